// pid_ctrl: discrete PID controller in incremental (velocity) form, one
// independent controller per coil path, all sharing three multipliers.
//
//   e_k = setpoint - measured
//   u_k = u_{k-1} + a0*e_k + a1*e_{k-1} + a2*e_{k-2}
//   a0 = Kp(1 + dt/Ti + Td/dt),  a1 = -Kp(1 + 2Td/dt),  a2 = Kp*Td/dt
//
// How it works.  Corrected values arrive one path per cycle (in_valid,
// in_path, in_data).  Stage 1 forms e_k and reads the path's stored e_{k-1},
// e_{k-2} and u_{k-1}; stage 2 runs the three multiplications; stage 3 adds
// them to u_{k-1}, clamps the sum to the 16-bit output range (the clamped
// value is also what is stored, so the integral cannot wind up), writes the
// new state back and emits u_k >> 12 with the same path number.  Latency is
// three cycles, one path per cycle.  `sat` pulses with an output that was
// clamped; `clr` zeroes every path's history.
//
// From the paper: equations (2) and (3), three multipliers and adjustable
// coefficients.  The Q6.12 coefficient format, the defaults (Kp = 1, no I or
// D term), the clamping, the clear input and the pipeline are this design's
// choices; the paper leaves the gains to be found by test.
module pid_ctrl
  import ktx_pkg::*;
#(
  parameter int NP = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,        // zero the stored history of all paths
  input  coef_t                    coef,       // uses setpt, a0, a1, a2
  input  logic                     in_valid,
  input  logic [$clog2(NP)-1:0]    in_path,
  input  logic signed [DAC_W-1:0]  in_data,
  output logic                     out_valid,
  output logic [$clog2(NP)-1:0]    out_path,
  output logic signed [DAC_W-1:0]  out_data,
  output logic                     sat
);
  localparam int PW  = $clog2(NP);
  localparam int E_W = DAC_W + 1;
  localparam int U_W = DAC_W + K_FRAC + 1;     // stored u_k, Q.12
  localparam int M_P = E_W + K_W;              // one product
  localparam int SUM_W = M_P + 3;
  localparam logic signed [SUM_W-1:0] U_MAX = SUM_W'(32767) <<< K_FRAC;
  localparam logic signed [SUM_W-1:0] U_MIN = -(SUM_W'(32768) <<< K_FRAC);

  logic signed [E_W-1:0] e1_mem [NP];
  logic signed [E_W-1:0] e2_mem [NP];
  logic signed [U_W-1:0] u_mem  [NP];

  // stage 1
  logic                  v1;
  logic [PW-1:0]         path1;
  logic signed [E_W-1:0] e_1, e1_1, e2_1;
  logic signed [U_W-1:0] u_1;
  // stage 2
  logic                  v2;
  logic [PW-1:0]         path2;
  logic signed [E_W-1:0] e_2, e1_2;
  logic signed [U_W-1:0] u_2;
  logic signed [M_P-1:0] m0, m1, m2;
  // stage 3
  logic signed [SUM_W-1:0] sum;
  logic signed [SUM_W-1:0] u_new;

  always_comb begin
    sum = SUM_W'(u_2) + SUM_W'(m0) + SUM_W'(m1) + SUM_W'(m2);
    if (sum > U_MAX)      u_new = U_MAX;
    else if (sum < U_MIN) u_new = U_MIN;
    else                  u_new = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; path1 <= '0; path2 <= '0;
      e_1 <= '0; e1_1 <= '0; e2_1 <= '0; u_1 <= '0;
      e_2 <= '0; e1_2 <= '0; u_2 <= '0; m0 <= '0; m1 <= '0; m2 <= '0;
      out_valid <= 1'b0; out_path <= '0; out_data <= '0; sat <= 1'b0;
      for (int i = 0; i < NP; i++) begin
        e1_mem[i] <= '0; e2_mem[i] <= '0; u_mem[i] <= '0;
      end
    end else begin
      // stage 1: error and state read
      v1    <= in_valid;
      path1 <= in_path;
      e_1   <= E_W'(coef.setpt) - E_W'(in_data);
      e1_1  <= e1_mem[in_path];
      e2_1  <= e2_mem[in_path];
      u_1   <= u_mem[in_path];
      // stage 2: three multipliers
      v2    <= v1;
      path2 <= path1;
      e_2   <= e_1;
      e1_2  <= e1_1;
      u_2   <= u_1;
      m0    <= e_1  * coef.a0;
      m1    <= e1_1 * coef.a1;
      m2    <= e2_1 * coef.a2;
      // stage 3: accumulate, clamp, write back
      out_valid <= v2;
      out_path  <= path2;
      out_data  <= DAC_W'(u_new >>> K_FRAC);
      sat       <= v2 && (sum != u_new);
      if (v2) begin
        u_mem[path2]  <= U_W'(u_new);
        e1_mem[path2] <= e_2;
        e2_mem[path2] <= e1_2;
      end
      if (clr) begin
        for (int i = 0; i < NP; i++) begin
          e1_mem[i] <= '0; e2_mem[i] <= '0; u_mem[i] <= '0;
        end
      end
    end
  end

  // a path's state is read in stage 1 and written in stage 3: the same path
  // must not be in flight twice
  a_no_hazard: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !((v1 && path1 == in_path) || (v2 && path2 == in_path)));

endmodule
