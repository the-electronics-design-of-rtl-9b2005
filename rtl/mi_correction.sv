// mi_correction: mutual inductance correction of the 16 coil paths,
//     U_out = v * M * (U_in * beta_R + alpha_0),
// where M is the 16x16 circulant, symmetric mutual inductance matrix: c0 on the
// diagonal, c1 on the two neighbours, c2 on the two next neighbours (indices
// wrap round the torus gap), zero elsewhere.
//
// How it works.  Samples arrive one path at a time (cal_en, path, data).  Each
// is cut to its upper SAMPLE_W bits, scaled and offset (y = x*beta_R/2^8 +
// alpha_0), and y is multiplied by the three distinct matrix entries; the three
// products are kept per path.  When all paths of the period are in, the sums
//     s_i = c0*y_i + c1*(y_{i-1} + y_{i+1}) + c2*(y_{i-2} + y_{i+2})
// are formed one path per cycle, shifted down by the Q.8 scale of M,
// multiplied by v (Q.16) and saturated to 16 bits.  Results leave as a stream
// (out_valid, out_path, out_data), path 0 first, one per cycle; the first
// appears five clocks after the clock edge that takes the last sample.
//
// From the paper: equation (1), the matrix with its three values (620, -7,
// -1.67 uH, the defaults of c0..c2), 12-bit data into the multipliers, signed
// coefficients and the addition after all 16 paths are in.  The paper speaks
// of two multipliers per sample; it does not say how the diagonal term is
// formed, so this design uses a third multiplier for it.  The number formats
// are this design's own.
module mi_correction
  import ktx_pkg::*;
#(
  parameter int NP = 16,       // paths
  parameter int IN_W = 16,     // width of an incoming ADC code
  parameter int X_W = 12       // bits used by the correction (upper bits of the code)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  coef_t                     coef,
  input  logic                      cal_en,     // one sample present
  input  logic [$clog2(NP)-1:0]     in_path,
  input  logic signed [IN_W-1:0]    in_data,
  output logic                      busy,       // summation phase running
  output logic                      out_valid,
  output logic [$clog2(NP)-1:0]     out_path,
  output logic signed [DAC_W-1:0]   out_data
);
  localparam int PW = $clog2(NP);
  localparam int P_W = Y_W + M_W;       // product width
  localparam int S_W = P_W + 3;         // sum of five products

  // ---- stage 1: scale and offset ----
  logic signed [X_W-1:0]  x;
  logic signed [Y_W-1:0]  y_r;
  logic [PW-1:0]          path_r;
  logic                   v1;
  logic signed [X_W+BETA_W-1:0] xb;

  assign x  = in_data[IN_W-1 -: X_W];
  assign xb = x * coef.beta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; y_r <= '0; path_r <= '0;
    end else begin
      v1     <= cal_en;
      path_r <= in_path;
      y_r    <= Y_W'(xb >>> BETA_FRAC) + Y_W'(coef.alpha);
    end
  end

  // ---- stage 2: the coefficient multipliers, products kept per path ----
  logic signed [P_W-1:0] p0 [NP];
  logic signed [P_W-1:0] p1 [NP];
  logic signed [P_W-1:0] p2 [NP];
  logic [NP-1:0]         have;

  always_ff @(posedge clk) begin
    if (v1) begin
      p0[path_r] <= y_r * coef.c0;
      p1[path_r] <= y_r * coef.c1;
      p2[path_r] <= y_r * coef.c2;
    end
  end

  // ---- stage 3..5: summation phase ----
  logic          summing;
  logic [PW-1:0] i_ptr;
  logic signed [S_W-1:0] s_r;
  logic [PW-1:0] s_path;
  logic          s_v;
  logic signed [S_W-M_FRAC+V_W-1:0] t_r;
  logic [PW-1:0] t_path;
  logic          t_v;
  logic signed [S_W-1:0] s_next;

  always_comb begin
    s_next = S_W'(p0[i_ptr])
           + S_W'(p1[PW'(i_ptr - 1'b1)]) + S_W'(p1[PW'(i_ptr + 1'b1)])
           + S_W'(p2[PW'(i_ptr - 2'd2)]) + S_W'(p2[PW'(i_ptr + 2'd2)]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= '0; summing <= 1'b0; i_ptr <= '0;
      s_r <= '0; s_path <= '0; s_v <= 1'b0;
      t_r <= '0; t_path <= '0; t_v <= 1'b0;
      out_valid <= 1'b0; out_path <= '0; out_data <= '0;
    end else begin
      // collect
      if (!summing && have == '1) begin
        summing <= 1'b1;
        i_ptr   <= '0;
        have    <= v1 ? (NP'(1) << path_r) : '0;
      end else if (v1) begin
        have[path_r] <= 1'b1;
      end
      // sum one path per cycle
      s_v <= summing;
      if (summing) begin
        s_r    <= s_next;
        s_path <= i_ptr;
        i_ptr  <= i_ptr + 1'b1;
        if (i_ptr == PW'(NP - 1)) summing <= 1'b0;
      end
      // multiply by v
      t_v    <= s_v;
      t_path <= s_path;
      t_r    <= (S_W-M_FRAC)'(s_r >>> M_FRAC) * coef.v;
      // saturate
      out_valid <= t_v;
      out_path  <= t_path;
      out_data  <= sat16(64'(t_r >>> V_FRAC));
    end
  end

  assign busy = summing;

  // the products of a period must not be overwritten while they are summed
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) summing |-> !v1);

endmodule
