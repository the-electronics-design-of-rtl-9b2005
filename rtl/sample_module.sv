// sample_module: the FPGA logic of the sample board.  Every control period it
// samples the 16 Rogowski-coil signals, corrects them for the mutual
// inductance between neighbouring coils, runs one PID step per coil and sends
// the 16 results over RS-485 to the coil control board.
//
// Chain: a period timer starts both ADS8528 controllers (adc_ctrl) together;
// their 2 x 8 samples are gathered by data_store (ADC 0 -> paths 0..7, ADC 1 ->
// paths 8..15), which streams the complete frame, one path per clock, both to
// mi_correction and to the record port (rec_*, the data that the board keeps
// in DDR2 and can send to the host); mi_correction feeds pid_ctrl, and
// pid_ctrl feeds rs485_tx.  At the defaults (200 MHz, 20 us period) one frame
// needs about 0.5 us in the ADC interface after BUSY falls, 16 + 4 + 3 clocks
// of processing and 9.3 us on the line, so it fits the period with room.
//
// The adjustable parameters (beta_R, alpha_0, the three matrix entries, v,
// the PID set point and coefficients) sit in a small register file written
// through cfg_we/cfg_addr/cfg_wdata (register map in ktx_pkg).  Register
// CFG_CTRL bit 0 enables periodic sampling (on after reset); writing bit 1
// clears the PID history.  The register port, the period and the record port
// are this design's choices; the paper gives the chain itself (Fig. 3, Sec. III).
module sample_module
  import ktx_pkg::*;
#(
  parameter int unsigned PERIOD = PERIOD_CYC,    // clocks per control period
  parameter int          CPB    = CLKS_PER_BIT   // clocks per RS-485 bit
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // parameter registers
  input  logic                              cfg_we,
  input  logic [3:0]                        cfg_addr,
  input  logic [31:0]                       cfg_wdata,
  // two ADS8528 devices
  output logic [N_ADC-1:0]                  adc_convst,
  input  logic [N_ADC-1:0]                  adc_busy,
  output logic [N_ADC-1:0]                  adc_cs_n,
  output logic [N_ADC-1:0]                  adc_rd_n,
  output logic [N_ADC-1:0]                  adc_wr_n,
  input  logic [N_ADC-1:0][ADC_W-1:0]       adc_db_i,
  output logic [N_ADC-1:0][ADC_W-1:0]       adc_db_o,
  output logic [N_ADC-1:0]                  adc_db_oe,
  // record stream of raw samples (to DDR2 / network)
  output logic                              rec_valid,
  output logic [PATH_W-1:0]                 rec_path,
  output logic [ADC_W-1:0]                  rec_data,
  output logic [23:0]                       rec_addr,
  // RS-485 line to the coil control board
  output logic                              rs_tx,
  output logic                              rs_de,
  // status
  output logic                              period_tick,
  output logic                              adc_overrun,   // tick while an ADC was still busy
  output logic                              pid_sat,
  output logic                              tx_overflow
);
  // ---------------- parameter registers ----------------
  coef_t coef;
  logic  run, pid_clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef    <= COEF_DEF;
      run     <= 1'b1;
      pid_clr <= 1'b0;
    end else begin
      pid_clr <= 1'b0;
      if (cfg_we) begin
        unique case (cfg_addr)
          CFG_BETA:  coef.beta  <= cfg_wdata[BETA_W-1:0];
          CFG_ALPHA: coef.alpha <= cfg_wdata[ALPHA_W-1:0];
          CFG_C0:    coef.c0    <= cfg_wdata[M_W-1:0];
          CFG_C1:    coef.c1    <= cfg_wdata[M_W-1:0];
          CFG_C2:    coef.c2    <= cfg_wdata[M_W-1:0];
          CFG_V:     coef.v     <= cfg_wdata[V_W-1:0];
          CFG_SETPT: coef.setpt <= cfg_wdata[DAC_W-1:0];
          CFG_A0:    coef.a0    <= cfg_wdata[K_W-1:0];
          CFG_A1:    coef.a1    <= cfg_wdata[K_W-1:0];
          CFG_A2:    coef.a2    <= cfg_wdata[K_W-1:0];
          CFG_CTRL: begin
            run     <= cfg_wdata[0];
            pid_clr <= cfg_wdata[1];
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- period timer ----------------
  localparam int TW = $clog2(PERIOD);
  logic [TW-1:0] tcnt;
  logic [N_ADC-1:0] adc_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcnt        <= '0;
      period_tick <= 1'b0;
      adc_overrun <= 1'b0;
    end else begin
      period_tick <= 1'b0;
      adc_overrun <= 1'b0;
      if (!run) begin
        tcnt <= '0;
      end else if (tcnt == TW'(PERIOD - 1)) begin
        tcnt        <= '0;
        period_tick <= 1'b1;
        adc_overrun <= (adc_ready != '1);
      end else begin
        tcnt <= tcnt + 1'b1;
      end
    end
  end

  // ---------------- ADC controllers ----------------
  logic [N_ADC-1:0]                    s_valid;
  logic [N_ADC-1:0][$clog2(ADC_CH)-1:0] s_ch;
  logic [N_ADC-1:0][ADC_W-1:0]          s_data;

  for (genvar k = 0; k < N_ADC; k++) begin : g_adc
    logic signed [ADC_W-1:0] d;
    adc_ctrl #(.N_CH(ADC_CH), .ADC_W(ADC_W)) u_adc (
      .clk, .rst_n,
      .start(period_tick && (adc_ready == '1)),
      .ready(adc_ready[k]), .done(),
      .convst(adc_convst[k]), .busy(adc_busy[k]),
      .cs_n(adc_cs_n[k]), .rd_n(adc_rd_n[k]), .wr_n(adc_wr_n[k]),
      .db_i(adc_db_i[k]), .db_o(adc_db_o[k]), .db_oe(adc_db_oe[k]),
      .smp_valid(s_valid[k]), .smp_ch(s_ch[k]), .smp_data(d)
    );
    assign s_data[k] = d;
  end

  // ---------------- data store ----------------
  logic              st_valid;
  logic [PATH_W-1:0] st_path;
  logic [ADC_W-1:0]  st_data;

  data_store #(.N_IN(N_ADC), .CH_PER_IN(ADC_CH), .W(ADC_W), .ADDR_W(24)) u_store (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ch(s_ch), .in_data(s_data),
    .ready(),
    .out_valid(st_valid), .out_path(st_path), .out_data(st_data), .data_addr(rec_addr)
  );

  assign rec_valid = st_valid;
  assign rec_path  = st_path;
  assign rec_data  = st_data;

  // ---------------- mutual inductance correction ----------------
  logic                    mc_valid;
  logic [PATH_W-1:0]       mc_path;
  logic signed [DAC_W-1:0] mc_data;

  mi_correction #(.NP(N_PATH), .IN_W(ADC_W), .X_W(SAMPLE_W)) u_mic (
    .clk, .rst_n, .coef,
    .cal_en(st_valid), .in_path(st_path), .in_data(st_data),
    .busy(),
    .out_valid(mc_valid), .out_path(mc_path), .out_data(mc_data)
  );

  // ---------------- PID ----------------
  logic                    pid_valid;
  logic [PATH_W-1:0]       pid_path;
  logic signed [DAC_W-1:0] pid_data;

  pid_ctrl #(.NP(N_PATH)) u_pid (
    .clk, .rst_n, .clr(pid_clr), .coef,
    .in_valid(mc_valid), .in_path(mc_path), .in_data(mc_data),
    .out_valid(pid_valid), .out_path(pid_path), .out_data(pid_data), .sat(pid_sat)
  );

  // ---------------- RS-485 transmitter ----------------
  rs485_tx #(.CPB(CPB), .DEPTH(N_PATH)) u_tx (
    .clk, .rst_n,
    .in_valid(pid_valid), .in_path(pid_path), .in_data(pid_data),
    .tx(rs_tx), .de(rs_de), .overflow(tx_overflow), .idle()
  );

endmodule
