// ktx_eff_top: the digital part of the KTX error-field feedback loop, both
// boards together.  The sample board (sample_module) reads 16 Rogowski-coil
// signals through two ADS8528 converters, corrects them for the mutual
// inductance of neighbouring coils, runs a PID step per coil and sends the
// results over RS-485; the coil control board (coil_control_module) receives
// them and drives 16 DAC8831 converters that set the voltages of the
// error-field control coils' power amplifiers.
//
// The two boards have their own clocks and resets (clk_s/rst_s_n,
// clk_c/rst_c_n); they share only the RS-485 line, which is wired through
// here and also brought out (rs_line) for observation.  Everything off the
// FPGAs (ADCs, DACs, DDR2 memory, network interface, host) connects through
// plain ports.  Loop latency at the defaults: from BUSY falling on the ADCs to
// the last DAC update, about 0.5 us of ADC reads, 23 clocks of arithmetic,
// 9.3 us on the line and 0.35 us of SPI, roughly 10.3 us in a 20 us period.
module ktx_eff_top
  import ktx_pkg::*;
(
  // sample board
  input  logic                         clk_s,
  input  logic                         rst_s_n,
  input  logic                         cfg_we,
  input  logic [3:0]                   cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  output logic [N_ADC-1:0]             adc_convst,
  input  logic [N_ADC-1:0]             adc_busy,
  output logic [N_ADC-1:0]             adc_cs_n,
  output logic [N_ADC-1:0]             adc_rd_n,
  output logic [N_ADC-1:0]             adc_wr_n,
  input  logic [N_ADC-1:0][ADC_W-1:0]  adc_db_i,
  output logic [N_ADC-1:0][ADC_W-1:0]  adc_db_o,
  output logic [N_ADC-1:0]             adc_db_oe,
  output logic                         rec_s_valid,
  output logic [PATH_W-1:0]            rec_s_path,
  output logic [ADC_W-1:0]             rec_s_data,
  output logic [23:0]                  rec_s_addr,
  output logic                         period_tick,
  output logic                         adc_overrun,
  output logic                         pid_sat,
  output logic                         tx_overflow,
  // the RS-485 line between the boards
  output logic                         rs_line,
  output logic                         rs_de,
  // coil control board
  input  logic                         clk_c,
  input  logic                         rst_c_n,
  input  logic                         src_sel,
  input  logic                         net_valid,
  input  logic [PATH_W-1:0]            net_path,
  input  logic signed [DAC_W-1:0]      net_data,
  output logic                         rec_c_valid,
  output logic [PATH_W-1:0]            rec_c_path,
  output logic signed [DAC_W-1:0]      rec_c_data,
  output logic [N_PATH-1:0]            dac_ncs,
  output logic [N_PATH-1:0]            dac_sclk,
  output logic [N_PATH-1:0]            dac_sdi,
  output logic                         frame_done,
  output logic                         dac_skip,
  output logic                         par_err,
  output logic                         frm_err
);

  sample_module u_sample (
    .clk(clk_s), .rst_n(rst_s_n),
    .cfg_we, .cfg_addr, .cfg_wdata,
    .adc_convst, .adc_busy, .adc_cs_n, .adc_rd_n, .adc_wr_n,
    .adc_db_i, .adc_db_o, .adc_db_oe,
    .rec_valid(rec_s_valid), .rec_path(rec_s_path), .rec_data(rec_s_data), .rec_addr(rec_s_addr),
    .rs_tx(rs_line), .rs_de,
    .period_tick, .adc_overrun, .pid_sat, .tx_overflow
  );

  coil_control_module u_coil (
    .clk(clk_c), .rst_n(rst_c_n),
    .rs_rx(rs_line),
    .src_sel, .net_valid, .net_path, .net_data,
    .rec_valid(rec_c_valid), .rec_path(rec_c_path), .rec_data(rec_c_data),
    .dac_ncs, .dac_sclk, .dac_sdi,
    .frame_done, .dac_skip, .par_err, .frm_err
  );

endmodule
