// ktx_loop_tb: closes the feedback loop around the whole design with a
// simple static model of the machine, to show that the controller drives the
// measured error field towards zero.  Model (in 12-bit ADC units, own choice):
//     reading_j = D_j + 0.5*u_j + 0.02*(u_{j-1} + u_{j+1})
// where D_j is a fixed random error field at coil j and u_j the value now
// held by DAC j.  Each period the ADC models get these readings, the design
// runs one correction and PI step (Kp = 0.5, Ki*dt = 1.0, i.e. a0 = 1.5,
// a1 = -0.5, a2 = 0), and the DACs are read back.  The test passes if, after
// 40 periods, every corrected reading is below 1 % of the largest initial
// error and the total error has fallen monotonically at the end.
`timescale 1ns/1ps
module ktx_loop_tb;
  import ktx_pkg::*;
  logic clk_s = 0, clk_c = 0, rst_s_n = 0, rst_c_n = 0;
  always #2.5  clk_s = ~clk_s;
  always #2.51 clk_c = ~clk_c;

  logic cfg_we; logic [3:0] cfg_addr; logic [31:0] cfg_wdata;
  logic [1:0] adc_convst, adc_busy, adc_cs_n, adc_rd_n, adc_wr_n, adc_db_oe;
  logic [1:0][15:0] adc_db_i, adc_db_o;
  logic rec_s_valid; logic [3:0] rec_s_path; logic [15:0] rec_s_data; logic [23:0] rec_s_addr;
  logic period_tick, adc_overrun, pid_sat, tx_overflow, rs_line, rs_de;
  logic src_sel, net_valid, rec_c_valid; logic [3:0] net_path, rec_c_path;
  logic signed [15:0] net_data, rec_c_data;
  logic [15:0] dac_ncs, dac_sclk, dac_sdi;
  logic frame_done, dac_skip, par_err, frm_err;
  int checks = 0, failures = 0;

  ktx_eff_top dut (.*);

  logic [1:0][7:0][15:0] codes;
  logic [1:0][31:0] cfg_reg;
  int cfg_writes [2], conversions [2];
  for (genvar k = 0; k < 2; k++) begin : g_m
    ads8528_model #(.CONV_NS(1500)) adc (.convst(adc_convst[k]), .busy(adc_busy[k]), .cs_n(adc_cs_n[k]),
                       .rd_n(adc_rd_n[k]), .wr_n(adc_wr_n[k]), .db_in(adc_db_o[k]),
                       .db_out(adc_db_i[k]), .codes(codes[k]), .cfg_reg(cfg_reg[k]),
                       .cfg_writes(cfg_writes[k]), .conversions(conversions[k]));
  end
  logic [15:0] code [16];
  int updates [16], bad [16];
  for (genvar i = 0; i < 16; i++) begin : g_d
    dac8831_model dac (.ncs(dac_ncs[i]), .sclk(dac_sclk[i]), .sdi(dac_sdi[i]),
                       .code(code[i]), .updates(updates[i]), .bad_frames(bad[i]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NP_RUN = 40;
  initial begin
    #((NP_RUN + 4) * 20000); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input cfg_addr_e a, input logic [31:0] d);
    @(negedge clk_s); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_s); cfg_we = 0;
  endtask

  real D [16];
  real err_hist [NP_RUN];
  real max0;

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic real dac_val(int i);
    return real'($signed(code[(i + 16) % 16] ^ 16'h8000));
  endfunction

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; codes = '0;
    src_sel = 0; net_valid = 0; net_path = 0; net_data = 0;
    max0 = 0;
    for (int j = 0; j < 16; j++) begin
      D[j] = real'($urandom_range(0, 3000)) - 1500.0;
      if (fabs(D[j]) > max0) max0 = fabs(D[j]);
    end
    repeat (3) @(posedge clk_s);
    rst_s_n = 1; rst_c_n = 1;
    cfg_write(CFG_A0, 32'(18'sd6144));
    cfg_write(CFG_A1, 32'(-18'sd2048));
    cfg_write(CFG_A2, 32'(18'sd0));
    for (int k = 0; k < NP_RUN; k++) begin
      real tot;
      @(posedge clk_s); #0.1;
      while (!period_tick) begin @(posedge clk_s); #0.1; end
      @(negedge clk_s);
      tot = 0;
      for (int j = 0; j < 16; j++) begin
        real r;
        int ri;
        r = D[j] + 0.5 * dac_val(j) + 0.02 * (dac_val(j - 1) + dac_val(j + 1));
        ri = int'(r);
        if (ri > 2047) ri = 2047;
        if (ri < -2048) ri = -2048;
        codes[j / 8][j % 8] = 16'(ri <<< 4);       // 12-bit reading in the upper bits
        tot += fabs(r);
      end
      err_hist[k] = tot;
      @(posedge frame_done);
      repeat (100) @(posedge clk_c);
    end
    $display("total |reading| over 16 coils: start %0.1f, after 10 periods %0.1f, end %0.1f (largest initial %0.1f)",
             err_hist[0], err_hist[10], err_hist[NP_RUN-1], max0);
    check(err_hist[NP_RUN-1] < err_hist[0] / 50.0, "error field reduced at least 50-fold");
    for (int k = NP_RUN - 10; k < NP_RUN; k++) check(err_hist[k] <= err_hist[k-1] + 16.0, "error not growing at the end");
    for (int j = 0; j < 16; j++) begin
      real r;
      r = D[j] + 0.5 * dac_val(j) + 0.02 * (dac_val(j - 1) + dac_val(j + 1));
      check(fabs(r) < 0.01 * max0 + 2.0, $sformatf("coil %0d residual %0.1f", j, r));
    end
    check(bad[0] == 0 && updates[0] == NP_RUN, "one DAC write per period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
