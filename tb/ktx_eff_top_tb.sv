// ktx_eff_top_tb: the whole feedback electronics end to end, at its default
// sizes.  Two ADS8528 models feed the sample board, 16 DAC8831 models sit on
// the coil control board, and the two boards run from clocks 0.4 % apart.
// Every control period the testbench gives the ADC models 16 new codes and
// predicts the 16 DAC codes with the reference arithmetic (16x16 mutual
// inductance product, PID step per path, offset-binary conversion); after the
// coil board reports the frame written, every DAC must hold its prediction.
// Along the way it rewrites the parameter registers, uses PID gains that
// clamp, clears the PID history, and finally switches the coil board to its
// network input.  It counts each of these mechanisms and fails if one never
// happened, and checks the loop latency from conversion start to the DAC
// update against the period.
`timescale 1ns/1ps
module ktx_eff_top_tb;
  import ktx_pkg::*;
  import ktx_ref_pkg::*;
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

  localparam int NF = 12;
  initial begin
    #((NF + 4) * 20000); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  coef_t  c;
  longint u [16], e1 [16], e2 [16];
  int n_sat_exp = 0, n_sat = 0, n_tick = 0, n_cfg = 0, n_clr = 0, n_rec_s = 0, n_rec_c = 0;
  int n_done = 0, n_net = 0, n_err = 0;
  realtime t_tick, t_done, lat_max = 0;

  always @(posedge clk_s) begin
    #0.1;
    if (pid_sat) n_sat++;
    if (period_tick) begin n_tick++; t_tick = $realtime; end
    if (rec_s_valid) n_rec_s++;
    if (adc_overrun || tx_overflow) n_err++;
  end
  always @(posedge clk_c) begin
    #0.1;
    if (rec_c_valid) n_rec_c++;
    if (frame_done) begin
      n_done++; t_done = $realtime;
      if (!src_sel && t_done - t_tick > lat_max) lat_max = t_done - t_tick;
    end
    if (dac_skip || par_err || frm_err) n_err++;
  end

  task automatic cfg_write(input cfg_addr_e a, input logic [31:0] d);
    @(negedge clk_s); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_s); cfg_we = 0;
    n_cfg++;
  endtask

  logic signed [15:0] expv [16];
  task automatic check_dacs(string what);
    for (int i = 0; i < 16; i++)
      check(code[i] == {~expv[i][15], expv[i][14:0]},
            $sformatf("%s: DAC %0d code %h for value %0d", what, i, code[i], expv[i]));
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; codes = '0; c = COEF_DEF;
    src_sel = 0; net_valid = 0; net_path = 0; net_data = 0;
    for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end
    repeat (3) @(posedge clk_s);
    rst_s_n = 1; rst_c_n = 1;
    for (int f = 0; f < NF; f++) begin
      logic [15:0] fc [16];
      longint corr [16];
      bit cl;
      @(posedge clk_s); #0.1;
      while (!period_tick) begin @(posedge clk_s); #0.1; end
      @(negedge clk_s);
      for (int j = 0; j < 16; j++) begin
        fc[j] = 16'($urandom);
        if (f < 3) fc[j] = 16'(int'($urandom_range(0, 20000)) - 10000);
        codes[j / 8][j % 8] = fc[j];
      end
      case (f)
        3: begin c.a0 = 18'sd9000; c.a1 = -18'sd12000; c.a2 = 18'sd4000;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2)); end
        5: begin c.a0 = 18'sd120000; c.a1 = -18'sd60000; c.a2 = 18'sd0;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2)); end
        7: begin c = COEF_DEF; c.beta = 16'sd300; c.alpha = 16'sd40;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2));
                 cfg_write(CFG_BETA, 32'(c.beta)); cfg_write(CFG_ALPHA, 32'(c.alpha));
                 cfg_write(CFG_CTRL, 32'd3); n_clr++;
                 for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end end
        9: begin c.c1 = -20'sd4000; c.v = 18'sd150; c.setpt = -16'sd300;
                 cfg_write(CFG_C1, 32'(c.c1)); cfg_write(CFG_V, 32'(c.v)); cfg_write(CFG_SETPT, 32'(c.setpt)); end
        default: ;
      endcase
      correct(fc, c, corr);
      for (int j = 0; j < 16; j++) begin
        expv[j] = 16'(pid_step(corr[j], c, u[j], e1[j], e2[j], cl));
        if (cl) n_sat_exp++;
      end
      // wait for the coil board to write the frame, then for the SPI writes
      @(posedge frame_done);
      repeat (100) @(posedge clk_c);
      check_dacs($sformatf("frame %0d", f));
    end
    // ---- network input on the coil board ----
    @(negedge clk_s); cfg_write(CFG_CTRL, 32'd0);        // stop sampling
    repeat (12000) @(posedge clk_c);
    @(negedge clk_c); src_sel = 1;
    for (int p = 0; p < 16; p++) begin
      @(negedge clk_c);
      net_valid = 1; net_path = 4'(p); net_data = 16'($urandom); expv[p] = net_data;
    end
    @(negedge clk_c); net_valid = 0;
    repeat (100) @(posedge clk_c);
    check_dacs("network frame");
    n_net = (n_done == NF + 1) ? 1 : 0;
    // ---- mechanism counts and totals ----
    $display("periods %0d, parameter writes %0d, PID clamps %0d, PID clears %0d, record words %0d/%0d, frames to DACs %0d, network frames %0d, worst tick-to-DAC-load %0.1f ns",
             n_tick, n_cfg, n_sat, n_clr, n_rec_s, n_rec_c, n_done, n_net, lat_max);
    check(n_tick >= NF, "periodic sampling happened");
    check(n_cfg > 0, "parameter writes happened");
    check(n_sat > 0 && n_sat == n_sat_exp, $sformatf("PID clamp happened %0d (expected %0d)", n_sat, n_sat_exp));
    check(n_clr > 0, "PID clear happened");
    check(n_rec_s == 16 * NF && n_rec_c == 16 * (NF + 1), "record streams on both boards");
    check(n_net == 1, "network source switch happened");
    check(n_err == 0, "no overrun, overflow, skip or line error");
    check(lat_max < 20000.0, "loop latency within one period");
    for (int i = 0; i < 16; i++) check(bad[i] == 0 && updates[i] == NF + 1, "DAC writes");
    for (int k = 0; k < 2; k++) check(cfg_writes[k] == 2, "ADC configured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
