// sample_module_tb: the sample board's logic with two ADS8528 models on its
// ADC pins.  Each period the testbench gives the models 16 new codes and
// predicts, with the reference arithmetic, the 16 words that must then appear
// on the RS-485 line (mutual inductance correction, then one PID step per
// path with the state the reference keeps).  It decodes the line at the bit
// centres and compares every word.  Between frames it rewrites the parameter
// registers (PID gains, beta_R and alpha_0, matrix entries and v, set point),
// clears the PID history once and uses gains large enough to clamp.  It also
// checks the raw-sample record stream, the 4000-clock period, the ADC
// configuration writes and that no overrun or FIFO overflow occurs.
`timescale 1ns/1ps
module sample_module_tb;
  import ktx_pkg::*;
  import ktx_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic cfg_we; logic [3:0] cfg_addr; logic [31:0] cfg_wdata;
  logic [1:0] adc_convst, adc_busy, adc_cs_n, adc_rd_n, adc_wr_n, adc_db_oe;
  logic [1:0][15:0] adc_db_i, adc_db_o;
  logic rec_valid; logic [3:0] rec_path; logic [15:0] rec_data; logic [23:0] rec_addr;
  logic rs_tx, rs_de, period_tick, adc_overrun, pid_sat, tx_overflow;
  int checks = 0, failures = 0;

  sample_module dut (.*);

  logic [1:0][7:0][15:0] codes;
  logic [1:0][31:0] cfg_reg;
  int cfg_writes [2], conversions [2];
  for (genvar k = 0; k < 2; k++) begin : g_m
    ads8528_model adc (.convst(adc_convst[k]), .busy(adc_busy[k]), .cs_n(adc_cs_n[k]),
                       .rd_n(adc_rd_n[k]), .wr_n(adc_wr_n[k]), .db_in(adc_db_o[k]),
                       .db_out(adc_db_i[k]), .codes(codes[k]), .cfg_reg(cfg_reg[k]),
                       .cfg_writes(cfg_writes[k]), .conversions(conversions[k]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NF = 10;
  initial begin
    #((NF + 2) * 20000 + 20000); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  coef_t  c;
  longint u [16], e1 [16], e2 [16];
  logic [3:0]  exp_p [$];
  logic [15:0] exp_d [$];
  logic [15:0] rec_exp [$];
  int n_sat_exp = 0;

  task automatic cfg_write(input cfg_addr_e a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // ---------------- line decoder ----------------
  int words = 0;
  initial begin : decoder
    logic [21:0] bits;
    forever begin
      @(negedge rs_tx);
      repeat (2) @(posedge clk);
      #0.1 check(rs_tx == 0, "start bit");
      for (int b = 0; b < 22; b++) begin
        repeat (5) @(posedge clk);
        #0.1 bits[b] = rs_tx;
      end
      check(bits[21] == 1 && ^bits[20:0] == 0, "stop and parity");
      if (exp_p.size() == 0) check(0, "unexpected word");
      else begin
        logic [3:0] p; logic [15:0] d;
        p = exp_p.pop_front(); d = exp_d.pop_front();
        check(bits[3:0] == p && bits[19:4] == d,
              $sformatf("word %0d: %0d:%0d expected %0d:%0d", words, bits[3:0],
                        $signed(bits[19:4]), p, $signed(d)));
      end
      words++;
    end
  end

  // ---------------- record stream ----------------
  int rec_n = 0; longint rec_last_addr = -1;
  always @(posedge clk) begin
    #0.1;
    if (rec_valid) begin
      check(rec_path == 4'(rec_n % 16), "record path order");
      if (rec_exp.size() > 0) check(rec_data == rec_exp.pop_front(), "record data");
      else check(0, "unexpected record word");
      check(longint'(rec_addr) == rec_last_addr + 1, "record address");
      rec_last_addr = rec_addr;
      rec_n++;
    end
  end

  int n_sat = 0, n_ovr = 0, n_ovf = 0;
  longint tick_cyc [$]; longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    #0.1;
    if (pid_sat) n_sat++;
    if (adc_overrun) n_ovr++;
    if (tx_overflow) n_ovf++;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; codes = '0; c = COEF_DEF;
    for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      logic [15:0] fc [16];
      longint corr [16];
      bit cl;
      @(posedge clk); #0.1;
      while (!period_tick) begin @(posedge clk); #0.1; end
      tick_cyc.push_back(cyc);
      @(negedge clk);
      for (int j = 0; j < 16; j++) begin
        fc[j] = 16'($urandom);
        codes[j / 8][j % 8] = fc[j];
        rec_exp.push_back(fc[j]);
      end
      // parameter changes, right after the tick, before the samples arrive
      case (f)
        2: begin c.a0 = 18'sd9000; c.a1 = -18'sd12000; c.a2 = 18'sd4000;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2)); end
        3: begin c.beta = 16'sd300; c.alpha = -16'sd250;
                 cfg_write(CFG_BETA, 32'(c.beta)); cfg_write(CFG_ALPHA, 32'(c.alpha)); end
        4: begin c.a0 = 18'sd120000; c.a1 = -18'sd60000; c.a2 = 18'sd0;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2)); end
        5: begin c = COEF_DEF; c.beta = 16'sd300; c.alpha = -16'sd250;
                 cfg_write(CFG_A0, 32'(c.a0)); cfg_write(CFG_A1, 32'(c.a1)); cfg_write(CFG_A2, 32'(c.a2));
                 cfg_write(CFG_CTRL, 32'd3);        // keep running, clear PID history
                 for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end end
        6: begin c.c0 = 20'sd120000; c.c1 = -20'sd3000; c.c2 = 20'sd500; c.v = 18'sd140;
                 cfg_write(CFG_C0, 32'(c.c0)); cfg_write(CFG_C1, 32'(c.c1));
                 cfg_write(CFG_C2, 32'(c.c2)); cfg_write(CFG_V, 32'(c.v)); end
        7: begin c.setpt = 16'sd500; cfg_write(CFG_SETPT, 32'(c.setpt)); end
        default: ;
      endcase
      correct(fc, c, corr);
      for (int j = 0; j < 16; j++) begin
        longint o;
        o = pid_step(corr[j], c, u[j], e1[j], e2[j], cl);
        if (cl) n_sat_exp++;
        exp_p.push_back(4'(j)); exp_d.push_back(16'(o));
      end
    end
    // let the last frame leave
    repeat (3000) @(posedge clk);
    check(words == 16 * NF, $sformatf("words on the line %0d", words));
    check(rec_n == 16 * NF, $sformatf("record words %0d", rec_n));
    $display("clamped outputs: %0d", n_sat);
    check(n_sat == n_sat_exp && n_sat > 0, $sformatf("clamped outputs %0d expected %0d", n_sat, n_sat_exp));
    check(n_ovr == 0 && n_ovf == 0, "no ADC overrun, no FIFO overflow");
    for (int k = 0; k < 2; k++) begin
      check(cfg_writes[k] == 2 && cfg_reg[k] == 32'h0000_03FF, "ADC configured");
      check(conversions[k] == NF + 1 || conversions[k] == NF, "one conversion per period");
    end
    for (int i = 1; i < tick_cyc.size(); i++)
      check(tick_cyc[i] - tick_cyc[i-1] == 4000, "period 4000 clocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
