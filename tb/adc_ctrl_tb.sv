// adc_ctrl_tb: adc_ctrl against the ADS8528 bus model.  Checks the
// configuration write after reset, then runs several conversions with random
// codes and checks that all eight channels come out in order with the codes
// the model was given, that CONVST lasts its four clocks and that one
// conversion (start to done) takes the expected number of clocks.
`timescale 1ns/1ps
module adc_ctrl_tb;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic start, ready, done, convst, busy, cs_n, rd_n, wr_n, db_oe, smp_valid;
  logic [15:0] db_i, db_o, smp_data;
  logic [2:0]  smp_ch;
  logic [7:0][15:0] codes;
  logic [31:0] cfg_reg;
  int cfg_writes, conversions;
  int checks = 0, failures = 0;

  adc_ctrl #(.CFG_WORD(32'hA5C3_0F1E)) dut (.*);
  ads8528_model #(.CONV_NS(300)) adc (.convst, .busy, .cs_n, .rd_n, .wr_n, .db_in(db_o),
                                      .db_out(db_i), .codes, .cfg_reg, .cfg_writes, .conversions);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int got; int t_start, t_done, cyc; int conv_len;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (convst) conv_len++;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; codes = '0; cyc = 0; conv_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    @(posedge clk);
    check(cfg_writes == 2, "two configuration words written");
    check(cfg_reg == 32'hA5C3_0F1E, $sformatf("configuration word %h", cfg_reg));
    for (int n = 0; n < 6; n++) begin
      for (int c = 0; c < 8; c++) codes[c] = 16'($urandom);
      if (n == 0) codes[0] = 16'h8000;
      if (n == 1) codes[7] = 16'h7FFF;
      @(negedge clk); start = 1; conv_len = 0;
      t_start = cyc;
      @(negedge clk); start = 0;
      got = 0;
      while (!done) begin
        @(posedge clk); #0.1;
        if (smp_valid) begin
          check(smp_ch == 3'(got), $sformatf("channel order %0d vs %0d", smp_ch, got));
          check(smp_data == codes[got], $sformatf("ch %0d data %h vs %h", got, smp_data, codes[got]));
          got++;
        end
      end
      t_done = cyc;
      check(got == 8, $sformatf("eight samples, got %0d", got));
      check(conv_len == 4, $sformatf("CONVST high 4 clocks, got %0d", conv_len));
      // BUSY rises 10 ns after CONVST and lasts 300 ns (62 clocks after start),
      // two synchroniser clocks, one clock to leave the wait, 8*(4+3) read clocks
      check((t_done - t_start) >= 62 + 2 + 56 - 1 && (t_done - t_start) <= 62 + 2 + 56 + 3,
            $sformatf("conversion took %0d clocks", t_done - t_start));
    end
    check(conversions == 6, "six conversions started");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
