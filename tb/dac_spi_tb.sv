// dac_spi_tb: dac_spi writing into the DAC8831 model.  The first code is
// 6EAC, the value in the logic-analyser capture of the design, and the
// testbench checks that the serial data follows the shift sequence 6EAC,
// DD58, BAB0, 7560, ... (data_reg shifted left once per bit).  Then random
// codes: each must reach the DAC unchanged, SCLK must run at a quarter of the
// clock (50 MHz), each write must keep `busy` high for 70 clocks, and a
// dataReady during a write must be ignored.
`timescale 1ns/1ps
module dac_spi_tb;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic [15:0] datain, code;
  logic dataReady, ncs, sclk, sdi, busy, done;
  int updates, bad_frames;
  int checks = 0, failures = 0;

  dac_spi dut (.*);
  dac8831_model dac (.ncs, .sclk, .sdi, .code, .updates, .bad_frames);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bits seen on the rising SCLK edges of the current write
  logic [15:0] seen; int nseen;
  realtime last_rise, period_max, period_min;
  always @(posedge sclk) begin
    if (nseen > 0) begin
      if ($realtime - last_rise > period_max) period_max = $realtime - last_rise;
      if ($realtime - last_rise < period_min) period_min = $realtime - last_rise;
    end
    last_rise = $realtime;
    seen = {seen[14:0], sdi};
    nseen++;
  end

  int busy_len;
  always @(posedge clk) #0.1 if (busy) busy_len++;

  initial begin
    datain = 16'h6EAC; dataReady = 0; nseen = 0; busy_len = 0;
    period_max = 0; period_min = 1e9;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      logic [15:0] v;
      v = (n == 0) ? 16'h6EAC : 16'($urandom);
      @(negedge clk); datain = v; dataReady = 1; nseen = 0; busy_len = 0;
      @(negedge clk); dataReady = 0;
      if (n == 0) begin
        // follow data_reg through the first shifts: MSB of each printed value
        logic [15:0] printed [5] = '{16'h6EAC, 16'hDD58, 16'hBAB0, 16'h7560, 16'hEAC0};
        for (int k = 0; k < 5; k++) begin
          @(posedge sclk); #0.1;
          check(sdi == printed[k][15], $sformatf("bit %0d follows data_reg %h", k, printed[k]));
        end
      end
      if (n == 3) begin
        // a request during a write is ignored
        repeat (10) @(negedge clk);
        datain = 16'h0000; dataReady = 1; @(negedge clk); dataReady = 0;
      end
      wait (done); @(posedge clk); #0.2;
      check(code == v, $sformatf("DAC code %h vs %h", code, v));
      check(seen == v, "serial bits MSB first");
      check(nseen == 16, $sformatf("16 SCLK pulses, got %0d", nseen));
      check(busy_len == 70, $sformatf("busy %0d clocks", busy_len));
      check(ncs == 1 && sclk == 0, "idle levels");
    end
    check(updates == 20, $sformatf("DAC updates %0d", updates));
    check(bad_frames == 0, "no broken frames");
    check(period_min == 20.0 && period_max == 20.0, $sformatf("SCLK period %0t..%0t", period_min, period_max));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
