// rs485_tx_tb: writes bursts of 16 words (one per clock, as the PID delivers
// them) into rs485_tx and decodes the line in the testbench by sampling each
// bit at its centre.  Checks every word's path, data, parity and stop bit,
// that a bit lasts five clocks (40 Mbit/s at 200 MHz), that a burst of 16
// words takes 16 x 116 clocks, that `de` is high whenever the line carries
// data, and that a 17th word into the full FIFO raises `overflow`.
`timescale 1ns/1ps
module rs485_tx_tb;
  import ktx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic in_valid, tx, de, overflow, idle;
  logic [3:0] in_path;
  logic signed [15:0] in_data;
  int checks = 0, failures = 0;

  rs485_tx dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line decoder
  logic [3:0]  exp_path [$];
  logic [15:0] exp_data [$];
  int rx_words = 0, de_bad = 0, ovf_count = 0;
  longint cyc = 0, first_start = -1, last_stop = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) #0.1 if (overflow) ovf_count++;
  always @(posedge clk) #0.1 if (rst_n && !tx && !de) de_bad++;

  initial begin : decoder
    logic [21:0] bits;
    forever begin
      @(negedge tx);
      if (first_start < 0) first_start = cyc;
      repeat (2) @(posedge clk);           // to the centre of the start bit
      #0.1 check(tx == 0, "start bit");
      for (int b = 0; b < 22; b++) begin
        repeat (5) @(posedge clk);
        #0.1 bits[b] = tx;
      end
      last_stop = cyc;
      check(bits[21] == 1, "stop bit");
      check(^bits[20:0] == 0, "even parity");
      if (exp_path.size() > 0) begin
        logic [3:0] p; logic [15:0] d;
        p = exp_path.pop_front(); d = exp_data.pop_front();
        check(bits[3:0] == p, $sformatf("path %0d vs %0d", bits[3:0], p));
        check(bits[19:4] == d, $sformatf("data %h vs %h", bits[19:4], d));
      end else check(0, "unexpected word");
      rx_words++;
    end
  end

  initial begin
    in_valid = 0; in_path = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      first_start = -1;
      for (int p = 0; p < 16; p++) begin
        @(negedge clk);
        in_valid = 1; in_path = 4'(p); in_data = 16'($urandom);
        if (f == 0 && p == 0) in_data = 16'hFFFF;
        exp_path.push_back(in_path); exp_data.push_back(in_data);
      end
      if (f == 2) begin
        // the first word has already left the FIFO: fill it to 16, then one more
        @(negedge clk); in_path = 4'd0; in_data = 16'h1234;
        exp_path.push_back(in_path); exp_data.push_back(in_data);
        @(negedge clk); in_path = 4'd1; in_data = 16'h5678;   // dropped
      end
      @(negedge clk); in_valid = 0;
      wait (idle);
      repeat (20) @(posedge clk);
      if (f < 2) begin
        // start bit of word 0 to the centre of the stop bit of word 15
        check(last_stop - first_start == 15 * 116 + 2 + 21 * 5 + 5,
              $sformatf("burst timing %0d clocks", last_stop - first_start));
      end
    end
    check(rx_words == 16 * 3 + 1, $sformatf("words on the line %0d", rx_words));
    check(ovf_count == 1, $sformatf("overflow pulses %0d", ovf_count));
    check(de_bad == 0, "de high while data on the line");
    check(exp_path.size() == 0, "all words sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
