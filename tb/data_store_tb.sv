// data_store_tb: feeds data_store with the sample pairs of two ADCs (both
// ADCs deliver channel c in the same clock, as they do in the system) for
// several periods, in a shuffled channel order, and checks the `ready` pulse,
// that the frame leaves as 16 consecutive words path 0..15 with the right
// data, that it starts two clocks after the last sample and that data_addr
// keeps counting up across frames.
`timescale 1ns/1ps
module data_store_tb;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic [1:0]       in_valid;
  logic [1:0][2:0]  in_ch;
  logic [1:0][15:0] in_data;
  logic ready, out_valid;
  logic [3:0]  out_path;
  logic [15:0] out_data;
  logic [23:0] data_addr;
  int checks = 0, failures = 0;

  data_store dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] exp_frame [16];
  int order [8];
  int n_words, lat, readies;
  longint exp_addr;

  initial begin
    in_valid = 0; in_ch = '0; in_data = '0; exp_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      for (int c = 0; c < 8; c++) order[c] = c;
      if (f > 0) order.shuffle();
      for (int c = 0; c < 8; c++) begin
        @(negedge clk);
        in_valid = 2'b11;
        in_ch[0] = 3'(order[c]); in_ch[1] = 3'(order[c]);
        in_data[0] = 16'($urandom); in_data[1] = 16'($urandom);
        exp_frame[order[c]] = in_data[0];
        exp_frame[8 + order[c]] = in_data[1];
      end
      @(negedge clk); in_valid = 0;
      // wait for the stream
      lat = 0; readies = 0;
      while (!out_valid) begin
        @(posedge clk); #0.1; lat++;
        if (ready) readies++;
        if (lat > 50) break;
      end
      check(lat == 2, $sformatf("stream starts 2 clocks after last sample, got %0d", lat));
      check(readies == 1, "one ready pulse");
      n_words = 0;
      while (out_valid) begin
        check(out_path == 4'(n_words), $sformatf("path %0d vs %0d", out_path, n_words));
        check(out_data == exp_frame[n_words], $sformatf("path %0d data %h vs %h", n_words, out_data, exp_frame[n_words]));
        check(data_addr == 24'(exp_addr), $sformatf("address %0d vs %0d", data_addr, exp_addr));
        exp_addr++; n_words++;
        @(posedge clk); #0.1;
        if (ready) readies++;
      end
      check(n_words == 16, $sformatf("16 words, got %0d", n_words));
      check(readies == 1, "no extra ready");
      repeat (5) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
