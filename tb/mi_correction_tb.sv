// mi_correction_tb: drives mi_correction with frames of 16 random ADC codes
// (paths in shuffled order) under the paper's matrix values and under random
// coefficient sets, and compares each of the 16 outputs with a full 16x16
// matrix-vector product computed in the testbench.  Also checks the output
// order and that the first result appears five clocks after the clock that
// takes the last sample, and that large inputs saturate.
`timescale 1ns/1ps
module mi_correction_tb;
  import ktx_pkg::*;
  import ktx_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  coef_t coef;
  logic cal_en, busy, out_valid;
  logic [3:0] in_path, out_path;
  logic signed [15:0] in_data, out_data;
  int checks = 0, failures = 0;
  int sat_seen = 0;

  mi_correction dut (.clk, .rst_n, .coef, .cal_en, .in_path, .in_data, .busy,
                     .out_valid, .out_path, .out_data);

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

  logic [15:0] codes [N_PATH];
  longint exp_v [N_PATH];
  int order [N_PATH];
  int lat, n;

  initial begin
    cal_en = 0; in_path = 0; in_data = 0; coef = COEF_DEF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 24; f++) begin
      coef = COEF_DEF;
      if (f >= 8) begin
        coef.beta  = 16'($urandom_range(0, 1024)) - 16'sd512;
        coef.alpha = 16'($urandom_range(0, 4000)) - 16'sd2000;
        coef.c0    = 20'($urandom_range(0, 300000)) - 20'sd150000;
        coef.c1    = 20'($urandom_range(0, 8000)) - 20'sd4000;
        coef.c2    = 20'($urandom_range(0, 4000)) - 20'sd2000;
        coef.v     = 18'($urandom_range(0, 2000));
      end
      for (int j = 0; j < N_PATH; j++) begin
        codes[j] = 16'($urandom);
        if (f == 1) codes[j] = 16'h7FF0;                  // all at full scale
        if (f == 2) codes[j] = (j == 3) ? 16'h4000 : 16'h0000;  // single impulse
        order[j] = j;
      end
      if (f == 5) coef.v = 18'sd60000;                    // force saturation
      if (f > 2) order.shuffle();
      correct(codes, coef, exp_v);
      for (int j = 0; j < N_PATH; j++) begin
        @(negedge clk);
        cal_en = 1; in_path = 4'(order[j]); in_data = codes[order[j]];
      end
      @(negedge clk); cal_en = 0;
      lat = 0;
      while (!out_valid && lat < 40) begin @(posedge clk); #0.1; lat++; end
      check(lat == 5, $sformatf("first result %0d clocks after last sample", lat));
      n = 0;
      while (out_valid) begin
        check(out_path == 4'(n), $sformatf("order %0d vs %0d", out_path, n));
        check(longint'(out_data) == exp_v[n],
              $sformatf("frame %0d path %0d: %0d vs %0d", f, n, out_data, exp_v[n]));
        if (exp_v[n] == 32767 || exp_v[n] == -32768) sat_seen++;
        n++;
        @(posedge clk); #0.1;
      end
      check(n == N_PATH, $sformatf("16 results, got %0d", n));
      repeat (3) @(posedge clk);
    end
    check(sat_seen > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
