// pid_ctrl_tb: runs pid_ctrl for many periods of 16 paths with random
// measurements and several coefficient sets (pure P, PI, PID, large gains
// that drive the output into its clamp), keeping an independent reference
// state per path.  Checks every output value and path, the three-clock
// latency, the `sat` flag against the reference clamp, and that `clr` empties
// the history.
`timescale 1ns/1ps
module pid_ctrl_tb;
  import ktx_pkg::*;
  import ktx_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  coef_t coef;
  logic clr, in_valid, out_valid, sat;
  logic [3:0] in_path, out_path;
  logic signed [15:0] in_data, out_data;
  int checks = 0, failures = 0;

  pid_ctrl dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #500000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint u [16], e1 [16], e2 [16];
  longint exp_o [16];
  bit     exp_s [16];
  int sat_count = 0, n;
  logic [3:0] q_path [$];
  logic signed [15:0] q_data [$];
  bit q_sat [$];
  always @(posedge clk) begin
    #0.1;
    if (out_valid) begin q_path.push_back(out_path); q_data.push_back(out_data); q_sat.push_back(sat); end
  end

  // output checker: outputs must follow inputs by three clocks
  logic [2:0] vpipe;
  always @(posedge clk) vpipe <= {vpipe[1:0], in_valid};

  initial begin
    clr = 0; in_valid = 0; in_path = 0; in_data = 0; coef = COEF_DEF;
    for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      case (k / 10)
        0: coef = COEF_DEF;                                              // P only
        1: begin coef.a0 = 18'sd6000; coef.a1 = -18'sd4096; coef.a2 = 18'sd0; end  // PI
        2: begin coef.a0 = 18'sd9000; coef.a1 = -18'sd12000; coef.a2 = 18'sd4000; end // PID
        3: begin coef.a0 = 18'sd100000; coef.a1 = -18'sd90000; coef.a2 = 18'sd0; end // large
        4: begin coef.a0 = 18'($urandom_range(0, 40000)); coef.a1 = -18'($urandom_range(0, 40000));
                 coef.a2 = 18'($urandom_range(0, 20000)) - 18'sd10000; end
        default: begin coef.a0 = 18'sd5000; coef.a1 = -18'sd4500; coef.a2 = 18'sd100; end
      endcase
      coef.setpt = (k % 7 == 3) ? 16'sd1000 : 16'sd0;
      if (k == 50) begin
        // clear history
        @(negedge clk); clr = 1; @(negedge clk); clr = 0;
        for (int i = 0; i < 16; i++) begin u[i] = 0; e1[i] = 0; e2[i] = 0; end
      end
      for (int p = 0; p < 16; p++) begin
        longint meas;
        meas = longint'($signed(16'($urandom)));
        if (k >= 40 && k < 50) meas = meas / 64;   // small errors
        exp_o[p] = pid_step(meas, coef, u[p], e1[p], e2[p], exp_s[p]);
        @(negedge clk);
        in_valid = 1; in_path = 4'(p); in_data = 16'(meas);
      end
      @(negedge clk); in_valid = 0;
      repeat (5) @(posedge clk);
      #0.1;
      n = q_path.size();
      for (int i = 0; i < n && i < 16; i++) begin
        check(q_path[i] == 4'(i), "path order");
        check(longint'(q_data[i]) == exp_o[i], $sformatf("k %0d path %0d: %0d vs %0d", k, i, q_data[i], exp_o[i]));
        check(q_sat[i] == exp_s[i], $sformatf("k %0d path %0d sat %0d vs %0d", k, i, q_sat[i], exp_s[i]));
        if (q_sat[i]) sat_count++;
      end
      q_path.delete(); q_data.delete(); q_sat.delete();
      check(n == 16, $sformatf("16 outputs, got %0d", n));
    end
    check(sat_count > 0, "clamping exercised");
    $display("clamped outputs: %0d", sat_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: every output clock had an input exactly three clocks before
  always @(posedge clk) if (rst_n) begin
    #0.2;
    if (out_valid != vpipe[2]) begin
      failures++; $display("FAIL: output not exactly three clocks after its input");
    end
  end
endmodule
