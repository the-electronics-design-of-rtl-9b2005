// rs485_rx_tb: sends words to rs485_rx from a testbench transmitter whose bit
// time is off the nominal 25 ns (by -0.8 %, 0 and +0.8 %) and whose phase is
// unrelated to the receiver clock.  Checks that good words arrive with their
// path and data, that a word with a flipped parity bit raises par_err, one
// with a low stop bit raises frm_err, neither is delivered, and a short
// glitch on the idle line produces nothing.
`timescale 1ns/1ps
module rs485_rx_tb;
  import ktx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic rx, out_valid, par_err, frm_err;
  logic [3:0] out_path;
  logic signed [15:0] out_data;
  int checks = 0, failures = 0;

  rs485_rx dut (.*);

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

  realtime tbit = 25.0;
  // kind: 0 good, 1 bad parity, 2 bad stop
  task automatic send(input logic [3:0] p, input logic [15:0] d, input int kind);
    logic [22:0] w;
    w = {1'b1, ^{d, p}, d, p, 1'b0};
    if (kind == 1) w[21] = ~w[21];
    if (kind == 2) w[22] = 1'b0;
    for (int b = 0; b < 23; b++) begin
      rx = w[b];
      #(tbit);
    end
    rx = 1'b1;
  endtask

  logic [3:0]  exp_p [$];
  logic [15:0] exp_d [$];
  int n_ok = 0, n_par = 0, n_frm = 0;
  always @(posedge clk) begin
    #0.1;
    if (out_valid) begin
      n_ok++;
      if (exp_p.size() == 0) check(0, "unexpected word");
      else begin
        logic [3:0] p; logic [15:0] d;
        p = exp_p.pop_front(); d = exp_d.pop_front();
        check(out_path == p && out_data == d,
              $sformatf("got %0d:%h expected %0d:%h", out_path, out_data, p, d));
      end
    end
    if (par_err) n_par++;
    if (frm_err) n_frm++;
  end

  int exp_par = 0, exp_frm = 0, exp_ok = 0;
  initial begin
    rx = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #13.7;
    for (int r = 0; r < 3; r++) begin
      tbit = (r == 0) ? 25.0 : (r == 1) ? 24.8 : 25.2;
      for (int i = 0; i < 40; i++) begin
        logic [3:0] p; logic [15:0] d; int kind;
        p = 4'($urandom); d = 16'($urandom);
        kind = ($urandom_range(0, 9) == 0) ? 1 : ($urandom_range(0, 14) == 0) ? 2 : 0;
        if (i == 5) kind = 1;
        if (i == 9) kind = 2;
        if (kind == 0) begin exp_p.push_back(p); exp_d.push_back(d); exp_ok++; end
        if (kind == 1) exp_par++;
        if (kind == 2) exp_frm++;
        
        send(p, d, kind);
        if (kind == 2) #(tbit * 2);          // let the line settle after a broken word
        if (i % 7 == 0) #(tbit * $urandom_range(0, 3) + 1.3);
        if (i == 20) begin rx = 0; #6; rx = 1; #(tbit * 2); end   // glitch
      end
    end
    #500;
    check(n_ok == exp_ok, $sformatf("good words %0d of %0d", n_ok, exp_ok));
    check(n_par == exp_par, $sformatf("parity errors %0d of %0d", n_par, exp_par));
    check(n_frm == exp_frm, $sformatf("framing errors %0d of %0d", n_frm, exp_frm));
    check(exp_p.size() == 0, "all good words delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
