// coil_control_module_tb: the coil control board's logic with 16 DAC8831
// models on its SPI pins.  A testbench transmitter sends frames of 16 words
// over the RS-485 input with a bit time 0.4 % off nominal; after each frame
// every DAC must hold the offset-binary form of its path's value.  One word
// is sent with a bad parity bit and one with a bad stop bit: they must be
// reported and dropped, leaving that DAC at its previous value.  Then the
// input is switched to the network port: frames from it must reach the DACs
// while RS-485 words are ignored, and a second frame end arriving while the
// DACs are still being written must be skipped and reported.  The echo
// stream back to the host is checked word by word.
`timescale 1ns/1ps
module coil_control_module_tb;
  import ktx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic rs_rx, src_sel, net_valid, rec_valid;
  logic [3:0] net_path, rec_path;
  logic signed [15:0] net_data, rec_data;
  logic [15:0] dac_ncs, dac_sclk, dac_sdi;
  logic frame_done, dac_skip, par_err, frm_err;
  int checks = 0, failures = 0;

  coil_control_module dut (.*);

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

  initial begin
    #400000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  realtime tbit = 25.1;
  task automatic send(input logic [3:0] p, input logic [15:0] d, input int kind);
    logic [22:0] w;
    w = {1'b1, ^{d, p}, d, p, 1'b0};
    if (kind == 1) w[21] = ~w[21];
    if (kind == 2) w[22] = 1'b0;
    for (int b = 0; b < 23; b++) begin rs_rx = w[b]; #(tbit); end
    rs_rx = 1'b1;
    if (kind == 2) #(tbit * 2);
  endtask

  logic signed [15:0] applied [16];     // what each DAC should hold
  logic [3:0]  echo_p [$];
  logic [15:0] echo_d [$];
  int n_done = 0, n_skip = 0, n_par = 0, n_frm = 0;
  always @(posedge clk) begin
    #0.1;
    if (frame_done) n_done++;
    if (dac_skip) n_skip++;
    if (par_err) n_par++;
    if (frm_err) n_frm++;
    if (rec_valid) begin
      if (echo_p.size() == 0) check(0, "unexpected echo");
      else begin
        logic [3:0] p; logic [15:0] d;
        p = echo_p.pop_front(); d = echo_d.pop_front();
        check(rec_path == p && rec_data == d, "echo word");
      end
    end
  end

  task automatic check_dacs(string what);
    for (int i = 0; i < 16; i++)
      check(code[i] == {~applied[i][15], applied[i][14:0]},
            $sformatf("%s: DAC %0d code %h for value %0d", what, i, code[i], applied[i]));
  endtask

  initial begin
    rs_rx = 1; src_sel = 0; net_valid = 0; net_path = 0; net_data = 0;
    for (int i = 0; i < 16; i++) applied[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #7.3;
    // ---- RS-485 frames ----
    for (int f = 0; f < 6; f++) begin
      for (int p = 0; p < 16; p++) begin
        logic [15:0] d; int kind;
        d = 16'($urandom);
        if (f == 0 && p == 0) d = 16'h8000;
        if (f == 0 && p == 1) d = 16'h7FFF;
        kind = 0;
        if (f == 2 && p == 6) kind = 1;
        if (f == 3 && p == 9) kind = 2;
        if (kind == 0) begin applied[p] = d; echo_p.push_back(4'(p)); echo_d.push_back(d); end
        send(4'(p), d, kind);
      end
      repeat (100) @(posedge clk);
      check_dacs($sformatf("RS-485 frame %0d", f));
    end
    check(n_done == 6, $sformatf("frames written %0d", n_done));
    check(n_par == 1 && n_frm == 1, $sformatf("parity errors %0d, framing errors %0d", n_par, n_frm));
    // ---- network source ----
    @(negedge clk); src_sel = 1;
    fork
      // RS-485 words arriving meanwhile must be ignored
      for (int p = 0; p < 4; p++) send(4'(p), 16'h1111, 0);
    join_none
    for (int f = 0; f < 3; f++) begin
      for (int p = 0; p < 16; p++) begin
        @(negedge clk);
        net_valid = 1; net_path = 4'(p); net_data = 16'($urandom);
        applied[p] = net_data; echo_p.push_back(4'(p)); echo_d.push_back(net_data);
      end
      @(negedge clk); net_valid = 0;
      if (f == 1) begin
        // a second frame end while the DACs are busy
        repeat (5) @(negedge clk);
        net_valid = 1; net_path = 4'd15; net_data = 16'sd77;
        applied[15] = 16'sd77; echo_p.push_back(4'd15); echo_d.push_back(16'sd77);
        @(negedge clk); net_valid = 0;
        repeat (100) @(posedge clk);
      end
      repeat (100) @(posedge clk);
      if (f != 1) check_dacs($sformatf("network frame %0d", f));
    end
    check(n_skip == 1, $sformatf("skipped frames %0d", n_skip));
    check(n_done == 9, $sformatf("frames written %0d", n_done));
    for (int i = 0; i < 16; i++) check(bad[i] == 0 && updates[i] == 9, "DAC update count");
    check(echo_p.size() == 0, "all words echoed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
