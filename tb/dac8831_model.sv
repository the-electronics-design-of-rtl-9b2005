// dac8831_model: behavioural model, for simulation only, of the serial input
// of a DAC8831.  While CS is low every rising SCLK shifts SDI in, most
// significant bit first; the rising CS that ends a 16-bit frame loads the
// shifted word into `code` (LDAC tied low) and counts it in `updates`.  A
// frame of any other length is counted in `bad_frames` and not loaded.
`timescale 1ns/1ps
module dac8831_model (
  input  logic        ncs,
  input  logic        sclk,
  input  logic        sdi,
  output logic [15:0] code,
  output int          updates,
  output int          bad_frames
);
  logic [15:0] sh;
  int nbits;
  initial begin
    code = 16'h8000; updates = 0; bad_frames = 0; sh = 0; nbits = 0;
  end
  always @(negedge ncs) nbits = 0;
  always @(posedge sclk) if (!ncs) begin
    sh = {sh[14:0], sdi};
    nbits++;
  end
  always @(posedge ncs) begin
    if (nbits == 16) begin
      code = sh;
      updates++;
    end else if (nbits != 0) begin
      bad_frames++;
    end
    nbits = 0;
  end
endmodule
