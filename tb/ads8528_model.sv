// ads8528_model: behavioural model, for simulation only, of the parallel bus
// of one ADS8528 eight-channel ADC.  A rising CONVST freezes the eight codes
// presented on `codes`; BUSY goes high BUSY_DLY ns later and stays high for
// CONV_NS ns.  Each falling RD with CS low then drives the next channel's
// code onto the bus after RD_DLY ns (channel 0 first after every
// conversion).  A rising WR with CS low shifts the bus word into cfg_reg
// (upper word first) and counts it in cfg_writes.
`timescale 1ns/1ps
module ads8528_model #(
  parameter int CONV_NS  = 300,
  parameter int BUSY_DLY = 10,
  parameter int RD_DLY   = 5
) (
  input  logic            convst,
  output logic            busy,
  input  logic            cs_n,
  input  logic            rd_n,
  input  logic            wr_n,
  input  logic [15:0]     db_in,       // from the controller (configuration writes)
  output logic [15:0]     db_out,      // to the controller
  input  logic [7:0][15:0] codes,
  output logic [31:0]     cfg_reg,
  output int              cfg_writes,
  output int              conversions
);
  logic [7:0][15:0] frozen;
  int rd_idx;

  initial begin
    busy = 0; db_out = 16'hFFFF; cfg_reg = 0; cfg_writes = 0; conversions = 0;
    rd_idx = 0; frozen = '0;
  end

  always @(posedge convst) begin
    frozen = codes;
    conversions++;
    #(BUSY_DLY) busy = 1;
    #(CONV_NS) busy = 0;
    rd_idx = 0;
  end

  always @(negedge rd_n) if (!cs_n) begin
    #(RD_DLY) db_out = frozen[rd_idx % 8];
    rd_idx++;
  end

  always @(posedge wr_n) if (!cs_n) begin
    cfg_reg = {cfg_reg[15:0], db_in};
    cfg_writes++;
  end
endmodule
