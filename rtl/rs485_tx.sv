// rs485_tx: sends the controller outputs of the sample board to the coil
// control board over the RS-485 line, one 23-bit word per coil path.
//
// Word on the line (idle high, least significant bit first):
//   start 0 | path[3:0] | data[15:0] | even parity of path and data | stop 1
// Each bit lasts CLKS_PER_BIT clocks (5 clocks at 200 MHz = 40 Mbit/s, the
// rate named in the paper), so a word occupies 116 clocks (the stop bit is
// one clock longer) and a frame of 16 words 1856 clocks (9.3 us).  Incoming words (in_valid, in_path, in_data)
// may arrive one per clock and wait in a 16-word FIFO; words are sent
// back-to-back while it holds any.  `de` is the transceiver driver enable and
// is high while words are on the line.  `overflow` pulses if a word
// arrives with the FIFO full; it is then dropped.
//
// The paper names the RS-485 link and its 40 Mbit/s rate.  The word format,
// parity and FIFO are this design's choices.
module rs485_tx
  import ktx_pkg::*;
#(
  parameter int CPB   = CLKS_PER_BIT,
  parameter int DEPTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [PATH_W-1:0]       in_path,
  input  logic signed [DAC_W-1:0] in_data,
  output logic                    tx,
  output logic                    de,
  output logic                    overflow,
  output logic                    idle        // nothing queued or on the line
);
  localparam int CW = $clog2(CPB + 1);
  localparam int BW = $clog2(RS_WORD_BITS + 1);

  logic [RS_PAYLOAD_W-1:0] f_data;
  logic                    f_empty, f_rd;
  logic                    busy;
  logic [RS_WORD_BITS-1:0] shreg;
  logic [CW-1:0]           ccnt;
  logic [BW-1:0]           bcnt;

  sync_fifo #(.W(RS_PAYLOAD_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(in_valid), .wr_data({in_data, in_path}),
    .rd_en(f_rd), .rd_data(f_data),
    .empty(f_empty), .full(), .overflow(overflow)
  );

  assign f_rd = !busy && !f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      shreg <= '1;
      ccnt  <= '0;
      bcnt  <= '0;
      tx    <= 1'b1;
      de    <= 1'b0;
    end else begin
      if (!busy) begin
        tx <= 1'b1;
        de <= !f_empty;                 // keep the driver on between queued words
        if (!f_empty) begin
          // load: stop, parity, payload, start (bit 0 goes first)
          shreg <= {1'b1, ^f_data, f_data, 1'b0};
          busy  <= 1'b1;
          ccnt  <= '0;
          bcnt  <= '0;
        end
      end else begin
        de <= 1'b1;
        tx <= shreg[0];
        if (ccnt == CW'(CPB - 1)) begin
          ccnt  <= '0;
          shreg <= {1'b1, shreg[RS_WORD_BITS-1:1]};
          if (bcnt == BW'(RS_WORD_BITS - 1)) begin
            busy <= 1'b0;
            bcnt <= '0;
          end else begin
            bcnt <= bcnt + 1'b1;
          end
        end else begin
          ccnt <= ccnt + 1'b1;
        end
      end
    end
  end

  assign idle = f_empty && !busy && !de;

endmodule
