// rs485_rx: receiver of the RS-485 words on the coil control board.
//
// The line passes a two-flop synchroniser (the two boards run from separate
// clocks).  A falling edge starts a word; the start bit is checked in its
// middle, CPB/2 clocks later, and every following bit is sampled CPB clocks
// after the previous one, i.e. near its centre.  With only five clocks per
// bit this tolerates a clock mismatch between the boards of about 1 % (0.8 %
// is tested; crystal oscillators differ by far less).  Word format, least significant bit
// first: start 0 | path[3:0] | data[15:0] | even parity | stop 1.  A word with
// good parity and stop bit is delivered as a one-clock pulse on out_valid with
// out_path and out_data, about half a bit time after its stop bit's centre;
// otherwise par_err or frm_err pulses and the word is dropped.  A start bit
// that is not low at its centre is taken as a glitch and ignored.
//
// The paper names the RS-485 link and its 40 Mbit/s rate; the format and the
// checks are this design's choices and match rs485_tx.
module rs485_rx
  import ktx_pkg::*;
#(
  parameter int CPB = CLKS_PER_BIT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    rx,
  output logic                    out_valid,
  output logic [PATH_W-1:0]       out_path,
  output logic signed [DAC_W-1:0] out_data,
  output logic                    par_err,
  output logic                    frm_err
);
  localparam int CW = $clog2(CPB + 1);
  localparam int BW = $clog2(RS_WORD_BITS + 1);

  typedef enum logic [1:0] {R_IDLE, R_START, R_BITS} rstate_e;

  logic [2:0]              sync;      // [0],[1] synchroniser, [2] previous value
  logic                    rxs;
  rstate_e                 st;
  logic [CW-1:0]           ccnt;
  logic [BW-1:0]           bcnt;
  logic [RS_WORD_BITS-2:0] shreg;     // everything after the start bit

  assign rxs = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= '1;
      st        <= R_IDLE;
      ccnt      <= '0;
      bcnt      <= '0;
      shreg     <= '0;
      out_valid <= 1'b0;
      out_path  <= '0;
      out_data  <= '0;
      par_err   <= 1'b0;
      frm_err   <= 1'b0;
    end else begin
      sync      <= {sync[1:0], rx};
      out_valid <= 1'b0;
      par_err   <= 1'b0;
      frm_err   <= 1'b0;
      unique case (st)
        R_IDLE: begin
          ccnt <= '0;
          if (sync[2] && !rxs) st <= R_START;     // falling edge
        end
        R_START: begin
          ccnt <= ccnt + 1'b1;
          if (ccnt == CW'(CPB / 2 - 1)) begin
            ccnt <= '0;
            bcnt <= '0;
            st   <= rxs ? R_IDLE : R_BITS;
          end
        end
        R_BITS: begin
          ccnt <= ccnt + 1'b1;
          if (ccnt == CW'(CPB - 1)) begin
            ccnt  <= '0;
            shreg <= {rxs, shreg[RS_WORD_BITS-2:1]};
            bcnt  <= bcnt + 1'b1;
            if (bcnt == BW'(RS_WORD_BITS - 2)) begin
              // rxs is the stop bit; shreg[RS_WORD_BITS-2:1] holds payload and parity
              st <= R_IDLE;
              if (!rxs)
                frm_err <= 1'b1;
              else if (^shreg[RS_WORD_BITS-2:1])
                par_err <= 1'b1;
              else begin
                out_valid <= 1'b1;
                out_path  <= shreg[PATH_W:1];
                out_data  <= shreg[RS_PAYLOAD_W:PATH_W+1];
              end
            end
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
