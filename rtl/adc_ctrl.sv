// adc_ctrl: parallel-bus controller for one ADS8528 (8 simultaneously sampling
// 16-bit SAR ADC channels) on the sample board.
//
// After reset it writes the 32-bit configuration word as two 16-bit bus words
// (CS and WR low, upper half first).  Then, on each `start` pulse, it raises
// CONVST for CONVST_CYC cycles, waits for BUSY to rise and fall (BUSY passes a
// two-flop synchroniser), and reads the N_CH results one by one: CS low, RD low
// for RD_LOW cycles, the bus is captured in the last RD-low cycle, RD high for
// RD_HIGH cycles.  Every capture is emitted as one smp_valid pulse with the
// channel number and the raw two's-complement code; `done` pulses after the last.
//
// The paper gives the device, its channel count and resolution, and Fig. 5
// prints the signal names BUSY, CS, WR and DATA.  The strobe timing, the
// configuration value and the read order (channel 0 first) are this design's
// choices; CFG_WORD is a placeholder to be set from the device data sheet.
module adc_ctrl #(
  parameter int          N_CH       = 8,
  parameter int          ADC_W      = 16,
  parameter int          CONVST_CYC = 4,
  parameter int          RD_LOW     = 4,
  parameter int          RD_HIGH    = 3,
  parameter int          WR_LOW     = 4,
  parameter int          WR_HIGH    = 3,
  parameter logic [31:0] CFG_WORD   = 32'h0000_03FF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,      // request one conversion of all channels
  output logic                     ready,      // idle and configured: start is accepted
  output logic                     done,       // pulse after the last channel is read
  // ADS8528 pins
  output logic                     convst,
  input  logic                     busy,
  output logic                     cs_n,
  output logic                     rd_n,
  output logic                     wr_n,
  input  logic        [ADC_W-1:0]  db_i,
  output logic        [ADC_W-1:0]  db_o,
  output logic                     db_oe,
  // sample stream
  output logic                     smp_valid,
  output logic [$clog2(N_CH)-1:0]  smp_ch,
  output logic signed [ADC_W-1:0]  smp_data
);
  typedef enum logic [3:0] {S_CFG_LO, S_CFG_HI, S_IDLE, S_CONV, S_WAIT_HI, S_WAIT_LO,
                            S_RD_LO, S_RD_HI} state_e;
  localparam int CW = 8;

  state_e                    state;
  logic [CW-1:0]             cnt;
  logic                      cfg_half;  // 0: upper word being written, 1: lower word
  logic [$clog2(N_CH)-1:0]   ch;
  logic [1:0]                busy_sync;
  logic                      busy_s;

  assign busy_s = busy_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_sync <= '0;
    else        busy_sync <= {busy_sync[0], busy};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CFG_LO;
      cnt       <= '0;
      cfg_half  <= 1'b0;
      ch        <= '0;
      convst    <= 1'b0;
      cs_n      <= 1'b1;
      rd_n      <= 1'b1;
      wr_n      <= 1'b1;
      db_o      <= '0;
      db_oe     <= 1'b0;
      smp_valid <= 1'b0;
      smp_ch    <= '0;
      smp_data  <= '0;
      done      <= 1'b0;
    end else begin
      smp_valid <= 1'b0;
      done      <= 1'b0;
      cnt       <= cnt + 1'b1;
      unique case (state)
        // configuration write: WR low phase, then WR high phase, two words
        S_CFG_LO: begin
          cs_n  <= 1'b0;
          wr_n  <= 1'b0;
          db_oe <= 1'b1;
          db_o  <= cfg_half ? CFG_WORD[15:0] : CFG_WORD[31:16];
          if (cnt == CW'(WR_LOW - 1)) begin
            state <= S_CFG_HI;
            cnt   <= '0;
          end
        end
        S_CFG_HI: begin
          wr_n <= 1'b1;
          if (cnt == CW'(WR_HIGH - 1)) begin
            cnt <= '0;
            if (cfg_half) begin
              state <= S_IDLE;
              cs_n  <= 1'b1;
              db_oe <= 1'b0;
            end else begin
              cfg_half <= 1'b1;
              state    <= S_CFG_LO;
            end
          end
        end
        S_IDLE: begin
          cnt <= '0;
          if (start) begin
            convst <= 1'b1;
            state  <= S_CONV;
          end
        end
        S_CONV: begin
          if (cnt == CW'(CONVST_CYC - 1)) begin
            convst <= 1'b0;
            state  <= S_WAIT_HI;
          end
        end
        S_WAIT_HI: if (busy_s) state <= S_WAIT_LO;
        S_WAIT_LO: begin
          cnt <= '0;
          if (!busy_s) begin
            state <= S_RD_LO;
            ch    <= '0;
            cs_n  <= 1'b0;
            rd_n  <= 1'b0;
          end
        end
        S_RD_LO: begin
          if (cnt == CW'(RD_LOW - 1)) begin
            rd_n      <= 1'b1;
            smp_valid <= 1'b1;
            smp_ch    <= ch;
            smp_data  <= db_i;
            state     <= S_RD_HI;
            cnt       <= '0;
          end
        end
        S_RD_HI: begin
          if (cnt == CW'(RD_HIGH - 1)) begin
            cnt <= '0;
            if (ch == ($clog2(N_CH))'(N_CH - 1)) begin
              cs_n  <= 1'b1;
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              ch    <= ch + 1'b1;
              rd_n  <= 1'b0;
              state <= S_RD_LO;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ready = (state == S_IDLE);

  // RD and WR are never low together
  a_strobes: assert property (@(posedge clk) disable iff (!rst_n) !(!rd_n && !wr_n));

endmodule
