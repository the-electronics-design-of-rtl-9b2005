// dac_spi: SPI write of one 16-bit code into a DAC8831 digital-to-analog
// converter.
//
// A pulse on dataReady while the block is idle loads datain into data_reg and
// pulls ncs low.  Sixteen SCLK periods follow, each SCLK_HALF clocks low and
// SCLK_HALF clocks high (50 MHz from a 200 MHz clock, the DAC's highest rated
// SPI clock).  sdi is always data_reg[15], so the code goes out most
// significant bit first; the DAC takes each bit on the rising SCLK edge, and
// data_reg shifts left by one (bitcounter counts up) on each falling edge.
// After the sixteenth bit ncs stays low for one more half period and then
// rises, which updates the DAC output (LDAC tied low on the board).  ncs then
// stays high for two half periods before `busy` falls and `done` pulses.  A
// write keeps `busy` high for 35 half periods, 70 clocks or 350 ns at the
// defaults, counted from the clock edge that takes dataReady.
//
// From the paper and Fig. 5: the DAC type, 16-bit codes, the 50 MHz SPI clock,
// and the names datain, dataReady, ncs, sclk, sdi, bitcounter and data_reg,
// with data_reg shifting left once per bit as the printed values
// (6EAC, DD58, BAB0, 7560, ...) show.  The CS hold and gap times are this
// design's choices.
module dac_spi #(
  parameter int W         = 16,
  parameter int SCLK_HALF = 2      // clocks per SCLK half period
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  datain,
  input  logic          dataReady,
  output logic          ncs,
  output logic          sclk,
  output logic          sdi,
  output logic          busy,
  output logic          done
);
  typedef enum logic [2:0] {D_IDLE, D_LOW, D_HIGH, D_HOLD, D_GAP} dstate_e;
  localparam int HW = $clog2(SCLK_HALF + 1);

  dstate_e               st;
  logic [W-1:0]          data_reg;
  logic [$clog2(W)-1:0]  bitcounter;
  logic [HW-1:0]         hcnt;
  logic                  gap2;
  logic                  half_end;

  assign sdi      = data_reg[W-1];
  assign half_end = (hcnt == HW'(SCLK_HALF - 1));
  assign busy     = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_IDLE;
      data_reg   <= '0;
      bitcounter <= '0;
      hcnt       <= '0;
      gap2       <= 1'b0;
      ncs        <= 1'b1;
      sclk       <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      hcnt <= half_end ? '0 : hcnt + 1'b1;
      unique case (st)
        D_IDLE: begin
          hcnt <= '0;
          if (dataReady) begin
            data_reg   <= datain;
            bitcounter <= '0;
            ncs        <= 1'b0;
            st         <= D_LOW;
          end
        end
        D_LOW: if (half_end) begin
          sclk <= 1'b1;                          // DAC samples sdi here
          st   <= D_HIGH;
        end
        D_HIGH: if (half_end) begin
          sclk <= 1'b0;
          if (bitcounter == ($clog2(W))'(W - 1)) begin
            st <= D_HOLD;
          end else begin
            data_reg   <= {data_reg[W-2:0], 1'b0};
            bitcounter <= bitcounter + 1'b1;
            st         <= D_LOW;
          end
        end
        D_HOLD: if (half_end) begin
          ncs  <= 1'b1;                          // DAC output updates
          gap2 <= 1'b0;
          st   <= D_GAP;
        end
        D_GAP: if (half_end) begin
          gap2 <= 1'b1;
          if (gap2) begin
            st   <= D_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_sclk_idle: assert property (@(posedge clk) disable iff (!rst_n) ncs |-> !sclk);

endmodule
