// sync_fifo: single-clock first-in first-out buffer, DEPTH words of W bits,
// held in a register array.  A write with the FIFO full is dropped and
// reported on `overflow` (one pulse); a read of an empty FIFO is ignored.
// rd_data shows the oldest word whenever `empty` is low (show-ahead); a write
// is visible to the reader one clock later.  Pointers carry one extra bit to
// tell full from empty.  This buffer is this design's own (it sits in front of
// the RS-485 transmitter); the source describes no buffering.
module sync_fifo #(
  parameter int W     = 20,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic         overflow
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic         do_wr, do_rd;

  assign empty   = (wr_ptr == rd_ptr);
  assign full    = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      overflow <= wr_en && full;
    end
  end

endmodule
