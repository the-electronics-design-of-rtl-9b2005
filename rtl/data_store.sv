// data_store: gathers the samples of one control period and hands them on as
// one ordered stream.
//
// The two ADC controllers read their eight channels at the same time, so two
// samples can arrive in one cycle.  Sample ch of ADC input k is written to
// path k*CH_PER_IN + ch of a 16-word frame buffer and marked in a fill mask.
// When every path is present the block pulses `ready`, clears the mask and
// streams the frame out, path 0 first, one word per cycle (out_valid, out_path,
// out_data).  Every streamed word also carries data_addr, a running word
// address that only ever counts up, for writing the record into the board's
// DDR2 memory or sending it to the host.  A frame takes N_PATH cycles to leave.
//
// Fig. 5 of the paper shows a block of this name with `ready` and a
// data_addr counting up by one each clock; the merge of two ADCs, the path
// numbering and the address width are this design's choices.
module data_store #(
  parameter int N_IN      = 2,   // ADCs
  parameter int CH_PER_IN = 8,   // channels per ADC
  parameter int W         = 16,  // sample width
  parameter int ADDR_W    = 24   // record address width
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [N_IN-1:0]                      in_valid,
  input  logic [N_IN-1:0][$clog2(CH_PER_IN)-1:0] in_ch,
  input  logic [N_IN-1:0][W-1:0]               in_data,
  output logic                                 ready,     // pulse: frame complete, stream starts
  output logic                                 out_valid,
  output logic [$clog2(N_IN*CH_PER_IN)-1:0]    out_path,
  output logic [W-1:0]                         out_data,
  output logic [ADDR_W-1:0]                    data_addr
);
  localparam int NP = N_IN * CH_PER_IN;
  localparam int PW = $clog2(NP);

  logic [W-1:0]  frame [NP];
  logic [NP-1:0] filled;
  logic          streaming;
  logic [PW-1:0] rd_ptr;
  logic [NP-1:0] set_mask;

  always_comb begin
    set_mask = '0;
    for (int k = 0; k < N_IN; k++)
      if (in_valid[k]) set_mask[k*CH_PER_IN + int'(in_ch[k])] = 1'b1;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < N_IN; k++)
      if (in_valid[k]) frame[k*CH_PER_IN + int'(in_ch[k])] <= in_data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filled    <= '0;
      streaming <= 1'b0;
      rd_ptr    <= '0;
      ready     <= 1'b0;
      out_valid <= 1'b0;
      out_path  <= '0;
      out_data  <= '0;
      data_addr <= '0;
    end else begin
      ready     <= 1'b0;
      out_valid <= 1'b0;
      if (!streaming && (filled == '1)) begin
        streaming <= 1'b1;
        ready     <= 1'b1;
        rd_ptr    <= '0;
        filled    <= set_mask;
      end else begin
        filled <= filled | set_mask;
      end
      if (streaming) begin
        out_valid <= 1'b1;
        out_path  <= rd_ptr;
        out_data  <= frame[rd_ptr];
        rd_ptr    <= rd_ptr + 1'b1;
        if (rd_ptr == PW'(NP - 1)) streaming <= 1'b0;
      end
      if (out_valid) data_addr <= data_addr + 1'b1;  // next word, next address
    end
  end

  // a new sample must not overwrite a path that is still waiting to be streamed
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 streaming |-> (set_mask == '0));

endmodule
