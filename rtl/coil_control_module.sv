// coil_control_module: the FPGA logic of the coil control board.  It takes
// the 16 controller outputs of each period, from the RS-485 line or from the
// network interface, and writes them into 16 DAC8831 converters whose
// outputs, scaled to -5 V..+5 V by operational amplifiers, drive the power
// amplifiers of the error-field control coils.
//
// Words (path, signed 16-bit value) from rs485_rx, or from the network port
// when src_sel is 1, are held per path in a frame register.  The word for the
// last path (15) closes the frame: all 16 held values are then loaded into
// the 16 dac_spi writers at once, so every coil is updated within the same
// 350 ns SPI write.  A path whose word was lost keeps its previous value.
// The DAC8831 in its bipolar arrangement expects offset binary, so each
// value's sign bit is inverted (-32768 -> 0x0000, 0 -> 0x8000, +32767 ->
// 0xFFFF).  Every accepted word is also sent back on rec_* so that the host
// can record what was applied.  If a frame closes while the DACs are still
// busy, it is not written and dac_skip pulses.
//
// From the paper (Sec. II-C, Fig. 4): RS-485 and network inputs, 16 DACs of
// type DAC8831 on SPI, the +-5 V range and the return of data to the
// computer.  Closing a frame on path 15, the source select and the code
// conversion are this design's choices.
module coil_control_module
  import ktx_pkg::*;
#(
  parameter int CPB       = CLKS_PER_BIT,
  parameter int SCLK_HLF  = SCLK_HALF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // RS-485 line from the sample board
  input  logic                    rs_rx,
  // network interface
  input  logic                    src_sel,      // 0: RS-485, 1: network
  input  logic                    net_valid,
  input  logic [PATH_W-1:0]       net_path,
  input  logic signed [DAC_W-1:0] net_data,
  output logic                    rec_valid,
  output logic [PATH_W-1:0]       rec_path,
  output logic signed [DAC_W-1:0] rec_data,
  // 16 DAC8831
  output logic [N_PATH-1:0]       dac_ncs,
  output logic [N_PATH-1:0]       dac_sclk,
  output logic [N_PATH-1:0]       dac_sdi,
  // status
  output logic                    frame_done,   // pulse: a frame was sent to the DACs
  output logic                    dac_skip,
  output logic                    par_err,
  output logic                    frm_err
);
  logic                    rx_valid;
  logic [PATH_W-1:0]       rx_path;
  logic signed [DAC_W-1:0] rx_data;

  rs485_rx #(.CPB(CPB)) u_rx (
    .clk, .rst_n, .rx(rs_rx),
    .out_valid(rx_valid), .out_path(rx_path), .out_data(rx_data),
    .par_err, .frm_err
  );

  // source select
  logic                    w_valid;
  logic [PATH_W-1:0]       w_path;
  logic signed [DAC_W-1:0] w_data;

  always_comb begin
    if (src_sel) begin
      w_valid = net_valid; w_path = net_path; w_data = net_data;
    end else begin
      w_valid = rx_valid;  w_path = rx_path;  w_data = rx_data;
    end
  end

  // frame register and DAC load
  logic signed [DAC_W-1:0] hold [N_PATH];
  logic                    load;
  logic [N_PATH-1:0]       dac_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PATH; i++) hold[i] <= '0;
      load       <= 1'b0;
      frame_done <= 1'b0;
      dac_skip   <= 1'b0;
      rec_valid  <= 1'b0;
      rec_path   <= '0;
      rec_data   <= '0;
    end else begin
      load       <= 1'b0;
      frame_done <= 1'b0;
      dac_skip   <= 1'b0;
      rec_valid  <= w_valid;
      rec_path   <= w_path;
      rec_data   <= w_data;
      if (w_valid) begin
        hold[w_path] <= w_data;
        if (w_path == PATH_W'(N_PATH - 1)) begin
          if (dac_busy == '0) begin
            load       <= 1'b1;
            frame_done <= 1'b1;
          end else begin
            dac_skip <= 1'b1;
          end
        end
      end
    end
  end

  for (genvar i = 0; i < N_PATH; i++) begin : g_dac
    dac_spi #(.W(DAC_W), .SCLK_HALF(SCLK_HLF)) u_dac (
      .clk, .rst_n,
      .datain({~hold[i][DAC_W-1], hold[i][DAC_W-2:0]}),
      .dataReady(load),
      .ncs(dac_ncs[i]), .sclk(dac_sclk[i]), .sdi(dac_sdi[i]),
      .busy(dac_busy[i]), .done()
    );
  end

endmodule
