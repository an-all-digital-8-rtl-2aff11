// axis_interface: the 8-bit stream input from the system processor.
//
// A byte is transferred on a rising clk edge where tvalid and tready are both
// high, as in AXI4-Stream (no tlast, tkeep or tuser: the byte counts are fixed).
// While `load_mode` is high (main state machine in Load Model) every byte goes
// to the model registers at consecutive addresses from 0, and tready drops once
// all MODEL_BYTES have arrived; `model_done` then stays high until load_mode
// falls, which also rewinds the address. Otherwise bytes go to the image
// buffers: IMG_XFER_BYTES per image (image bytes, then the label byte), with
// img_last on the label byte; tready follows the image buffers' wr_ready.
// The byte routing and counting scheme is this design's; the 8-bit
// AXI-Stream-like interface and the two modes are the paper's.
//
// Write strobes and data toward the two destinations are combinational from the
// handshake. Synchronous active-high reset.
module axis_interface #(
  parameter int MODEL_BYTES = convcotm_pkg::MODEL_BYTES,
  parameter int IMG_XFER    = convcotm_pkg::IMG_XFER_BYTES,
  localparam int MAW = $clog2(MODEL_BYTES + 1),
  localparam int IAW = $clog2(IMG_XFER)
) (
  input  logic           clk,
  input  logic           rst,
  // stream input
  input  logic [7:0]     tdata,
  input  logic           tvalid,
  output logic           tready,
  // mode and status
  input  logic           load_mode,
  output logic           model_done,
  // toward the model registers
  output logic           model_we,
  output logic [MAW-1:0] model_addr,
  output logic [7:0]     model_data,
  // toward the image buffers
  input  logic           img_ready,
  output logic           img_we,
  output logic [IAW-1:0] img_addr,
  output logic [7:0]     img_data,
  output logic           img_last
);

  logic [MAW-1:0] model_cnt;
  logic [IAW-1:0] img_cnt;
  logic           xfer;

  assign model_done = (model_cnt == MAW'(MODEL_BYTES));
  assign tready     = load_mode ? ~model_done : img_ready;
  assign xfer       = tvalid & tready;

  assign model_we   = xfer & load_mode;
  assign model_addr = model_cnt;
  assign model_data = tdata;

  assign img_we     = xfer & ~load_mode;
  assign img_addr   = img_cnt;
  assign img_data   = tdata;
  assign img_last   = (img_cnt == IAW'(IMG_XFER - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      model_cnt <= '0;
      img_cnt   <= '0;
    end else begin
      if (!load_mode)    model_cnt <= '0;
      else if (model_we) model_cnt <= model_cnt + 1'b1;
      if (img_we)        img_cnt   <= img_last ? '0 : img_cnt + 1'b1;
    end
  end

endmodule
