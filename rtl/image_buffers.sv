// image_buffers: two booleanized image buffers, used as a ping-pong pair so
// that the next image can be written while the current one is classified
// (continuous mode).
//
// Each buffer holds IMG*IMG/8 image bytes and one label byte (written last, at
// byte address IMG*IMG/8). Image byte k carries pixels 8k..8k+7, least
// significant bit first; pixel p is (row, col) = (p / IMG, p % IMG).
// Writes go to buffer wr_sel. The write of the last (label) byte, flagged by
// wr_last, marks that buffer full and moves wr_sel to the other one. The
// processing side reads buffer rd_sel, whose full flag is `avail`; `release`
// marks it empty again and moves rd_sel on. wr_ready is low while the buffer
// being written to is still full, which back-pressures the data interface.
// Two buffers of one image plus label each are the paper's; the byte layout,
// the full flags and the pointer scheme are this design's own.
//
// Timing: writes and flag updates on the rising clk edge; image/label outputs
// are combinational from the storage. Synchronous active-high reset clears
// the flags and pointers (not the storage).
module image_buffers #(
  parameter int IMG = convcotm_pkg::IMG_DIM,
  localparam int NB  = IMG * IMG / 8,   // image bytes per buffer
  localparam int AW  = $clog2(NB + 1)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [7:0]         wr_data,
  input  logic               wr_last,
  output logic               wr_ready,
  input  logic               release_buf,
  output logic               avail,
  output logic [IMG*IMG-1:0] image,
  output logic [3:0]         label
);

  logic [7:0] mem [2][NB+1];
  logic [1:0] full;
  logic       wr_sel;
  logic       rd_sel;

  assign wr_ready = ~full[wr_sel];
  assign avail    = full[rd_sel];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_sel][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      full   <= '0;
      wr_sel <= 1'b0;
      rd_sel <= 1'b0;
    end else begin
      if (wr_en && wr_last) begin
        full[wr_sel] <= 1'b1;
        wr_sel       <= ~wr_sel;
      end
      if (release_buf) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= ~rd_sel;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < NB; k++) image[8*k +: 8] = mem[rd_sel][k];
    label = mem[rd_sel][NB][3:0];
  end

  // A write must never target a full buffer.
  a_no_overwrite: assert property (@(posedge clk) disable iff (rst) wr_en |-> ~full[wr_sel]);

endmodule
