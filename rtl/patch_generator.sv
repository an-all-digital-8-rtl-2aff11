// patch_generator: slides a WIN x WIN window over a booleanized IMG x IMG image
// and outputs one patch (its features) per clock cycle.
//
// The generator holds a register of WIN rows of IMG bits. On `load` it copies
// image rows 0..WIN-1 into it and puts the window at x = y = 0. Each `step`
// moves the window one column to the right; after the rightmost position
// (x = IMG-WIN) the rows shift up by one, image row y+WIN enters the bottom row
// and the window returns to x = 0 with y+1. The window is a column multiplexer
// on the register, so the register only shifts once per patch row. The last
// patch is (x, y) = (IMG-WIN, IMG-WIN); `last` is high while it is shown.
// With the default sizes that is 19 x 19 = 361 patches.
//
// Feature order (N_FEAT = WIN*WIN + 2*(IMG-WIN) = 136):
//   feat[r*WIN + c]                 window pixel at row r, column c (0..99)
//   feat[WIN*WIN +: IMG-WIN]        thermometer code of y (100..117)
//   feat[WIN*WIN+IMG-WIN +: IMG-WIN] thermometer code of x (118..135)
// A thermometer code of position p has its p lowest bits set. Image pixel
// (row, col) is image[row*IMG + col]. The register, window sliding, row shift
// and thermometer position code follow the paper; the order of the features in
// the vector and the one-cycle parallel load of the first rows are this design's.
//
// Timing: feat/x/y/last are combinational from the registers; load and step act
// on the rising clk edge (load wins). Synchronous active-high reset.
module patch_generator #(
  parameter int IMG = convcotm_pkg::IMG_DIM,
  parameter int WIN = convcotm_pkg::WIN,
  localparam int NP  = IMG - WIN + 1,
  localparam int TB  = IMG - WIN,
  localparam int NF  = WIN * WIN + 2 * TB,
  localparam int PW  = $clog2(NP)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 load,
  input  logic                 step,
  input  logic [IMG*IMG-1:0]   image,
  output logic [NF-1:0]        feat,
  output logic [PW-1:0]        x,
  output logic [PW-1:0]        y,
  output logic                 last
);

  logic [WIN-1:0][IMG-1:0] rows;
  logic [IMG-1:0]          next_row;
  logic                    x_end;

  assign x_end = (x == PW'(NP - 1));
  assign last  = x_end && (y == PW'(NP - 1));

  // Image row that enters the bottom of the register when the window wraps.
  always_comb begin
    next_row = '0;
    for (int r = WIN; r < IMG; r++)
      if (int'(y) + WIN == r) next_row = image[r*IMG +: IMG];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rows <= '0;
      x    <= '0;
      y    <= '0;
    end else if (load) begin
      for (int r = 0; r < WIN; r++) rows[r] <= image[r*IMG +: IMG];
      x <= '0;
      y <= '0;
    end else if (step && !last) begin
      if (x_end) begin
        for (int r = 0; r < WIN - 1; r++) rows[r] <= rows[r+1];
        rows[WIN-1] <= next_row;
        x <= '0;
        y <= y + 1'b1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  // Window multiplexer and position codes.
  always_comb begin
    feat = '0;
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++)
        feat[r*WIN + c] = rows[r][int'(x) + c];
    for (int b = 0; b < TB; b++) begin
      feat[WIN*WIN + b]      = (b < int'(y));
      feat[WIN*WIN + TB + b] = (b < int'(x));
    end
  end

endmodule
