// pixel_address -- maps event coordinates to an accumulator location.
//
// The linear pixel address is address = y * WIDTH + x (row-major order, the
// order in which a frame is later read out). With BANKS parallel block
// memories the address is split by division by the actual number of banks:
// bank = address % BANKS selects the memory and cell_idx = address / BANKS is the
// location inside it. When BANKS divides WIDTH the bank is simply the column
// modulo BANKS, so BANKS horizontally adjacent pixels sit in different banks
// at the same cell and one read of all banks yields BANKS consecutive pixels
// (BANKS pixels per clock). With BANKS = 1 the bank is always 0 and the cell
// is the linear address.
//
// Purely combinational; with constant parameters the multiplication and the
// division reduce to constant arithmetic.
module pixel_address
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH  = 1280,
  parameter int unsigned HEIGHT = 720,
  parameter int unsigned BANKS  = 1,
  localparam int unsigned PIXELS = WIDTH * HEIGHT,
  localparam int unsigned CELLS  = (PIXELS + BANKS - 1) / BANKS,
  localparam int unsigned AW     = (PIXELS > 1) ? $clog2(PIXELS) : 1,
  localparam int unsigned CW     = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned BW     = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic [X_W-1:0] x,
  input  logic [Y_W-1:0] y,
  output logic [AW-1:0]  address,
  output logic [BW-1:0]  bank,
  output logic [CW-1:0]  cell_idx
);

  logic [AW-1:0] a;

  assign a       = AW'(y) * AW'(WIDTH) + AW'(x);
  assign address = a;
  assign bank    = BW'(a % AW'(BANKS));
  assign cell_idx = CW'(a / AW'(BANKS));

endmodule
