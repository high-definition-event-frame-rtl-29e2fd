// accumulator_ram -- one block memory of the event accumulator.
//
// A two-port memory with one element per pixel (or per pixel of one bank when
// several memories work in parallel). Port A only reads, port B only writes,
// as in the reference architecture: in write mode port B stores event values,
// in read mode port A reads a pixel and port B clears the cell read one cycle
// earlier. The event frequency representation uses port A to fetch the
// current count and port B to write it back.
//
// Timing: rd_data is the content of rd_addr one clock after rd_en (synchronous
// read). A read and a write of the same cell in one cycle return the old
// content (read-first). The memory starts all-zero, which every
// representation decodes as "no event"; an FPGA block memory is loaded with
// this initial content by the bitstream.
module accumulator_ram #(
  parameter int unsigned DEPTH = 921600,
  parameter int unsigned DW    = 2,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] mem [DEPTH];

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assert property (@(posedge clk) rd_en |-> 32'(rd_addr) < DEPTH)
    else $error("accumulator_ram: read address out of range");
  assert property (@(posedge clk) wr_en |-> 32'(wr_addr) < DEPTH)
    else $error("accumulator_ram: write address out of range");

endmodule
