// frame_reader -- read memory controller of the event frame generator.
//
// A start pulse begins read mode: the pixel position counter is reset to 0 and
// then steps through every cell of the accumulator, one cell per clock. The
// counter drives the read port of all BANKS memories at once, so each step
// yields BANKS consecutive pixels of the row-major image. The cell address is
// delayed by one clock and sent to the write ports with the value 0, which
// clears the cell just read and leaves the accumulator empty for the next
// frame. After the last cell, done pulses and the top returns to write mode.
//
// Rolling window (ROLLING = 1): every stored word holds a sub-window index
// above its value. With cur_idx the index of the sub-window that has just
// ended, a pixel is passed to the output only if its index lies within the
// last M_SUB sub-windows, i.e. (cur_idx - idx) mod N_SUB < M_SUB; otherwise it
// is output as "no event" (value 0). Only cells holding the oldest index,
// (cur_idx + 1) mod N_SUB, which the next sub-window will reuse, are cleared;
// all others keep their content.
//
// Timing: counting the clock edge that samples start as edge 0, the first
// pixel group is valid after edge 2 (memory read plus an output register) and
// the last one CELLS - 1 clocks later, CELLS = WIDTH*HEIGHT/BANKS; done pulses
// with the last group.
// pix_first and pix_last mark the first and last pixel group of a frame.
module frame_reader
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH   = 1280,
  parameter int unsigned HEIGHT  = 720,
  parameter int unsigned BANKS   = 1,
  parameter repr_e       REPR    = REPR_EVENT,
  parameter bit          ROLLING = 1'b0,
  parameter int unsigned N_SUB   = 8,
  parameter int unsigned M_SUB   = 4,
  localparam int unsigned PIXELS = WIDTH * HEIGHT,
  localparam int unsigned CELLS  = (PIXELS + BANKS - 1) / BANKS,
  localparam int unsigned CW     = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned VW     = repr_width(REPR),
  localparam int unsigned IW     = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned DW     = VW + (ROLLING ? IW : 0)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [IW-1:0] cur_idx,
  // accumulator memories
  output logic          rd_en,
  output logic [CW-1:0] rd_cell,
  input  logic [DW-1:0] rd_data [BANKS],
  output logic [BANKS-1:0] wr_en,
  output logic [CW-1:0] wr_cell,
  output logic [DW-1:0] wr_data,
  // pixel stream, BANKS pixels per clock
  output logic          pix_valid,
  output logic          pix_first,
  output logic          pix_last,
  output logic [VW-1:0] pix_value [BANKS]
);

  logic [CW-1:0] cnt;
  logic          run;

  // stage 1: memory data available for cell c1
  logic          v1, first1, last1;
  logic [CW-1:0] c1;

  assign rd_en   = run;
  assign rd_cell = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      cnt    <= '0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      c1     <= '0;
    end else begin
      if (start && !busy) begin
        run <= 1'b1;
        cnt <= '0;
      end else if (run) begin
        if (cnt == CW'(CELLS - 1)) run <= 1'b0;
        else                       cnt <= cnt + 1'b1;
      end
      v1     <= run;
      first1 <= run && (cnt == '0);
      last1  <= run && (cnt == CW'(CELLS - 1));
      c1     <= cnt;
    end
  end

  // Rolling-window selection and clearing.
  logic [IW-1:0] reset_idx;
  assign reset_idx = (N_SUB > 1) ? IW'((32'(cur_idx) + 1) % N_SUB) : '0;

  logic [BANKS-1:0] keep, clear;
  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      logic [IW-1:0] idx, age;
      idx = ROLLING ? IW'(rd_data[b] >> VW) : '0;
      age = (N_SUB > 1) ? IW'((32'(cur_idx) + 32'(N_SUB) - 32'(idx)) % N_SUB) : '0;
      keep[b]  = !ROLLING || (32'(age) < M_SUB);
      clear[b] = !ROLLING || (idx == reset_idx);
    end
  end

  assign wr_cell = c1;
  assign wr_data = '0;
  always_comb begin
    for (int b = 0; b < BANKS; b++) wr_en[b] = v1 && clear[b];
  end

  // Output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_valid <= 1'b0;
      pix_first <= 1'b0;
      pix_last  <= 1'b0;
      done      <= 1'b0;
      for (int b = 0; b < BANKS; b++) pix_value[b] <= '0;
    end else begin
      pix_valid <= v1;
      pix_first <= first1;
      pix_last  <= last1;
      done      <= last1;
      for (int b = 0; b < BANKS; b++)
        pix_value[b] <= keep[b] ? rd_data[b][VW-1:0] : '0;
    end
  end

  assign busy = run || v1 || pix_valid;

  initial begin
    assert (PIXELS % BANKS == 0)
      else $fatal(1, "frame_reader: BANKS must divide WIDTH*HEIGHT");
    assert (M_SUB >= 1 && M_SUB <= N_SUB)
      else $fatal(1, "frame_reader: rolling window needs 1 <= M_SUB <= N_SUB");
  end

endmodule
