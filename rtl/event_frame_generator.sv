// event_frame_generator -- projects a stream of sensor events onto image frames.
//
// An event camera reports per-pixel brightness changes e = {t, x, y, p}. This
// module collects the events of one accumulation interval in an on-chip
// accumulator holding one element per pixel (WIDTH x HEIGHT, 1280 x 720 by
// default) and then streams the whole accumulator out as an 8-bit grey image,
// clearing it on the way. It alternates between two modes:
//   write mode  events are taken from the event queue and written to the
//               accumulator (event_writer) until an event at the queue head
//               lies beyond the end of the current interval;
//   read mode   the pixel counter sweeps the accumulator (frame_reader), each
//               pixel is decoded (pixel_decoder) and output, and the cell is
//               cleared one clock after it was read.
// Events keep arriving in read mode; they wait in the event queue
// (event_fifo), which overwrites its oldest entries if it fills up. All events
// pass through the queue in both modes.
//
// Variants selected by parameters:
//   REPR     binary frame, event frame (default), exponentially decaying time
//            surface or event frequency; sets the accumulator word width.
//   BIN_POL  binary frame from both polarities (default) or from positive or
//            negative events only.
//   BANKS    number of parallel block memories; the frame is output at BANKS
//            pixels per clock (pixel_address splits address into bank/cell).
//   ROLLING  rolling window: an image every K_US us covering the last M_SUB of
//            N_SUB sub-windows kept in the accumulator; the sub-window index is
//            stored next to the value.
//
// Interface: ev_valid/ev is the event input (one event per clock at most, no
// back-pressure). pix_valid qualifies pix_data, BANKS grey levels of
// consecutive pixels in row-major order, lane 0 first; pix_first and pix_last
// mark the frame boundaries. frame_end_t is the end timestamp of the interval
// being accumulated (during read mode: of the frame being output). read_mode shows the current mode, ev_dropped
// pulses for every event lost to a full queue.
//
// Timing: a frame read-out takes WIDTH*HEIGHT/BANKS clocks plus 2 clocks of
// latency; in write mode one event is accumulated per clock.
module event_frame_generator
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH      = 1280,
  parameter int unsigned HEIGHT     = 720,
  parameter repr_e       REPR       = REPR_EVENT,
  parameter int unsigned BANKS      = 1,
  parameter int unsigned FIFO_DEPTH = 32768,
  parameter int unsigned TAU_US     = 10000,
  parameter bit          ROLLING    = 1'b0,
  parameter int unsigned N_SUB      = 8,
  parameter int unsigned M_SUB      = 4,
  parameter int unsigned K_US       = 1000,
  parameter pol_sel_e    BIN_POL    = POL_BOTH,
  localparam int unsigned PIXELS    = WIDTH * HEIGHT,
  localparam int unsigned CELLS     = (PIXELS + BANKS - 1) / BANKS,
  localparam int unsigned CW        = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned BW        = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned VW        = repr_width(REPR),
  localparam int unsigned IW        = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned DW        = VW + (ROLLING ? IW : 0)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ev_valid,
  input  event_t       ev,
  output logic         pix_valid,
  output logic         pix_first,
  output logic         pix_last,
  output logic [7:0]   pix_data [BANKS],
  output logic         read_mode,
  output logic [T_W-1:0] frame_end_t,
  output logic         ev_dropped,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count
);

  typedef enum logic {S_WRITE, S_READ} mode_e;
  mode_e mode;

  // ---------------------------------------------------------- event queue
  event_t head;
  logic   head_valid, pop;

  event_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(ev_valid), .din(ev),
    .pop, .drop_oldest(mode == S_READ),
    .dout(head), .valid(head_valid),
    .dropped(ev_dropped), .count(fifo_count)
  );

  // ------------------------------------------------------ accumulator banks
  logic          ram_rd_en   [BANKS];
  logic [CW-1:0] ram_rd_addr [BANKS];
  logic [DW-1:0] ram_rd_data [BANKS];
  logic          ram_wr_en   [BANKS];
  logic [CW-1:0] ram_wr_addr [BANKS];
  logic [DW-1:0] ram_wr_data [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    accumulator_ram #(.DEPTH(CELLS), .DW(DW)) u_ram (
      .clk,
      .rd_en(ram_rd_en[b]), .rd_addr(ram_rd_addr[b]), .rd_data(ram_rd_data[b]),
      .wr_en(ram_wr_en[b]), .wr_addr(ram_wr_addr[b]), .wr_data(ram_wr_data[b])
    );
  end

  // ------------------------------------------------- write memory controller
  logic           window_done, advance;
  logic [IW-1:0]  cur_idx;
  logic [T_W-1:0] window_end;
  logic           w_rd_en, w_wr_en;
  logic [CW-1:0]  w_rd_cell, w_wr_cell;
  logic [BW-1:0]  w_wr_bank;
  logic [DW-1:0]  w_wr_data;

  event_writer #(
    .WIDTH(WIDTH), .HEIGHT(HEIGHT), .BANKS(BANKS), .REPR(REPR),
    .ROLLING(ROLLING), .TAU_US(TAU_US), .N_SUB(N_SUB), .K_US(K_US),
    .BIN_POL(BIN_POL)
  ) u_writer (
    .clk, .rst_n,
    .enable(mode == S_WRITE),
    .head, .head_valid, .pop,
    .window_done, .advance, .cur_idx, .window_end,
    .rd_en(w_rd_en), .rd_cell(w_rd_cell), .rd_data(ram_rd_data),
    .wr_en(w_wr_en), .wr_bank(w_wr_bank), .wr_cell(w_wr_cell), .wr_data(w_wr_data)
  );

  // -------------------------------------------------- read memory controller
  logic             r_start, r_done;
  logic             r_rd_en;
  logic [CW-1:0]    r_rd_cell, r_wr_cell;
  logic [BANKS-1:0] r_wr_en;
  logic [DW-1:0]    r_wr_data;
  logic [VW-1:0]    r_value [BANKS];

  frame_reader #(
    .WIDTH(WIDTH), .HEIGHT(HEIGHT), .BANKS(BANKS), .REPR(REPR),
    .ROLLING(ROLLING), .N_SUB(N_SUB), .M_SUB(M_SUB)
  ) u_reader (
    .clk, .rst_n,
    .start(r_start), .busy(), .done(r_done), .cur_idx,
    .rd_en(r_rd_en), .rd_cell(r_rd_cell), .rd_data(ram_rd_data),
    .wr_en(r_wr_en), .wr_cell(r_wr_cell), .wr_data(r_wr_data),
    .pix_valid, .pix_first, .pix_last, .pix_value(r_value)
  );

  // ---------------------------------------------------------- port sharing
  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      if (mode == S_READ) begin
        ram_rd_en[b]   = r_rd_en;
        ram_rd_addr[b] = r_rd_cell;
        ram_wr_en[b]   = r_wr_en[b];
        ram_wr_addr[b] = r_wr_cell;
        ram_wr_data[b] = r_wr_data;
      end else begin
        ram_rd_en[b]   = w_rd_en;
        ram_rd_addr[b] = w_rd_cell;
        ram_wr_en[b]   = w_wr_en && (32'(w_wr_bank) == b);
        ram_wr_addr[b] = w_wr_cell;
        ram_wr_data[b] = w_wr_data;
      end
    end
  end

  // -------------------------------------------------------- pixel decoders
  for (genvar b = 0; b < BANKS; b++) begin : g_dec
    pixel_decoder #(.REPR(REPR)) u_dec (.value(r_value[b]), .pixel(pix_data[b]));
  end

  // ------------------------------------------------------------ mode control
  assign r_start = (mode == S_WRITE) && window_done;
  assign advance = (mode == S_READ) && r_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       mode <= S_WRITE;
    else if (r_start) mode <= S_READ;
    else if (advance) mode <= S_WRITE;
  end

  assign read_mode   = (mode == S_READ);
  assign frame_end_t = window_end;

  // The writer may only touch the accumulator in write mode, the reader only
  // in read mode.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mode == S_READ) |-> !w_wr_en && !pop)
    else $error("event_frame_generator: write port used in read mode");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mode == S_WRITE) |-> !r_rd_en && (r_wr_en == '0))
    else $error("event_frame_generator: reader active in write mode");

endmodule
