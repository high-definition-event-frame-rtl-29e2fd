// event_fifo -- temporary buffer for incoming events.
//
// Every event entering the frame generator is first written here, whatever
// the operating mode. While the accumulator is being read out (read mode) the
// consumer stops popping and the queue fills; in write mode the consumer
// drains it. The queue keeps whole events {t, x, y, p}. DEPTH defaults to the
// 32768 entries chosen for the reference implementation.
//
// Overflow policy: when the queue is full and drop_oldest is high (read mode),
// a new event replaces the oldest one (the head is advanced and the new event
// is written), because recent events carry the newest scene changes. When full
// with drop_oldest low, the incoming event is discarded instead; that case is
// this design's choice, the reference only defines the read-mode behaviour.
// Each lost event pulses dropped for one cycle.
//
// Interface: push/din write side (no back-pressure, an event camera cannot be
// stalled); show-ahead read side: dout is the head while valid is high, pop
// consumes it. The storage is one synchronous-read memory (block RAM); the
// head is held in an output register refreshed one cycle after each pop, so
// valid drops for at most one cycle between consecutive entries only when the
// queue runs empty. Sustained throughput is one push and one pop per cycle.
module event_fifo
  import efg_pkg::*;
#(
  parameter int unsigned DEPTH = 32768   // power of two
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  event_t din,
  input  logic   pop,
  input  logic   drop_oldest,
  output event_t dout,
  output logic   valid,
  output logic   dropped,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  event_t          mem [DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [AW:0]     cnt;            // entries in memory, head register included

  logic full, do_pop, evict, do_push;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign do_pop  = pop && valid;
  // Full in read mode: discard the head to make room for the new event.
  assign evict   = push && full && !do_pop && drop_oldest;
  assign do_push = push && (!full || do_pop || evict);

  // Head read address: the entry after the current head when it leaves.
  logic [AW-1:0] rd_next;
  assign rd_next = (do_pop || evict) ? rd_ptr + 1'b1 : rd_ptr;

  logic [AW:0] cnt_next;
  always_comb begin
    cnt_next = cnt;
    if (do_push && !(do_pop || evict)) cnt_next = cnt + 1'b1;
    if (!do_push && (do_pop || evict)) cnt_next = cnt - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  // Show-ahead head register with write-through for a queue that is empty or
  // holds only the entry being written.
  always_ff @(posedge clk) begin
    if (do_push && wr_ptr == rd_next) dout <= din;
    else                              dout <= mem[rd_next];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      cnt     <= '0;
      valid   <= 1'b0;
      dropped <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      rd_ptr  <= rd_next;
      cnt     <= cnt_next;
      valid   <= (cnt_next != '0);
      dropped <= push && !do_push || evict;
    end
  end

  assign count = cnt;

  // A pop is only legal while the head is valid.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> valid)
    else $error("event_fifo: pop while empty");

endmodule
