// efg_harness -- drives one event_frame_generator with a random event stream
// and checks every output frame against a reference model.
//
// The reference keeps, for every pixel, the state the chosen representation
// needs (last polarity, last timestamp, polarity sum, absolute sub-window
// number) and computes the expected grey level from the representation
// formulas with real arithmetic (exp), not from the design's tables. The
// event queue is modelled as a list: pushes append, the generator's pops take
// the front (the popped event is compared with the modelled front), and a
// push to a full queue removes the oldest entry in read mode or is lost in
// write mode. Frames are checked pixel by pixel in stream order, the read-out
// length is checked against WIDTH*HEIGHT/BANKS clocks, and each mode switch is
// checked against the window end.
//
// Counted mechanisms (reported in stats): frames, events that arrived during
// read mode, events lost to a full queue, back-to-back events on one pixel,
// rolling-window pixels held back from the output, rolling-window clears,
// events left out of a one-polarity binary frame.
module efg_harness
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH      = 12,
  parameter int unsigned HEIGHT     = 8,
  parameter repr_e       REPR       = REPR_EVENT,
  parameter int unsigned BANKS      = 1,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned TAU_US     = 200,
  parameter bit          ROLLING    = 1'b0,
  parameter int unsigned N_SUB      = 8,
  parameter int unsigned M_SUB      = 4,
  parameter int unsigned K_US       = 50,
  parameter pol_sel_e    BIN_POL    = POL_BOTH,
  parameter int unsigned FRAMES     = 12,
  parameter int unsigned SEED       = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_frames,
  output int   n_read_pushes,
  output int   n_drops,
  output int   n_same_pixel,
  output int   n_hidden,
  output int   n_cleared,
  output int   n_filtered
);

  localparam int PIXELS = WIDTH * HEIGHT;
  localparam int CELLS  = PIXELS / BANKS;
  localparam int PERIOD = ROLLING ? K_US : TAU_US;

  logic        ev_valid;
  event_t      ev;
  logic        pix_valid, pix_first, pix_last, read_mode, ev_dropped;
  logic [7:0]  pix_data [BANKS];
  logic [T_W-1:0] frame_end_t;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;

  event_frame_generator #(
    .WIDTH(WIDTH), .HEIGHT(HEIGHT), .REPR(REPR), .BANKS(BANKS),
    .FIFO_DEPTH(FIFO_DEPTH), .TAU_US(TAU_US), .ROLLING(ROLLING),
    .N_SUB(N_SUB), .M_SUB(M_SUB), .K_US(K_US), .BIN_POL(BIN_POL)
  ) dut (.*);

  // ------------------------------------------------------- reference state
  event_t q[$];
  int     ref_pol  [PIXELS];   // last polarity: +1 / -1, 0 = none
  int     ref_t    [PIXELS];   // decay value stored (signed magnitude)
  int     ref_sum  [PIXELS];   // saturated polarity sum
  int     ref_sub  [PIXELS];   // absolute sub-window of last event
  bit     ref_has  [PIXELS];
  longint win_end;
  bit     started;
  int     sub_abs;             // absolute number of the current sub-window
  int     last_pix;
  int     pix_pos;             // next expected pixel index in the frame
  int     frame_cycles;

  function automatic int expected(int i);
    real r;
    if (!ref_has[i]) begin
      return (REPR == REPR_BINARY) ? 0 : 128;
    end
    if (ROLLING && (sub_abs - ref_sub[i]) >= int'(M_SUB))
      return (REPR == REPR_BINARY) ? 0 : 128;
    case (REPR)
      REPR_BINARY:    return 255;
      REPR_EVENT:     return (ref_pol[i] > 0) ? 255 : 0;
      REPR_EXP_DECAY: return 128 + ref_t[i];
      default: begin
        r = 255.0 / (1.0 + $exp(-real'(ref_sum[i]) / 2.0));
        return $rtoi(r + 0.5);
      end
    endcase
  endfunction

  task automatic apply_event(event_t e);
    int  i;
    real k;
    i = int'(e.y) * WIDTH + int'(e.x);
    // one-polarity binary frame: the other polarity leaves no trace
    if (REPR == REPR_BINARY && BIN_POL != POL_BOTH &&
        e.p != (BIN_POL == POL_POS)) begin
      n_filtered++;
      return;
    end
    if (i == last_pix) n_same_pixel++;
    last_pix = i;
    if (ROLLING && ref_has[i] && ref_sub[i] != sub_abs) ref_sum[i] = 0;
    if (!ref_has[i]) ref_sum[i] = 0;
    ref_has[i] = 1;
    ref_pol[i] = e.p ? 1 : -1;
    ref_sub[i] = sub_abs;
    // decay: exp(-(t_end - t)/tau) quantised to 1/64 steps of the ratio
    k = $floor(real'(win_end - longint'(e.t)) * 64.0 / real'(TAU_US));
    if (k > 64.0) k = 64.0;
    ref_t[i] = $rtoi(127.0 * $exp(-k / 64.0) + 0.5) * ref_pol[i];
    ref_sum[i] = ref_sum[i] + ref_pol[i];
    if (ref_sum[i] > 15)  ref_sum[i] = 15;
    if (ref_sum[i] < -16) ref_sum[i] = -16;
  endtask

  task automatic end_of_frame();
    for (int i = 0; i < PIXELS; i++) begin
      if (!ROLLING) ref_has[i] = 0;
      else if (ref_has[i] && (sub_abs - ref_sub[i]) >= int'(N_SUB) - 1) begin
        ref_has[i] = 0;
        n_cleared++;
      end else if (ref_has[i] && (sub_abs - ref_sub[i]) >= int'(M_SUB)) begin
        n_hidden++;
      end
    end
    win_end += PERIOD;
    sub_abs++;
  endtask

  // ------------------------------------------------------------- stimulus
  logic [31:0] t_now;
  int unsigned rng;
  int          lx, ly;

  function automatic int unsigned rnd();
    rng = rng * 1103515245 + 12345;
    return rng >> 8;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_valid <= 1'b0;
      ev       <= '0;
      t_now    <= 32'd1000;
    end else begin
      logic [31:0] tn;
      int          x, y;
      tn = t_now + ((rnd() % 8 == 0) ? 32'(rnd() % 4) : 32'd0);
      if (rnd() % 3 == 0) begin x = lx; y = ly; end
      else begin x = int'(rnd() % WIDTH); y = int'(rnd() % HEIGHT); end
      // Rolling window: events sweep across the image in a narrow band, so
      // pixels age through the sub-windows.
      if (ROLLING) x = int'((tn / PERIOD + rnd() % 2) % WIDTH);
      lx <= x; ly <= y;
      t_now    <= tn;
      ev_valid <= !finished && (rnd() % 4 != 0);
      ev       <= '{t: tn, x: X_W'(x), y: Y_W'(y), p: rnd() % 2 == 0};
    end
  end

  // ------------------------------------------------------------ checking
  always @(posedge clk) begin
    if (rst_n) begin
      // Queue model, in the same order as the hardware: pop, then push.
      if (dut.pop) begin
        checks++;
        if (q.size() == 0 || dut.head != q[0]) begin
          failures++;
          $display("[%m] popped event differs from model queue front");
        end
        if (q.size() != 0) begin
          if (longint'(q[0].t) >= win_end) begin
            failures++;
            $display("[%m] event beyond window end accumulated");
          end
          apply_event(q[0]);
          void'(q.pop_front());
        end
      end
      if (ev_valid) begin
        if (read_mode) n_read_pushes++;
        if (q.size() >= int'(FIFO_DEPTH) && !dut.pop) begin
          n_drops++;
          if (read_mode) begin void'(q.pop_front()); q.push_back(ev); end
        end else begin
          q.push_back(ev);
        end
      end
      if (!started && q.size() > 0 && !dut.pop) begin
        started = 1;
        win_end = longint'(q[0].t) + PERIOD;
      end
      // Switching to read mode only once the queue head passed the window.
      if (dut.r_start) begin
        checks++;
        if (q.size() == 0 || longint'(q[0].t) < win_end) begin
          failures++;
          $display("[%m] read mode entered before the window end");
        end
        frame_cycles = 0;
      end
      if (read_mode) frame_cycles++;
      // Pixel stream.
      if (pix_valid) begin
        checks++;
        if (pix_first != (pix_pos == 0)) begin
          failures++;
          $display("[%m] pix_first wrong at pixel %0d", pix_pos);
        end
        for (int b = 0; b < BANKS; b++) begin
          checks++;
          if (int'(pix_data[b]) != expected(pix_pos + b)) begin
            failures++;
            if (failures < 20)
              $display("[%m] frame %0d pixel %0d: got %0d expected %0d",
                       n_frames, pix_pos + b, pix_data[b], expected(pix_pos + b));
          end
        end
        if (pix_first) begin
          checks++;
          if (longint'(frame_end_t) != win_end) begin
            failures++;
            $display("[%m] frame_end_t %0d, expected %0d", frame_end_t, win_end);
          end
        end
        pix_pos += BANKS;
        if (pix_last) begin
          checks++;
          if (pix_pos != PIXELS) begin
            failures++;
            $display("[%m] pix_last after %0d pixels", pix_pos);
          end
          pix_pos = 0;
          n_frames++;
          end_of_frame();
        end
      end
      if (dut.advance) begin
        // read-out length: CELLS clocks plus two of latency
        checks++;
        if (frame_cycles != CELLS + 2) begin
          failures++;
          $display("[%m] read mode lasted %0d clocks, expected %0d", frame_cycles, CELLS + 2);
        end
      end
      if (n_frames >= int'(FRAMES)) finished <= 1'b1;
    end
  end

  initial begin
    finished = 0; checks = 0; failures = 0; n_frames = 0; n_read_pushes = 0;
    n_drops = 0; n_same_pixel = 0; n_hidden = 0; n_cleared = 0; n_filtered = 0;
    started = 0; sub_abs = 0; pix_pos = 0; last_pix = -1; frame_cycles = 0;
    win_end = 0; rng = SEED; lx = 0; ly = 0;
    for (int i = 0; i < PIXELS; i++) begin
      ref_has[i] = 0; ref_pol[i] = 0; ref_t[i] = 0; ref_sum[i] = 0; ref_sub[i] = 0;
    end
  end

endmodule
