// tb_efg_hd_variants -- the variants of the resource comparison at full HD size.
//
// Six generators of 1280 x 720 pixels with a 10 ms accumulation interval and
// the 512-entry event queue used for that comparison run side by side, each
// fed with its own random event stream and checked frame by frame against a
// reference model (efg_harness): binary frame, event frame, exponentially
// decaying time surface, event frequency, event frame on 2 parallel memories
// (2 pixels per clock), and the rolling window (8 sub-windows of 1 ms, the
// last 4 shown) on the event frame. Each instance must read out its frames,
// buffer events during read mode and overflow its queue; the frequency
// instance must meet back-to-back events on one pixel, the rolling-window
// instance must hold pixels back and clear the oldest sub-window.
module tb_efg_hd_variants;
  import efg_pkg::*;

  localparam int NI = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  logic fin [NI];
  int   chk [NI], fail [NI], frames [NI], rdp [NI], drops [NI], same [NI],
        hidden [NI], cleared [NI], filt [NI];

  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_BINARY), .BANKS(1),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b0), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(2), .SEED(11)) h0 (.clk, .rst_n,
    .finished(fin[0]), .checks(chk[0]), .failures(fail[0]), .n_frames(frames[0]),
    .n_read_pushes(rdp[0]), .n_drops(drops[0]), .n_same_pixel(same[0]),
    .n_hidden(hidden[0]), .n_cleared(cleared[0]), .n_filtered(filt[0]));
  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_EVENT), .BANKS(1),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b0), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(2), .SEED(22)) h1 (.clk, .rst_n,
    .finished(fin[1]), .checks(chk[1]), .failures(fail[1]), .n_frames(frames[1]),
    .n_read_pushes(rdp[1]), .n_drops(drops[1]), .n_same_pixel(same[1]),
    .n_hidden(hidden[1]), .n_cleared(cleared[1]), .n_filtered(filt[1]));
  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_EXP_DECAY), .BANKS(1),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b0), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(2), .SEED(33)) h2 (.clk, .rst_n,
    .finished(fin[2]), .checks(chk[2]), .failures(fail[2]), .n_frames(frames[2]),
    .n_read_pushes(rdp[2]), .n_drops(drops[2]), .n_same_pixel(same[2]),
    .n_hidden(hidden[2]), .n_cleared(cleared[2]), .n_filtered(filt[2]));
  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_FREQUENCY), .BANKS(1),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b0), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(2), .SEED(44)) h3 (.clk, .rst_n,
    .finished(fin[3]), .checks(chk[3]), .failures(fail[3]), .n_frames(frames[3]),
    .n_read_pushes(rdp[3]), .n_drops(drops[3]), .n_same_pixel(same[3]),
    .n_hidden(hidden[3]), .n_cleared(cleared[3]), .n_filtered(filt[3]));
  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_EVENT), .BANKS(2),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b0), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(2), .SEED(55)) h4 (.clk, .rst_n,
    .finished(fin[4]), .checks(chk[4]), .failures(fail[4]), .n_frames(frames[4]),
    .n_read_pushes(rdp[4]), .n_drops(drops[4]), .n_same_pixel(same[4]),
    .n_hidden(hidden[4]), .n_cleared(cleared[4]), .n_filtered(filt[4]));
  efg_harness #(.WIDTH(1280), .HEIGHT(720), .REPR(REPR_EVENT), .BANKS(1),
                .FIFO_DEPTH(512), .TAU_US(10000), .ROLLING(1'b1), .N_SUB(8),
                .M_SUB(4), .K_US(1000), .FRAMES(10), .SEED(66)) h5 (.clk, .rst_n,
    .finished(fin[5]), .checks(chk[5]), .failures(fail[5]), .n_frames(frames[5]),
    .n_read_pushes(rdp[5]), .n_drops(drops[5]), .n_same_pixel(same[5]),
    .n_hidden(hidden[5]), .n_cleared(cleared[5]), .n_filtered(filt[5]));

  int checks, failures;

  task automatic need(bit cond, string what, int i);
    checks++;
    if (!cond) begin
      failures++;
      $display("instance %0d: mechanism never exercised: %s", i, what);
    end
  endtask

  task automatic report();
    for (int i = 0; i < NI; i++) begin
      checks   += chk[i];
      failures += fail[i];
      $display("instance %0d: frames=%0d read_mode_events=%0d drops=%0d same_pixel=%0d hidden=%0d cleared=%0d filtered=%0d checks=%0d failures=%0d",
               i, frames[i], rdp[i], drops[i], same[i], hidden[i], cleared[i], filt[i], chk[i], fail[i]);
      need(frames[i] > 0, "frame read-out", i);
      need(rdp[i] > 0, "events buffered during read mode", i);
      need(drops[i] > 0, "queue overflow", i);
      if (i == 3) need(same[i] > 0, "back-to-back events on one pixel", i);
      if (i == 5) begin
        need(hidden[i] > 0, "rolling window: pixel held back", i);
        need(cleared[i] > 0, "rolling window: oldest sub-window cleared", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    repeat (5) @(posedge clk);
    report();
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    report();
    $finish;
  end

endmodule
