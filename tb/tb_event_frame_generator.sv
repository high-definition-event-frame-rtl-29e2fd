// tb_event_frame_generator -- end-to-end test of the event frame generator.
//
// Seven small generators (12 x 8 pixels, the size of the illustrated
// example, a 16-entry event queue, short accumulation windows) run side by
// side, each with its own random event stream and reference model
// (efg_harness):
//   binary frame; event frame; event frame at 2 pixels per clock; exponentially
//   decaying time surface; event frequency at 3 pixels per clock; rolling
//   window on the event frame; rolling window on the event frequency at
//   2 pixels per clock; binary frame of positive events only at 2 pixels per
//   clock.
// Every instance must see its frames, events arriving in read mode and queue
// overflow; the frequency instances must see back-to-back events on one pixel
// (read-modify-write forwarding), the rolling-window instances pixels held
// back from the output and sub-window clears, the one-polarity binary frame
// negative events that leave no trace. A mechanism that never happened
// counts as a failure.
module tb_event_frame_generator;
  import efg_pkg::*;

  localparam int NI = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  logic fin [NI];
  int   chk [NI], fail [NI], frames [NI], rdp [NI], drops [NI], same [NI],
        hidden [NI], cleared [NI], filt [NI];

  efg_harness #(.REPR(REPR_BINARY),    .BANKS(1), .SEED(11)) h0 (.clk, .rst_n,
    .finished(fin[0]), .checks(chk[0]), .failures(fail[0]), .n_frames(frames[0]),
    .n_read_pushes(rdp[0]), .n_drops(drops[0]), .n_same_pixel(same[0]),
    .n_hidden(hidden[0]), .n_cleared(cleared[0]), .n_filtered(filt[0]));
  efg_harness #(.REPR(REPR_EVENT),     .BANKS(1), .SEED(22)) h1 (.clk, .rst_n,
    .finished(fin[1]), .checks(chk[1]), .failures(fail[1]), .n_frames(frames[1]),
    .n_read_pushes(rdp[1]), .n_drops(drops[1]), .n_same_pixel(same[1]),
    .n_hidden(hidden[1]), .n_cleared(cleared[1]), .n_filtered(filt[1]));
  efg_harness #(.REPR(REPR_EVENT),     .BANKS(2), .SEED(33)) h2 (.clk, .rst_n,
    .finished(fin[2]), .checks(chk[2]), .failures(fail[2]), .n_frames(frames[2]),
    .n_read_pushes(rdp[2]), .n_drops(drops[2]), .n_same_pixel(same[2]),
    .n_hidden(hidden[2]), .n_cleared(cleared[2]), .n_filtered(filt[2]));
  efg_harness #(.REPR(REPR_EXP_DECAY), .BANKS(1), .SEED(44)) h3 (.clk, .rst_n,
    .finished(fin[3]), .checks(chk[3]), .failures(fail[3]), .n_frames(frames[3]),
    .n_read_pushes(rdp[3]), .n_drops(drops[3]), .n_same_pixel(same[3]),
    .n_hidden(hidden[3]), .n_cleared(cleared[3]), .n_filtered(filt[3]));
  efg_harness #(.REPR(REPR_FREQUENCY), .BANKS(3), .SEED(55)) h4 (.clk, .rst_n,
    .finished(fin[4]), .checks(chk[4]), .failures(fail[4]), .n_frames(frames[4]),
    .n_read_pushes(rdp[4]), .n_drops(drops[4]), .n_same_pixel(same[4]),
    .n_hidden(hidden[4]), .n_cleared(cleared[4]), .n_filtered(filt[4]));
  efg_harness #(.REPR(REPR_EVENT),     .BANKS(1), .ROLLING(1'b1), .FRAMES(24),
                .SEED(66)) h5 (.clk, .rst_n,
    .finished(fin[5]), .checks(chk[5]), .failures(fail[5]), .n_frames(frames[5]),
    .n_read_pushes(rdp[5]), .n_drops(drops[5]), .n_same_pixel(same[5]),
    .n_hidden(hidden[5]), .n_cleared(cleared[5]), .n_filtered(filt[5]));
  efg_harness #(.REPR(REPR_FREQUENCY), .BANKS(2), .ROLLING(1'b1), .FRAMES(24),
                .SEED(77)) h6 (.clk, .rst_n,
    .finished(fin[6]), .checks(chk[6]), .failures(fail[6]), .n_frames(frames[6]),
    .n_read_pushes(rdp[6]), .n_drops(drops[6]), .n_same_pixel(same[6]),
    .n_hidden(hidden[6]), .n_cleared(cleared[6]), .n_filtered(filt[6]));
  efg_harness #(.REPR(REPR_BINARY),    .BANKS(2), .BIN_POL(POL_POS),
                .SEED(88)) h7 (.clk, .rst_n,
    .finished(fin[7]), .checks(chk[7]), .failures(fail[7]), .n_frames(frames[7]),
    .n_read_pushes(rdp[7]), .n_drops(drops[7]), .n_same_pixel(same[7]),
    .n_hidden(hidden[7]), .n_cleared(cleared[7]), .n_filtered(filt[7]));

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
      if (i == 4 || i == 6) need(same[i] > 0, "back-to-back events on one pixel", i);
      if (i == 7) need(filt[i] > 0, "binary frame: negative event left out", i);
      if (i == 5 || i == 6) begin
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
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5] && fin[6] && fin[7]);
    repeat (5) @(posedge clk);
    report();
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    report();
    $finish;
  end

endmodule
