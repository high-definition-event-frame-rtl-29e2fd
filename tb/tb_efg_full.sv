// tb_efg_full -- the event frame generator at its default size: 1280 x 720
// pixels, event frame representation, one block memory, 32768-entry event
// queue, 10 ms accumulation interval.
//
// Frame 1: 20000 random events spread over the first 10 ms, then one event
// past the interval end, which switches the generator to read mode. While
// the 921600 pixels are read out, 40000 more events of the second interval
// arrive, one per clock: the queue overflows and keeps only the newest 32768
// (the oldest 7233, the switching event included, are dropped). Frame 2 is
// triggered by one event past the second interval and must show exactly the
// surviving events. Both frames are compared pixel by pixel with a reference
// (last polarity per pixel: 255 positive, 0 negative, 128 none), and the
// read-out length (921600 clocks plus 2) and the drop count are checked.
module tb_efg_full;
  import efg_pkg::*;

  localparam int W = 1280, H = 720, NPIX = W * H, DEPTH = 32768;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  logic        ev_valid;
  event_t      ev;
  logic        pix_valid, pix_first, pix_last, read_mode, ev_dropped;
  logic [7:0]  pix_data [1];
  logic [31:0] frame_end_t;
  logic [15:0] fifo_count;

  event_frame_generator dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  byte    ref_pix [NPIX];      // expected grey level, -1 = 255 (byte is signed)
  event_t win2 [$];
  int     pix_pos = 0, frames = 0, drops = 0, read_cycles = 0, pix_errors = 0;

  always @(posedge clk) begin
    if (ev_dropped) drops++;
    if (read_mode) read_cycles++;
    if (pix_valid) begin
      checks++;
      if (pix_data[0] != 8'(ref_pix[pix_pos])) begin
        failures++;
        pix_errors++;
        if (pix_errors < 10)
          $display("frame %0d pixel %0d: got %0d expected %0d", frames + 1, pix_pos,
                   pix_data[0], 8'(ref_pix[pix_pos]));
      end
      if (pix_first != (pix_pos == 0)) pix_errors++;
      pix_pos++;
      if (pix_last) begin
        if (pix_pos != NPIX) pix_errors++;
        pix_pos = 0;
        frames++;
      end
    end
  end

  task automatic send(event_t e);
    ev = e; ev_valid = 1'b1;
    @(negedge clk);
    ev_valid = 1'b0;
  endtask

  task automatic clear_ref();
    for (int i = 0; i < NPIX; i++) ref_pix[i] = 8'sd0 + 8'(128);
  endtask

  task automatic add_ref(event_t e);
    ref_pix[int'(e.y) * W + int'(e.x)] = e.p ? 8'(255) : 8'(0);
  endtask

  function automatic event_t rand_event(int t);
    event_t e;
    e.t = 32'(t); e.x = X_W'($urandom % W); e.y = Y_W'($urandom % H); e.p = 1'($urandom);
    return e;
  endfunction

  task automatic wait_frame(int n);
    while (frames < n) @(negedge clk);
  endtask

  localparam int T0 = 100000;

  initial begin
    ev_valid = 0; ev = '0;
    clear_ref();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- frame 1
    for (int n = 0; n < 20000; n++) begin
      event_t e;
      e = rand_event(T0 + n / 2);
      if (n % 7 == 0) e.x = X_W'(W - 1);       // keep the last column busy
      add_ref(e);
      send(e);
    end
    begin
      event_t trig;
      trig = rand_event(T0 + 10000);
      win2.push_back(trig);
      read_cycles = 0;
      send(trig);
    end
    while (!read_mode) @(negedge clk);
    check(frame_end_t == 32'(T0 + 10000), "interval end of frame 1");
    // events of the second interval arrive during the read-out
    for (int n = 0; n < 40000; n++) begin
      event_t e;
      e = rand_event(T0 + 10000 + n / 4);
      win2.push_back(e);
      send(e);
    end
    check(read_mode, "still in read mode after the burst");
    wait_frame(1);
    check(pix_errors == 0, $sformatf("frame 1: %0d pixel errors", pix_errors));
    @(negedge clk); @(negedge clk);
    check(read_cycles == NPIX + 2, $sformatf("read mode lasted %0d clocks", read_cycles));
    check(drops == 40001 - DEPTH, $sformatf("%0d events dropped, expected %0d", drops, 40001 - DEPTH));
    // ---- frame 2: the newest DEPTH events survive
    clear_ref();
    for (int i = win2.size() - DEPTH; i < win2.size(); i++) add_ref(win2[i]);
    while (fifo_count != 0) @(negedge clk);
    read_cycles = 0;
    send(rand_event(T0 + 20000));
    wait_frame(2);
    check(pix_errors == 0, $sformatf("frame 2: %0d pixel errors", pix_errors));
    check(frames == 2, "two frames");
    $display("frames=%0d drops=%0d", frames, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
