// tb_event_writer -- self-checking test of the write memory controller.
//
// Part 1: a 12 x 8 image, event frequency, 2 memories, rolling window with 8
// sub-windows of 40 us. The testbench plays the event queue (show-ahead head,
// consumed by pop), the two memories (synchronous read, read-first) and the
// top-level mode control: when window_done rises it holds the writer off for
// a few clocks (read mode), compares the memory contents with a reference
// accumulation of the same events, clears the cells of the oldest sub-window
// as the read controller would, and pulses advance. Checked as well: no event
// at or beyond the window end is ever consumed, no pop while disabled, and
// consecutive events are consumed one per clock.
// Part 2: a 1 x 1 image with the decaying time surface (tau = 640 us): single
// events at chosen distances from the window end must be written as
// +/- round(127 * exp(-floor(64 * dt / tau) / 64)).
module tb_event_writer;
  import efg_pkg::*;

  localparam int W = 12, H = 8, B = 2, NS = 8, K = 40, CELLS = W * H / B;
  localparam int DW = 5 + 3;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  // ------------------------------------------------------------ part 1 DUT
  logic          enable, head_valid, pop, window_done, advance, rd_en, wr_en;
  event_t        head;
  logic [2:0]    cur_idx;
  logic [31:0]   window_end;
  logic [5:0]    rd_cell, wr_cell;
  logic [0:0]    wr_bank;
  logic [DW-1:0] rd_data [B];
  logic [DW-1:0] wr_data;

  event_writer #(.WIDTH(W), .HEIGHT(H), .BANKS(B), .REPR(REPR_FREQUENCY),
                 .ROLLING(1'b1), .N_SUB(NS), .K_US(K)) dut (.*);

  // memories (read-first)
  logic [DW-1:0] mem [B][CELLS];
  always @(posedge clk) begin
    if (rd_en) for (int b = 0; b < B; b++) rd_data[b] <= mem[b][rd_cell];
    if (wr_en) mem[wr_bank][wr_cell] <= wr_data;
  end

  // event queue
  event_t q[$];
  always @(negedge clk) begin
    head_valid = q.size() > 0;
    head       = (q.size() > 0) ? q[0] : '0;
  end

  // reference
  int ref_sum [W*H];
  int ref_sub [W*H];
  bit ref_has [W*H];
  int sub_abs = 0;
  longint win_end_ref;
  int pops_total = 0, back_to_back = 0, same_pixel = 0, last_i = -1;
  bit pop_d = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (!enable) check(!pop, "pop while disabled");
      if (pop) begin
        int i;
        check(longint'(q[0].t) < win_end_ref, $sformatf("event t=%0d at or beyond window end %0d consumed", q[0].t, win_end_ref));
        i = int'(q[0].y) * W + int'(q[0].x);
        if (i == last_i && pop_d) same_pixel++;
        last_i = i;
        if (!ref_has[i] || ref_sub[i] != sub_abs) ref_sum[i] = 0;
        ref_has[i] = 1; ref_sub[i] = sub_abs;
        ref_sum[i] += q[0].p ? 1 : -1;
        if (ref_sum[i] > 15) ref_sum[i] = 15;
        if (ref_sum[i] < -16) ref_sum[i] = -16;
        pops_total++;
        if (pop_d) back_to_back++;
        void'(q.pop_front());
      end
      pop_d = pop;
    end
  end

  task automatic read_and_clear();
    for (int i = 0; i < W * H; i++) begin
      logic [DW-1:0] expw;
      expw = ref_has[i] ? {3'(ref_sub[i] % NS), 5'(ref_sum[i])} : '0;
      check(mem[i % B][i / B] == expw,
            $sformatf("pixel %0d holds %0h, expected %0h", i, mem[i % B][i / B], expw));
      // clear the oldest sub-window, as the read controller does
      if (mem[i % B][i / B][7:5] == 3'((sub_abs + 1) % NS)) begin
        mem[i % B][i / B] = '0;
        ref_has[i] = 0;
      end
    end
  endtask

  // ------------------------------------------------------------ part 2 DUT
  logic   e2_valid, e2_pop, e2_done, e2_wr_en;
  event_t e2;
  logic [7:0] e2_wr_data;
  logic [31:0] e2_wend;
  logic [7:0]  e2_rd [1];
  logic [0:0]  e2_rd_cell, e2_wr_cell, e2_bank;
  logic [2:0]  e2_idx;
  logic        e2_rd_en;
  event_writer #(.WIDTH(1), .HEIGHT(1), .REPR(REPR_EXP_DECAY), .TAU_US(640)) dut2 (
    .clk, .rst_n, .enable(1'b1), .head(e2), .head_valid(e2_valid), .pop(e2_pop),
    .window_done(e2_done), .advance(1'b0), .cur_idx(e2_idx), .window_end(e2_wend),
    .rd_en(e2_rd_en), .rd_cell(e2_rd_cell), .rd_data(e2_rd), .wr_en(e2_wr_en),
    .wr_bank(e2_bank), .wr_cell(e2_wr_cell), .wr_data(e2_wr_data));

  int rounds = 0;

  initial begin
    enable = 0; advance = 0; e2_valid = 0; e2 = '0; e2_rd[0] = '0;
    for (int b = 0; b < B; b++) for (int c = 0; c < CELLS; c++) mem[b][c] = '0;
    for (int i = 0; i < W * H; i++) begin ref_has[i] = 0; ref_sum[i] = 0; ref_sub[i] = 0; end
    // event stream: 1500 events, timestamps rising slowly, a hot pixel
    begin
      int t = 5000;
      for (int n = 0; n < 1500; n++) begin
        event_t e;
        t += ($urandom % 3 == 0) ? 1 : 0;
        e.t = 32'(t);
        e.x = X_W'((n % 5 == 0) ? 3 : $urandom % W);
        e.y = Y_W'((n % 5 == 0) ? 2 : $urandom % H);
        e.p = 1'($urandom);
        q.push_back(e);
      end
      win_end_ref = longint'(q[0].t) + K;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); enable = 1;
    while (q.size() > 1 || rounds < 3) begin
      @(negedge clk);
      if (window_done) begin
        check(longint'(window_end) == win_end_ref, $sformatf("window end %0d expected %0d head %0d", window_end, win_end_ref, head.t));
        enable = 0;
        repeat (4) @(negedge clk);
        read_and_clear();
        advance = 1;
        @(negedge clk);
        advance = 0; enable = 1;
        sub_abs++; win_end_ref += K; rounds++;
        check(int'(cur_idx) == sub_abs % NS, "sub-window index");
      end
      if (q.size() <= 1) break;
    end
    repeat (3) @(negedge clk);
    enable = 0;
    repeat (2) @(negedge clk);
    read_and_clear();
    check(rounds >= 8, $sformatf("only %0d windows completed", rounds));
    check(same_pixel > 0, "back-to-back events on one pixel exercised");
    check(back_to_back > pops_total / 2, "one event per clock");
    $display("part 1: windows=%0d events=%0d back_to_back=%0d same_pixel=%0d",
             rounds, pops_total, back_to_back, same_pixel);

    // part 2: decay values. First event opens the window at t = 1000 + 640.
    for (int n = 0; n < 40; n++) begin
      int dt, k, mag;
      bit got;
      logic [31:0] t;
      @(negedge clk);
      dt = (n == 0) ? 640 : 1 + int'($urandom % 640);
      t  = (n == 0) ? 32'd1000 : e2_wend - 32'(dt);
      e2 = '{t: t, x: '0, y: '0, p: 1'(n % 2)};
      e2_valid = 1;
      do begin #1; got = e2_pop; @(negedge clk); end while (!got);
      e2_valid = 0;
      #1;
      check(e2_wr_en == 1'b1, "decay event written one clock after pop");
      k   = (dt * 64) / 640;
      mag = $rtoi(127.0 * $exp(-real'(k) / 64.0) + 0.5);
      check(e2_wr_data == 8'((n % 2) ? mag : -mag),
            $sformatf("decay dt=%0d wrote %0d expected %0d", dt, $signed(e2_wr_data),
                      (n % 2) ? mag : -mag));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
