// tb_event_fifo -- self-checking test of the event queue.
//
// An 8-entry queue is driven with random pushes, pops and read-mode phases
// and compared each clock with a list model: the head and its valid flag, the
// fill level, and the overflow policy (oldest entry replaced in read mode,
// newest entry lost otherwise, one dropped pulse per lost event). A final
// phase pushes and pops on every clock for 100 clocks and checks that all
// 100 events pass (one event per clock).
module tb_event_fifo;
  import efg_pkg::*;

  localparam int DEPTH = 8;

  logic   clk = 1'b0;
  logic   rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  logic   push, pop, drop_oldest, valid, dropped;
  event_t din, dout;
  logic [$clog2(DEPTH):0] count;

  event_fifo #(.DEPTH(DEPTH)) dut (.*);

  int     checks = 0, failures = 0;
  event_t q[$];
  int     exp_drop = 0, n_evict = 0, n_lost = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%t: %s", $time, msg);
    end
  endtask

  function automatic event_t rand_event();
    event_t e;
    e.t = $urandom; e.x = X_W'($urandom); e.y = Y_W'($urandom); e.p = 1'($urandom);
    return e;
  endfunction

  // Model update at each clock edge, using the inputs of that clock.
  always @(posedge clk) begin
    if (rst_n) begin
      bit p;
      p = pop && q.size() > 0;
      exp_drop = 0;
      if (push && q.size() == DEPTH && !p) begin
        exp_drop = 1;
        if (drop_oldest) begin void'(q.pop_front()); q.push_back(din); n_evict++; end
        else n_lost++;
      end else begin
        if (p) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
  end

  // Compare after the edge.
  always @(negedge clk) begin
    if (rst_n) begin
      check(valid == (q.size() > 0), "valid differs from model");
      if (valid && q.size() > 0) check(dout == q[0], "head differs from model");
      check(int'(count) == q.size(), "count differs from model");
      check(dropped == 1'(exp_drop), "dropped pulse differs from model");
    end
  end

  int passed;

  initial begin
    push = 0; pop = 0; drop_oldest = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic, alternating write-mode and read-mode phases
    for (int ph = 0; ph < 20; ph++) begin
      for (int i = 0; i < 50; i++) begin
        @(negedge clk);
        drop_oldest = ph[0];
        push = ($urandom % 4) != 0;
        din  = rand_event();
        pop  = ph[0] ? 1'b0 : (valid && ($urandom % 3 == 0));
      end
    end
    // drain
    @(negedge clk); push = 0; drop_oldest = 0;
    while (valid) begin pop = 1; @(negedge clk); end
    pop = 0;
    // full rate: one push and one pop per clock
    passed = 0;
    @(negedge clk); push = 1; din = rand_event();
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      pop = valid; if (valid) passed++;
      din = rand_event();
      push = (i < 99);
    end
    @(negedge clk); pop = valid; if (valid) passed++;
    @(negedge clk); pop = 0;
    check(passed == 100, $sformatf("full-rate phase passed %0d of 100 events", passed));
    check(n_evict > 0 && n_lost > 0, "both overflow cases must occur");
    $display("evictions=%0d lost=%0d", n_evict, n_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
