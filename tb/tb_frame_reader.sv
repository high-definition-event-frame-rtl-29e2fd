// tb_frame_reader -- self-checking test of the read memory controller.
//
// Two readers over a 12 x 8 image, 8 frames each with random accumulator
// contents (reader_bench): the basic one-memory event-frame reader, and a
// rolling-window reader (8 sub-windows, last 4 shown) at 2 pixels per clock.
// Checked: output values and order, frame markers, latency (3 clock edges from the one sampling start) and
// rate (one pixel group per clock), and which cells are cleared.
module tb_frame_reader;
  import efg_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge ahead of the first clock
  always #5 clk = ~clk;

  logic fin0, fin1;
  int   c0, f0, h0, c1, f1, h1;
  int   checks, failures;

  reader_bench #(.BANKS(1)) b0 (.clk, .rst_n, .finished(fin0), .checks(c0),
                                .failures(f0), .n_hidden(h0));
  reader_bench #(.BANKS(2), .ROLLING(1'b1)) b1 (.clk, .rst_n, .finished(fin1),
                                .checks(c1), .failures(f1), .n_hidden(h1));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (fin0 && fin1);
    checks   = c0 + c1 + 1;
    failures = f0 + f1 + ((h1 > 0) ? 0 : 1);
    $display("rolling window: %0d stored pixels held back", h1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

endmodule
