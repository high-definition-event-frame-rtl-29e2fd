// tb_accumulator_ram -- self-checking test of the accumulator memory.
//
// Checks that every cell starts at zero, then runs random reads and writes on
// both ports against an array model: read data one clock after rd_en, held
// while rd_en is low, and the old content returned when the same cell is
// read and written in the same clock (read-first).
module tb_accumulator_ram;

  localparam int DEPTH = 64;
  localparam int DW    = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rd_en, wr_en;
  logic [5:0]    rd_addr, wr_addr;
  logic [DW-1:0] rd_data, wr_data;

  accumulator_ram #(.DEPTH(DEPTH), .DW(DW)) dut (.*);

  int checks = 0, failures = 0, collisions = 0;
  logic [DW-1:0] model [DEPTH];
  logic [DW-1:0] expect_q;
  bit            expect_v;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t: %s", $time, msg); end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0; expect_v = 0;
    // initial content
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 6'(i);
      @(negedge clk); rd_en = 0;
      check(rd_data == '0, $sformatf("cell %0d not zero at start", i));
    end
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (expect_v) check(rd_data == expect_q, $sformatf("read data %0h expected %0h", rd_data, expect_q));
      rd_en   = ($urandom % 2) == 0;
      wr_en   = ($urandom % 2) == 0;
      rd_addr = 6'($urandom % 8);     // small range: many collisions
      wr_addr = ($urandom % 2) ? rd_addr : 6'($urandom % 8);
      wr_data = DW'($urandom);
      if (rd_en) begin expect_q = model[rd_addr]; expect_v = 1; end
      if (rd_en && wr_en && rd_addr == wr_addr) collisions++;
      if (wr_en) model[wr_addr] = wr_data;
    end
    @(negedge clk);
    if (expect_v) check(rd_data == expect_q, "last read");
    check(collisions > 0, "read/write collisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
