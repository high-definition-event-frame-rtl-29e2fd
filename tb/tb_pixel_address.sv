// tb_pixel_address -- self-checking test of the address and bank computation.
//
// Three instances: the default HD image with one memory (spot checks up to
// the last pixel, 1279 + 719*1280 = 921599), and the 12 x 8 example image
// split over 2 and over 3 memories, checked for every pixel. The worked
// example of the two-memory case, event (x=8, y=5), must give address 68 and
// cell 34; for every pixel the bank must be x mod BANKS (BANKS divides the
// width) and cell*BANKS + bank must give back the address.
module tb_pixel_address;
  import efg_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%s", msg); end
  endtask

  // HD, one memory
  logic [X_W-1:0] x0; logic [Y_W-1:0] y0;
  logic [19:0] a0; logic [0:0] b0; logic [19:0] c0;
  pixel_address dut0 (.x(x0), .y(y0), .address(a0), .bank(b0), .cell_idx(c0));

  // 12 x 8, two memories
  logic [X_W-1:0] x1; logic [Y_W-1:0] y1;
  logic [6:0] a1; logic [0:0] b1; logic [5:0] c1;
  pixel_address #(.WIDTH(12), .HEIGHT(8), .BANKS(2)) dut1
    (.x(x1), .y(y1), .address(a1), .bank(b1), .cell_idx(c1));

  // 12 x 8, three memories
  logic [6:0] a2; logic [1:0] b2; logic [4:0] c2;
  pixel_address #(.WIDTH(12), .HEIGHT(8), .BANKS(3)) dut2
    (.x(x1), .y(y1), .address(a2), .bank(b2), .cell_idx(c2));

  initial begin
    for (int i = 0; i < 200; i++) begin
      int xx, yy;
      xx = (i == 0) ? 1279 : int'($urandom % 1280);
      yy = (i == 0) ? 719  : int'($urandom % 720);
      x0 = X_W'(xx); y0 = Y_W'(yy);
      #1;
      check(int'(a0) == yy * 1280 + xx, $sformatf("HD address of (%0d,%0d) = %0d", xx, yy, a0));
      check(c0 == a0 && b0 == 0, "HD single memory: cell must equal address");
    end
    x1 = 8; y1 = 5; #1;
    check(a1 == 68, $sformatf("example address %0d, expected 68", a1));
    check(c1 == 34, $sformatf("example cell %0d, expected 34", c1));
    for (int yy = 0; yy < 8; yy++)
      for (int xx = 0; xx < 12; xx++) begin
        x1 = X_W'(xx); y1 = Y_W'(yy); #1;
        check(int'(a1) == yy * 12 + xx, "address");
        check(int'(b1) == xx % 2 && int'(c1) == (yy * 12 + xx) / 2, "two memories");
        check(int'(b2) == xx % 3 && int'(c2) == (yy * 12 + xx) / 3, "three memories");
        check(int'(c2) * 3 + int'(b2) == int'(a2), "cell*BANKS + bank = address");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
