// tb_pixel_decoder -- self-checking test of the four grey-level mappings.
//
// Every input code of each representation is applied and compared with a
// value computed here: binary 0/255; event frame +1 -> 255, -1 -> 0, none ->
// 128; decaying time surface 128 + signed value; event frequency
// round(255 / (1 + exp(-x/2))) evaluated with real arithmetic.
module tb_pixel_decoder;
  import efg_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%s", msg); end
  endtask

  logic [0:0] vb; logic [7:0] pb;
  logic [1:0] ve; logic [7:0] pe;
  logic [7:0] vd; logic [7:0] pd;
  logic [4:0] vf; logic [7:0] pf;

  pixel_decoder #(.REPR(REPR_BINARY))    d0 (.value(vb), .pixel(pb));
  pixel_decoder                          d1 (.value(ve), .pixel(pe));
  pixel_decoder #(.REPR(REPR_EXP_DECAY)) d2 (.value(vd), .pixel(pd));
  pixel_decoder #(.REPR(REPR_FREQUENCY)) d3 (.value(vf), .pixel(pf));

  initial begin
    vb = 0; #1 check(pb == 0,   "binary 0");
    vb = 1; #1 check(pb == 255, "binary 1");
    ve = 2'b01; #1 check(pe == 255, "event +1");
    ve = 2'b11; #1 check(pe == 0,   "event -1");
    ve = 2'b00; #1 check(pe == 128, "event none");
    for (int v = -127; v <= 127; v++) begin
      vd = 8'(v); #1;
      check(int'(pd) == 128 + v, $sformatf("decay %0d -> %0d", v, pd));
    end
    for (int x = -16; x <= 15; x++) begin
      int e;
      e = $rtoi(255.0 / (1.0 + $exp(-real'(x) / 2.0)) + 0.5);
      vf = 5'(x); #1;
      check(int'(pf) == e, $sformatf("frequency %0d -> %0d, expected %0d", x, pf, e));
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
