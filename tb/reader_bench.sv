// reader_bench -- drives one frame_reader over several frames and checks it.
//
// The bench owns the accumulator memories (synchronous read, read-first),
// fills them with random words before each frame, pulses start and checks:
// the first pixel group valid after the third clock edge counting the one
// that samples start, pix_first/pix_last, one
// group per clock for CELLS clocks, each lane's value (masked to "no event"
// outside the last M_SUB sub-windows when ROLLING), and the memory content
// after the frame (every cell zero without ROLLING; with ROLLING only the
// cells of sub-window (cur_idx + 1) mod N_SUB zero, all others unchanged).
module reader_bench
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH   = 12,
  parameter int unsigned HEIGHT  = 8,
  parameter int unsigned BANKS   = 1,
  parameter repr_e       REPR    = REPR_EVENT,
  parameter bit          ROLLING = 1'b0,
  parameter int unsigned N_SUB   = 8,
  parameter int unsigned M_SUB   = 4,
  parameter int unsigned FRAMES  = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_hidden
);

  localparam int CELLS = WIDTH * HEIGHT / BANKS;
  localparam int CW    = (CELLS > 1) ? $clog2(CELLS) : 1;
  localparam int VW    = repr_width(REPR);
  localparam int IW    = $clog2(N_SUB);
  localparam int DW    = VW + (ROLLING ? IW : 0);

  logic             start, busy, done, rd_en, pix_valid, pix_first, pix_last;
  logic [IW-1:0]    cur_idx;
  logic [CW-1:0]    rd_cell, wr_cell;
  logic [DW-1:0]    rd_data [BANKS];
  logic [BANKS-1:0] wr_en;
  logic [DW-1:0]    wr_data;
  logic [VW-1:0]    pix_value [BANKS];

  frame_reader #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .BANKS(BANKS), .REPR(REPR),
                 .ROLLING(ROLLING), .N_SUB(N_SUB), .M_SUB(M_SUB)) dut (.*);

  logic [DW-1:0] mem  [BANKS][CELLS];
  logic [DW-1:0] snap [BANKS][CELLS];

  always @(posedge clk) begin
    if (rd_en) for (int b = 0; b < BANKS; b++) rd_data[b] <= mem[b][rd_cell];
    for (int b = 0; b < BANKS; b++) if (wr_en[b]) mem[b][wr_cell] <= wr_data;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("[%m] %t: %s", $time, msg); end
  endtask

  function automatic logic [VW-1:0] expected(logic [DW-1:0] w);
    int idx, age;
    if (!ROLLING) return w[VW-1:0];
    idx = int'(w >> VW);
    age = (int'(cur_idx) - idx + int'(N_SUB)) % int'(N_SUB);
    return (age < int'(M_SUB)) ? w[VW-1:0] : '0;
  endfunction

  initial begin
    finished = 0; checks = 0; failures = 0; n_hidden = 0;
    start = 0; cur_idx = '0;
    @(posedge rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      int group, cyc;
      for (int b = 0; b < BANKS; b++)
        for (int c = 0; c < CELLS; c++) begin
          mem[b][c]  = DW'($urandom);
          snap[b][c] = mem[b][c];
        end
      cur_idx = IW'(f);
      @(negedge clk);
      check(!busy, "idle before start");
      start = 1;
      @(negedge clk);
      start = 0;
      check(!pix_valid, "no pixel one clock after start");
      group = 0; cyc = 1;
      while (group < CELLS && cyc < CELLS + 10) begin
        @(negedge clk);
        cyc++;
        if (pix_valid) begin
          if (group == 0) check(cyc == 3, $sformatf("first pixels %0d clocks after start", cyc));
          check(pix_first == (group == 0), "pix_first");
          check(pix_last == (group == CELLS - 1), "pix_last");
          check(done == (group == CELLS - 1), "done with the last group");
          for (int b = 0; b < BANKS; b++) begin
            check(pix_value[b] == expected(snap[b][group]),
                  $sformatf("cell %0d lane %0d: %0h expected %0h", group, b,
                            pix_value[b], expected(snap[b][group])));
            if (ROLLING && snap[b][group][VW-1:0] != '0 && expected(snap[b][group]) == '0)
              n_hidden++;
          end
          group++;
        end
      end
      check(cyc == CELLS + 2, $sformatf("frame took %0d clocks", cyc));
      @(negedge clk);
      check(!busy, "idle after the frame");
      for (int b = 0; b < BANKS; b++)
        for (int c = 0; c < CELLS; c++) begin
          logic [DW-1:0] e;
          if (!ROLLING) e = '0;
          else e = (int'(snap[b][c] >> VW) == (int'(cur_idx) + 1) % int'(N_SUB)) ? '0 : snap[b][c];
          check(mem[b][c] == e, $sformatf("after frame, cell %0d bank %0d holds %0h expected %0h",
                                          c, b, mem[b][c], e));
        end
    end
    finished = 1;
  end

endmodule
