// event_writer -- write memory controller of the event frame generator.
//
// In write mode it takes events from the head of the event queue, computes
// their accumulator location (pixel_address) and writes the value of the
// chosen representation there:
//   binary frame     1                          (overwrite); with BIN_POL set
//                    to POL_POS or POL_NEG, events of the other polarity are
//                    taken from the queue but not written
//   event frame      +1 / -1 on 2 bits          (overwrite, latest event wins)
//   exp. decay       +/- round(127*exp(-(t_end - t)/tau)) on 8 bits, looked up
//                    in DECAY_STEPS steps of (t_end - t)/tau (overwrite)
//   event frequency  stored polarity sum +1 / -1, saturated to -16 .. 15; the
//                    sum is read through the memory read port and written back
//                    through the write port one cycle later
// With the rolling window enabled every stored word carries, above the value,
// the index of the sub-window (0 .. N_SUB-1) the event fell in ("set index").
//
// Accumulation windows: the first event opens a window ending PERIOD us after
// its timestamp, PERIOD being TAU_US (one frame per tau) or, for the rolling
// window, K_US (one frame every K ms). An event whose timestamp reaches the
// window end is left at the queue head; once the pipeline has written its
// last value, window_done rises and the top switches to read mode. The pulse
// advance (end of the frame read-out) moves the window end by PERIOD and the
// sub-window index by one.
//
// Timing: one event per clock. Stage A pops the event and, for the event
// frequency, issues the memory read; stage B writes one cycle later. A count
// written in one cycle is forwarded to a read-modify-write of the same cell in
// the next cycle, because the memory returns the old content there.
module event_writer
  import efg_pkg::*;
#(
  parameter int unsigned WIDTH   = 1280,
  parameter int unsigned HEIGHT  = 720,
  parameter int unsigned BANKS   = 1,
  parameter repr_e       REPR    = REPR_EVENT,
  parameter bit          ROLLING = 1'b0,
  parameter int unsigned TAU_US  = 10000,
  parameter int unsigned N_SUB   = 8,
  parameter int unsigned K_US    = 1000,
  parameter pol_sel_e    BIN_POL = POL_BOTH,
  localparam int unsigned PIXELS = WIDTH * HEIGHT,
  localparam int unsigned CELLS  = (PIXELS + BANKS - 1) / BANKS,
  localparam int unsigned CW     = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned BW     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned VW     = repr_width(REPR),
  localparam int unsigned IW     = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned DW     = VW + (ROLLING ? IW : 0)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,        // write mode
  // event queue head
  input  event_t         head,
  input  logic           head_valid,
  output logic           pop,
  // window control
  output logic           window_done,
  input  logic           advance,
  output logic [IW-1:0]  cur_idx,
  output logic [T_W-1:0] window_end,
  // accumulator memories
  output logic           rd_en,
  output logic [CW-1:0]  rd_cell,
  input  logic [DW-1:0]  rd_data [BANKS],
  output logic           wr_en,
  output logic [BW-1:0]  wr_bank,
  output logic [CW-1:0]  wr_cell,
  output logic [DW-1:0]  wr_data
);

  localparam int unsigned PERIOD = ROLLING ? K_US : TAU_US;
  localparam bit RMW = (REPR == REPR_FREQUENCY);

  // ---------------------------------------------------------------- window
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started    <= 1'b0;
      window_end <= '0;
      cur_idx    <= '0;
    end else if (!started) begin
      if (head_valid) begin
        started    <= 1'b1;
        window_end <= head.t + T_W'(PERIOD);
      end
    end else if (advance) begin
      window_end <= window_end + T_W'(PERIOD);
      cur_idx    <= (N_SUB > 1) ? IW'((32'(cur_idx) + 1) % N_SUB) : '0;
    end
  end

  logic in_window;
  assign in_window = started && head_valid && (head.t < window_end);

  // --------------------------------------------------------------- stage A
  logic [BW-1:0] bank_a;
  logic [CW-1:0] cell_a;

  pixel_address #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .BANKS(BANKS)) u_addr (
    .x(head.x), .y(head.y), .address(), .bank(bank_a), .cell_idx(cell_a)
  );

  assign pop     = enable && in_window;
  assign rd_en   = pop && RMW;
  assign rd_cell = cell_a;

  // Value for the overwrite representations, computed in stage A.
  logic [VW-1:0] val_a;
  always_comb begin
    logic [T_W+6:0] dt;
    logic [T_W+6:0] k;
    logic [6:0]     mag;
    dt  = (T_W+7)'(window_end - head.t);
    k   = (dt * (T_W+7)'(DECAY_STEPS)) / (T_W+7)'(TAU_US);
    mag = decay_lut((k > (T_W+7)'(DECAY_STEPS)) ? 7'(DECAY_STEPS) : 7'(k));
    case (REPR)
      REPR_BINARY:    val_a = VW'(1);
      REPR_EVENT:     val_a = VW'(head.p ? EF_POS : EF_NEG);
      REPR_EXP_DECAY: val_a = VW'(head.p ? {1'b0, mag} : -{1'b0, mag});
      default:        val_a = VW'(head.p ? 1 : 0);   // frequency: increment flag
    endcase
  end

  // Binary frame from one polarity: other events are consumed, not written.
  logic keep_a;
  assign keep_a = (REPR != REPR_BINARY) || (BIN_POL == POL_BOTH) ||
                  (head.p == (BIN_POL == POL_POS));

  // --------------------------------------------------------------- stage B
  logic          v_b;
  logic [BW-1:0] bank_b;
  logic [CW-1:0] cell_b;
  logic [VW-1:0] val_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_b    <= 1'b0;
      bank_b <= '0;
      cell_b <= '0;
      val_b  <= '0;
    end else begin
      v_b    <= pop && keep_a;
      bank_b <= bank_a;
      cell_b <= cell_a;
      val_b  <= val_a;
    end
  end

  // Last write, for read-modify-write forwarding.
  logic          fw_v;
  logic [BW-1:0] fw_bank;
  logic [CW-1:0] fw_cell;
  logic [DW-1:0] fw_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fw_v    <= 1'b0;
      fw_bank <= '0;
      fw_cell <= '0;
      fw_data <= '0;
    end else begin
      fw_v    <= wr_en;
      fw_bank <= wr_bank;
      fw_cell <= wr_cell;
      fw_data <= wr_data;
    end
  end

  logic [DW-1:0] stored;
  logic [VW-1:0] new_val;
  always_comb begin
    logic signed [VW:0] sum;
    logic [VW-1:0]      base;
    stored = (fw_v && fw_bank == bank_b && fw_cell == cell_b) ? fw_data
                                                              : rd_data[bank_b];
    base = stored[VW-1:0];
    // A rolling-window count from an older sub-window restarts at zero.
    if (ROLLING && IW'(stored >> VW) != cur_idx) base = '0;
    sum = (VW+1)'(signed'(base));
    sum = val_b[0] ? sum + (VW+1)'(1) : sum - (VW+1)'(1);
    if (RMW) begin
      if (sum > (VW+1)'(FREQ_MAX))      new_val = VW'(FREQ_MAX);
      else if (sum < (VW+1)'(FREQ_MIN)) new_val = VW'(FREQ_MIN);
      else                              new_val = VW'(sum);
    end else begin
      new_val = val_b;
    end
  end

  assign wr_en   = v_b;
  assign wr_bank = bank_b;
  assign wr_cell = cell_b;
  assign wr_data = ROLLING ? DW'({cur_idx, new_val}) : DW'(new_val);

  assign window_done = enable && started && head_valid && !in_window && !v_b;

endmodule
