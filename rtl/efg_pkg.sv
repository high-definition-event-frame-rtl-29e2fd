// efg_pkg -- types, constants and look-up tables shared by the event frame
// generator.
//
// An event from a dynamic vision sensor is e = {t, x, y, p}: a timestamp, the
// pixel column and row, and the polarity of the brightness change. The
// coordinate widths fit sensors up to 2048 x 1024 pixels (the default image is
// the 1280 x 720 HD frame). Timestamps are counted in microseconds on 32 bits;
// the unit and width are this design's choice, the sensor family used for
// testing reports microseconds.
//
// Four pixel representations are supported. Each has its own accumulator word
// width (the "No. of bits" of the resource comparison): binary frame 1 bit,
// event frame 2 bits, exponentially decaying time surface 8 bits, event
// frequency 5 bits. The two look-up tables below replace the exponential
// functions of the two time/frequency representations. pol_sel_e selects
// whether a binary frame takes both polarities or only one of them.
package efg_pkg;

  localparam int unsigned X_W = 11;   // column index width
  localparam int unsigned Y_W = 10;   // row index width
  localparam int unsigned T_W = 32;   // timestamp width, microseconds

  typedef struct packed {
    logic [T_W-1:0] t;   // timestamp [us]
    logic [X_W-1:0] x;   // column
    logic [Y_W-1:0] y;   // row
    logic           p;   // polarity: 1 = brightness increase, 0 = decrease
  } event_t;

  typedef enum logic [1:0] {
    REPR_BINARY    = 2'd0,   // f = 1 where any event occurred
    REPR_EVENT     = 2'd1,   // f = polarity (+1 / -1), 0 where no event
    REPR_EXP_DECAY = 2'd2,   // f = p * exp((t_event - t_end) / tau)
    REPR_FREQUENCY = 2'd3    // f = 255 / (1 + exp(-x/2)), x = sum of polarities
  } repr_e;

  // Events that enter a binary frame: both polarities, or only one of them.
  typedef enum logic [1:0] {
    POL_BOTH = 2'd0,
    POL_POS  = 2'd1,
    POL_NEG  = 2'd2
  } pol_sel_e;

  // Accumulator bits per pixel for each representation.
  function automatic int unsigned repr_width(repr_e r);
    case (r)
      REPR_BINARY:    return 1;
      REPR_EVENT:     return 2;
      REPR_EXP_DECAY: return 8;
      default:        return 5;
    endcase
  endfunction

  // Event frame encoding of the 2-bit accumulator (two's complement of +1/-1).
  localparam logic [1:0] EF_NONE = 2'b00;
  localparam logic [1:0] EF_POS  = 2'b01;
  localparam logic [1:0] EF_NEG  = 2'b11;

  // Neutral grey level of the signed representations (no event at the pixel).
  localparam logic [7:0] GREY = 8'd128;

  // Saturation limits of the 5-bit polarity sum.
  localparam int FREQ_MIN = -16;
  localparam int FREQ_MAX = 15;

  // Number of steps the ratio (t_end - t_event) / tau is quantised to.
  localparam int unsigned DECAY_STEPS = 64;

  // Decay magnitude: round(127 * exp(-k / 64)) for k = 0 .. 64, where k / 64
  // approximates (t_end - t_event) / tau. The signed result +/-magnitude is
  // stored; 0 means "no event".
  function automatic logic [6:0] decay_lut(logic [6:0] k);
    logic [6:0] v;
    case (k)
      7'd0:  v = 127; 7'd1:  v = 125; 7'd2:  v = 123; 7'd3:  v = 121;
      7'd4:  v = 119; 7'd5:  v = 117; 7'd6:  v = 116; 7'd7:  v = 114;
      7'd8:  v = 112; 7'd9:  v = 110; 7'd10: v = 109; 7'd11: v = 107;
      7'd12: v = 105; 7'd13: v = 104; 7'd14: v = 102; 7'd15: v = 100;
      7'd16: v = 99;  7'd17: v = 97;  7'd18: v = 96;  7'd19: v = 94;
      7'd20: v = 93;  7'd21: v = 91;  7'd22: v = 90;  7'd23: v = 89;
      7'd24: v = 87;  7'd25: v = 86;  7'd26: v = 85;  7'd27: v = 83;
      7'd28: v = 82;  7'd29: v = 81;  7'd30: v = 79;  7'd31: v = 78;
      7'd32: v = 77;  7'd33: v = 76;  7'd34: v = 75;  7'd35: v = 74;
      7'd36: v = 72;  7'd37: v = 71;  7'd38: v = 70;  7'd39: v = 69;
      7'd40: v = 68;  7'd41: v = 67;  7'd42: v = 66;  7'd43: v = 65;
      7'd44: v = 64;  7'd45: v = 63;  7'd46: v = 62;  7'd47: v = 61;
      7'd48: v = 60;  7'd49: v = 59;  7'd50: v = 58;  7'd51: v = 57;
      7'd52: v = 56;  7'd53: v = 55;  7'd54: v = 55;  7'd55: v = 54;
      7'd56: v = 53;  7'd57: v = 52;  7'd58: v = 51;  7'd59: v = 51;
      7'd60: v = 50;  7'd61: v = 49;  7'd62: v = 48;  7'd63: v = 47;
      default: v = 47;
    endcase
    return v;
  endfunction

  // Event frequency grey level: round(255 / (1 + exp(-x / 2))) for the
  // saturated polarity sum x = -16 .. 15 (5-bit two's complement).
  function automatic logic [7:0] freq_lut(logic signed [4:0] x);
    logic [7:0] v;
    case (int'(x))
      -16: v = 0;   -15: v = 0;   -14: v = 0;   -13: v = 0;
      -12: v = 1;   -11: v = 1;   -10: v = 2;   -9:  v = 3;
      -8:  v = 5;   -7:  v = 7;   -6:  v = 12;  -5:  v = 19;
      -4:  v = 30;  -3:  v = 47;  -2:  v = 69;  -1:  v = 96;
      0:   v = 128; 1:   v = 159; 2:   v = 186; 3:   v = 208;
      4:   v = 225; 5:   v = 236; 6:   v = 243; 7:   v = 248;
      8:   v = 250; 9:   v = 252; 10:  v = 253; 11:  v = 254;
      12:  v = 254; default: v = 255;
    endcase
    return v;
  endfunction

endpackage
