// pixel_decoder -- turns an accumulator value into an 8-bit grey level.
//
//   binary frame     1 -> 255, 0 -> 0
//   event frame      +1 -> 255, -1 -> 0, no event -> 128
//   exp. decay       signed value v in -127 .. 127 -> 128 + v (no event -> 128)
//   event frequency  polarity sum x in -16 .. 15 -> round(255 / (1 + exp(-x/2))),
//                    from a 32-entry table (no event, x = 0 -> 128)
// The event frame and frequency mappings and the binary 0/255 mapping follow
// the reference; the grey offset of the decaying time surface is this design's
// choice. Purely combinational.
module pixel_decoder
  import efg_pkg::*;
#(
  parameter repr_e REPR = REPR_EVENT,
  localparam int unsigned VW = repr_width(REPR)
) (
  input  logic [VW-1:0] value,
  output logic [7:0]    pixel
);

  always_comb begin
    case (REPR)
      REPR_BINARY:
        pixel = value[0] ? 8'd255 : 8'd0;
      REPR_EVENT:
        case (2'(value))
          EF_POS:  pixel = 8'd255;
          EF_NEG:  pixel = 8'd0;
          default: pixel = GREY;
        endcase
      REPR_EXP_DECAY:
        pixel = GREY + 8'(value);
      default:
        pixel = freq_lut(5'(value));
    endcase
  end

endmodule
