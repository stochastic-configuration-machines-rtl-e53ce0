// input_encoder: converts normalised real inputs into the binary inputs of the
// SCM, using the decimal-place unary encodings ("scheme 1" and "scheme 2").
//
// Each feature is presented as decimal digits of a value in [0,1]: digit 0 is
// the ones digit (0 or 1) and digit k (k >= 1) the k-th decimal place, each as
// a 4-bit BCD digit. The ones digit becomes one bit (1 when the value is 1).
// Every decimal place becomes a right-aligned unary code:
//   9-bit field : d ones                         (d = 0..9)
//   4-bit field : floor(d/2) ones                (0/1->0000 ... 8/9->1111)
//   2-bit field : 0..3 -> 00, 4..6 -> 01, 7..9 -> 11
// Scheme 1 uses 9-bit fields for all PLACES places (1 + 9*PLACES bits).
// Scheme 2 V1 uses fields 9,4,2 (16 bits); V2 uses 9,9,4,2 (25 bits).
// The codes and bit counts follow the paper; e.g. 0.867 under scheme 1 with
// three places gives 0 011111111 000111111 001111111.
//
// Bit order (this design's choice): within a feature's group the ones bit is
// the most significant bit and the last decimal place the least significant,
// so the group reads left to right like the printed code. Feature f occupies
// bits [f*NB +: NB] of the output. Digits above 9 are treated as 9.
//
// Purely combinational (constant field positions, one small decoder per
// decimal place). In the paper the encoding is done on the PC before
// the inputs are loaded; here it sits on the write path of the input buffer.
// Every place uses the same 9-bit unary decoder. The 4-bit and 2-bit fields
// keep only its low bits, so lint tools report the upper bits of that
// decoder as unused in those places.
module input_encoder
  import scm_pkg::*;
#(
  parameter int   N_FEAT = 1,
  parameter enc_e SCHEME = ENC_S2V2,
  parameter int   PLACES = 3,                        // scheme 1 only
  localparam int  NP     = enc_places(SCHEME, PLACES),
  localparam int  NB     = enc_bits(SCHEME, PLACES)
) (
  input  logic [3:0]           digits [N_FEAT][NP+1],
  output logic [N_FEAT*NB-1:0] bits
);

  // bit position (counted from the LSB of the group) just above field k
  function automatic int field_top(int k);
    int t;
    t = NB - 1;                                  // the ones bit
    for (int j = 1; j < k; j++) t -= enc_field_w(SCHEME, j);
    return t;
  endfunction

  for (genvar f = 0; f < N_FEAT; f++) begin : g_feat
    // ones place: one bit, set when the value is 1
    assign bits[f*NB + NB - 1] = (digits[f][0] != 4'd0);

    for (genvar k = 1; k <= NP; k++) begin : g_place
      localparam int W  = enc_field_w(SCHEME, k);
      localparam int LO = field_top(k) - W;      // lowest bit of the field
      logic [3:0] d;
      logic [3:0] n;                             // number of ones
      logic [8:0] code;

      assign d = (digits[f][k] > 4'd9) ? 4'd9 : digits[f][k];

      always_comb begin
        case (W)
          9:       n = d;
          4:       n = d >> 1;
          default: n = (d >= 4'd7) ? 4'd2 : (d >= 4'd4) ? 4'd1 : 4'd0;
        endcase
        code = 9'((10'd1 << n) - 10'd1);
      end

      assign bits[f*NB + LO +: W] = code[W-1:0];
    end
  end

endmodule
