// scm_pkg: types and constants shared by the stochastic configuration machine
// (SCM) inference datapath.
//
// Real-valued quantities (mechanism-model weights p, intercept u, node bias,
// output weights beta and the model output) are 32-bit signed fixed point in
// Q7.25: one sign bit, 7 integer bits, 25 fraction bits, two's complement.
// The format is the one the SCM FPGA implementation uses; applying it to the
// node bias as well is this design's choice.
//
// Hidden weights are single bits ('0' means -1, '1' means +1). The per-node
// scaling factor lambda is a power of two in {1..128}, stored as its 3-bit
// shift amount.
//
// Some constants here (FX_FRAC, CFG_AW) are used only by the modules that
// import the package. A lint of the package on its own reports them as
// unused.
package scm_pkg;

  localparam int FX_W    = 32;   // fixed-point word width
  localparam int FX_FRAC = 25;   // fraction bits (Q7.25)
  localparam int LAMBDA_W = 3;   // shift amount 0..7 -> lambda 1..128

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [LAMBDA_W-1:0]    lambda_t;

  // Activation of a hidden layer.
  //   ACT_SIGN: next-layer bit is 1/0 meaning +1/-1, real output +beta/-beta.
  //   ACT_STEP: next-layer bit is 1/0 meaning 1/0,  real output  beta/0.
  typedef enum logic {ACT_SIGN = 1'b0, ACT_STEP = 1'b1} act_e;

  // Input encoding schemes (one feature -> a group of binary inputs).
  //   ENC_S1   : ones bit + 9-bit unary per decimal place (U places)
  //   ENC_S2V1 : ones(1) tenths(9) hundredths(4) thousandths(2)      = 16 bits
  //   ENC_S2V2 : ones(1) tenths(9) hundredths(9) thousandths(4) 1e-4(2) = 25 bits
  typedef enum logic [1:0] {ENC_S1 = 2'd0, ENC_S2V1 = 2'd1, ENC_S2V2 = 2'd2} enc_e;

  // Number of binary inputs produced per feature.
  function automatic int enc_bits(enc_e scheme, int places);
    case (scheme)
      ENC_S2V1: return 16;
      ENC_S2V2: return 25;
      default:  return 1 + 9 * places;
    endcase
  endfunction

  // Number of decimal places (after the ones digit) read per feature.
  function automatic int enc_places(enc_e scheme, int places);
    case (scheme)
      ENC_S2V1: return 3;
      ENC_S2V2: return 4;
      default:  return places;
    endcase
  endfunction

  // Width of the unary code of decimal place k (1 = tenths).
  function automatic int enc_field_w(enc_e scheme, int k);
    case (scheme)
      ENC_S2V1: return (k == 1) ? 9 : (k == 2) ? 4 : 2;
      ENC_S2V2: return (k <= 2) ? 9 : (k == 3) ? 4 : 2;
      default:  return 9;
    endcase
  endfunction

  // Configuration-port address map (word addresses, 32-bit data).
  //   addr[19:16] target : 0 = mechanism model, 1..3 = hidden layer 1..3
  //   mechanism  : addr[15:0] = k < N_IN -> p[k]; k == N_IN -> intercept u
  //   layer      : addr[15:14] field, addr[13:0] index
  //                field 0 weights : index = {node, word}, the word index
  //                                  taking WORD_BITS = max(1, clog2(ceil(N_IN/32)))
  //                                  bits; weight j of a node is bit j%32
  //                                  of word j/32
  //                field 1 lambda  : index = node (data[2:0])
  //                field 2 bias    : index = node
  //                field 3 beta    : index = node
  localparam int CFG_AW = 20;
  typedef enum logic [1:0] {FLD_WEIGHT = 2'd0, FLD_LAMBDA = 2'd1,
                            FLD_BIAS = 2'd2, FLD_BETA = 2'd3} fld_e;

endpackage
