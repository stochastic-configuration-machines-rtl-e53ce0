// xnor_count: multiplier-free dot product of N_IN inputs and N_IN weights that
// both take values in {-1,+1}, stored as bits ('0' = -1, '1' = +1).
//
// The two vectors are XNORed: a '1' marks a product of +1, a '0' a product of
// -1. The ones and the zeros are counted and the dot product is
// count(1) - count(0). This is the XNOR-count operation of binarised networks
// as the SCM implementation uses it for its {-1,1} node inputs.
//
// Pipeline (free running, no enable; validity is tracked by the caller):
//   stage 1  register the XNOR vector
//   stage 2  register count of ones and count of zeros; with ADD_STAGES = 2
//            each count is formed from two half-vector counts over two cycles
//            (the "addition hierarchy" used for wide inputs)
//   stage 3  register the difference
// so dot is valid 2 + ADD_STAGES cycles after x/w are applied.
module xnor_count #(
  parameter int  N_IN       = 25,
  parameter int  ADD_STAGES = 1,                       // 1 or 2
  localparam int CNT_W      = $clog2(N_IN + 1),
  localparam int DOT_W      = CNT_W + 1
) (
  input  logic                    clk,
  input  logic [N_IN-1:0]         x,
  input  logic [N_IN-1:0]         w,
  output logic signed [DOT_W-1:0] dot
);

  localparam int H = N_IN / 2;

  logic [N_IN-1:0]  xn_q;
  logic [CNT_W-1:0] ones_q, zeros_q;

  always_ff @(posedge clk) xn_q <= ~(x ^ w);

  if (ADD_STAGES == 2 && N_IN >= 2) begin : g_split
    logic [CNT_W-1:0] ones_lo, ones_hi, zeros_lo, zeros_hi;
    always_ff @(posedge clk) begin
      ones_lo  <= CNT_W'($countones(xn_q[H-1:0]));
      ones_hi  <= CNT_W'($countones(xn_q[N_IN-1:H]));
      zeros_lo <= CNT_W'($countones(~xn_q[H-1:0]));
      zeros_hi <= CNT_W'($countones(~xn_q[N_IN-1:H]));
      ones_q   <= ones_lo + ones_hi;
      zeros_q  <= zeros_lo + zeros_hi;
    end
  end else begin : g_single
    always_ff @(posedge clk) begin
      ones_q  <= CNT_W'($countones(xn_q));
      zeros_q <= CNT_W'($countones(~xn_q));
    end
  end

  always_ff @(posedge clk)
    dot <= $signed({1'b0, ones_q}) - $signed({1'b0, zeros_q});

endmodule
