// zero_one_dot: multiplier-free dot product of N_IN inputs in {0,1} (the
// outputs of a step-activated layer) and N_IN weights in {-1,+1} stored as
// bits ('0' = -1, '1' = +1).
//
// Only inputs that are '1' contribute. Two flag vectors are formed: the
// "+1" vector has a '1' where input = 1 and weight = 1, the "-1" vector a '1'
// where input = 1 and weight = 0. The ones in each vector are counted and the
// dot product is count(+1 flags) - count(-1 flags), as in the SCM
// implementation's {0,1}-input node.
//
// Pipeline (free running): stage 1 registers the two flag vectors, stage 2 the
// two counts (two cycles with ADD_STAGES = 2, half-vector counts first),
// stage 3 the difference; dot is valid 2 + ADD_STAGES cycles after x/w.
module zero_one_dot #(
  parameter int  N_IN       = 60,
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

  logic [N_IN-1:0]  pos_q, neg_q;
  logic [CNT_W-1:0] npos_q, nneg_q;

  always_ff @(posedge clk) begin
    pos_q <= x & w;
    neg_q <= x & ~w;
  end

  if (ADD_STAGES == 2 && N_IN >= 2) begin : g_split
    logic [CNT_W-1:0] pos_lo, pos_hi, neg_lo, neg_hi;
    always_ff @(posedge clk) begin
      pos_lo <= CNT_W'($countones(pos_q[H-1:0]));
      pos_hi <= CNT_W'($countones(pos_q[N_IN-1:H]));
      neg_lo <= CNT_W'($countones(neg_q[H-1:0]));
      neg_hi <= CNT_W'($countones(neg_q[N_IN-1:H]));
      npos_q <= pos_lo + pos_hi;
      nneg_q <= neg_lo + neg_hi;
    end
  end else begin : g_single
    always_ff @(posedge clk) begin
      npos_q <= CNT_W'($countones(pos_q));
      nneg_q <= CNT_W'($countones(neg_q));
    end
  end

  always_ff @(posedge clk)
    dot <= $signed({1'b0, npos_q}) - $signed({1'b0, nneg_q});

endmodule
