// mechanism_model: the linear mechanism (prior-knowledge) model P(X,p,u) of an
// SCM, evaluated on binary inputs without multipliers.
//
// The model is P = sum_k p_k * x_k + u with x_k in {-1,+1} (stored as 0/1),
// p_k the linear weights found offline (LASSO regression) and u the
// intercept, all Q7.25. Since x_k is +-1, each term is either p_k or its
// two's complement, selected by the input bit; the terms and u are then
// summed. Sums wrap at 32 bits like every Q7.25 addition in this design.
//
// Pipeline (free running): stage 1 registers the selected +-p_k terms,
// stage 2 the sum plus intercept. With ADD_STAGES = 2 the sum is formed from
// two half sums over two cycles. Latency from x to p_out: 1 + ADD_STAGES.
//
// Parameter write port (own choice): we with index < N_IN writes p[index],
// index == N_IN writes u. Reset (asynchronous, active low) clears them.
module mechanism_model
  import scm_pkg::*;
#(
  parameter int N_IN       = 25,
  parameter int ADD_STAGES = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [15:0]     index,
  input  fx_t             wdata,
  input  logic [N_IN-1:0] x,
  output fx_t             p_out
);

  localparam int H = N_IN / 2;

  fx_t p [N_IN];
  fx_t u;
  fx_t term_q [N_IN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_IN; k++) p[k] <= '0;
      u <= '0;
    end else if (we) begin
      for (int k = 0; k < N_IN; k++)
        if (32'(index) == k) p[k] <= wdata;
      if (32'(index) == N_IN) u <= wdata;
    end
  end

  always_ff @(posedge clk)
    for (int k = 0; k < N_IN; k++) term_q[k] <= x[k] ? p[k] : -p[k];

  if (ADD_STAGES == 2 && N_IN >= 2) begin : g_split
    fx_t lo_q, hi_q;
    always_ff @(posedge clk) begin
      fx_t lo, hi;
      lo = u;
      hi = '0;
      for (int k = 0; k < H; k++)    lo += term_q[k];
      for (int k = H; k < N_IN; k++) hi += term_q[k];
      lo_q  <= lo;
      hi_q  <= hi;
      p_out <= lo_q + hi_q;
    end
  end else begin : g_single
    always_ff @(posedge clk) begin
      fx_t s;
      s = u;
      for (int k = 0; k < N_IN; k++) s += term_q[k];
      p_out <= s;
    end
  end

endmodule
