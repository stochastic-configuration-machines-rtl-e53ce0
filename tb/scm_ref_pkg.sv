// scm_ref_pkg: behavioural reference model of a stochastic configuration
// machine, used by the testbenches to compute expected outputs
// independently of the RTL. It evaluates the model with plain integer
// arithmetic: +-1 products summed one by one, lambda as a multiplication,
// the bias compared in 64-bit Q.25 and outputs summed in 32-bit wrapping
// arithmetic (the RTL's Q7.25 format).
package scm_ref_pkg;

  localparam int MAXL = 3;
  localparam int MAXN = 64;
  localparam int MAXI = 1024;

  // Encoding of one decimal digit d into a code of width w, as the
  // characters of the printed code (most significant first).
  function automatic string enc_digit(int w, int d);
    string s;
    int n;
    case (w)
      1: n = (d != 0) ? 1 : 0;
      9: n = d;
      4: case (d) 0, 1: n = 0; 2, 3: n = 1; 4, 5: n = 2; 6, 7: n = 3; default: n = 4; endcase
      default: case (d) 0, 1, 2, 3: n = 0; 4, 5, 6: n = 1; default: n = 2; endcase
    endcase
    s = "";
    for (int i = 0; i < w; i++) s = {s, (i >= w - n) ? "1" : "0"};
    return s;
  endfunction

  class scm_model;
    int n_in;
    int n_layers;
    int nodes [MAXL];
    bit step  [MAXL];                 // 1 = step activation, 0 = sign
    bit w     [MAXL][MAXN][MAXI];
    int shift [MAXL][MAXN];
    int bias  [MAXL][MAXN];
    int beta  [MAXL][MAXN];
    int p     [MAXI];
    int u;
    // statistics of the last evaluations
    int n_pos, n_neg_sign, n_zero_step;

    function new(int n_in_, int n_layers_, int n0, int n1, int n2,
                 bit s0, bit s1, bit s2);
      n_in = n_in_; n_layers = n_layers_;
      nodes[0] = n0; nodes[1] = n1; nodes[2] = n2;
      step[0] = s0; step[1] = s1; step[2] = s2;
    endfunction

    // random model; bias in +-range (integer part), small lambdas, |beta| < 1
    function void random_model(int bias_range);
      for (int k = 0; k < MAXL; k++)
        for (int n = 0; n < MAXN; n++) begin
          for (int i = 0; i < MAXI; i++) w[k][n][i] = 1'($urandom);
          shift[k][n] = $urandom_range(0, 3);
          bias[k][n]  = ($urandom_range(0, 2 * bias_range) - bias_range) * (1 << 25)
                        + $urandom_range(0, (1 << 25) - 1);
          beta[k][n]  = $urandom_range(0, 1 << 25) - (1 << 24);
        end
      for (int i = 0; i < MAXI; i++) p[i] = $urandom_range(0, 1 << 23) - (1 << 22);
      u = $urandom_range(0, 1 << 26) - (1 << 25);
    endfunction

    function int n_in_of(int k);
      return (k == 0) ? n_in : nodes[k-1];
    endfunction

    // hidden-node evaluation: returns the output bit, sets y
    function bit node(int k, int n, bit x [MAXI], output int y);
      longint dot, pre;
      bit in_pm;                        // inputs are +-1
      in_pm = (k == 0) ? 1'b1 : !step[k-1];
      dot = 0;
      for (int i = 0; i < n_in_of(k); i++) begin
        longint xv, wv;
        xv = x[i] ? 1 : (in_pm ? -1 : 0);
        wv = w[k][n][i] ? 1 : -1;
        dot += xv * wv;
      end
      pre = dot * (longint'(1) << shift[k][n]) * (longint'(1) << 25) + longint'(bias[k][n]);
      if (pre >= 0) begin y = beta[k][n]; n_pos++; return 1'b1; end
      if (step[k]) begin y = 0; n_zero_step++; end
      else begin y = -beta[k][n]; n_neg_sign++; end
      return 1'b0;
    endfunction

    function int mech(bit x [MAXI]);
      int s;
      s = u;
      for (int i = 0; i < n_in; i++) s += x[i] ? p[i] : -p[i];
      return s;
    endfunction

    function int eval(bit x [MAXI]);
      bit cur [MAXI];
      bit nxt [MAXI];
      int acc;
      cur = x;
      acc = mech(x);
      for (int k = 0; k < n_layers; k++) begin
        for (int n = 0; n < nodes[k]; n++) begin
          int y;
          nxt[n] = node(k, n, cur, y);
          acc += y;
        end
        cur = nxt;
      end
      return acc;
    endfunction

    // configuration words in the scm_core address map
    function void cfg_words(ref int unsigned addrs [$], ref int unsigned data [$]);
      addrs.delete(); data.delete();
      for (int i = 0; i < n_in; i++) begin addrs.push_back(i); data.push_back(p[i]); end
      addrs.push_back(n_in); data.push_back(u);
      for (int k = 0; k < n_layers; k++) begin
        int ni, wpn, wb;
        ni  = n_in_of(k);
        wpn = (ni + 31) / 32;
        wb  = (wpn > 1) ? $clog2(wpn) : 1;
        for (int n = 0; n < nodes[k]; n++) begin
          for (int j = 0; j < wpn; j++) begin
            int unsigned word;
            word = 0;
            for (int b = 0; b < 32; b++)
              if (32 * j + b < ni && w[k][n][32*j+b]) word |= (32'd1 << b);
            addrs.push_back(((k + 1) << 16) | (0 << 14) | ((n << wb) | j));
            data.push_back(word);
          end
          addrs.push_back(((k + 1) << 16) | (1 << 14) | n); data.push_back(shift[k][n]);
          addrs.push_back(((k + 1) << 16) | (2 << 14) | n); data.push_back(bias[k][n]);
          addrs.push_back(((k + 1) << 16) | (3 << 14) | n); data.push_back(beta[k][n]);
        end
      end
    endfunction
  endclass

endpackage
