// input_encoder_tb: checks the decimal-place unary encoders against the two
// worked examples (0.867 under scheme 1 with three places, 0.8674 under
// scheme 2 V2) and against a string-built reference for random values under
// scheme 1 (3 places), scheme 2 V1 and scheme 2 V2, two features each.
module input_encoder_tb;
  import scm_pkg::*;
  import scm_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [3:0] d1 [2][4];
  logic [3:0] dv1 [2][4];
  logic [3:0] dv2 [2][5];
  logic [55:0] b1;
  logic [31:0] bv1;
  logic [49:0] bv2;

  input_encoder #(.N_FEAT(2), .SCHEME(ENC_S1),   .PLACES(3)) u_s1  (.digits(d1),  .bits(b1));
  input_encoder #(.N_FEAT(2), .SCHEME(ENC_S2V1), .PLACES(3)) u_v1  (.digits(dv1), .bits(bv1));
  input_encoder #(.N_FEAT(2), .SCHEME(ENC_S2V2), .PLACES(3)) u_v2  (.digits(dv2), .bits(bv2));

  function automatic string to_str(logic [63:0] v, int n);
    string s = "";
    for (int i = n - 1; i >= 0; i--) s = {s, v[i] ? "1" : "0"};
    return s;
  endfunction

  task automatic check_str(string what, string got, string exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %s expected %s", what, got, exp);
    end
  endtask

  // reference code of one feature from its digits and field widths
  function automatic string ref_code(int nd, int widths [5], int digs [5]);
    string s = enc_digit(1, digs[0]);
    for (int k = 1; k <= nd; k++) s = {s, enc_digit(widths[k], digs[k])};
    return s;
  endfunction

  initial begin
    int ws1 [5] = '{1, 9, 9, 9, 0};
    int wv1 [5] = '{1, 9, 4, 2, 0};
    int wv2 [5] = '{1, 9, 9, 4, 2};
    // worked examples
    d1[0] = '{4'd0, 4'd8, 4'd6, 4'd7};  d1[1] = '{4'd0, 4'd0, 4'd0, 4'd0};
    dv2[0] = '{4'd0, 4'd8, 4'd6, 4'd7, 4'd4}; dv2[1] = '{4'd1, 4'd0, 4'd0, 4'd0, 4'd0};
    dv1[0] = '{4'd0, 4'd0, 4'd0, 4'd0}; dv1[1] = '{4'd0, 4'd0, 4'd0, 4'd0};
    #1;
    check_str("0.867 S1 u=3", to_str(64'(b1[27:0]), 28), "0011111111000111111001111111");
    check_str("0.8674 S2V2", to_str(64'(bv2[24:0]), 25), "0011111111000111111011101");
    check_str("1.0000 S2V2", to_str(64'(bv2[49:25]), 25), "1000000000000000000000000");
    // random values
    for (int t = 0; t < 400; t++) begin
      int g [2][5];
      for (int f = 0; f < 2; f++) begin
        g[f][0] = ($urandom_range(0, 9) == 0) ? 1 : 0;
        for (int k = 1; k < 5; k++) g[f][k] = g[f][0] ? 0 : $urandom_range(0, 9);
        for (int k = 0; k < 4; k++) begin d1[f][k] = 4'(g[f][k]); dv1[f][k] = 4'(g[f][k]); end
        for (int k = 0; k < 5; k++) dv2[f][k] = 4'(g[f][k]);
      end
      #1;
      for (int f = 0; f < 2; f++) begin
        check_str($sformatf("S1 t%0d f%0d", t, f), to_str(64'(b1 >> (28*f)), 28), ref_code(3, ws1, g[f]));
        check_str($sformatf("S2V1 t%0d f%0d", t, f), to_str(64'(bv1 >> (16*f)), 16), ref_code(3, wv1, g[f]));
        check_str($sformatf("S2V2 t%0d f%0d", t, f), to_str(64'(bv2 >> (25*f)), 25), ref_code(4, wv2, g[f]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
