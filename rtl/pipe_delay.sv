// pipe_delay: delays a W-bit value by D clock cycles (D = 0 is a wire).
// Used to keep the running output sum of the SCM pipeline aligned with the
// layer whose node outputs it is added to. No reset: the value travels next
// to a reset valid bit.
module pipe_delay #(
  parameter int W = 32,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < D; i++) r[i] <= r[i-1];
    end
    assign q = r[D-1];
  end
endmodule
