// input_buffer_tb: fills a 300 x 25-bit buffer with random samples, reads
// every address back (data one cycle after the address), reads while
// writing another address, and checks that a write past the end is ignored.
module input_buffer_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int W = 25, D = 300, AW = 9;
  logic we = 0; logic [AW-1:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];

  input_buffer #(.WIDTH(W), .DEPTH(D)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                            .raddr(raddr), .rdata(rdata));

  initial begin
    for (int a = 0; a < D; a++) begin
      ref_mem[a] = W'($urandom);
      we = 1; waddr = AW'(a); wdata = ref_mem[a];
      @(posedge clk); #1;
    end
    // write past the end (address 300..511 do not exist)
    waddr = AW'(D); wdata = '1; @(posedge clk); #1;
    we = 0;
    for (int a = 0; a < D; a++) begin
      raddr = AW'(a);
      // simultaneous write to a different address
      if (a > 0 && a % 10 == 0) begin
        we = 1; waddr = AW'(a - 1); wdata = W'($urandom); ref_mem[a-1] = wdata;
      end
      @(posedge clk); #1; we = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("FAIL addr %0d: %h vs %h", a, rdata, ref_mem[a]); end
    end
    for (int a = 0; a < D; a += 10) begin
      raddr = AW'(a); @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("FAIL reread %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
