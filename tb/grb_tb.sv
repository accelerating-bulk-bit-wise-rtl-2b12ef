// grb_tb: checks that the global row buffer registers the selected child's word one cycle later.
module grb_tb;
  localparam int N = 4, W = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [1:0] sel;
  logic [W-1:0] din [N];
  logic [W-1:0] q, expq;
  grb #(.N(N), .WORD_W(W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      sel = 2'($urandom);
      for (int i = 0; i < N; i++) din[i] = W'($urandom);
      expq = din[sel];
      @(negedge clk);
      checks++;
      if (q != expq) begin failures++; $display("FAIL: q=%h exp=%h", q, expq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
