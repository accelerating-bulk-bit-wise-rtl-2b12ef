// mrd_tb: checks that the modified row decoder raises and holds several computation word-lines,
// clears them on Rst and flags indices beyond the twelfth row.
module mrd_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic set, rst, err;
  logic [3:0] addr;
  logic [11:0] wl, expw;

  mrd dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    set = 0; rst = 0; addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(wl == 0, "reset clears word-lines");
    for (int t = 0; t < 40; t++) begin
      int k;
      expw = 0;
      k = 1 + $urandom_range(0, 2);
      for (int j = 0; j < k; j++) begin
        int a;
        a = $urandom_range(0, 11);
        expw[a] = 1'b1;
        @(negedge clk); set = 1; addr = 4'(a);
        @(negedge clk); set = 0;
      end
      check(wl == expw, $sformatf("held word-lines %b expected %b", wl, expw));
      check(!err, "no error for valid indices");
      @(negedge clk); rst = 1;
      @(negedge clk); rst = 0;
      check(wl == 0, "Rst clears all word-lines");
    end
    @(negedge clk); set = 1; addr = 4'd13;
    @(negedge clk); set = 0;
    check(err && wl == 0, "index 13 flagged, nothing raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
