// row_dec_tb: checks the split of row addresses into data rows (held in two slots) and
// computation rows (forwarded to the modified row decoder), precharge and the error flag.
module row_dec_tb;
  import drim_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic act, pre, mrd_set, err;
  row_t row;
  logic [1:0] data_open;
  row_t data_row [2];
  logic [3:0] mrd_addr;

  row_dec dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic do_act(input row_t r);
    @(negedge clk); act = 1; row = r;
    @(negedge clk); act = 0;
  endtask
  task automatic do_pre();
    @(negedge clk); pre = 1;
    @(negedge clk); pre = 0;
  endtask

  initial begin
    act = 0; pre = 0; row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      row_t r0, r1;
      r0 = row_t'($urandom_range(0, 499));
      r1 = row_t'($urandom_range(0, 499));
      if (r1 == r0) r1 = (r0 == 0) ? 9'd1 : r0 - 1;
      do_act(r0);
      check(data_open == 2'b01 && data_row[0] == r0, "first data row held");
      do_act(r1);
      check(data_open == 2'b11 && data_row[1] == r1 && !err, "second data row held");
      do_pre();
      check(data_open == 2'b00, "precharge closes data rows");
    end
    for (int k = 0; k < 12; k++) begin
      @(negedge clk); act = 1; row = row_t'(500 + k);
      @(negedge clk); act = 0;
      check(mrd_set && mrd_addr == 4'(k) && data_open == 0, $sformatf("compute row %0d to MRD", k));
      @(negedge clk);
      check(!mrd_set, "MRD strobe lasts one cycle");
    end
    do_act(9'd1); do_act(9'd2); do_act(9'd3);
    check(err, "third data row flagged");
    do_pre();
    check(!err, "error cleared by precharge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
