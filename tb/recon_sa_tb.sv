// recon_sa_tb: checks the reconfigurable sense amplifier against the inverter truth table.
//
// For every (n, C) charge-sharing case and both enable patterns it compares the latched BL
// with a reference built from the three trip points (Vdd/4, Vdd/2, 3Vdd/4): single-cell read,
// majority of three, and XNOR/XOR of two cells. It also checks the column write into the latch,
// that BLbar is the complement of BL and that precharge releases the latch.
module recon_sa_tb;
  import drim_pkg::*;
  localparam int C = 8, W = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en_m, en_x, en_c, sense, prech, wr_en, sa_valid;
  logic [1:0] n_ones [C];
  logic [1:0] n_cells;
  logic [0:0] wr_col;
  logic [W-1:0] wr_data;
  logic [C-1:0] bl, blb;

  recon_sa #(.COLS_P(C), .WORD_W_P(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: Vi/Vdd = n/C
  function automatic logic ref_bl(input int n, input int cc, input logic dra);
    real v;
    v = (cc == 0) ? 0.0 : real'(n) / real'(cc);
    if (!dra) return v > 0.5;                       // normal-Vs inverter, then restore
    return !((v > 0.25) && !(v > 0.75));            // XNOR = NOT(OR2 AND NAND2)
  endfunction

  task automatic sense_once(input logic dra, input int cc, input int ns [C]);
    @(negedge clk);
    en_m = !dra; en_x = 1'b1; en_c = dra;
    n_cells = 2'(cc);
    for (int i = 0; i < C; i++) n_ones[i] = 2'(ns[i]);
    sense = 1'b1;
    @(negedge clk);
    sense = 1'b0;
    check(sa_valid, "sa_valid after sense");
    for (int i = 0; i < C; i++)
      check(bl[i] == ref_bl(ns[i], cc, dra),
            $sformatf("dra=%0d C=%0d n=%0d bl=%0d", dra, cc, ns[i], bl[i]));
    check(blb == ~bl, "BLbar complement");
    prech = 1'b1;
    @(negedge clk);
    prech = 1'b0; en_m = 0; en_x = 0; en_c = 0;
    check(!sa_valid, "precharge releases the SA");
  endtask

  int ns [C];
  initial begin
    en_m = 0; en_x = 0; en_c = 0; sense = 0; prech = 0; wr_en = 0; wr_col = 0; wr_data = 0;
    n_cells = 0;
    for (int i = 0; i < C; i++) n_ones[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // single cell read: C = 1, n = 0/1
    for (int i = 0; i < C; i++) ns[i] = i % 2;
    sense_once(1'b0, 1, ns);
    // TRA: C = 3, n = 0..3
    for (int i = 0; i < C; i++) ns[i] = i % 4;
    sense_once(1'b0, 3, ns);
    // DRA: C = 2, n = 0..2  -> XNOR truth table 1,0,1
    for (int i = 0; i < C; i++) ns[i] = i % 3;
    sense_once(1'b1, 2, ns);
    check(bl[0] == 1'b1 && bl[1] == 1'b0 && bl[2] == 1'b1, "XNOR2 truth table 00/01/11");
    // column write into a latched row
    for (int i = 0; i < C; i++) ns[i] = 0;
    @(negedge clk);
    en_m = 1; en_x = 1; en_c = 0; n_cells = 1;
    for (int i = 0; i < C; i++) n_ones[i] = 0;
    sense = 1;
    @(negedge clk);
    sense = 0; wr_en = 1; wr_col = 1; wr_data = 4'b1011;
    @(negedge clk);
    wr_en = 0;
    check(bl == 8'b1011_0000, "column write into the SA latch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
