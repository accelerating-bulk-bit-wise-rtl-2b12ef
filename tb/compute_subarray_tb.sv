// compute_subarray_tb: self-checking test of one computational sub-array.
//
// Loads random rows through the host commands (ACT, WR, PRE), runs the command sequences of
// every DRIM function (copy, NOT, MAJ3, XNOR2, XOR2, full add) as AAP instructions, reads the
// results back (ACT, RD, PRE) and compares them with bit-wise reference values computed here.
// It also checks the cycle count of every AAP type, that a dual-row activation overwrites its
// source rows with the result, and that the decoder error flag works (three data rows in one activation).
module compute_subarray_tb;
  import drim_pkg::*;

  localparam int T_CSS = 2, T_SAS = 3, T_WR = 2, T_PRE = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid;
  sub_cmd_t          cmd;
  logic              busy, err;
  logic [WORD_W-1:0] rdata;

  compute_subarray #(.T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .rdata, .err
  );

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input sub_cmd_t c);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd       = c;
    @(negedge clk);
    cmd_valid = 1'b0;
    cmd       = '0;
  endtask

  task automatic wait_idle(output int cycles);
    cycles = 0;
    while (busy) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic write_row(input row_t r, input logic [COLS-1:0] d);
    sub_cmd_t c;
    int cy;
    c = '0; c.op = SOP_ACT; c.row = r;
    issue(c); wait_idle(cy);
    for (int w = 0; w < COLS / WORD_W; w++) begin
      c = '0; c.op = SOP_WR; c.col = COL_AW'(w); c.wdata = d[w*WORD_W +: WORD_W];
      issue(c);
    end
    c = '0; c.op = SOP_PRE;
    issue(c); wait_idle(cy);
  endtask

  task automatic read_row(input row_t r, output logic [COLS-1:0] d);
    sub_cmd_t c;
    int cy;
    c = '0; c.op = SOP_ACT; c.row = r;
    issue(c); wait_idle(cy);
    for (int w = 0; w < COLS / WORD_W; w++) begin
      c = '0; c.op = SOP_RD; c.col = COL_AW'(w);
      issue(c);
      d[w*WORD_W +: WORD_W] = rdata;
    end
    c = '0; c.op = SOP_PRE;
    issue(c); wait_idle(cy);
  endtask

  int cnt_type [5];

  task automatic aap(input aap_type_e k, input row_t s1, input row_t s2, input row_t s3,
                     input row_t d1, input row_t d2);
    sub_cmd_t c;
    int cy, exp_cy;
    c = '0; c.op = SOP_AAP; c.kind = k;
    c.src1 = s1; c.src2 = s2; c.src3 = s3; c.des1 = d1; c.des2 = d2;
    issue(c);
    wait_idle(cy);
    exp_cy = int'(n_src(k)) + T_CSS + T_SAS + int'(n_dst(k)) + T_WR + T_PRE;
    check(cy == exp_cy, $sformatf("AAP type %0d took %0d cycles, expected %0d", k, cy, exp_cy));
    cnt_type[k]++;
  endtask

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [COLS-1:0] maj3(input logic [COLS-1:0] a, b, c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  localparam row_t X1 = crow(CR_X1), X2 = crow(CR_X2), X3 = crow(CR_X3), X4 = crow(CR_X4);
  localparam row_t X5 = crow(CR_X5), X6 = crow(CR_X6);
  localparam row_t DCC1 = crow(CR_DCC1), DCC2 = crow(CR_DCC2);
  localparam row_t DCC3 = crow(CR_DCC3), DCC4 = crow(CR_DCC4);

  logic [COLS-1:0] a, b, k, got, got2;

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int it = 0; it < 3; it++) begin
      a = rnd_row(); b = rnd_row(); k = rnd_row();
      if (it == 0) begin a = '0; b = '1; end
      write_row(9'd10, a); write_row(9'd11, b); write_row(9'd499, k);

      read_row(9'd10, got);
      check(got == a, "write/read of a data row");

      // copy: AAP(Di, Dr)
      aap(AAP1, 9'd10, '0, '0, 9'd20, '0);
      read_row(9'd20, got);
      check(got == a, "copy");

      // NOT: AAP(Di, dcc2); AAP(dcc1, Dr)
      aap(AAP1, 9'd11, '0, '0, DCC2, '0);
      aap(AAP1, DCC1, '0, '0, 9'd21, '0);
      read_row(9'd21, got);
      check(got == ~b, "NOT");

      // MAJ3: AAP(Di,x1) AAP(Dj,x2) AAP(Dk,x3) AAP(x1,x2,x3,Dr)
      aap(AAP1, 9'd10, '0, '0, X1, '0);
      aap(AAP1, 9'd11, '0, '0, X2, '0);
      aap(AAP1, 9'd499, '0, '0, X3, '0);
      aap(AAP4, X1, X2, X3, 9'd22, '0);
      read_row(9'd22, got);
      check(got == maj3(a, b, k), "MAJ3 (triple-row activation)");

      // XNOR2: AAP(Di,x1) AAP(Dj,x2) AAP(x1,x2,Dr)
      aap(AAP1, 9'd10, '0, '0, X1, '0);
      aap(AAP1, 9'd11, '0, '0, X2, '0);
      aap(AAP3, X1, X2, '0, 9'd23, '0);
      read_row(9'd23, got);
      check(got == ~(a ^ b), "XNOR2 (dual-row activation)");
      // the source rows now hold the result as well
      aap(AAP1, X1, '0, '0, 9'd24, '0);
      read_row(9'd24, got);
      check(got == ~(a ^ b), "DRA overwrites its source row with the result");

      // XOR2 through the BLbar-side DCC word-line
      aap(AAP1, 9'd10, '0, '0, X1, '0);
      aap(AAP1, 9'd11, '0, '0, X2, '0);
      aap(AAP3, X1, X2, '0, DCC2, '0);
      aap(AAP1, DCC1, '0, '0, 9'd25, '0);
      read_row(9'd25, got);
      check(got == (a ^ b), "XOR2");

      // full adder
      aap(AAP2, 9'd10, '0, '0, X1, X2);
      aap(AAP2, 9'd11, '0, '0, X3, X4);
      aap(AAP2, 9'd499, '0, '0, X5, X6);
      aap(AAP3, X2, X4, '0, DCC2, '0);
      aap(AAP3, X6, DCC1, '0, DCC4, '0);
      aap(AAP1, DCC3, '0, '0, 9'd26, '0);
      aap(AAP4, X1, X3, X5, 9'd27, '0);
      read_row(9'd26, got);
      read_row(9'd27, got2);
      check(got == (a ^ b ^ k), "full adder sum");
      check(got2 == maj3(a, b, k), "full adder carry");
      // operands untouched
      read_row(9'd10, got);
      check(got == a, "operand row preserved");
    end

    // decoder error: two data rows in one activation
    begin
      sub_cmd_t c;
      int cy;
      c = '0; c.op = SOP_AAP; c.kind = AAP4; c.src1 = 9'd1; c.src2 = 9'd2; c.src3 = 9'd3;
      c.des1 = 9'd4;
      @(negedge clk); cmd_valid = 1'b1; cmd = c;
      @(negedge clk); cmd_valid = 1'b0; cmd = '0;
      repeat (4) @(negedge clk);
      check(err == 1'b1, "error flag on three data rows in one activation");
      wait_idle(cy);
      check(err == 1'b0, "error flag cleared by precharge");
    end

    for (int t = 1; t <= 4; t++) check(cnt_type[t] > 0, $sformatf("AAP type %0d exercised", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
