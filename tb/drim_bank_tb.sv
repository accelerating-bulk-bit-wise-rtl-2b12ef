// drim_bank_tb: checks a bank of two mats of two sub-arrays: host accesses through two levels of
// global row buffers reach the addressed sub-array (mat-major index), and a broadcast AAP
// sequence (copy to x1 and x2, then dual-row XNOR) runs only in the sub-arrays set in the mask.
module drim_bank_tb;
  import drim_pkg::*;
  localparam int NS = 4;
  localparam int SELW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic cmd_valid, bcast, busy, err;
  sub_cmd_t cmd;
  logic [SELW-1:0] sub_sel;
  logic [SELW-1:0] sel;
  logic [NS-1:0] mask;
  logic [WORD_W-1:0] rdata;
  assign sub_sel = sel;
  drim_bank #(.N_MAT(2), .N_SUB(2)) dut (.clk, .rst_n, .cmd_valid, .cmd, .sub_sel, .bcast, .mask,
                                         .busy, .rdata, .err);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input sub_cmd_t c, input int s, input logic bc, input logic [NS-1:0] m);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = c; sel = SELW'(s); bcast = bc; mask = m;
    @(negedge clk);
    cmd_valid = 1'b0; cmd = '0; bcast = 1'b0;
    while (busy) @(negedge clk);
  endtask

  task automatic write_row(input int s, input row_t r, input logic [COLS-1:0] d);
    sub_cmd_t c;
    c = '0; c.op = SOP_ACT; c.row = r; issue(c, s, 1'b0, '0);
    for (int w = 0; w < COLS / WORD_W; w++) begin
      c = '0; c.op = SOP_WR; c.col = COL_AW'(w); c.wdata = d[w*WORD_W +: WORD_W];
      issue(c, s, 1'b0, '0);
    end
    c = '0; c.op = SOP_PRE; issue(c, s, 1'b0, '0);
  endtask

  task automatic read_row(input int s, input row_t r, output logic [COLS-1:0] d);
    sub_cmd_t c;
    c = '0; c.op = SOP_ACT; c.row = r; issue(c, s, 1'b0, '0);
    for (int w = 0; w < COLS / WORD_W; w++) begin
      c = '0; c.op = SOP_RD; c.col = COL_AW'(w);
      @(negedge clk);
      cmd_valid = 1'b1; cmd = c; sel = SELW'(s);
      @(negedge clk);
      cmd_valid = 1'b0; cmd = '0;
      repeat (2) @(negedge clk);
      d[w*WORD_W +: WORD_W] = rdata;
    end
    c = '0; c.op = SOP_PRE; issue(c, s, 1'b0, '0);
  endtask

  task automatic bcast_aap(input aap_type_e k, input row_t s1, input row_t s2, input row_t d1,
                           input logic [NS-1:0] m);
    sub_cmd_t c;
    c = '0; c.op = SOP_AAP; c.kind = k; c.src1 = s1; c.src2 = s2; c.des1 = d1;
    issue(c, 0, 1'b1, m);
  endtask

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  logic [COLS-1:0] a [NS], b [NS], old [NS], got;
  initial begin
    cmd_valid = 0; cmd = '0; sel = '0; bcast = 0; mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2; it++) begin
      logic [NS-1:0] m;
      m = NS'($urandom);
      if (m == 0) m = 1;
      if (&m) m[0] = 1'b0;
      for (int s = 0; s < NS; s++) begin
        a[s] = rnd_row(); b[s] = rnd_row(); old[s] = rnd_row();
        write_row(s, 9'd5, a[s]); write_row(s, 9'd6, b[s]); write_row(s, 9'd7, old[s]);
      end
      for (int s = 0; s < NS; s++) begin
        read_row(s, 9'd5, got);
        check(got == a[s], $sformatf("host write/read, sub-array %0d", s));
      end
      bcast_aap(AAP1, 9'd5, '0, crow(CR_X1), m);
      bcast_aap(AAP1, 9'd6, '0, crow(CR_X2), m);
      bcast_aap(AAP3, crow(CR_X1), crow(CR_X2), 9'd7, m);
      for (int s = 0; s < NS; s++) begin
        read_row(s, 9'd7, got);
        if (m[s]) check(got == ~(a[s] ^ b[s]), $sformatf("broadcast XNOR in sub-array %0d", s));
        else      check(got == old[s], $sformatf("masked-off sub-array %0d untouched", s));
      end
    end
    check(!err, "no decoder error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
