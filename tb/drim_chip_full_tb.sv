// drim_chip_full_tb: one complete bulk XNOR2 on the DRIM chip at its default size (8 banks x 4
// mats x 8 sub-arrays), with vectors of one row per sub-array.
//
// The testbench plays the host: it loads operand vectors through the column write port (row
// chunk k of a vector sits in sub-array k mod N_ALL at data row base + k div N_ALL), sends the
// AAP command sequences of the DRIM functions to the instruction port, reads the result vectors
// back and compares them with bit-wise reference values computed here. Each instruction's
// latency is checked against rounds * (AAP cycles + 2), and the mechanisms the bench exercises
// (of: the four AAP types, dual-row and triple-row activation, multi-round and partial-mask
// vectors, refused instructions, host reads and writes) are counted and must each occur.
module drim_chip_full_tb;
  import drim_pkg::*;
  localparam int N_BANK = 8, N_MAT = 4, N_SUB = 8;
  localparam int N_PB = N_MAT * N_SUB, N_ALL = N_BANK * N_PB;
  localparam int T_CSS = 2, T_SAS = 3, T_WR = 2, T_PRE = 2;
  localparam int SZ = 256;                       // vector length in rows
  localparam int NR = (SZ + N_ALL - 1) / N_ALL;   // rows per sub-array

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready, mem_valid, mem_ready, rsp_valid, err;
  aap_instr_t instr;
  mem_req_t mem_req;
  logic [WORD_W-1:0] rsp_data;
  logic [31:0] aap_rounds;

  drim_chip dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_type [5], n_dra, n_tra, n_multi, n_partial, n_refused, n_rd, n_wr;

  task automatic mem(input logic wr, input int k, input int base, input int w,
                     input logic [WORD_W-1:0] wd, output logic [WORD_W-1:0] rd);
    mem_req_t r;
    int g;
    g = k % N_ALL;
    r = '0; r.write = wr; r.bank = 3'(g / N_PB); r.sub = 8'(g % N_PB);
    r.row = row_t'(base + k / N_ALL); r.col = COL_AW'(w); r.wdata = wd;
    @(negedge clk);
    while (!mem_ready) @(negedge clk);
    mem_valid = 1'b1; mem_req = r;
    @(negedge clk);
    mem_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    rd = rsp_data;
    if (wr) n_wr++; else n_rd++;
  endtask

  typedef logic [COLS-1:0] vec_t [SZ];

  task automatic write_vec(input int base, input vec_t v);
    logic [WORD_W-1:0] d;
    for (int k = 0; k < SZ; k++)
      for (int w = 0; w < COLS / WORD_W; w++) mem(1'b1, k, base, w, v[k][w*WORD_W +: WORD_W], d);
  endtask

  task automatic read_vec(input int base, output vec_t v);
    logic [WORD_W-1:0] d;
    for (int k = 0; k < SZ; k++)
      for (int w = 0; w < COLS / WORD_W; w++) begin
        mem(1'b0, k, base, w, '0, d);
        v[k][w*WORD_W +: WORD_W] = d;
      end
  endtask

  function automatic int aap_cycles(input aap_type_e k);
    return int'(n_src(k)) + T_CSS + T_SAS + int'(n_dst(k)) + T_WR + T_PRE;
  endfunction

  // One AAP instruction. Slice sl < 0 covers the whole vector (ceil(SZ/N_ALL) rounds); slice
  // sl >= 0 covers only rows sl*N_ALL .. sl*N_ALL+N_ALL-1 (one round). Functions that keep
  // intermediate values in the shared computation rows must run slice by slice.
  int cur_slice = -1;
  function automatic row_t offs(input row_t r);
    return (cur_slice >= 0 && is_data_row(r)) ? r + row_t'(cur_slice) : r;
  endfunction

  task automatic aap(input aap_type_e k, input row_t s1, input row_t s2, input row_t s3,
                     input row_t d1, input row_t d2);
    aap_instr_t i;
    int cy, r0, nr, rows;
    i = '0; i.kind = k; i.src1 = offs(s1); i.src2 = offs(s2); i.src3 = offs(s3);
    i.des1 = offs(d1); i.des2 = offs(d2);
    rows = (cur_slice < 0) ? SZ : ((SZ - cur_slice * N_ALL) < N_ALL ? SZ - cur_slice * N_ALL : N_ALL);
    nr = (rows + N_ALL - 1) / N_ALL;
    i.size = SIZE_W'(rows);
    r0 = int'(aap_rounds);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1'b1; instr = i;
    @(negedge clk);
    instr_valid = 1'b0;
    cy = 0;
    while (!instr_ready) begin @(negedge clk); cy++; end
    check(cy == nr * (aap_cycles(k) + 2),
          $sformatf("AAP type %0d took %0d cycles, expected %0d", k, cy, nr * (aap_cycles(k) + 2)));
    check(int'(aap_rounds) - r0 == nr, "rounds issued");
    n_type[k]++;
    if (k == AAP3) n_dra++;
    if (k == AAP4) n_tra++;
    if (nr > 1) n_multi++;
    if (rows % N_ALL != 0) n_partial++;
  endtask

  localparam row_t X1 = crow(CR_X1), X2 = crow(CR_X2), X3 = crow(CR_X3), X4 = crow(CR_X4);
  localparam row_t X5 = crow(CR_X5), X6 = crow(CR_X6);
  localparam row_t DCC1 = crow(CR_DCC1), DCC2 = crow(CR_DCC2);
  localparam row_t DCC3 = crow(CR_DCC3), DCC4 = crow(CR_DCC4);
  // vector base rows
  localparam int VA = 0, VB = NR, VC = 2 * NR, VR = 3 * NR, VS = 4 * NR;

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  vec_t a, b, c, got, got2;

  task automatic check_vec(input vec_t v, input vec_t e, input string what);
    int bad;
    bad = 0;
    for (int k = 0; k < SZ; k++) if (v[k] !== e[k]) bad++;
    check(bad == 0, $sformatf("%s: %0d of %0d rows wrong", what, bad, SZ));
  endtask

  vec_t e;
  initial begin
    instr_valid = 1'b0; instr = '0; mem_valid = 1'b0; mem_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < SZ; k++) begin a[k] = rnd_row(); b[k] = rnd_row(); c[k] = rnd_row(); end
    write_vec(VA, a);
    write_vec(VB, b);
    // XNOR2: AAP(Di,x1) AAP(Dj,x2) AAP(x1,x2,Dr)
    for (int sl = 0; sl < NR; sl++) begin
      cur_slice = sl;
      aap(AAP1, row_t'(VA), '0, '0, X1, '0);
      aap(AAP1, row_t'(VB), '0, '0, X2, '0);
      aap(AAP3, X1, X2, '0, row_t'(VR), '0);
    end
    cur_slice = -1;
    read_vec(VR, got);
    for (int k = 0; k < SZ; k++) e[k] = ~(a[k] ^ b[k]);
    check_vec(got, e, "XNOR2 over the whole chip");

    check(!err, "no error flag");
    check(n_type[1] > 0 && n_type[3] > 0, "AAP types 1 and 3 used");
    check(n_dra > 0, "dual-row activation used");
    check(n_rd > 0 && n_wr > 0, "host reads and writes used");
    $display("mechanisms: type1=%0d type3=%0d dra=%0d reads=%0d writes=%0d",
             n_type[1], n_type[3], n_dra, n_rd, n_wr);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
