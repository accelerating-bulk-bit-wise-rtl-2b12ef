// sub_ctrl_tb: checks the command sequence produced by the sub-array controller.
//
// For each AAP type it records every cycle from acceptance to idle and compares the trace with
// the expected sequence: source rows strobed in order, charge sharing with all enables low,
// one sense strobe with the enable pattern of the control table ((1,1,0) regular, (0,1,1) for
// dual-row activation), destination rows in order, then precharge; the total cycle count is
// checked too. Host ACT / WR / RD / PRE are checked for the row-open state and the column
// write strobe.
module sub_ctrl_tb;
  import drim_pkg::*;
  localparam int T_CSS = 2, T_SAS = 3, T_WR = 2, T_PRE = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic cmd_valid, busy, act, pre, en_m, en_x, en_c, sense, wr_en;
  sub_cmd_t cmd;
  row_t row;
  logic [COL_AW-1:0] col;
  logic [WORD_W-1:0] wr_data;

  sub_ctrl #(.T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_aap(input aap_type_e k);
    row_t rows [5];
    row_t exp_rows [$];
    row_t seen [$];
    int cy, ns, nd, sense_cy, first_pre, npre;
    logic m, x, c;
    for (int i = 0; i < 5; i++) rows[i] = row_t'($urandom_range(0, 511));
    @(negedge clk);
    cmd = '0; cmd.op = SOP_AAP; cmd.kind = k;
    cmd.src1 = rows[0]; cmd.src2 = rows[1]; cmd.src3 = rows[2]; cmd.des1 = rows[3]; cmd.des2 = rows[4];
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    ns = int'(n_src(k)); nd = int'(n_dst(k));
    for (int i = 0; i < ns; i++) exp_rows.push_back(rows[i]);
    for (int i = 0; i < nd; i++) exp_rows.push_back(rows[3+i]);
    cy = 0; sense_cy = -1; first_pre = -1; npre = 0;
    while (busy) begin
      if (act) seen.push_back(row);
      if (sense) begin sense_cy = cy; m = en_m; x = en_x; c = en_c; end
      if (cy >= ns && cy < ns + T_CSS)
        check(!en_m && !en_x && !en_c, "enables low during charge sharing");
      if (pre) begin if (first_pre < 0) first_pre = cy; npre++; end
      @(negedge clk);
      cy++;
    end
    check(cy == ns + T_CSS + T_SAS + nd + T_WR + T_PRE, $sformatf("type %0d cycles %0d", k, cy));
    check(seen.size() == exp_rows.size(), "number of row activations");
    for (int i = 0; i < seen.size() && i < exp_rows.size(); i++)
      check(seen[i] == exp_rows[i], $sformatf("activation %0d row %0d expected %0d", i, seen[i], exp_rows[i]));
    check(sense_cy == ns + T_CSS, $sformatf("sense strobe at cycle %0d", sense_cy));
    if (k == AAP3) check({m, x, c} == 3'b011, "DRA enables (EnM,Enx,EnC) = 0,1,1");
    else           check({m, x, c} == 3'b110, "regular enables (EnM,Enx,EnC) = 1,1,0");
    check(npre == T_PRE && first_pre == cy - T_PRE, "precharge at the end");
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) run_aap(aap_type_e'(1 + t % 4));
    // host access
    @(negedge clk); cmd = '0; cmd.op = SOP_ACT; cmd.row = 9'd77; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(busy && act && row == 9'd77, "host ACT opens the row");
    while (busy) @(negedge clk);
    check(en_m && en_x && !en_c, "row open with the regular SA");
    @(negedge clk); cmd = '0; cmd.op = SOP_WR; cmd.col = 2'd2; cmd.wdata = 64'hDEAD_BEEF_0123_4567; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(wr_en && col == 2'd2 && wr_data == 64'hDEAD_BEEF_0123_4567, "column write strobe");
    @(negedge clk);
    check(!wr_en, "write strobe lasts one cycle");
    cmd = '0; cmd.op = SOP_RD; cmd.col = 2'd1; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(col == 2'd1 && !busy, "column read select");
    cmd = '0; cmd.op = SOP_PRE; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(pre && busy, "precharge after host access");
    while (busy) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
