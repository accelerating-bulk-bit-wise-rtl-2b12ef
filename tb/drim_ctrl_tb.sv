// drim_ctrl_tb: checks the chip controller on its own, with a simple busy model of the banks.
//
// An AAP over 'size' rows must be split into ceil(size/N_ALL) broadcast rounds with the right
// masks, data-row operands offset by the round number and computation-row operands left alone,
// each round waiting for the banks to go idle. Instructions that would run past the last data
// row must be refused with err. Host reads and writes must come out as ACT, RD/WR, PRE to the
// addressed sub-array, with the read word taken from the I/O buffer.
module drim_ctrl_tb;
  import drim_pkg::*;
  localparam int NB = 2, NM = 1, NSB = 2, NALL = NB * NM * NSB, L = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready, mem_valid, mem_ready, rsp_valid, cmd_valid, bcast, busy_in, err;
  aap_instr_t instr;
  mem_req_t mem_req;
  logic [WORD_W-1:0] rsp_data, io_q;
  sub_cmd_t cmd;
  logic [2:0] bank_sel;
  logic [7:0] sub_sel;
  logic [NALL-1:0] mask;
  logic [31:0] aap_rounds;

  drim_ctrl #(.N_BANK(NB), .N_MAT(NM), .N_SUB(NSB)) dut (.*);

  // busy model: L cycles after every command
  int bcnt = 0;
  always_ff @(posedge clk) begin
    if (cmd_valid) bcnt <= L;
    else if (bcnt > 0) bcnt <= bcnt - 1;
  end
  assign busy_in = bcnt > 0;

  sub_cmd_t log_cmd [$];
  logic [NALL-1:0] log_mask [$];
  int log_cy [$];
  int cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid) begin
      log_cmd.push_back(cmd); log_mask.push_back(mask); log_cy.push_back(cyc);
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input aap_instr_t i, output int cycles);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1; instr = i;
    @(negedge clk);
    instr_valid = 0;
    cycles = 0;
    while (!instr_ready) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    aap_instr_t i;
    mem_req_t r;
    int cy, n0;
    instr_valid = 0; mem_valid = 0; instr = '0; mem_req = '0; io_q = 64'h0123_4567_89AB_CDEF;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // size 6 over 4 sub-arrays: two rounds
    i = '0; i.kind = AAP3; i.src1 = crow(CR_X1); i.src2 = 9'd40; i.des1 = 9'd100; i.size = 16'd6;
    n0 = log_cmd.size();
    send(i, cy);
    check(log_cmd.size() - n0 == 2, "two rounds for 6 rows on 4 sub-arrays");
    check(cy == 2 * (L + 2), $sformatf("instruction took %0d cycles, expected %0d", cy, 2 * (L + 2)));
    if (log_cmd.size() - n0 == 2) begin
      check(log_mask[n0] == 4'b1111 && log_mask[n0+1] == 4'b0011, "round masks");
      check(log_cmd[n0].src1 == crow(CR_X1) && log_cmd[n0+1].src1 == crow(CR_X1),
            "computation-row operand not offset");
      check(log_cmd[n0].src2 == 9'd40 && log_cmd[n0+1].src2 == 9'd41, "data-row source offset by round");
      check(log_cmd[n0].des1 == 9'd100 && log_cmd[n0+1].des1 == 9'd101, "data-row destination offset");
      check(log_cmd[n0].op == SOP_AAP && log_cmd[n0].kind == AAP3, "AAP type forwarded");
      check(log_cy[n0+1] - log_cy[n0] == L + 2, "next round waits for idle banks");
    end
    check(aap_rounds == 32'd2, "round counter");

    // size 0 is one row
    i = '0; i.kind = AAP1; i.src1 = 9'd3; i.des1 = crow(CR_DCC2); i.size = 16'd0;
    n0 = log_cmd.size();
    send(i, cy);
    check(log_cmd.size() - n0 == 1 && log_mask[n0] == 4'b0001, "size 0 runs one row");

    // refused: data row past 499
    i = '0; i.kind = AAP2; i.src1 = 9'd10; i.des1 = crow(CR_X1); i.des2 = 9'd498; i.size = 16'd12;
    n0 = log_cmd.size();
    check(!err, "no error before");
    send(i, cy);
    check(log_cmd.size() == n0 && err, "instruction running past the data rows refused");

    // host read
    r = '0; r.bank = 3'd1; r.sub = 8'd1; r.row = 9'd321; r.col = 2'd3;
    n0 = log_cmd.size();
    @(negedge clk); mem_valid = 1; mem_req = r;
    @(negedge clk); mem_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_data == io_q, "read data from the I/O buffer");
    check(bank_sel == 3'd1 && sub_sel == 8'd1, "host access addresses the sub-array");
    while (!mem_ready) @(negedge clk);
    check(log_cmd.size() - n0 == 3, "ACT, RD, PRE");
    if (log_cmd.size() - n0 == 3) begin
      check(log_cmd[n0].op == SOP_ACT && log_cmd[n0].row == 9'd321, "ACT row");
      check(log_cmd[n0+1].op == SOP_RD && log_cmd[n0+1].col == 2'd3, "RD column");
      check(log_cmd[n0+2].op == SOP_PRE, "PRE");
      check(log_mask[n0] == '0, "host access is not a broadcast");
    end
    // host write
    r = '0; r.write = 1; r.bank = 3'd0; r.sub = 8'd0; r.row = 9'd7; r.col = 2'd1; r.wdata = 64'hFACE;
    n0 = log_cmd.size();
    @(negedge clk); mem_valid = 1; mem_req = r;
    @(negedge clk); mem_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(log_cmd.size() - n0 == 3 && log_cmd[n0+1].op == SOP_WR && log_cmd[n0+1].wdata == 64'hFACE,
          "ACT, WR with data, PRE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
