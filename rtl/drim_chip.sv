// drim_chip: top level of the DRIM processing-in-DRAM chip (regular configuration, 8 banks).
//
// DRIM turns every 512x256 DRAM sub-array into a bit-serial SIMD unit: operands sit in rows of
// the same sub-array, and one AAP instruction (ACTIVATE sources, ACTIVATE destinations,
// PRECHARGE) computes a copy, a dual-row X(N)OR or a triple-row majority on all 256 bit-lines of
// every participating sub-array at once. The chip holds N_BANK banks of N_MAT mats of N_SUB
// sub-arrays, a chip I/O buffer and the chip controller. Instructions enter on the instr port
// (valid/ready; accepted when instr_ready is high) and host column reads/writes on the mem port
// (valid/ready, one response pulse on rsp_valid per request; for a write rsp_data is not used).
// err is sticky for refused instructions and reports live decoder errors of any sub-array;
// aap_rounds counts issued lock-step AAP rounds. Eight banks and the sub-array geometry follow
// the paper; N_MAT, N_SUB and all cycle counts are this model's choices.
module drim_chip
  import drim_pkg::*;
#(
  parameter int unsigned N_BANK = 8,
  parameter int unsigned N_MAT  = 4,
  parameter int unsigned N_SUB  = 8,
  parameter int unsigned T_CSS  = 2,
  parameter int unsigned T_SAS  = 3,
  parameter int unsigned T_WR   = 2,
  parameter int unsigned T_PRE  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  input  aap_instr_t         instr,
  output logic               instr_ready,
  input  logic               mem_valid,
  input  mem_req_t           mem_req,
  output logic               mem_ready,
  output logic               rsp_valid,
  output logic [WORD_W-1:0]  rsp_data,
  output logic               err,
  output logic [31:0]        aap_rounds
);

  localparam int unsigned N_PB  = N_MAT * N_SUB;
  localparam int unsigned N_ALL = N_BANK * N_PB;
  localparam int unsigned BW    = (N_BANK > 1) ? $clog2(N_BANK) : 1;

  logic              cmd_valid, bcast, ctrl_err;
  sub_cmd_t          cmd;
  logic [2:0]        bank_sel;
  logic [7:0]        sub_sel;
  logic [N_ALL-1:0]  mask;
  logic [WORD_W-1:0] io_q;

  logic [N_BANK-1:0] ben, bbusy, berr, bank_any;
  logic [WORD_W-1:0] brdata [N_BANK];

  drim_ctrl #(.N_BANK(N_BANK), .N_MAT(N_MAT), .N_SUB(N_SUB)) u_ctrl (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready,
    .mem_valid, .mem_req, .mem_ready, .rsp_valid, .rsp_data,
    .cmd_valid, .cmd, .bank_sel, .sub_sel, .bcast, .mask,
    .busy_in(|bbusy), .io_q, .err(ctrl_err), .aap_rounds
  );

  for (genvar b = 0; b < int'(N_BANK); b++) begin : g_any
    assign bank_any[b] = |mask[b*N_PB +: N_PB];
  end

  grd #(.N(N_BANK)) u_grd (.sel(BW'(bank_sel)), .bcast, .mask(bank_any), .en(ben));

  for (genvar b = 0; b < int'(N_BANK); b++) begin : g_bank
    drim_bank #(.N_MAT(N_MAT), .N_SUB(N_SUB),
                .T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) u_bank (
      .clk, .rst_n, .cmd_valid(cmd_valid & ben[b]), .cmd, .sub_sel, .bcast,
      .mask(mask[b*N_PB +: N_PB]), .busy(bbusy[b]), .rdata(brdata[b]), .err(berr[b])
    );
  end

  // chip I/O buffer
  grb #(.N(N_BANK), .WORD_W(WORD_W)) u_io (.clk, .sel(BW'(bank_sel)), .din(brdata), .q(io_q));

  assign err = ctrl_err | (|berr);

endmodule
