// drim_bank: one DRIM bank, N_MAT mats behind a bank-level global row decoder and global row
// buffer.
//
// sub_sel addresses a sub-array inside the bank in mat-major order (mat = sub_sel / N_SUB).
// For a broadcast the mask holds one bit per sub-array of the bank. rdata is registered once
// in the mat GRB and once in the bank GRB, two cycles behind the sub-array. The bank/mat
// hierarchy follows the paper; N_MAT and N_SUB are this model's choices.
module drim_bank
  import drim_pkg::*;
#(
  parameter int unsigned N_MAT = 4,
  parameter int unsigned N_SUB = 8,
  parameter int unsigned MW    = (N_MAT > 1) ? $clog2(N_MAT) : 1,
  parameter int unsigned SW    = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  parameter int unsigned T_CSS = 2,
  parameter int unsigned T_SAS = 3,
  parameter int unsigned T_WR  = 2,
  parameter int unsigned T_PRE = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  input  sub_cmd_t                cmd,
  input  logic [7:0]              sub_sel,
  input  logic                    bcast,
  input  logic [N_MAT*N_SUB-1:0]  mask,
  output logic                    busy,
  output logic [WORD_W-1:0]       rdata,
  output logic                    err
);

  logic [MW-1:0] mat_sel;
  logic [SW-1:0] sub_in_mat;
  assign mat_sel    = MW'(32'(sub_sel) / N_SUB);
  assign sub_in_mat = SW'(32'(sub_sel) % N_SUB);

  logic [N_MAT-1:0]  men, mbusy, merr, mat_any;
  logic [WORD_W-1:0] mrdata [N_MAT];

  for (genvar m = 0; m < int'(N_MAT); m++) begin : g_any
    assign mat_any[m] = |mask[m*N_SUB +: N_SUB];
  end

  grd #(.N(N_MAT)) u_grd (.sel(mat_sel), .bcast, .mask(mat_any), .en(men));

  for (genvar m = 0; m < int'(N_MAT); m++) begin : g_mat
    drim_mat #(.N_SUB(N_SUB), .T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) u_mat (
      .clk, .rst_n, .cmd_valid(cmd_valid & men[m]), .cmd,
      .sel(sub_in_mat), .bcast, .mask(mask[m*N_SUB +: N_SUB]),
      .busy(mbusy[m]), .rdata(mrdata[m]), .err(merr[m])
    );
  end

  grb #(.N(N_MAT), .WORD_W(WORD_W)) u_grb (.clk, .sel(mat_sel), .din(mrdata), .q(rdata));

  assign busy = |mbusy;
  assign err  = |merr;

endmodule
