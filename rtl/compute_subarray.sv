// compute_subarray: one DRIM computational sub-array (512 rows x 256 bit-lines).
//
// Wires the sub-array controller, the regular row decoder (data rows), the modified row decoder
// (computation rows x1..x8, dcc1..dcc4), the cell array and the row of reconfigurable sense
// amplifiers together as in the paper's sub-array and sense-amplifier drawings. It executes
// the four AAP instruction types entirely inside the sub-array:
//   type 1  AAP(src, des)              copy a row (RowClone)
//   type 2  AAP(src, des1, des2)       copy a row into two rows
//   type 3  AAP(src1, src2, des)       dual-row activation: des = src1 XNOR src2 (and, through a
//                                      BLbar-side DCC word-line, src1 XOR src2)
//   type 4  AAP(src1, src2, src3, des) triple-row activation: des = MAJ3
// Every source row is overwritten with the result as well, as in the paper's transient.
// Host access uses ACT / RD / WR / PRE; rdata is the WORD_W-bit slice of the open row selected
// by the last RD or WR column, available while the row is open. The word multiplexer on the
// read path is this model's choice. err reports a decoder error (a third data row in one
// activation, or a computation-row index beyond dcc4) and clears at precharge.
module compute_subarray
  import drim_pkg::*;
#(
  parameter int unsigned T_CSS = 2,
  parameter int unsigned T_SAS = 3,
  parameter int unsigned T_WR  = 2,
  parameter int unsigned T_PRE = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  input  sub_cmd_t           cmd,
  output logic               busy,
  output logic [WORD_W-1:0]  rdata,
  output logic               err
);

  logic               act, pre, en_m, en_x, en_c, sense, wr_en;
  row_t               row;
  logic [COL_AW-1:0]  col;
  logic [WORD_W-1:0]  wr_data;

  sub_ctrl #(.T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy,
    .act, .row, .pre, .en_m, .en_x, .en_c, .sense, .wr_en, .col, .wr_data
  );

  logic [1:0]  data_open;
  logic        mrd_set, rd_err, mrd_err;
  row_t        data_row [2];
  logic [3:0]  mrd_addr;
  logic [N_CROW-1:0] cwl;

  row_dec u_rd (
    .clk, .rst_n, .act, .row, .pre,
    .data_open, .data_row, .mrd_set, .mrd_addr, .err(rd_err)
  );

  mrd u_mrd (
    .clk, .rst_n, .set(mrd_set), .addr(mrd_addr), .rst(pre), .wl(cwl), .err(mrd_err)
  );

  logic [1:0]       n_ones [COLS];
  logic [1:0]       n_cells;
  logic             sa_valid;
  logic [COLS-1:0]  bl, blb;

  cell_array u_cells (
    .clk, .rst_n, .data_open, .data_row, .cwl, .sa_valid, .bl, .n_ones, .n_cells
  );

  recon_sa u_sa (
    .clk, .rst_n, .en_m, .en_x, .en_c, .sense, .prech(pre),
    .n_ones, .n_cells, .wr_en, .wr_col(col), .wr_data,
    .sa_valid, .bl, .blb
  );

  assign rdata = bl[col*WORD_W +: WORD_W];
  assign err   = rd_err | mrd_err;

  // BLbar is the complement of BL whenever the SA holds a value.
  a_blb: assert property (@(posedge clk) disable iff (!rst_n) sa_valid |-> (blb == ~bl));

endmodule
