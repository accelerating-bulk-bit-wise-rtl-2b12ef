// drim_mat: one mat, a group of computational sub-arrays that share a global row decoder and a
// global row buffer.
//
// The command from the chip controller is broadcast on the mat's global word-line bus; the GRD
// turns the index/broadcast mask into a per-sub-array command strobe. busy is the OR of the
// sub-arrays' busy flags, err the OR of their error flags, and rdata the GRB register holding
// the word of the selected sub-array (one cycle behind it). The mat structure follows the
// paper; the number of sub-arrays per mat (N_SUB) is not given there and is this model's choice.
module drim_mat
  import drim_pkg::*;
#(
  parameter int unsigned N_SUB = 8,
  parameter int unsigned SW    = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  parameter int unsigned T_CSS = 2,
  parameter int unsigned T_SAS = 3,
  parameter int unsigned T_WR  = 2,
  parameter int unsigned T_PRE = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  input  sub_cmd_t           cmd,
  input  logic [SW-1:0]      sel,
  input  logic               bcast,
  input  logic [N_SUB-1:0]   mask,
  output logic               busy,
  output logic [WORD_W-1:0]  rdata,
  output logic               err
);

  logic [N_SUB-1:0]  en, sbusy, serr;
  logic [WORD_W-1:0] srdata [N_SUB];

  grd #(.N(N_SUB)) u_grd (.sel, .bcast, .mask, .en);

  for (genvar s = 0; s < int'(N_SUB); s++) begin : g_sub
    compute_subarray #(.T_CSS(T_CSS), .T_SAS(T_SAS), .T_WR(T_WR), .T_PRE(T_PRE)) u_sub (
      .clk, .rst_n, .cmd_valid(cmd_valid & en[s]), .cmd,
      .busy(sbusy[s]), .rdata(srdata[s]), .err(serr[s])
    );
  end

  grb #(.N(N_SUB), .WORD_W(WORD_W)) u_grb (.clk, .sel, .din(srdata), .q(rdata));

  assign busy = |sbusy;
  assign err  = |serr;

endmodule
