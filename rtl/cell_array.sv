// cell_array: the storage cells of one DRIM computational sub-array and their bit-line
// connection.
//
// Holds DATA_ROWS data rows (up to two open at once), eight computation rows x1..x8 and two dual-contact-cell (DCC) rows.
// A DCC row has two word-lines: dcc1 (or dcc3) connects the cell to BL, dcc2 (or dcc4) connects
// the same cell to BLbar, which is how a value is stored inverted for NOT. For every bit-line the
// module reports how many cells are connected (C) and how many of them drive BL towards '1' (n);
// a cell seen from BLbar counts with its complement. This replaces analog charge sharing and is
// what the sense amplifiers read. While the sense amplifier holds a value (sa_valid), every open
// row is overwritten on each clock edge: BL-side rows take BL, BLbar-side DCC word-lines store
// BLbar. This is how a DRAM row is restored after a read and how the second ACTIVATE of an AAP
// copies the sensed row into its destination rows.
//
// The row organisation follows the paper. Pairing dcc1/dcc2 and dcc3/dcc4 on one cell each,
// the complement rule for BLbar-side cells and the saturation of C and n at three are this
// model's choices (at most three cells are ever connected). Cells are not reset: like DRAM they
// hold whatever was last written.
module cell_array
  import drim_pkg::*;
#(
  parameter int unsigned COLS_P      = COLS,
  parameter int unsigned DATA_ROWS_P = DATA_ROWS,
  parameter int unsigned N_CROW_P    = N_CROW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [1:0]           data_open,
  input  row_t                 data_row [2],
  input  logic [N_CROW_P-1:0]  cwl,
  input  logic                 sa_valid,
  input  logic [COLS_P-1:0]    bl,
  output logic [1:0]           n_ones [COLS_P],
  output logic [1:0]           n_cells
);

  localparam int unsigned N_X = 8;   // x1..x8; word-lines 8..11 are dcc1..dcc4

  logic [COLS_P-1:0] dmem [DATA_ROWS_P];
  logic [COLS_P-1:0] xmem [N_X];
  logic [COLS_P-1:0] dcc  [2];

  logic [COLS_P-1:0] drow0, drow1;
  assign drow0 = dmem[data_row[0]];
  assign drow1 = dmem[data_row[1]];

  logic [3:0] cells_full;
  always_comb begin
    cells_full = {3'b000, data_open[0]} + {3'b000, data_open[1]};
    for (int k = 0; k < int'(N_CROW_P); k++) cells_full += {3'b000, cwl[k]};
    n_cells = (cells_full > 4'd3) ? 2'd3 : cells_full[1:0];
  end

  always_comb begin
    for (int i = 0; i < int'(COLS_P); i++) begin
      logic [3:0] n;
      n = {3'b000, data_open[0] & drow0[i]} + {3'b000, data_open[1] & drow1[i]};
      for (int k = 0; k < int'(N_X); k++) n += {3'b000, cwl[k] & xmem[k][i]};
      n += {3'b000, cwl[8]  &  dcc[0][i]};
      n += {3'b000, cwl[9]  & ~dcc[0][i]};
      n += {3'b000, cwl[10] &  dcc[1][i]};
      n += {3'b000, cwl[11] & ~dcc[1][i]};
      n_ones[i] = (n > 4'd3) ? 2'd3 : n[1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (sa_valid) begin
      if (data_open[0]) dmem[data_row[0]] <= bl;
      if (data_open[1]) dmem[data_row[1]] <= bl;
      for (int k = 0; k < int'(N_X); k++)
        if (cwl[k]) xmem[k] <= bl;
      if (cwl[8])       dcc[0] <= bl;
      else if (cwl[9])  dcc[0] <= ~bl;
      if (cwl[10])      dcc[1] <= bl;
      else if (cwl[11]) dcc[1] <= ~bl;
    end
  end

  // At most three cells share charge on a bit-line; once the SA drives, any number may be open.
  a_max_cells: assert property (@(posedge clk) disable iff (!rst_n)
                                !sa_valid |-> cells_full <= 4'd3);
  a_dcc_one_side: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(cwl[8] && cwl[9]) && !(cwl[10] && cwl[11]));

endmodule
