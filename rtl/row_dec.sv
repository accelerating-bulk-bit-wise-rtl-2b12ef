// row_dec: regular row decoder (RD) of a computational sub-array, with the split between the
// data-row region and the computation-row region.
//
// An 'act' strobe with a row address below DATA_ROWS raises that data word-line and holds it
// until 'pre'. Up to two data word-lines can be held (slot 0 and slot 1), which is what an
// in-array copy between two data rows needs (RowClone: ACTIVATE source, ACTIVATE destination,
// no precharge between). An address at or above DATA_ROWS is a computation row: the decoder
// passes its index (row - DATA_ROWS) to the modified row decoder with a one-cycle 'mrd_set'
// strobe. A third data row, or an index beyond the last computation row, is refused and flagged
// on 'err' until precharge. The two regions and their sizes follow the paper; the address map,
// the two slots and the error rule are this model's choices. Timing: outputs are registered,
// one clock after the strobe.
module row_dec
  import drim_pkg::*;
#(
  parameter int unsigned DATA_ROWS_P = DATA_ROWS,
  parameter int unsigned N_CROW_P    = N_CROW
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        act,
  input  row_t        row,
  input  logic        pre,
  output logic [1:0]  data_open,
  output row_t        data_row [2],
  output logic        mrd_set,
  output logic [3:0]  mrd_addr,
  output logic        err
);

  logic is_data;
  row_t cidx;
  assign is_data = 32'(row) < DATA_ROWS_P;
  assign cidx    = row - row_t'(DATA_ROWS_P);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_open <= '0;
      data_row  <= '{default: '0};
      mrd_set   <= 1'b0;
      mrd_addr  <= '0;
      err       <= 1'b0;
    end else begin
      mrd_set <= 1'b0;
      if (pre) begin
        data_open <= '0;
        err       <= 1'b0;
      end else if (act) begin
        if (is_data) begin
          if (!data_open[0] || data_row[0] == row) begin
            data_open[0] <= 1'b1;
            data_row[0]  <= row;
          end else if (!data_open[1] || data_row[1] == row) begin
            data_open[1] <= 1'b1;
            data_row[1]  <= row;
          end else begin
            err <= 1'b1;
          end
        end else if (32'(cidx) < N_CROW_P) begin
          mrd_set  <= 1'b1;
          mrd_addr <= cidx[3:0];
        end else begin
          err <= 1'b1;
        end
      end
    end
  end

endmodule
