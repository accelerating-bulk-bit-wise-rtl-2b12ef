// cell_array_tb: checks the cell array's write-back and its per-bit-line charge-sharing count.
//
// Writes random values into data rows, x rows and both DCC rows (a BLbar-side word-line stores
// the complement), keeps a reference copy, then opens random sets of up to three rows with the
// sense amplifier released and compares n (cells pulling BL to 1) and C with the reference.
module cell_array_tb;
  import drim_pkg::*;
  localparam int C = 16, DR = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [1:0]  data_open;
  row_t        data_row [2];
  logic [11:0] cwl;
  logic        sa_valid;
  logic [C-1:0] bl;
  logic [1:0]  n_ones [C];
  logic [1:0]  n_cells;

  cell_array #(.COLS_P(C), .DATA_ROWS_P(DR)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [C-1:0] rd [DR];
  logic [C-1:0] rx [8];
  logic [C-1:0] rdcc [2];

  task automatic close_all();
    data_open = 0; cwl = 0; sa_valid = 0;
  endtask

  // write value v through one word-line (k < DR: data row; else compute word-line k-DR)
  task automatic wr(input int k, input logic [C-1:0] v);
    @(negedge clk);
    close_all();
    if (k < DR) begin data_open = 2'b01; data_row[0] = row_t'(k); rd[k] = v; end
    else begin
      cwl[k-DR] = 1'b1;
      if (k - DR < 8) rx[k-DR] = v;
      else if (k - DR == 8)  rdcc[0] = v;
      else if (k - DR == 9)  rdcc[0] = ~v;
      else if (k - DR == 10) rdcc[1] = v;
      else                   rdcc[1] = ~v;
    end
    sa_valid = 1; bl = v;
    @(negedge clk);
    close_all();
  endtask

  function automatic logic cell_bl(input int k, input int i);
    if (k < DR) return rd[k][i];
    if (k - DR < 8) return rx[k-DR][i];
    case (k - DR)
      8: return rdcc[0][i];
      9: return ~rdcc[0][i];
      10: return rdcc[1][i];
      default: return ~rdcc[1][i];
    endcase
  endfunction

  initial begin
    close_all(); bl = 0; data_row = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < DR + 12; k++) wr(k, C'($urandom));
    for (int t = 0; t < 200; t++) begin
      int nrow, sel [3], nd;
      @(negedge clk);
      close_all();
      nrow = $urandom_range(1, 3);
      nd = 0;
      for (int j = 0; j < nrow; j++) begin
        bit dup;
        do begin
          sel[j] = $urandom_range(0, DR + 11);
          dup = 0;
          for (int q = 0; q < j; q++) if (sel[q] == sel[j]) dup = 1;
          if (sel[j] < DR && nd == 2) dup = 1;
          if (sel[j] >= DR + 8) for (int q = 0; q < j; q++)
            if (sel[q] >= DR + 8 && ((sel[q] - DR - 8) / 2) == ((sel[j] - DR - 8) / 2)) dup = 1;
        end while (dup);
        if (sel[j] < DR) begin data_open[nd] = 1'b1; data_row[nd] = row_t'(sel[j]); nd++; end
        else cwl[sel[j] - DR] = 1'b1;
      end
      #1;
      check(int'(n_cells) == nrow, $sformatf("C=%0d expected %0d", n_cells, nrow));
      for (int i = 0; i < C; i++) begin
        int n;
        n = 0;
        for (int j = 0; j < nrow; j++) n += int'(cell_bl(sel[j], i));
        check(int'(n_ones[i]) == n, $sformatf("n at bit %0d = %0d expected %0d", i, n_ones[i], n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
