// drim_pkg: geometry, row map and command types shared by the DRIM processing-in-DRAM model.
//
// A DRIM computational sub-array has 512 rows of 256 cells. Rows 0..499 are ordinary data rows
// driven by the regular row decoder; the last 12 rows are computation rows on the modified row
// decoder: eight plain rows x1..x8 and the word-lines dcc1..dcc4 of two dual-contact-cell rows
// (dcc1 and dcc3 reach the cell from BL, dcc2 and dcc4 from BLbar). The 512x256 geometry, the
// 500/12 split, the row names and the four AAP instruction types follow the paper. The row
// address map (compute row k at address 500+k), the 64-bit column word, and the binary encodings
// of commands are this model's own choices.
package drim_pkg;

  localparam int unsigned ROWS      = 512;
  localparam int unsigned DATA_ROWS = 500;
  localparam int unsigned N_CROW    = 12;
  localparam int unsigned COLS      = 256;
  localparam int unsigned WORD_W    = 64;
  localparam int unsigned ROW_AW    = 9;
  localparam int unsigned COL_AW    = 2;   // $clog2(COLS/WORD_W) at the default geometry
  localparam int unsigned SIZE_W    = 16;

  // Compute row indices (MRD address) and their sub-array row addresses.
  localparam logic [3:0] CR_X1 = 4'd0,  CR_X2 = 4'd1,  CR_X3 = 4'd2,  CR_X4 = 4'd3;
  localparam logic [3:0] CR_X5 = 4'd4,  CR_X6 = 4'd5,  CR_X7 = 4'd6,  CR_X8 = 4'd7;
  localparam logic [3:0] CR_DCC1 = 4'd8, CR_DCC2 = 4'd9, CR_DCC3 = 4'd10, CR_DCC4 = 4'd11;

  typedef logic [ROW_AW-1:0] row_t;

  function automatic row_t crow(input logic [3:0] k);
    return row_t'(DATA_ROWS) + row_t'(k);
  endfunction

  function automatic logic is_data_row(input row_t r);
    return r < row_t'(DATA_ROWS);
  endfunction

  // AAP instruction types: 1 = copy (src,des), 2 = double copy (src,des1,des2),
  // 3 = dual-row activation X(N)OR (src1,src2,des), 4 = triple-row activation MAJ3.
  typedef enum logic [2:0] {
    AAP1 = 3'd1,
    AAP2 = 3'd2,
    AAP3 = 3'd3,
    AAP4 = 3'd4
  } aap_type_e;

  typedef struct packed {
    aap_type_e          kind;
    row_t               src1;
    row_t               src2;
    row_t               src3;
    row_t               des1;
    row_t               des2;
    logic [SIZE_W-1:0]  size;   // vector length in DRAM rows
  } aap_instr_t;

  // Sub-array level commands.
  typedef enum logic [2:0] {
    SOP_NOP = 3'd0,
    SOP_AAP = 3'd1,
    SOP_ACT = 3'd2,
    SOP_RD  = 3'd3,
    SOP_WR  = 3'd4,
    SOP_PRE = 3'd5
  } sub_op_e;

  typedef struct packed {
    sub_op_e             op;
    aap_type_e           kind;
    row_t                src1;
    row_t                src2;
    row_t                src3;
    row_t                des1;
    row_t                des2;
    row_t                row;      // ACT
    logic [COL_AW-1:0]   col;      // RD / WR
    logic [WORD_W-1:0]   wdata;    // WR
  } sub_cmd_t;

  // Host access to one column word of one row.
  typedef struct packed {
    logic                write;
    logic [2:0]          bank;
    logic [7:0]          sub;      // sub-array index inside the bank (mat-major)
    row_t                row;
    logic [COL_AW-1:0]   col;
    logic [WORD_W-1:0]   wdata;
  } mem_req_t;

  // Number of source and destination rows of each AAP type.
  function automatic int unsigned n_src(input aap_type_e k);
    case (k)
      AAP3:    return 2;
      AAP4:    return 3;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned n_dst(input aap_type_e k);
    return (k == AAP2) ? 2 : 1;
  endfunction

endpackage
