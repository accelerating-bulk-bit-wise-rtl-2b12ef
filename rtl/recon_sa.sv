// recon_sa: one row of DRIM reconfigurable sense amplifiers (one per bit-line).
//
// Each bit-line sees C connected cells, n of which hold '1'; after charge sharing its voltage is
// Vi = n*Vdd/C. Three inverters with different switching voltages read it:
//   out1, normal-Vs, trips at Vdd/2  (the regular DRAM sense amplifier),
//   out2, low-Vs,    trips at Vdd/4  (NOR2 of two cells),
//   out3, high-Vs,   trips at 3Vdd/4 (NAND2 of two cells).
// Each inverter outputs 1 while Vi is below its trip point. With (EnM,Enx,EnC) = (1,1,0) the
// regular amplifier resolves BL = NOT out1: the value of a single cell (read, write, copy, NOT)
// or the majority of three (triple-row activation). With (0,1,1) the add-on circuit forms
// BLbar = NOT(out2) AND out3 = Di XOR Dj and BL = Di XNOR Dj in one step (dual-row
// activation). The thresholds, the truth table and the two enable patterns follow the paper;
// the analog voltages are replaced by the exact comparisons 4n > C, 2n > C and 4n > 3C.
//
// Timing: on the cycle 'sense' is high the sensed row is latched and sa_valid rises; the latch
// then drives BL/BLbar (and so restores or overwrites every open cell) until 'prech'. A column
// write (WRITE command) replaces one WORD_W slice of the latched row. Reset and precharge leave
// sa_valid low; the SA holds no data then.
module recon_sa
  import drim_pkg::*;
#(
  parameter int unsigned COLS_P   = COLS,
  parameter int unsigned WORD_W_P = WORD_W,
  parameter int unsigned CW       = (COLS_P > WORD_W_P) ? $clog2(COLS_P / WORD_W_P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_m,
  input  logic                 en_x,
  input  logic                 en_c,
  input  logic                 sense,
  input  logic                 prech,
  input  logic [1:0]           n_ones [COLS_P],
  input  logic [1:0]           n_cells,
  input  logic                 wr_en,
  input  logic [CW-1:0]        wr_col,
  input  logic [WORD_W_P-1:0]  wr_data,
  output logic                 sa_valid,
  output logic [COLS_P-1:0]    bl,
  output logic [COLS_P-1:0]    blb
);

  logic regular_mode, dra_mode;
  assign regular_mode = en_m & en_x & ~en_c;
  assign dra_mode     = ~en_m & en_x & en_c;

  logic [COLS_P-1:0] out1, out2, out3, sensed;
  always_comb begin
    for (int i = 0; i < COLS_P; i++) begin
      // Vi/Vdd = n/C, compared with the trip points 1/2, 1/4 and 3/4.
      out1[i] = !({1'b0, n_ones[i], 1'b0} > {2'b00, n_cells});         // 2n > C
      out2[i] = !({n_ones[i], 2'b00} > {2'b00, n_cells});               // 4n > C
      out3[i] = !({n_ones[i], 2'b00} > ({2'b00, n_cells} * 4'd3));      // 4n > 3C
      if (regular_mode)  sensed[i] = ~out1[i];
      else if (dra_mode) sensed[i] = ~(~out2[i] & out3[i]);             // BL = NOT XOR2
      else               sensed[i] = 1'b0;
    end
  end

  logic [COLS_P-1:0] latch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_valid <= 1'b0;
      latch_q  <= '0;
    end else if (prech) begin
      sa_valid <= 1'b0;
    end else if (sense) begin
      sa_valid <= 1'b1;
      latch_q  <= sensed;
    end else if (wr_en && sa_valid) begin
      latch_q[wr_col*WORD_W_P +: WORD_W_P] <= wr_data;
    end
  end

  assign bl  = latch_q;
  assign blb = ~latch_q;

  // Only the two enable patterns of the paper's control table may be used while sensing.
  a_enables: assert property (@(posedge clk) disable iff (!rst_n)
                              sense |-> (regular_mode || dra_mode));

endmodule
