// sub_ctrl: controller unit of one computational sub-array (command decoder and timing control).
//
// Decodes sub-array commands and walks the array through the states of an in-memory operation:
// precharged, charge sharing, sense amplification, write-back and precharge.
//   AAP (types 1..4): raise the source row(s) one per cycle (1, 1, 2 or 3 rows), T_CSS cycles of
//     charge sharing with every enable low, T_SAS cycles of sense amplification (the value is
//     latched on the first of them), raise the destination row(s) one per cycle (2 for type 2,
//     else 1), T_WR cycles of write-back, then T_PRE cycles of precharge (Rst to the decoders,
//     SA released). Type 3 is the dual-row activation and senses with (EnM,Enx,EnC) = (0,1,1);
//     all other types use the regular pattern (1,1,0).
//   ACT row: open one row for host access (charge sharing and sensing as above), then wait in
//     the row-open state. RD col selects the column word that is read out of the SA; WR col
//     writes a word into the SA, which writes it through to the open row. PRE closes the row.
// busy is high from the cycle after a command is accepted until the operation has finished
// (for ACT: until the row is open). An AAP of type t takes n_src(t) + T_CSS + T_SAS + n_dst(t)
// + T_WR + T_PRE cycles. The state sequence and the enable patterns follow the paper; every
// cycle count is this model's choice, since the paper gives times (about 90 ns per AAP) but no
// clock.
module sub_ctrl
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
  output logic               act,
  output row_t               row,
  output logic               pre,
  output logic               en_m,
  output logic               en_x,
  output logic               en_c,
  output logic               sense,
  output logic               wr_en,
  output logic [COL_AW-1:0]  col,
  output logic [WORD_W-1:0]  wr_data
);

  typedef enum logic [2:0] {
    S_IDLE, S_SRC, S_CSS, S_SAS, S_DST, S_WB, S_PRE, S_OPEN
  } state_e;

  state_e      state;
  sub_cmd_t    cur;
  logic        host_act;   // current activation is a host ACT, not an AAP
  logic [2:0]  idx;
  logic [3:0]  cnt;

  logic dra;
  assign dra = !host_act && (cur.kind == AAP3);

  logic accept;
  always_comb begin
    accept = 1'b0;
    if (cmd_valid) begin
      case (cmd.op)
        SOP_AAP, SOP_ACT: accept = (state == S_IDLE);
        SOP_RD, SOP_WR:   accept = (state == S_OPEN);
        SOP_PRE:          accept = (state == S_OPEN) || (state == S_IDLE);
        default:          accept = 1'b1;
      endcase
    end
  end

  function automatic row_t src_row(input sub_cmd_t c, input logic [2:0] i);
    case (i)
      3'd0:    return c.src1;
      3'd1:    return c.src2;
      default: return c.src3;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      host_act <= 1'b0;
      idx      <= '0;
      cnt      <= '0;
      col      <= '0;
      wr_en    <= 1'b0;
      wr_data  <= '0;
    end else begin
      wr_en <= 1'b0;
      case (state)
        S_IDLE: if (accept) begin
          if (cmd.op == SOP_AAP) begin
            cur <= cmd; host_act <= 1'b0; idx <= '0; state <= S_SRC;
          end else if (cmd.op == SOP_ACT) begin
            cur <= cmd; cur.src1 <= cmd.row; host_act <= 1'b1; idx <= '0; state <= S_SRC;
          end
        end
        S_SRC: begin
          if (32'(idx) + 1 >= (host_act ? 1 : n_src(cur.kind))) begin
            state <= S_CSS; cnt <= 4'(T_CSS - 1);
          end
          idx <= idx + 3'd1;
        end
        S_CSS: if (cnt == 0) begin state <= S_SAS; cnt <= 4'(T_SAS - 1); end
               else cnt <= cnt - 4'd1;
        S_SAS: if (cnt == 0) begin
                 idx <= '0;
                 state <= host_act ? S_OPEN : S_DST;
               end else cnt <= cnt - 4'd1;
        S_DST: begin
          if (32'(idx) + 1 >= n_dst(cur.kind)) begin state <= S_WB; cnt <= 4'(T_WR - 1); end
          idx <= idx + 3'd1;
        end
        S_WB:  if (cnt == 0) begin state <= S_PRE; cnt <= 4'(T_PRE - 1); end
               else cnt <= cnt - 4'd1;
        S_PRE: if (cnt == 0) state <= S_IDLE;
               else cnt <= cnt - 4'd1;
        S_OPEN: if (accept) begin
          case (cmd.op)
            SOP_RD:  col <= cmd.col;
            SOP_WR:  begin col <= cmd.col; wr_en <= 1'b1; wr_data <= cmd.wdata; end
            SOP_PRE: begin state <= S_PRE; cnt <= 4'(T_PRE - 1); end
            default: ;
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    act   = 1'b0;
    row   = '0;
    if (state == S_SRC) begin
      act = 1'b1;
      row = src_row(cur, idx);
    end else if (state == S_DST) begin
      act = 1'b1;
      row = (idx == 3'd0) ? cur.des1 : cur.des2;
    end
  end

  assign pre   = (state == S_PRE);
  assign sense = (state == S_SAS) && (cnt == 4'(T_SAS - 1));
  assign busy  = (state != S_IDLE) && (state != S_OPEN);

  // Enables: low while charge sharing; Table-1 pattern from sense amplification onwards.
  // EnC of a dual-row activation is dropped on the last sense cycle.
  logic amp;
  assign amp  = (state == S_SAS) || (state == S_DST) || (state == S_WB) || (state == S_OPEN);
  assign en_x = amp;
  assign en_m = amp && !dra;
  assign en_c = dra && (state == S_SAS) && (cnt != 4'd0 || T_SAS == 1);

  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
                              cmd_valid |-> accept);

endmodule
