// drim_ctrl: chip controller of the DRIM processing-in-DRAM array.
//
// Two request ports: AAP instructions (the DRIM hardware instruction set) and host column
// reads/writes. An AAP(src.., des.., size) covers a vector of 'size' DRAM rows. The controller
// runs it as ceil(size / N_SUB_ALL) lock-step rounds: in round r every sub-array g with
// r*N_SUB_ALL + g < size executes the same AAP, with r added to every data-row operand
// (computation-row operands x1..dcc4 are the same in every sub-array). Row chunk k of a vector
// therefore lives in sub-array k mod N_SUB_ALL at data row base + k div N_SUB_ALL. A round is a
// broadcast of one command followed by a wait until no sub-array is busy. An instruction whose
// data-row operands would pass the last data row is refused and sets err.
// A host access is ACTIVATE, READ or WRITE, PRECHARGE to one sub-array; read data arrives through
// the mat, bank and chip buffers RD_LAT cycles after the READ and is returned on rsp_valid.
// The AAP types and the size rule follow the paper. The chunk-to-sub-array mapping, the host
// port, and serving one request at a time (instructions before host accesses) are this model's
// choices.
module drim_ctrl
  import drim_pkg::*;
#(
  parameter int unsigned N_BANK = 8,
  parameter int unsigned N_MAT  = 4,
  parameter int unsigned N_SUB  = 8,
  parameter int unsigned RD_LAT = 3,
  parameter int unsigned N_PB   = N_MAT * N_SUB,
  parameter int unsigned N_ALL  = N_BANK * N_PB
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction port
  input  logic               instr_valid,
  input  aap_instr_t         instr,
  output logic               instr_ready,
  // host access port
  input  logic               mem_valid,
  input  mem_req_t           mem_req,
  output logic               mem_ready,
  output logic               rsp_valid,
  output logic [WORD_W-1:0]  rsp_data,
  // to the banks
  output logic               cmd_valid,
  output sub_cmd_t           cmd,
  output logic [2:0]         bank_sel,
  output logic [7:0]         sub_sel,
  output logic               bcast,
  output logic [N_ALL-1:0]   mask,
  input  logic               busy_in,
  input  logic [WORD_W-1:0]  io_q,
  // status
  output logic               err,
  output logic [31:0]        aap_rounds
);

  typedef enum logic [3:0] {
    C_IDLE, C_ISSUE, C_WAIT0, C_WAIT, C_ACT, C_ACT_W0, C_ACT_W, C_RW, C_RD_W, C_PRE, C_PRE_W0,
    C_PRE_W
  } cstate_e;

  cstate_e     state;
  aap_instr_t  ins;
  mem_req_t    req;
  logic [SIZE_W-1:0] rounds, rnd;
  logic [3:0]  lat;

  function automatic logic [SIZE_W-1:0] n_rounds(input logic [SIZE_W-1:0] size);
    logic [SIZE_W:0] s;
    s = (size == 0) ? (SIZE_W+1)'(1) : {1'b0, size};
    return SIZE_W'((s + (SIZE_W+1)'(N_ALL - 1)) / (SIZE_W+1)'(N_ALL));
  endfunction

  function automatic logic row_fits(input row_t r, input logic [SIZE_W-1:0] last);
    return !is_data_row(r) || (32'(r) + 32'(last) < DATA_ROWS);
  endfunction

  function automatic logic instr_ok(input aap_instr_t i);
    logic [SIZE_W-1:0] last;
    logic ok;
    last = n_rounds(i.size) - 1;
    ok = row_fits(i.src1, last) && row_fits(i.des1, last);
    if (i.kind == AAP2) ok = ok && row_fits(i.des2, last);
    if (i.kind == AAP3 || i.kind == AAP4) ok = ok && row_fits(i.src2, last);
    if (i.kind == AAP4) ok = ok && row_fits(i.src3, last);
    return ok && (i.kind inside {AAP1, AAP2, AAP3, AAP4});
  endfunction

  function automatic row_t offs(input row_t r, input logic [SIZE_W-1:0] k);
    return is_data_row(r) ? r + row_t'(k) : r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      ins        <= '0;
      req        <= '0;
      rounds     <= '0;
      rnd        <= '0;
      lat        <= '0;
      err        <= 1'b0;
      aap_rounds <= '0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
    end else begin
      rsp_valid <= 1'b0;
      case (state)
        C_IDLE: begin
          if (instr_valid) begin
            if (instr_ok(instr)) begin
              ins    <= instr;
              rounds <= n_rounds(instr.size);
              rnd    <= '0;
              state  <= C_ISSUE;
            end else begin
              err <= 1'b1;
            end
          end else if (mem_valid) begin
            req   <= mem_req;
            state <= C_ACT;
          end
        end
        C_ISSUE:  begin state <= C_WAIT0; aap_rounds <= aap_rounds + 32'd1; end
        C_WAIT0:  state <= C_WAIT;
        C_WAIT:   if (!busy_in) begin
                    if (rnd + 1 >= rounds) state <= C_IDLE;
                    else begin rnd <= rnd + 1; state <= C_ISSUE; end
                  end
        C_ACT:    state <= C_ACT_W0;
        C_ACT_W0: state <= C_ACT_W;
        C_ACT_W:  if (!busy_in) state <= C_RW;
        C_RW:     begin
                    lat   <= 4'(RD_LAT);
                    state <= C_RD_W;
                  end
        C_RD_W:   if (lat == 0) begin
                    if (!req.write) begin rsp_valid <= 1'b1; rsp_data <= io_q; end
                    state <= C_PRE;
                  end else lat <= lat - 4'd1;
        C_PRE:    state <= C_PRE_W0;
        C_PRE_W0: state <= C_PRE_W;
        C_PRE_W:  if (!busy_in) begin
                    if (req.write) rsp_valid <= 1'b1;   // write acknowledge
                    state <= C_IDLE;
                  end
        default:  state <= C_IDLE;
      endcase
    end
  end

  assign instr_ready = (state == C_IDLE);
  assign mem_ready   = (state == C_IDLE) && !instr_valid;

  always_comb begin
    cmd       = '0;
    cmd_valid = 1'b0;
    bcast     = 1'b0;
    mask      = '0;
    bank_sel  = req.bank;
    sub_sel   = req.sub;
    case (state)
      C_ISSUE: begin
        cmd_valid = 1'b1;
        bcast     = 1'b1;
        cmd.op    = SOP_AAP;
        cmd.kind  = ins.kind;
        cmd.src1  = offs(ins.src1, rnd);
        cmd.src2  = offs(ins.src2, rnd);
        cmd.src3  = offs(ins.src3, rnd);
        cmd.des1  = offs(ins.des1, rnd);
        cmd.des2  = offs(ins.des2, rnd);
        for (int g = 0; g < int'(N_ALL); g++)
          mask[g] = (32'(rnd) * N_ALL + 32'(g)) < 32'((ins.size == 0) ? 1 : ins.size);
      end
      C_ACT: begin
        cmd_valid = 1'b1;
        cmd.op    = SOP_ACT;
        cmd.row   = req.row;
      end
      C_RW: begin
        cmd_valid = 1'b1;
        cmd.op    = req.write ? SOP_WR : SOP_RD;
        cmd.col   = req.col;
        cmd.wdata = req.wdata;
      end
      C_PRE: begin
        cmd_valid = 1'b1;
        cmd.op    = SOP_PRE;
      end
      default: ;
    endcase
  end

endmodule
