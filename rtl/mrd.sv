// mrd: modified row decoder of the computation rows.
//
// A 4-to-12 decoder whose word-line drivers hold their state, so that the controller can raise
// two (dual-row activation) or three (triple-row activation) computation rows at once: each
// 'set' strobe raises the addressed word-line and leaves the others as they are, and 'rst'
// (the Rst line from the controller) lowers all of them at precharge. Index order: x1..x8 are
// 0..7, dcc1..dcc4 are 8..11. The paper gives the 4-to-12 decoder, the modified drivers and the
// Rst line; the set/reset latch behaviour of each driver and the error flag for indices 12..15
// are this model's choices. Timing: word-lines change one clock after the strobe.
module mrd #(
  parameter int unsigned N_CROW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set,
  input  logic [3:0]        addr,
  input  logic              rst,
  output logic [N_CROW-1:0] wl,
  output logic              err
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl  <= '0;
      err <= 1'b0;
    end else if (rst) begin
      wl  <= '0;
      err <= 1'b0;
    end else if (set) begin
      if (32'(addr) < N_CROW) wl[addr] <= 1'b1;
      else                    err      <= 1'b1;
    end
  end

endmodule
