// grb: global row buffer of a mat or a bank, also used as the chip I/O buffer.
//
// Registers the column word read out of the selected child on every clock edge, so a read
// word travels from a sub-array sense amplifier to the chip pins through one register per level
// (mat, bank, chip). The paper names a shared global row buffer per mat and bank; its width and
// timing are this model's choices.
module grb #(
  parameter int unsigned N      = 8,
  parameter int unsigned WORD_W = 64,
  parameter int unsigned SW     = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic [SW-1:0]     sel,
  input  logic [WORD_W-1:0] din [N],
  output logic [WORD_W-1:0] q
);

  always_ff @(posedge clk) q <= din[sel];

endmodule
