// grd: global row decoder of a mat or a bank.
//
// Decides which of N children (sub-arrays of a mat, or mats of a bank) receives the command
// on the shared global word-line bus. For a host access one child is chosen by index; for a
// data-parallel AAP the controller broadcasts and a mask picks the children that hold a chunk
// of the vector. The paper names the global row decoder but not its logic; the index decoder with a
// broadcast mask is this model's choice. Purely combinational.
module grd #(
  parameter int unsigned N  = 8,
  parameter int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [SW-1:0] sel,
  input  logic          bcast,
  input  logic [N-1:0]  mask,
  output logic [N-1:0]  en
);

  always_comb begin
    for (int i = 0; i < int'(N); i++)
      en[i] = bcast ? mask[i] : (32'(sel) == i);
  end

endmodule
