// grd_tb: checks index decoding and the broadcast mask of the global row decoder.
module grd_tb;
  localparam int N = 8;
  logic [2:0] sel;
  logic bcast;
  logic [N-1:0] mask, en;
  grd #(.N(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 200; t++) begin
      sel = 3'($urandom); bcast = 1'($urandom); mask = N'($urandom);
      #1;
      checks++;
      if (en != (bcast ? mask : N'(1) << sel)) begin
        failures++; $display("FAIL: sel=%0d bcast=%0d mask=%b en=%b", sel, bcast, mask, en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
