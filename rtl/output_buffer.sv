// output_buffer: result register of the PAC Fano decoder.
//
// On capture it stores the decoded carrier word from Vreg, the number of
// cycles spent (CC counter) and the timeout flag, and keeps them until the
// next capture.  Vreg holds the most recent decision in bit 0, so after a
// complete decode v_j sits at Vreg bit N-1-j; the buffer reverses the order so
// that v_hat[j] = v_j.  After a timeout the word is whatever partial path was
// in Vreg and should be discarded.  Holding the cycle count with the word is
// this design's choice, made because the count is reported per codeword.
module output_buffer #(
  parameter int unsigned N   = pac_pkg::N_DEF,
  parameter int unsigned H   = pac_pkg::H_DEF,
  parameter int unsigned CCW = pac_pkg::CCW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             capture,
  input  logic [N+H-1:0]   vreg,
  input  logic [CCW-1:0]   cycles_in,
  input  logic             to_in,
  output logic [N-1:0]     v_hat,
  output logic [CCW-1:0]   cycles,
  output logic             to
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_hat  <= '0;
      cycles <= '0;
      to     <= 1'b0;
    end else if (capture) begin
      for (int j = 0; j < int'(N); j++) v_hat[j] <= vreg[N-1-j];
      cycles <= cycles_in;
      to     <= to_in;
    end
  end
endmodule
