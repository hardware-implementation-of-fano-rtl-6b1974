// vreg: bidirectional shift register of decided information-carrier bits.
//
// N+H bits long so that the search can back up all the way to the root
// without losing a decision, with the H convolution-memory positions in front.
// A forward move shifts the new decision v_i into bit 0; a backward move
// shifts the other way, dropping the latest decision and refilling the far
// end with zero.  Bits H-1..0 form the convolution state CS
// (cs[j-1] = v_{i-j}) used by the branch metric unit; bits before the start of
// the word read as zero.  clr empties the register at the start of a decode.
// fwd and bwd must not be high together.  The N+H length and the use of the
// low bits as the convolution state follow the published architecture; the
// zero fill and the clear input are this design's choices.
module vreg #(
  parameter int unsigned N = pac_pkg::N_DEF,
  parameter int unsigned H = pac_pkg::H_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           fwd,
  input  logic           bwd,
  input  logic           v_in,
  output logic [N+H-1:0] q,
  output logic [H-1:0]   cs
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (clr)   q <= '0;
    else if (fwd)   q <= {q[N+H-2:0], v_in};
    else if (bwd)   q <= {1'b0, q[N+H-1:1]};
  end

  assign cs = q[H-1:0];

  a_one_dir: assert property (@(posedge clk) !(fwd && bwd));
endmodule
