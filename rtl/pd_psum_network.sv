// pd_psum_network: combinational bit-estimate update network of the polar
// demapper.
//
// The g node operation at tree level k needs the partial sums of the left
// sibling sub-block, i.e. the 2^k decided bits u of that block multiplied by
// the polar transform F^{(x)k}.  Instead of keeping partial-sum registers that
// are updated bit by bit (which cannot follow a decoder that backtracks), this
// network re-encodes the whole Ureg combinationally (the published design
// replaces the partial-sum registers with such a combinational network; the
// butterfly form is this design's): ps[0] = u, and stage k+1
// combines neighbouring aligned blocks of size 2^k as (left XOR right, right).
// Then ps[k][base +: 2^k] is the F^{(x)k} encoding of u[base +: 2^k] for every
// aligned base.  Bits of Ureg beyond the current index are stale but never
// reach a selected left-sibling block.  Some output bits are plain copies of
// an input bit (ps[0] is u itself, and the last bit of every aligned block
// passes unchanged); synthesis reports them as wired straight through, which is
// what the polar transform asks for.
module pd_psum_network #(
  parameter int unsigned N = pac_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic [N-1:0] u,
  output logic [N-1:0] ps [LOGN]
);
  logic [N-1:0] st [LOGN+1];

  always_comb begin
    st[0] = u;
    for (int k = 0; k < int'(LOGN); k++) begin
      for (int j = 0; j < int'(N); j++) begin
        if (((j >> k) & 1) == 0) st[k+1][j] = st[k][j] ^ st[k][j + (1 << k)];
        else                     st[k+1][j] = st[k][j];
      end
    end
    for (int k = 0; k < int'(LOGN); k++) ps[k] = st[k];
  end
endmodule
