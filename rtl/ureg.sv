// ureg: register of decided convolution-output bits u.
//
// On each forward move of the search the bit u_i of the chosen branch is
// written at position i; backward moves leave the register alone, since the
// bits past the current depth are simply ignored and overwritten later.  The
// whole vector feeds the demapper's partial-sum network and the u_{i-1}
// multiplexer.  clr zeroes it at the start of a decode (this design's
// choice; the addressed write itself follows the published description).
module ureg #(
  parameter int unsigned N = pac_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            we,
  input  logic [LOGN-1:0] idx,
  input  logic            d,
  output logic [N-1:0]    q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q <= '0;
    else if (clr) q <= '0;
    else if (we)  q[idx] <= d;
  end
endmodule
