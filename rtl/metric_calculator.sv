// metric_calculator: approximated Fano branch metrics of one bit channel.
//
// With the bias b_i restricted to {0,1} and log2(1+e^-x) approximated by 0 or
// |z|, the PAC Fano metric reduces to four cases (s = sign bit of z_i):
//     s b | gamma(0)   gamma(1)
//     0 0 |  1          1-|z|
//     0 1 |  0          -|z|
//     1 0 |  1-|z|      1
//     1 1 |  -|z|       0
// The circuit follows that table directly: an absolute-value stage, one adder
// that forms 1-|z|, and two 4-to-1 multiplexers selected by {s, b}.
// Purely combinational.  |z| is clipped to 2^(Q-1)-1 (this design's choice) so
// that every output fits in Q signed bits.
module metric_calculator #(
  parameter int unsigned Q = pac_pkg::Q_DEF
) (
  input  logic signed [Q-1:0] z,
  input  logic                b,
  output logic signed [Q-1:0] gamma0,
  output logic signed [Q-1:0] gamma1
);
  localparam logic signed [Q-1:0] MAXMAG = Q'((1 << (Q - 1)) - 1);
  localparam logic signed [Q-1:0] MINV   = {1'b1, {(Q - 1){1'b0}}};
  logic               s;
  logic signed [Q-1:0] mag, neg_mag, one_minus;
  logic [1:0]         sel;

  always_comb begin
    s         = z[Q-1];
    mag       = s ? ((z == MINV) ? MAXMAG : -z) : z;
    neg_mag   = -mag;
    one_minus = neg_mag + Q'(1);
    sel       = {s, b};
    unique case (sel)
      2'b00: begin gamma0 = Q'(1);    gamma1 = one_minus; end
      2'b01: begin gamma0 = '0;       gamma1 = neg_mag;   end
      2'b10: begin gamma0 = one_minus; gamma1 = Q'(1);    end
      default: begin gamma0 = neg_mag; gamma1 = '0;       end
    endcase
  end
endmodule
