// input_buffer: channel LLR storage of the PAC Fano decoder.
//
// Holds the N quantised channel LLRs of the codeword being decoded.  It is
// loaded through a simple addressed write port, one Q-bit LLR per clock
// (we/waddr/wdata), and presents all N values in parallel to the polar
// demapper, which treats them as the top level of its tree.  The load port is
// this design's own choice; a new vector may be written whenever the decoder
// is idle.  Reset clears the buffer.  Note: a stored LLR greater than zero
// favours bit 0.
module input_buffer #(
  parameter int unsigned N = pac_pkg::N_DEF,
  parameter int unsigned Q = pac_pkg::Q_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [LOGN-1:0]     waddr,
  input  logic signed [Q-1:0] wdata,
  output logic signed [Q-1:0] llr [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(N); j++) llr[j] <= '0;
    end else if (we) begin
      llr[waddr] <= wdata;
    end
  end
endmodule
