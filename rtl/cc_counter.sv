// cc_counter: clock-cycle counter and timeout detector.
//
// Counts the cycles of one decoding session (clr at the start, en while the
// decoder works) and raises TO as soon as the count exceeds the maximum cycle
// budget MC, which bounds the worst-case latency.  The counter saturates
// instead of wrapping (this design's choice).  TO is combinational from the
// count.
module cc_counter #(
  parameter int unsigned CCW = pac_pkg::CCW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           en,
  input  logic [CCW-1:0] mc,
  output logic [CCW-1:0] count,
  output logic           to
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    count <= '0;
    else if (clr)                  count <= '0;
    else if (en && (count != '1))  count <= count + 1'b1;
  end

  assign to = (count > mc);
endmodule
