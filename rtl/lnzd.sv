// lnzd -- leading nonzero detector.
//
// Returns the position of the lowest-numbered set bit of `mask` and whether any bit is
// set. A PE holds two of them: one scans the source activation registers for the next
// nonzero input activation, the other scans the predictor bank for the next output row
// that is predicted nonzero. The paper names the block and its job; this version is a
// plain combinational priority encoder, lowest index first (the scan order is this
// design's choice). Purely combinational, no clock.
module lnzd #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0]         mask,
  output logic                 found,
  output logic [$clog2(N)-1:0] idx
);
  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (mask[i]) begin
        found = 1'b1;
        idx   = ($clog2(N))'(i);
      end
    end
  end
endmodule
