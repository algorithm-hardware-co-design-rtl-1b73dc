// find_next_set: lowest set bit of `vec` at or above position `from`.
//
// Combinational priority encoder used to walk a binary spike vector while
// skipping zeros, so that sparse spike integration spends one cycle per
// spike rather than one per input. found=0 when no bit at or above `from`
// is set (idx is then 0).
module find_next_set #(
  parameter int W   = 140,
  localparam int IW = $clog2(W + 1)
) (
  input  logic [W-1:0]  vec,
  input  logic [IW-1:0] from,
  output logic          found,
  output logic [IW-1:0] idx
);

  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int i = W - 1; i >= 0; i--) begin
      if (vec[i] && (32'(from) <= i)) begin
        found = 1'b1;
        idx   = IW'(i);
      end
    end
  end

endmodule
