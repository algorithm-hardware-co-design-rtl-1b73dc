// mac_array: one row of a dense vector-matrix product per clock.
//
// sum = a[0]*b[0] + a[1]*b[1] + ... + a[N_TERMS-1]*b[N_TERMS-1], all signed,
// computed as N_TERMS parallel multipliers and an adder tree and registered:
// with en=1 in cycle t, sum/valid show the result in cycle t+1. valid is low
// after a cycle without en; sum keeps its last value.
//
// The core uses two instances: the memory-update MAC (row i of Abar with
// m[k-1], plus Bbar_i * x[k]) and the memory-integration MAC (row i of P
// with m[k-1], plus v_i * x[k]). A MAC array is named by the source design;
// doing a full row per cycle is this design's choice.
module mac_array #(
  parameter int N_TERMS = 11,
  parameter int A_W     = 8,
  parameter int B_W     = 16,
  parameter int ACC_W   = 40
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic [N_TERMS-1:0][A_W-1:0]     a,
  input  logic [N_TERMS-1:0][B_W-1:0]     b,
  output logic signed [ACC_W-1:0]         sum,
  output logic                            valid
);

  logic signed [ACC_W-1:0] dot;

  always_comb begin
    dot = '0;
    for (int t = 0; t < N_TERMS; t++)
      dot += ACC_W'($signed(a[t])) * ACC_W'($signed(b[t]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en;
      if (en) sum <= dot;
    end
  end

endmodule
