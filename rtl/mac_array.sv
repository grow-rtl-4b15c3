// mac_array: the vector unit of GROW. LANES multiply-accumulate lanes compute
// acc_out[i] = acc_in[i] + a * b[i]: one scalar LHS nonzero times one dense RHS
// row, added to the output row it belongs to. This scalar-times-vector step is
// the whole arithmetic of the row-wise (Gustavson) product.
// Purely combinational; the caller registers the result (the output buffer is
// written on the next clock edge). Arithmetic is 64-bit two's complement and
// wraps modulo 2^64 (the number format is this design's choice; lane count and
// width follow the published configuration).
module mac_array
  import grow_pkg::*;
#(
  parameter int LANES_P = LANES,
  parameter int W       = DATA_W
) (
  input  logic [W-1:0]               a,
  input  logic [LANES_P-1:0][W-1:0]  b,
  input  logic [LANES_P-1:0][W-1:0]  acc_in,
  output logic [LANES_P-1:0][W-1:0]  acc_out
);
  always_comb begin
    for (int i = 0; i < LANES_P; i++) acc_out[i] = acc_in[i] + a * b[i];
  end
endmodule
