// logical_operation_unit: the one-bit "multiplier" of the engine.
//
// It forms the product of one activation bit a'_{i,j} with one weight bit
// w'_i. With m = 0 the unit behaves as an XNOR gate (weights +-1 encoded as
// w' = (w+1)/2, Table 1(a) after the correction term gamma is moved out);
// with m = 1 it behaves as an AND gate (weights {0,1}, Table 1(b)). Both
// behaviours follow the paper. The logic is written as the sum of products
//   o = (a & w) | (~m & ~a & ~w)
// which shares the AND term between the two modes. Purely combinational.
module logical_operation_unit (
  input  logic m,   // operation mode: 0 = XNOR, 1 = AND
  input  logic a,   // activation bit a'_{i,j}
  input  logic w,   // weight bit w'_i
  output logic o    // o_{i,j}
);
  logic both_one, both_zero;

  always_comb begin
    both_one  = a & w;
    both_zero = ~m & ~a & ~w;
    o         = both_one | both_zero;
  end
endmodule
