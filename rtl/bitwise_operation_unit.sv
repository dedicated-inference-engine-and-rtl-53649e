// bitwise_operation_unit: J logical operation units side by side.
//
// Unit j combines bit j of the activation a'_i with the single weight bit
// w'_i, so the J outputs o_{i,0..J-1}, read as an unsigned number, are
// sum_j 2^j (a'_{i,j} op w'_i): a'_i itself or its one's complement in XNOR
// mode, a'_i or 0 in AND mode (Eq. 5 and Eq. 7). Structure as in the paper;
// combinational.
module bitwise_operation_unit #(
  parameter int unsigned J = bnn_pkg::J_BITS
) (
  input  logic         m,     // operation mode: 0 = XNOR, 1 = AND
  input  logic [J-1:0] a,     // activation a'_i, bit j = a'_{i,j}
  input  logic         w,     // weight bit w'_i
  output logic [J-1:0] o      // o_{i,j}
);
  for (genvar j = 0; j < J; j++) begin : g_lou
    logical_operation_unit u_lou (
      .m (m),
      .a (a[j]),
      .w (w),
      .o (o[j])
    );
  end
endmodule
