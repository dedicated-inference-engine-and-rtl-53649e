// tb_logical_operation_unit: exhaustive check of the one-bit product.
// All eight (m, a, w) combinations are compared with the truth tables of
// both modes: m = 0 gives 1 when a equals w (XNOR), m = 1 gives a AND w.
module tb_logical_operation_unit;
  logic m, a, w, o;
  int   checks = 0, failures = 0;

  logical_operation_unit dut (.m(m), .a(a), .w(w), .o(o));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic expected;
    for (int v = 0; v < 8; v++) begin
      {m, a, w} = 3'(v);
      #1;
      expected = m ? (a & w) : (a == w);
      checks++;
      if (o !== expected) begin
        failures++;
        $display("FAIL m=%0d a=%0d w=%0d o=%0d expected %0d", m, a, w, o, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
