// tb_bitwise_operation_unit: the J-bit output word against its arithmetic
// meaning. With weight bit 1 the word equals the activation in both modes;
// with weight bit 0 it is 2^J - 1 - a in XNOR mode and 0 in AND mode.
// Checked at the default J = 8 and at J = 4.
module tb_bitwise_operation_unit;
  logic       m, w;
  logic [7:0] a8, o8;
  logic [3:0] a4, o4;
  int         checks = 0, failures = 0;

  bitwise_operation_unit             dut8 (.m(m), .a(a8), .w(w), .o(o8));
  bitwise_operation_unit #(.J(4))    dut4 (.m(m), .a(a4), .w(w), .o(o4));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e8, e4;
    for (int n = 0; n < 2000; n++) begin
      m  = 1'($urandom);
      w  = 1'($urandom);
      a8 = 8'($urandom);
      a4 = 4'($urandom);
      #1;
      e8 = w ? int'(a8) : (m ? 0 : 255 - int'(a8));
      e4 = w ? int'(a4) : (m ? 0 : 15 - int'(a4));
      checks += 2;
      if (int'(o8) != e8) begin
        failures++;
        $display("FAIL J=8 m=%0d w=%0d a=%0d o=%0d exp %0d", m, w, a8, o8, e8);
      end
      if (int'(o4) != e4) begin
        failures++;
        $display("FAIL J=4 m=%0d w=%0d a=%0d o=%0d exp %0d", m, w, a4, o4, e4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
