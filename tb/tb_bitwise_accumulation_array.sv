// tb_bitwise_accumulation_array: every lane of the array accumulates its own
// random activation/weight stream; each lane's result is compared with the
// binary-weight dot product (m = 1) or with dot - gamma (m = 0), gamma being
// ((sum w - I) / 2) * (2^J - 1). Runs the default 16 lanes.
module tb_bitwise_accumulation_array;
  localparam int L = 16, J = 8;
  logic                   clk = 0, rst_n = 0;
  logic                   m, en, clear, last;
  logic [L-1:0][J-1:0]    a;
  logic [L-1:0]           w;
  logic [L-1:0][23:0]     acc;
  logic                   acc_valid;
  int                     checks = 0, failures = 0;
  int                     dot [L], sum_w [L];

  bitwise_accumulation_array dut (.clk(clk), .rst_n(rst_n), .m(m), .en(en),
    .clear(clear), .last(last), .a(a), .w(w), .acc(acc), .acc_valid(acc_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {m, en, clear, last, a, w} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      int n;
      bit mode;
      n = 1 + int'($urandom_range(63));
      mode = 1'($urandom);
      for (int k = 0; k < L; k++) begin dot[k] = 0; sum_w[k] = 0; end
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        m = mode; en = 1; clear = (i == 0); last = (i == n - 1);
        for (int k = 0; k < L; k++) begin
          a[k] = J'($urandom);
          w[k] = 1'($urandom);
          if (mode) dot[k] += w[k] ? int'(a[k]) : 0;
          else      dot[k] += w[k] ? int'(a[k]) : -int'(a[k]);
          sum_w[k] += w[k] ? 1 : -1;
        end
      end
      @(negedge clk);
      en = 0; clear = 0; last = 0;
      checks++;
      if (!acc_valid) begin
        failures++;
        $display("FAIL acc_valid missing");
      end
      for (int k = 0; k < L; k++) begin
        int e;
        e = mode ? dot[k] : dot[k] - ((sum_w[k] - n) / 2) * ((1 << J) - 1);
        checks++;
        if (int'(acc[k]) != e) begin
          failures++;
          $display("FAIL lane %0d acc=%0d expected %0d", k, acc[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
