// tb_bitwise_mac_unit: back-to-back MAC sums against the binary-weight dot
// product. For m = 1 the reference is sum a_i * w'_i. For m = 0 the weights
// are w_i = 2 w'_i - 1 (+-1) and the reference is sum a_i * w_i - gamma with
// gamma = ((sum w_i - I) / 2) * (2^J - 1), i.e. the unit's result plus gamma
// must equal the true signed dot product. Sums of random length 1..40 follow
// each other without gaps; acc_valid must pulse exactly one cycle after each
// last term.
module tb_bitwise_mac_unit;
  localparam int J = 8;
  logic          clk = 0, rst_n = 0;
  logic          m, en, clear, last, w;
  logic [J-1:0]  a;
  logic [23:0]   acc;
  logic          acc_valid;
  int            checks = 0, failures = 0;

  bitwise_mac_unit dut (.clk(clk), .rst_n(rst_n), .m(m), .en(en), .clear(clear),
    .last(last), .a(a), .w(w), .acc(acc), .acc_valid(acc_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q[$];

  // result checker: acc_valid must coincide with a queued expectation
  int pending_valid = 0;
  always @(posedge clk) if (rst_n) begin
    if (acc_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected acc_valid");
      end else begin
        int e;
        e = exp_q.pop_front();
        if (int'(acc) != e) begin
          failures++;
          $display("FAIL acc=%0d expected %0d", acc, e);
        end
      end
    end
  end

  // the previous cycle's 'last' must be followed by acc_valid
  logic last_q;
  always @(posedge clk) begin
    last_q <= en & last & rst_n;
    if (rst_n && last_q) begin
      checks++;
      if (!acc_valid) begin
        failures++;
        $display("FAIL acc_valid not one cycle after last");
      end
    end
  end

  initial begin
    {m, en, clear, last, w, a} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < 200; s++) begin
      int n, dot, sum_w, gamma, e;
      bit mode;
      n = 1 + int'($urandom_range(39));
      mode = 1'($urandom);
      dot = 0; sum_w = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        m = mode;
        en = 1; clear = (i == 0); last = (i == n - 1);
        a = J'($urandom); w = 1'($urandom);
        if (m) dot += w ? int'(a) : 0;
        else   dot += w ? int'(a) : -int'(a);
        sum_w += w ? 1 : -1;
      end
      gamma = ((sum_w - n) / 2) * ((1 << J) - 1);
      e = m ? dot : dot - gamma;
      exp_q.push_back(e);
      // occasionally leave idle cycles between sums
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        en = 0; clear = 0; last = 0;
        a = J'($urandom); w = 1'($urandom);
      end
    end
    @(negedge clk);
    en = 0; last = 0; clear = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
