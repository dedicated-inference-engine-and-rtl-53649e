// tb_adder_array: random MAC results plus signed beta+gamma words, and
// random element-wise sums of two feature maps, each checked one cycle after
// the operands are presented, together with out_valid.
module tb_adder_array;
  localparam int L = 16, J = 8;
  logic                          clk = 0, rst_n = 0;
  logic                          in_valid, eltwise, out_valid;
  logic        [L-1:0][23:0]     mac;
  logic signed [L-1:0][31:0]     bias, sum;
  logic        [L-1:0][J-1:0]    fm_a, fm_b;
  int                            checks = 0, failures = 0;

  adder_array dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .eltwise(eltwise),
    .mac(mac), .bias(bias), .fm_a(fm_a), .fm_b(fm_b), .sum(sum), .out_valid(out_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e [L];
    bit     v;
    {in_valid, eltwise, mac, bias, fm_a, fm_b} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      v        = ($urandom_range(4) != 0);
      in_valid = v;
      eltwise  = 1'($urandom);
      for (int k = 0; k < L; k++) begin
        mac[k]  = 24'($urandom);
        bias[k] = 32'($signed($urandom_range(200000)) - 100000);
        fm_a[k] = J'($urandom);
        fm_b[k] = J'($urandom);
        e[k] = eltwise ? longint'(fm_a[k]) + longint'(fm_b[k])
                       : longint'(mac[k]) + longint'($signed(bias[k]));
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid != v) begin
        failures++;
        $display("FAIL out_valid=%0d expected %0d", out_valid, v);
      end
      if (v) begin
        for (int k = 0; k < L; k++) begin
          checks++;
          if (longint'($signed(sum[k])) != e[k]) begin
            failures++;
            $display("FAIL lane %0d sum=%0d expected %0d", k, $signed(sum[k]), e[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
