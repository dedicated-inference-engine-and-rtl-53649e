// tb_quant_act_unit: quantization and pooling. Random signed sums (covering
// negative values, values inside the range and values far above it) are
// shifted, clipped to [0, 255] and max-pooled over windows of 1 to 4 inputs.
// The reference uses plain integer division by 2^shift rounded toward minus
// infinity. Every pooled output, its timing and the clip flags are checked.
module tb_quant_act_unit;
  localparam int L = 16, J = 8;
  logic                       clk = 0, rst_n = 0;
  logic                       in_valid, win_first, win_last, out_valid;
  logic signed [L-1:0][31:0]  sum;
  logic        [4:0]          shift;
  logic        [L-1:0][J-1:0] q;
  logic        [L-1:0]        sat_hi, sat_lo;
  int                         checks = 0, failures = 0;
  int                         n_hi = 0, n_lo = 0;

  quant_act_unit dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .sum(sum),
    .shift(shift), .win_first(win_first), .win_last(win_last), .q(q),
    .out_valid(out_valid), .sat_hi(sat_hi), .sat_lo(sat_lo));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int quant(longint s, int sh);
    longint d;
    d = s / (longint'(1) << sh);
    if (s < 0 && d * (longint'(1) << sh) != s) d = d - 1;   // floor
    if (d > 255) return 255;
    if (d < 0) return 0;
    return int'(d);
  endfunction

  initial begin
    int mx [L];
    {in_valid, win_first, win_last, sum} = '0;
    shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int wdw = 0; wdw < 300; wdw++) begin
      int len;
      len   = 1 + int'($urandom_range(3));
      shift = 5'($urandom_range(6));
      for (int k = 0; k < L; k++) mx[k] = 0;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        in_valid = 1; win_first = (t == 0); win_last = (t == len - 1);
        for (int k = 0; k < L; k++) begin
          int q_ref;
          case ($urandom_range(2))
            0: sum[k] = 32'(-int'($urandom_range(5000)));
            1: sum[k] = 32'($urandom_range(255 << shift));
            default: sum[k] = 32'($urandom_range(2000000));
          endcase
          q_ref = quant(longint'($signed(sum[k])), int'(shift));
          if (q_ref > mx[k]) mx[k] = q_ref;
        end
        @(negedge clk);
        in_valid = 0;
        for (int k = 0; k < L; k++) begin
          longint d;
          d = longint'($signed(sum[k])) >>> shift;
          checks++;
          if (sat_hi[k] != (d > 255) || sat_lo[k] != (d < 0)) begin
            failures++;
            $display("FAIL lane %0d clip flags", k);
          end
          n_hi += sat_hi[k]; n_lo += sat_lo[k];
        end
        checks++;
        if (out_valid != win_last) begin
          failures++;
          $display("FAIL out_valid=%0d expected %0d", out_valid, win_last);
        end
      end
      for (int k = 0; k < L; k++) begin
        checks++;
        if (int'(q[k]) != mx[k]) begin
          failures++;
          $display("FAIL lane %0d q=%0d expected %0d (window %0d)", k, q[k], mx[k], len);
        end
      end
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) begin
      failures++;
      $display("FAIL clipping not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
