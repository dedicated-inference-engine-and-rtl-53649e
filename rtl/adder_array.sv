// adder_array: LANES parallel adders behind the accumulation array.
//
// In MAC layers every lane adds its MAC result to the stored beta+gamma word
// of its output channel: sum = MAC + (beta + gamma) (Eq. 5, Eq. 7). The
// correction term gamma of the XNOR mode was folded into that word in
// advance, off the engine, so no weight-dependent arithmetic happens here.
// With 'eltwise' set, every lane instead adds the two J-bit feature map
// elements fm_a and fm_b (element-wise add of two maps, e.g. a residual
// connection). Both uses come from the paper; the operand selection is this
// design's choice. One register stage: out_valid/sum one cycle after
// in_valid.
module adder_array #(
  parameter int unsigned LANES  = bnn_pkg::N_LANES,
  parameter int unsigned J      = bnn_pkg::J_BITS,
  parameter int unsigned ACC_W  = bnn_pkg::ACC_BITS,
  parameter int unsigned BIAS_W = bnn_pkg::BIAS_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic                                eltwise,  // 1: fm_a + fm_b
  input  logic        [LANES-1:0][ACC_W-1:0]  mac,      // MAC results
  input  logic signed [LANES-1:0][BIAS_W-1:0] bias,     // beta + gamma
  input  logic        [LANES-1:0][J-1:0]      fm_a,     // feature map A
  input  logic        [LANES-1:0][J-1:0]      fm_b,     // feature map B
  output logic signed [LANES-1:0][BIAS_W-1:0] sum,
  output logic                                out_valid
);
  logic signed [LANES-1:0][BIAS_W-1:0] op_a, op_b, next_sum;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      op_a[k]     = eltwise ? BIAS_W'(fm_a[k]) : BIAS_W'(mac[k]);
      op_b[k]     = eltwise ? BIAS_W'(fm_b[k]) : bias[k];
      next_sum[k] = op_a[k] + op_b[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid) sum <= next_sum;
      out_valid <= in_valid;
    end
  end
endmodule
