// quant_act_unit: quantization, activation and max pooling per lane.
//
// Each adder output is shifted right arithmetically by 'shift' and clipped
// to the J-bit activation range [0, 2^J - 1]; the lower clip acts as the
// ReLU-type activation, the upper one as saturation. The quantized values of
// successive inputs are then max-pooled: 'win_first' starts a window,
// 'win_last' closes it and makes the pooled value leave one cycle later with
// out_valid. A window of one input (both flags set) passes the quantized
// value unchanged. The paper states that this unit quantizes the adder
// output and computes pooling; the shift-and-clip quantizer and max pooling
// over consecutive inputs are this design's choices.
module quant_act_unit #(
  parameter int unsigned LANES  = bnn_pkg::N_LANES,
  parameter int unsigned J      = bnn_pkg::J_BITS,
  parameter int unsigned BIAS_W = bnn_pkg::BIAS_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic signed [LANES-1:0][BIAS_W-1:0] sum,
  input  logic        [4:0]                   shift,
  input  logic                                win_first,
  input  logic                                win_last,
  output logic        [LANES-1:0][J-1:0]      q,
  output logic                                out_valid,
  output logic        [LANES-1:0]             sat_hi,   // last input clipped high
  output logic        [LANES-1:0]             sat_lo    // last input clipped to 0
);
  localparam logic signed [BIAS_W-1:0] QMAX = BIAS_W'((1 << J) - 1);

  logic signed [LANES-1:0][BIAS_W-1:0] shifted;
  logic        [LANES-1:0][J-1:0]      qv, pooled;
  logic        [LANES-1:0]             hi, lo;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      shifted[k] = $signed(sum[k]) >>> shift;
      hi[k]      = $signed(shifted[k]) > QMAX;
      lo[k]      = $signed(shifted[k]) < 0;
      if (hi[k])      qv[k] = QMAX[J-1:0];
      else if (lo[k]) qv[k] = '0;
      else            qv[k] = shifted[k][J-1:0];
      pooled[k] = (win_first || qv[k] > q[k]) ? qv[k] : q[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q         <= '0;
      out_valid <= 1'b0;
      sat_hi    <= '0;
      sat_lo    <= '0;
    end else begin
      if (in_valid) begin
        q      <= pooled;
        sat_hi <= hi;
        sat_lo <= lo;
      end
      out_valid <= in_valid & win_last;
    end
  end
endmodule
