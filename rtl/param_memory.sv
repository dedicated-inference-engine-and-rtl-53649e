// param_memory: on-chip memory for filter weights and beta+gamma.
//
// Two banks. The weight bank holds W_DEPTH words of LANES weight bits: word
// (g, i) carries bit w'_i of the LANES output channels of group g. The bias
// bank holds B_DEPTH words of LANES signed beta+gamma values, one word per
// output channel group. Each bank has one write port (filled from outside the
// engine) and one synchronous read port whose data hold until the next read.
// The paper shows one parameter memory without size or organisation; the
// bank split, widths and depths are this design's choices.
module param_memory #(
  parameter int unsigned LANES   = bnn_pkg::N_LANES,
  parameter int unsigned BIAS_W  = bnn_pkg::BIAS_BITS,
  parameter int unsigned W_DEPTH = 8192,
  parameter int unsigned B_DEPTH = 256,
  parameter int unsigned WAW     = $clog2(W_DEPTH),
  parameter int unsigned BAW     = $clog2(B_DEPTH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         w_wr_en,
  input  logic [WAW-1:0]               w_wr_addr,
  input  logic [LANES-1:0]             w_wr_data,
  input  logic                         w_rd_en,
  input  logic [WAW-1:0]               w_rd_addr,
  output logic [LANES-1:0]             w_rd_data,
  input  logic                         b_wr_en,
  input  logic [BAW-1:0]               b_wr_addr,
  input  logic [LANES-1:0][BIAS_W-1:0] b_wr_data,
  input  logic                         b_rd_en,
  input  logic [BAW-1:0]               b_rd_addr,
  output logic [LANES-1:0][BIAS_W-1:0] b_rd_data
);
  logic [LANES-1:0]             wmem [W_DEPTH];
  logic [LANES-1:0][BIAS_W-1:0] bmem [B_DEPTH];

  always_ff @(posedge clk) begin
    if (w_wr_en) wmem[w_wr_addr] <= w_wr_data;
    if (b_wr_en) bmem[b_wr_addr] <= b_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_rd_data <= '0;
      b_rd_data <= '0;
    end else begin
      if (w_rd_en) w_rd_data <= wmem[w_rd_addr];
      if (b_rd_en) b_rd_data <= bmem[b_rd_addr];
    end
  end
endmodule
