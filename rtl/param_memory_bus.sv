// param_memory_bus: the bus between the parameter memory and its users.
//
// Filter weights and the beta+gamma words generated in advance by a processor
// outside the engine are written through two write ports; the engine writes
// nothing here, so these ports are always accepted. The accumulation array
// reads one weight word (LANES bits) per cycle. The adder array reads one
// beta+gamma word per output channel group: the request travels with the
// last term of a MAC sum, and the bus captures the returned word in a holding
// register, so that it is valid two cycles after the request, in the cycle
// the accumulators finish, and stays there while the next sum is being
// accumulated. The paper draws the bus and what flows over it; the holding
// register and timing are this design's choices.
module param_memory_bus #(
  parameter int unsigned LANES  = bnn_pkg::N_LANES,
  parameter int unsigned BIAS_W = bnn_pkg::BIAS_BITS,
  parameter int unsigned WAW    = 13,
  parameter int unsigned BAW    = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // parameter loading (outside the engine)
  input  logic                         wt_valid,
  input  logic [WAW-1:0]               wt_addr,
  input  logic [LANES-1:0]             wt_data,
  input  logic                         bg_valid,
  input  logic [BAW-1:0]               bg_addr,
  input  logic [LANES-1:0][BIAS_W-1:0] bg_data,
  // engine reads
  input  logic                         w_rd_en,
  input  logic [WAW-1:0]               w_rd_addr,
  output logic [LANES-1:0]             w_bits,     // cycle after w_rd_en
  input  logic                         b_rd_en,
  input  logic [BAW-1:0]               b_rd_addr,
  output logic [LANES-1:0][BIAS_W-1:0] bias,       // two cycles after b_rd_en
  // memory side
  output logic                         mem_w_wr_en,
  output logic [WAW-1:0]               mem_w_wr_addr,
  output logic [LANES-1:0]             mem_w_wr_data,
  output logic                         mem_w_rd_en,
  output logic [WAW-1:0]               mem_w_rd_addr,
  input  logic [LANES-1:0]             mem_w_rd_data,
  output logic                         mem_b_wr_en,
  output logic [BAW-1:0]               mem_b_wr_addr,
  output logic [LANES-1:0][BIAS_W-1:0] mem_b_wr_data,
  output logic                         mem_b_rd_en,
  output logic [BAW-1:0]               mem_b_rd_addr,
  input  logic [LANES-1:0][BIAS_W-1:0] mem_b_rd_data
);
  logic b_rd_q;

  always_comb begin
    mem_w_wr_en   = wt_valid;
    mem_w_wr_addr = wt_addr;
    mem_w_wr_data = wt_data;
    mem_b_wr_en   = bg_valid;
    mem_b_wr_addr = bg_addr;
    mem_b_wr_data = bg_data;
    mem_w_rd_en   = w_rd_en;
    mem_w_rd_addr = w_rd_addr;
    mem_b_rd_en   = b_rd_en;
    mem_b_rd_addr = b_rd_addr;
    w_bits        = mem_w_rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_rd_q <= 1'b0;
      bias   <= '0;
    end else begin
      b_rd_q <= b_rd_en;
      if (b_rd_q) bias <= mem_b_rd_data;
    end
  end
endmodule
