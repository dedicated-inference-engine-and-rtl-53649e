// feature_memory_bus: the bus between the feature memory and its users.
//
// Write side: input images arrive from outside on a valid/ready port; the
// quantization and activation unit writes output maps back through the
// engine write port. The engine write has priority: while it writes, img_ready
// is low and the image word waits (it must then hold valid, address and
// data). Read side: port A serves the accumulation array, port B the adder
// array. For port A the bus also picks the activation of lane 'rda_lane' out
// of the word read, so that the array gets one J-bit activation in the cycle
// after the request, the same cycle as the word (depthwise layers use the
// whole word instead). The paper draws this bus and its connections only;
// arbitration and lane selection are this design's choices.
module feature_memory_bus #(
  parameter int unsigned LANES = bnn_pkg::N_LANES,
  parameter int unsigned J     = bnn_pkg::J_BITS,
  parameter int unsigned AW    = 12,
  parameter int unsigned LW    = $clog2(LANES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input images (outside the engine)
  input  logic                    img_valid,
  output logic                    img_ready,
  input  logic [AW-1:0]           img_addr,
  input  logic [LANES-1:0][J-1:0] img_data,
  // write-back from the quantization and activation unit
  input  logic                    eng_wr_en,
  input  logic [AW-1:0]           eng_wr_addr,
  input  logic [LANES-1:0][J-1:0] eng_wr_data,
  // read port A: activations for the accumulation array
  input  logic                    rda_en,
  input  logic [AW-1:0]           rda_addr,
  input  logic [LW-1:0]           rda_lane,
  output logic [LANES-1:0][J-1:0] rda_word,
  output logic [J-1:0]            rda_act,
  // read port B: second operand of element-wise adds
  input  logic                    rdb_en,
  input  logic [AW-1:0]           rdb_addr,
  output logic [LANES-1:0][J-1:0] rdb_word,
  // memory side
  output logic                    mem_wr_en,
  output logic [AW-1:0]           mem_wr_addr,
  output logic [LANES-1:0][J-1:0] mem_wr_data,
  output logic                    mem_rda_en,
  output logic [AW-1:0]           mem_rda_addr,
  input  logic [LANES-1:0][J-1:0] mem_rda_data,
  output logic                    mem_rdb_en,
  output logic [AW-1:0]           mem_rdb_addr,
  input  logic [LANES-1:0][J-1:0] mem_rdb_data
);
  logic [LW-1:0] lane_q;

  always_comb begin
    img_ready    = ~eng_wr_en;
    mem_wr_en    = eng_wr_en | img_valid;
    mem_wr_addr  = eng_wr_en ? eng_wr_addr : img_addr;
    mem_wr_data  = eng_wr_en ? eng_wr_data : img_data;
    mem_rda_en   = rda_en;
    mem_rda_addr = rda_addr;
    mem_rdb_en   = rdb_en;
    mem_rdb_addr = rdb_addr;
    rda_word     = mem_rda_data;
    rdb_word     = mem_rdb_data;
    rda_act      = mem_rda_data[lane_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      lane_q <= '0;
    else if (rda_en) lane_q <= rda_lane;
  end

  // A stalled image write keeps its request unchanged until accepted.
  a_img_hold: assert property (@(posedge clk) disable iff (!rst_n)
    img_valid && !img_ready |=> img_valid && $stable(img_addr) && $stable(img_data))
    else $error("image write changed while stalled");
endmodule
