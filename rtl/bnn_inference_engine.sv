// bnn_inference_engine: dedicated inference engine for binary-weight networks.
//
// The engine evaluates layers of the form o = sum_i a_i * w_i + (beta+gamma)
// with J-bit activations and 1-bit weights, without multipliers: a
// bitwise operation and accumulation array forms and sums the J-bit words
// (a_i XNOR w'_i) in mode m = 0 (weights +-1) or (a_i AND w'_i) in mode
// m = 1 (weights {0,1}); an adder array adds the per-channel constant
// beta+gamma, in which the weight-only correction term gamma of the XNOR mode
// was folded in advance by a processor outside the engine; a quantization
// and activation unit brings the sums back to J-bit activations and max-pools
// them. The adder array also runs element-wise adds of two feature maps.
// Depthwise convolutions, which the paper's networks use throughout their
// backbone, run on the same array with one channel per lane; that mapping,
// like the rest of the dataflow, is this design's own.
// Feature maps live in a feature memory, weights and beta+gamma in a
// parameter memory, each behind its memory bus; a control unit runs a layer
// described by a bnn_pkg::layer_cfg_t. This block structure is the paper's;
// sizes, memory layout, control and handshakes are this design's choices.
//
// Interface: input images and feature maps are written word by word through
// img_* (valid/ready; ready drops while the engine writes back). Weights
// (wt_*) and beta+gamma words (bg_*) are written without handshake. A layer
// starts with a one-cycle 'start' while 'busy' is low, with 'cfg' valid in
// that cycle; every output word is written back to the feature memory and
// also appears on out_* (the output maps) in the same cycle; 'done' pulses
// at the end. A MAC layer over G groups, P rows and I inputs takes
// G*P*I + 6 cycles from start to done (I taps for a depthwise layer); an
// element-wise layer G*P + 6.
module bnn_inference_engine
  import bnn_pkg::*;
#(
  parameter int unsigned LANES    = bnn_pkg::N_LANES,
  parameter int unsigned J        = bnn_pkg::J_BITS,
  parameter int unsigned ACC_W    = bnn_pkg::ACC_BITS,
  parameter int unsigned BIAS_W   = bnn_pkg::BIAS_BITS,
  parameter int unsigned FM_DEPTH = 4096,
  parameter int unsigned W_DEPTH  = 8192,
  parameter int unsigned B_DEPTH  = 256,
  parameter int unsigned FAW      = $clog2(FM_DEPTH),
  parameter int unsigned WAW      = $clog2(W_DEPTH),
  parameter int unsigned BAW      = $clog2(B_DEPTH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // layer control
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         busy,
  output logic                         done,
  // input images / feature maps into the feature memory
  input  logic                         img_valid,
  output logic                         img_ready,
  input  logic [FAW-1:0]               img_addr,
  input  logic [LANES-1:0][J-1:0]      img_data,
  // filter weights into the parameter memory
  input  logic                         wt_valid,
  input  logic [WAW-1:0]               wt_addr,
  input  logic [LANES-1:0]             wt_data,
  // beta+gamma words into the parameter memory
  input  logic                         bg_valid,
  input  logic [BAW-1:0]               bg_addr,
  input  logic [LANES-1:0][BIAS_W-1:0] bg_data,
  // output maps
  output logic                         out_valid,
  output logic [FAW-1:0]               out_addr,
  output logic [LANES-1:0][J-1:0]      out_data
);
  localparam int unsigned LW = $clog2(LANES);

  layer_cfg_t cfg_q;

  // control unit
  logic          rda_en, rdb_en, w_rd_en, b_rd_en;
  logic [15:0]   rda_addr, rdb_addr, w_rd_addr, b_rd_addr, wr_addr;
  logic [LW-1:0] rda_lane;
  logic          mac_en, mac_clear, mac_last, add_valid, win_first, win_last;
  logic          wr_en;

  // feature side
  logic                    fm_wr_en, fm_rda_en, fm_rdb_en;
  logic [FAW-1:0]          fm_wr_addr, fm_rda_addr, fm_rdb_addr;
  logic [LANES-1:0][J-1:0] fm_wr_data, fm_rda_data, fm_rdb_data;
  logic [LANES-1:0][J-1:0] rda_word, rdb_word;
  logic [J-1:0]            rda_act;

  // parameter side
  logic                         pm_w_wr_en, pm_w_rd_en, pm_b_wr_en, pm_b_rd_en;
  logic [WAW-1:0]               pm_w_wr_addr, pm_w_rd_addr;
  logic [BAW-1:0]               pm_b_wr_addr, pm_b_rd_addr;
  logic [LANES-1:0]             pm_w_wr_data, pm_w_rd_data, w_bits;
  logic [LANES-1:0][BIAS_W-1:0] pm_b_wr_data, pm_b_rd_data, bias;

  // datapath
  logic [LANES-1:0][J-1:0]             act_bcast;
  logic [LANES-1:0][ACC_W-1:0]         acc;
  logic                                acc_valid, sum_valid, q_valid;
  logic signed [LANES-1:0][BIAS_W-1:0] sum;
  logic [LANES-1:0][J-1:0]             q;
  logic [LANES-1:0]                    sat_hi, sat_lo;

  control_unit #(.LANES(LANES)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .cfg       (cfg),
    .busy      (busy),
    .done      (done),
    .cfg_q     (cfg_q),
    .rda_en    (rda_en),
    .rda_addr  (rda_addr),
    .rda_lane  (rda_lane),
    .rdb_en    (rdb_en),
    .rdb_addr  (rdb_addr),
    .w_rd_en   (w_rd_en),
    .w_rd_addr (w_rd_addr),
    .b_rd_en   (b_rd_en),
    .b_rd_addr (b_rd_addr),
    .mac_en    (mac_en),
    .mac_clear (mac_clear),
    .mac_last  (mac_last),
    .acc_valid (acc_valid),
    .add_valid (add_valid),
    .win_first (win_first),
    .win_last  (win_last),
    .q_valid   (q_valid),
    .wr_en     (wr_en),
    .wr_addr   (wr_addr)
  );

  feature_memory_bus #(.LANES(LANES), .J(J), .AW(FAW)) u_fm_bus (
    .clk          (clk),
    .rst_n        (rst_n),
    .img_valid    (img_valid),
    .img_ready    (img_ready),
    .img_addr     (img_addr),
    .img_data     (img_data),
    .eng_wr_en    (wr_en),
    .eng_wr_addr  (wr_addr[FAW-1:0]),
    .eng_wr_data  (q),
    .rda_en       (rda_en),
    .rda_addr     (rda_addr[FAW-1:0]),
    .rda_lane     (rda_lane),
    .rda_word     (rda_word),
    .rda_act      (rda_act),
    .rdb_en       (rdb_en),
    .rdb_addr     (rdb_addr[FAW-1:0]),
    .rdb_word     (rdb_word),
    .mem_wr_en    (fm_wr_en),
    .mem_wr_addr  (fm_wr_addr),
    .mem_wr_data  (fm_wr_data),
    .mem_rda_en   (fm_rda_en),
    .mem_rda_addr (fm_rda_addr),
    .mem_rda_data (fm_rda_data),
    .mem_rdb_en   (fm_rdb_en),
    .mem_rdb_addr (fm_rdb_addr),
    .mem_rdb_data (fm_rdb_data)
  );

  feature_memory #(.LANES(LANES), .J(J), .DEPTH(FM_DEPTH)) u_fm (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_en    (fm_wr_en),
    .wr_addr  (fm_wr_addr),
    .wr_data  (fm_wr_data),
    .rda_en   (fm_rda_en),
    .rda_addr (fm_rda_addr),
    .rda_data (fm_rda_data),
    .rdb_en   (fm_rdb_en),
    .rdb_addr (fm_rdb_addr),
    .rdb_data (fm_rdb_data)
  );

  param_memory_bus #(.LANES(LANES), .BIAS_W(BIAS_W), .WAW(WAW), .BAW(BAW)) u_pm_bus (
    .clk           (clk),
    .rst_n         (rst_n),
    .wt_valid      (wt_valid),
    .wt_addr       (wt_addr),
    .wt_data       (wt_data),
    .bg_valid      (bg_valid),
    .bg_addr       (bg_addr),
    .bg_data       (bg_data),
    .w_rd_en       (w_rd_en),
    .w_rd_addr     (w_rd_addr[WAW-1:0]),
    .w_bits        (w_bits),
    .b_rd_en       (b_rd_en),
    .b_rd_addr     (b_rd_addr[BAW-1:0]),
    .bias          (bias),
    .mem_w_wr_en   (pm_w_wr_en),
    .mem_w_wr_addr (pm_w_wr_addr),
    .mem_w_wr_data (pm_w_wr_data),
    .mem_w_rd_en   (pm_w_rd_en),
    .mem_w_rd_addr (pm_w_rd_addr),
    .mem_w_rd_data (pm_w_rd_data),
    .mem_b_wr_en   (pm_b_wr_en),
    .mem_b_wr_addr (pm_b_wr_addr),
    .mem_b_wr_data (pm_b_wr_data),
    .mem_b_rd_en   (pm_b_rd_en),
    .mem_b_rd_addr (pm_b_rd_addr),
    .mem_b_rd_data (pm_b_rd_data)
  );

  param_memory #(.LANES(LANES), .BIAS_W(BIAS_W), .W_DEPTH(W_DEPTH), .B_DEPTH(B_DEPTH)) u_pm (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_wr_en   (pm_w_wr_en),
    .w_wr_addr (pm_w_wr_addr),
    .w_wr_data (pm_w_wr_data),
    .w_rd_en   (pm_w_rd_en),
    .w_rd_addr (pm_w_rd_addr),
    .w_rd_data (pm_w_rd_data),
    .b_wr_en   (pm_b_wr_en),
    .b_wr_addr (pm_b_wr_addr),
    .b_wr_data (pm_b_wr_data),
    .b_rd_en   (pm_b_rd_en),
    .b_rd_addr (pm_b_rd_addr),
    .b_rd_data (pm_b_rd_data)
  );

  // Matrix products and full convolutions: one activation per cycle is
  // broadcast to every MAC unit, each unit holding the weight bit of its own
  // output channel. Depthwise convolutions: every unit takes the activation
  // of its own channel from the word read.
  always_comb begin
    for (int k = 0; k < LANES; k++)
      act_bcast[k] = (cfg_q.op == OP_DWCONV) ? rda_word[k] : rda_act;
  end

  bitwise_accumulation_array #(.LANES(LANES), .J(J), .ACC_W(ACC_W)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .m         (cfg_q.mode),
    .en        (mac_en),
    .clear     (mac_clear),
    .last      (mac_last),
    .a         (act_bcast),
    .w         (w_bits),
    .acc       (acc),
    .acc_valid (acc_valid)
  );

  adder_array #(.LANES(LANES), .J(J), .ACC_W(ACC_W), .BIAS_W(BIAS_W)) u_adders (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (add_valid),
    .eltwise   (cfg_q.op == OP_ELTWISE),
    .mac       (acc),
    .bias      (bias),
    .fm_a      (rda_word),
    .fm_b      (rdb_word),
    .sum       (sum),
    .out_valid (sum_valid)
  );

  quant_act_unit #(.LANES(LANES), .J(J), .BIAS_W(BIAS_W)) u_quant (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sum_valid),
    .sum       (sum),
    .shift     (cfg_q.shift),
    .win_first (win_first),
    .win_last  (win_last),
    .q         (q),
    .out_valid (q_valid),
    .sat_hi    (sat_hi),
    .sat_lo    (sat_lo)
  );

  // Every address the control unit produces must lie inside its memory; the
  // descriptor fields are 16 bits wide, the memories may be smaller.
  a_fm_rda: assert property (@(posedge clk) disable iff (!rst_n)
    rda_en |-> rda_addr < 16'(FM_DEPTH)) else $error("feature read A out of range");
  a_fm_rdb: assert property (@(posedge clk) disable iff (!rst_n)
    rdb_en |-> rdb_addr < 16'(FM_DEPTH)) else $error("feature read B out of range");
  a_fm_wr: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> wr_addr < 16'(FM_DEPTH)) else $error("write-back out of range");
  a_w_rd: assert property (@(posedge clk) disable iff (!rst_n)
    w_rd_en |-> w_rd_addr < 16'(W_DEPTH)) else $error("weight read out of range");
  a_b_rd: assert property (@(posedge clk) disable iff (!rst_n)
    b_rd_en |-> b_rd_addr < 16'(B_DEPTH)) else $error("beta+gamma read out of range");

  always_comb begin
    out_valid = wr_en;
    out_addr  = wr_addr[FAW-1:0];
    out_data  = q;
  end
endmodule
