// control_unit: sequences one layer through the engine.
//
// After 'start' the unit latches the layer descriptor (bnn_pkg::layer_cfg_t)
// and walks through output channel groups g (outer loop), input rows p and,
// for MAC layers, the I activations of a row (inner loop), issuing one
// memory request per cycle:
//   OP_MAC     activation i of row p  : word in_base + p*ceil(I/LANES) + i/LANES,
//                                      lane i % LANES (broadcast to all lanes)
//              weight bits (g, i)     : weight word w_base + g*I + i
//              beta+gamma of group g  : bias word b_base + g, with the last term
//   OP_DWCONV  tap i of row p, group g : word in_base + p*I*G + i*G + g, every
//                                      lane using its own channel's activation
//              weight bits (g, i), beta+gamma as for OP_MAC
//   OP_ELTWISE element (p, g)         : words in_base + p*G + g and in2_base + p*G + g
// Results go to word out_base + (p / pool)*G + g; rows p with the same
// p / pool form one max-pooling window.
// Latency from the request of the last term of a job to the write-back is
// 4 cycles for OP_MAC and OP_DWCONV (memory, accumulate, add, quantize) and
// 3 for OP_ELTWISE. Jobs are pipelined, so a layer takes G*P*I (OP_MAC,
// OP_DWCONV) or G*P (OP_ELTWISE) issue cycles N plus that latency: with
// 'start' sampled in cycle S, requests go out in cycles S+1 .. S+N and 'done' pulses in cycle
// S+N+6, after the last write-back. The paper names the control unit only; this
// schedule, the descriptor and the memory layout are this design's own.
// LANES must be a power of two.
module control_unit
  import bnn_pkg::*;
#(
  parameter int unsigned LANES = bnn_pkg::N_LANES,
  parameter int unsigned LW    = $clog2(LANES)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  layer_cfg_t   cfg,
  output logic         busy,
  output logic         done,
  output layer_cfg_t   cfg_q,        // descriptor of the running layer
  // feature memory requests
  output logic         rda_en,
  output logic [15:0]  rda_addr,
  output logic [LW-1:0] rda_lane,
  output logic         rdb_en,
  output logic [15:0]  rdb_addr,
  // parameter memory requests
  output logic         w_rd_en,
  output logic [15:0]  w_rd_addr,
  output logic         b_rd_en,
  output logic [15:0]  b_rd_addr,
  // accumulation array control, aligned with the returned memory data
  output logic         mac_en,
  output logic         mac_clear,
  output logic         mac_last,
  // adder array
  input  logic         acc_valid,    // from the accumulation array
  output logic         add_valid,
  // quantization and activation unit
  output logic         win_first,
  output logic         win_last,
  input  logic         q_valid,
  // write-back
  output logic         wr_en,
  output logic [15:0]  wr_addr
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  // Side information of one job, travelling alongside its data.
  typedef struct packed {
    logic        valid;
    logic        first;
    logic        last;
    logic [15:0] addr;
  } tag_t;

  state_e      state;
  logic [15:0] i_cnt, p_cnt;
  logic [7:0]  g_cnt;
  logic [3:0]  pool_cnt, pool_n;
  logic [15:0] row_words;                  // words per input row (OP_MAC)
  logic [15:0] in_row, w_grp, w_addr, elt_off, out_row, dw_off;
  logic        issue, job_end, row_end, grp_end, layer_end, is_mac, is_dw;
  tag_t        tag_new;
  tag_t        tag_d [1:4];
  logic        mac_en_q, mac_clear_q, mac_last_q, elt_q;

  always_comb begin
    // is_mac: every layer that accumulates (OP_MAC and OP_DWCONV)
    is_mac    = (cfg_q.op != OP_ELTWISE);
    is_dw     = (cfg_q.op == OP_DWCONV);
    pool_n    = (cfg_q.pool == 4'd0) ? 4'd1 : cfg_q.pool;
    issue     = (state == S_RUN);
    job_end   = issue && (!is_mac || i_cnt == cfg_q.n_in - 16'd1);
    row_end   = job_end;
    grp_end   = row_end && (p_cnt == cfg_q.n_rows - 16'd1);
    layer_end = grp_end && (g_cnt == cfg_q.n_groups - 8'd1);

    rda_en    = issue;
    if (is_dw)       rda_addr = in_row + dw_off;
    else if (is_mac) rda_addr = in_row + (i_cnt >> LW);
    else             rda_addr = cfg_q.in_base + elt_off;
    rda_lane  = i_cnt[LW-1:0];
    rdb_en    = issue && !is_mac;
    rdb_addr  = cfg_q.in2_base + elt_off;
    w_rd_en   = issue && is_mac;
    w_rd_addr = w_addr;
    b_rd_en   = job_end && is_mac;
    b_rd_addr = cfg_q.b_base + 16'(g_cnt);

    tag_new.valid = job_end;
    tag_new.first = (pool_cnt == 4'd0);
    tag_new.last  = (pool_cnt == pool_n - 4'd1);
    tag_new.addr  = out_row;

    busy      = (state != S_IDLE);
    mac_en    = mac_en_q;
    mac_clear = mac_clear_q;
    mac_last  = mac_last_q;
    add_valid = is_mac ? acc_valid : elt_q;
    win_first = is_mac ? tag_d[3].first : tag_d[2].first;
    win_last  = is_mac ? tag_d[3].last  : tag_d[2].last;
    wr_en     = q_valid;
    wr_addr   = is_mac ? tag_d[4].addr : tag_d[3].addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cfg_q       <= '0;
      done        <= 1'b0;
      i_cnt       <= '0;
      p_cnt       <= '0;
      g_cnt       <= '0;
      pool_cnt    <= '0;
      row_words   <= '0;
      in_row      <= '0;
      w_grp       <= '0;
      w_addr      <= '0;
      elt_off     <= '0;
      out_row     <= '0;
      dw_off      <= '0;
      mac_en_q    <= 1'b0;
      mac_clear_q <= 1'b0;
      mac_last_q  <= 1'b0;
      elt_q       <= 1'b0;
      for (int s = 1; s <= 4; s++) tag_d[s] <= '0;
    end else begin
      done        <= 1'b0;
      mac_en_q    <= issue && is_mac;
      mac_clear_q <= issue && is_mac && (i_cnt == 16'd0);
      mac_last_q  <= job_end && is_mac;
      elt_q       <= issue && !is_mac;
      tag_d[1]    <= tag_new;
      for (int s = 2; s <= 4; s++) tag_d[s] <= tag_d[s-1];

      case (state)
        S_IDLE: begin
          if (start) begin
            cfg_q     <= cfg;
            state     <= S_RUN;
            i_cnt     <= '0;
            p_cnt     <= '0;
            g_cnt     <= '0;
            pool_cnt  <= '0;
            row_words <= (cfg.op == OP_DWCONV) ? 16'(cfg.n_in * cfg.n_groups)
                                               : (cfg.n_in + 16'(LANES - 1)) >> LW;
            dw_off    <= '0;
            in_row    <= cfg.in_base;
            w_grp     <= cfg.w_base;
            w_addr    <= cfg.w_base;
            elt_off   <= '0;
            out_row   <= cfg.out_base;
          end
        end
        S_RUN: begin
          w_addr <= w_addr + 16'd1;
          i_cnt  <= i_cnt + 16'd1;
          dw_off <= dw_off + 16'(cfg_q.n_groups);
          if (row_end) begin
            i_cnt    <= '0;
            dw_off   <= 16'(g_cnt);
            p_cnt    <= p_cnt + 16'd1;
            in_row   <= in_row + row_words;
            w_addr   <= w_grp;
            elt_off  <= elt_off + 16'(cfg_q.n_groups);
            pool_cnt <= pool_cnt + 4'd1;
            if (pool_cnt == pool_n - 4'd1) begin
              pool_cnt <= '0;
              out_row  <= out_row + 16'(cfg_q.n_groups);
            end
          end
          if (grp_end) begin
            // next output channel group: rewind rows, advance weights
            p_cnt    <= '0;
            pool_cnt <= '0;
            g_cnt    <= g_cnt + 8'd1;
            in_row   <= cfg_q.in_base;
            w_grp    <= w_grp + cfg_q.n_in;
            w_addr   <= w_grp + cfg_q.n_in;
            elt_off  <= 16'(g_cnt) + 16'd1;
            dw_off   <= 16'(g_cnt) + 16'd1;
            out_row  <= cfg_q.out_base + 16'(g_cnt) + 16'd1;
          end
          if (layer_end) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!tag_d[1].valid && !tag_d[2].valid && !tag_d[3].valid &&
              !tag_d[4].valid) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Loop counts of a descriptor must be at least one.
  a_cfg_counts: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> cfg.n_rows != 0 && cfg.n_groups != 0 && (cfg.op == OP_ELTWISE || cfg.n_in != 0))
    else $error("descriptor with a zero loop count");

  // A new layer may only be started while the unit is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE)
    else $error("start while busy");
endmodule
