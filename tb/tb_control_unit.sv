// tb_control_unit: the request schedule of the control unit. A model of the
// datapath latencies (accumulate +1, add +1, quantize +1) closes the loop.
// For MAC, depthwise and element-wise layers with several groups, rows, pooling
// windows and input counts that are not multiples of the lane count, every
// memory request, every MAC control flag, every pooling flag and every
// write-back address is compared with a reference schedule computed from
// the loop nest, and start-to-done must take N + 6 cycles for N requests.
module tb_control_unit;
  import bnn_pkg::*;
  logic         clk = 0, rst_n = 0;
  logic         start, busy, done;
  layer_cfg_t   cfg, cfg_q;
  logic         rda_en, rdb_en, w_rd_en, b_rd_en;
  logic [15:0]  rda_addr, rdb_addr, w_rd_addr, b_rd_addr, wr_addr;
  logic [3:0]   rda_lane;
  logic         mac_en, mac_clear, mac_last, acc_valid, add_valid;
  logic         win_first, win_last, q_valid, wr_en;
  logic         sum_valid;
  int           checks = 0, failures = 0;

  control_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy),
    .done(done), .cfg_q(cfg_q), .rda_en(rda_en), .rda_addr(rda_addr), .rda_lane(rda_lane),
    .rdb_en(rdb_en), .rdb_addr(rdb_addr), .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr),
    .b_rd_en(b_rd_en), .b_rd_addr(b_rd_addr), .mac_en(mac_en), .mac_clear(mac_clear),
    .mac_last(mac_last), .acc_valid(acc_valid), .add_valid(add_valid),
    .win_first(win_first), .win_last(win_last), .q_valid(q_valid), .wr_en(wr_en),
    .wr_addr(wr_addr));

  always #5 clk = ~clk;

  // datapath latency model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 0; sum_valid <= 0; q_valid <= 0;
    end else begin
      acc_valid <= mac_en & mac_last;
      sum_valid <= add_valid;
      q_valid   <= sum_valid & win_last;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected request stream, one entry per request cycle
  typedef struct {int a_addr; int lane; int b_addr; int w_addr; int bias; bit first; bit last;} req_t;
  req_t req_q[$];
  int   wr_q[$];
  int   pool_q[$];   // {first,last} per job, in order

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run_layer(layer_cfg_t c);
    int n_req, t0, t_done, pool, row_words;
    pool = (c.pool == 0) ? 1 : int'(c.pool);
    row_words = (int'(c.n_in) + 15) / 16;
    req_q.delete(); wr_q.delete(); pool_q.delete();
    for (int g = 0; g < c.n_groups; g++)
      for (int p = 0; p < c.n_rows; p++) begin
        if (c.op == OP_DWCONV)
          for (int i = 0; i < c.n_in; i++)
            req_q.push_back('{int'(c.in_base) + (p*int'(c.n_in) + i)*int'(c.n_groups) + g, -2, -1,
                              int'(c.w_base) + g*int'(c.n_in) + i,
                              (i == c.n_in - 1) ? int'(c.b_base) + g : -1,
                              i == 0, i == c.n_in - 1});
        else if (c.op == OP_MAC)
          for (int i = 0; i < c.n_in; i++)
            req_q.push_back('{int'(c.in_base) + p*row_words + i/16, i % 16, -1,
                              int'(c.w_base) + g*int'(c.n_in) + i,
                              (i == c.n_in - 1) ? int'(c.b_base) + g : -1,
                              i == 0, i == c.n_in - 1});
        else
          req_q.push_back('{int'(c.in_base) + p*int'(c.n_groups) + g, -1,
                            int'(c.in2_base) + p*int'(c.n_groups) + g, -1, -1, 1, 1});
        pool_q.push_back(((p % pool) == 0 ? 2 : 0) + ((p % pool) == pool - 1 ? 1 : 0));
        if (p % pool == pool - 1)
          wr_q.push_back(int'(c.out_base) + (p / pool)*int'(c.n_groups) + g);
      end
    n_req = req_q.size();
    @(negedge clk);
    cfg = c; start = 1;
    @(posedge clk);
    t0 = int'($time / 10);
    #1 start = 0;
    fork
      begin : mon
        bit mac_prev_valid, mac_prev_first, mac_prev_last;
        mac_prev_valid = 0; mac_prev_first = 0; mac_prev_last = 0;
        forever begin
          @(negedge clk);
          // MAC flags follow the previous cycle's request
          if (c.op != OP_ELTWISE) begin
            check(mac_en == mac_prev_valid, "mac_en");
            if (mac_prev_valid) begin
              check(mac_clear == mac_prev_first, "mac_clear");
              check(mac_last == mac_prev_last, "mac_last");
            end
          end
          mac_prev_valid = 0;
          if (rda_en) begin
            req_t r;
            check(req_q.size() > 0, "extra request");
            if (req_q.size() > 0) begin
              r = req_q.pop_front();
              check(int'(rda_addr) == r.a_addr, "port A address");
              if (c.op != OP_ELTWISE) begin
                if (r.lane >= 0) check(int'(rda_lane) == r.lane, "lane");
                check(w_rd_en && int'(w_rd_addr) == r.w_addr, "weight address");
                check(b_rd_en == (r.bias >= 0), "bias request");
                if (r.bias >= 0) check(int'(b_rd_addr) == r.bias, "bias address");
                check(!rdb_en, "port B idle");
              end else begin
                check(rdb_en && int'(rdb_addr) == r.b_addr, "port B address");
                check(!w_rd_en && !b_rd_en, "parameter ports idle");
              end
              mac_prev_valid = 1; mac_prev_first = r.first; mac_prev_last = r.last;
            end
          end
          if (sum_valid) begin
            int pf;
            check(pool_q.size() > 0, "extra quantizer input");
            if (pool_q.size() > 0) begin
              pf = pool_q.pop_front();
              check(win_first == pf[1] && win_last == pf[0], "pooling flags");
            end
          end
          if (wr_en) begin
            check(wr_q.size() > 0, "extra write");
            if (wr_q.size() > 0) check(int'(wr_addr) == wr_q.pop_front(), "write address");
          end
          if (done) disable mon;
        end
      end
    join
    t_done = int'(($time - 5) / 10) + 1;
    check(req_q.size() == 0 && wr_q.size() == 0 && pool_q.size() == 0, "all jobs done");
    check(t_done - t0 == n_req + 6, "start-to-done cycles");
    $display("layer op=%0d: %0d requests, %0d cycles", c.op, n_req, t_done - t0);
    check(!busy, "idle after done");
  endtask

  initial begin
    layer_cfg_t c;
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    c = '0;
    c.op = OP_MAC; c.mode = MODE_XNOR; c.n_in = 37; c.n_rows = 6; c.n_groups = 3;
    c.in_base = 100; c.out_base = 900; c.w_base = 50; c.b_base = 7; c.pool = 1;
    run_layer(c);
    c.mode = MODE_AND; c.n_in = 1; c.n_rows = 8; c.n_groups = 2; c.pool = 4; c.pool = 2;
    run_layer(c);
    c.n_in = 16; c.n_rows = 9; c.pool = 3; c.n_groups = 1;
    run_layer(c);
    c.op = OP_DWCONV; c.mode = MODE_XNOR; c.n_in = 9; c.n_rows = 5; c.n_groups = 3;
    c.pool = 1; c.in_base = 20; c.w_base = 700; c.b_base = 30;
    run_layer(c);
    c.n_in = 49; c.n_rows = 4; c.n_groups = 2; c.pool = 2;
    run_layer(c);
    c.op = OP_ELTWISE; c.n_rows = 8; c.n_groups = 4; c.in_base = 10; c.in2_base = 300;
    c.pool = 2;
    run_layer(c);
    c.pool = 0; c.n_groups = 1; c.n_rows = 1;
    run_layer(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
