// tb_bnn_inference_engine: end-to-end test of the engine at its default
// parameters (16 lanes, J = 8, full memory sizes).
//
// The testbench plays the host: it writes an input map and the binary
// weights, and, in the role of the processor outside the engine, computes
// beta+gamma for every output channel from beta and the weights
// (gamma = ((sum_i w_i - I) / 2) * (2^J - 1) for +-1 weights, 0 for {0,1}
// weights). Three chained layers then run:
//   1. MAC, m = 0 (weights +-1), I = 40 inputs (three words per row), 8 rows,
//      32 output channels (2 groups). While it runs, a second map is written
//      through the image port so that image writes collide with write-backs.
//   2. MAC, m = 1 (weights {0,1}) on the output of layer 1, 16 channels,
//      max-pooling over pairs of rows.
//   3. Element-wise add of the layer-1 output and the second map.
//   4. Depthwise 3x3 convolution (9 taps), m = 0, on 32 channels: the host
//      writes the taps of every output row through the image port.
// Every output word is compared with a reference computed here with signed
// integer arithmetic on the real weight values; each layer must finish in
// N + 6 cycles. Counts how often each mechanism happened (XNOR mode, AND
// mode, element-wise add, depthwise layer, pooling, clipping high and low, stalled image
// writes, rows spanning several words) and fails if one never did.
module tb_bnn_inference_engine;
  import bnn_pkg::*;
  localparam int L = 16, J = 8;

  logic                      clk = 0, rst_n = 0;
  logic                      start, busy, done;
  layer_cfg_t                cfg;
  logic                      img_valid, img_ready;
  logic [11:0]               img_addr;
  logic [L-1:0][J-1:0]       img_data;
  logic                      wt_valid;
  logic [12:0]               wt_addr;
  logic [L-1:0]              wt_data;
  logic                      bg_valid;
  logic [7:0]                bg_addr;
  logic [L-1:0][31:0]        bg_data;
  logic                      out_valid;
  logic [11:0]               out_addr;
  logic [L-1:0][J-1:0]       out_data;

  bnn_inference_engine dut (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg),
    .busy(busy), .done(done), .img_valid(img_valid), .img_ready(img_ready),
    .img_addr(img_addr), .img_data(img_data), .wt_valid(wt_valid), .wt_addr(wt_addr),
    .wt_data(wt_data), .bg_valid(bg_valid), .bg_addr(bg_addr), .bg_data(bg_data),
    .out_valid(out_valid), .out_addr(out_addr), .out_data(out_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_xnor = 0, n_and = 0, n_elt = 0, n_pool = 0, n_hi = 0, n_lo = 0;
  int n_stall = 0, n_multiword = 0, n_dw = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- reference data ----------------
  localparam int P = 8, I1 = 40, C1 = 32, C2 = 16;
  int x   [P][I1];        // layer-1 input
  int w1  [C1][I1];       // +-1
  int b1  [C1];
  int y1  [P][C1];        // layer-1 output
  int w2  [C2][C1];       // 0/1
  int b2  [C2];
  int y2  [P/2][C2];      // layer-2 output (pooled)
  int xb  [P][C1];        // second map
  int y3  [P][C1];        // element-wise output
  localparam int PD = 4, T = 9;
  int xd  [PD][T][C1];    // depthwise input taps
  int wdw [C1][T];        // +-1
  int bd  [C1];
  int y4  [PD][C1];       // depthwise output
  logic [L-1:0][J-1:0] exp_mem [int];
  logic [L-1:0][J-1:0] got_mem [int];

  function automatic int clip(longint v, int sh);
    longint d;
    d = v >>> sh;
    if (d > 255) begin n_hi++; return 255; end
    if (d < 0) begin n_lo++; return 0; end
    return int'(d);
  endfunction

  // "processor" role: beta + gamma for +-1 weights
  function automatic int beta_gamma_pm1(int beta, int ch);
    int sw;
    sw = 0;
    for (int i = 0; i < I1; i++) sw += w1[ch][i];
    return beta + ((sw - I1) / 2) * ((1 << J) - 1);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) got_mem[int'(out_addr)] = out_data;

  // ---------------- host port drivers ----------------
  task automatic write_img(int addr, logic [L-1:0][J-1:0] data);
    @(negedge clk);
    img_valid = 1; img_addr = 12'(addr); img_data = data;
    @(posedge clk);
    while (!img_ready) begin
      n_stall++;
      @(posedge clk);
    end
    #1 img_valid = 0;
  endtask

  task automatic run(layer_cfg_t c, int n_req);
    int t0, t1;
    @(negedge clk);
    cfg = c; start = 1;
    @(posedge clk);
    t0 = int'($time / 10);
    #1 start = 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = int'($time / 10);
    check(t1 - t0 == n_req + 6, $sformatf("layer took %0d cycles, expected %0d", t1 - t0, n_req + 6));
  endtask

  initial begin
    layer_cfg_t c;
    logic [L-1:0][J-1:0] word;
    {start, img_valid, wt_valid, bg_valid} = '0;
    cfg = '0; img_addr = '0; img_data = '0; wt_addr = '0; wt_data = '0;
    bg_addr = '0; bg_data = '0;

    // random network data
    for (int p = 0; p < P; p++) for (int i = 0; i < I1; i++) x[p][i] = int'($urandom_range(255));
    for (int k = 0; k < C1; k++) begin
      for (int i = 0; i < I1; i++) w1[k][i] = ($urandom_range(1) == 1) ? 1 : -1;
      b1[k] = int'($urandom_range(2000)) - 1000;
    end
    for (int k = 0; k < C2; k++) begin
      for (int i = 0; i < C1; i++) w2[k][i] = int'($urandom_range(1));
      b2[k] = int'($urandom_range(1000)) - 700;
    end
    for (int p = 0; p < P; p++) for (int k = 0; k < C1; k++) xb[p][k] = int'($urandom_range(255));
    for (int p = 0; p < PD; p++)
      for (int t = 0; t < T; t++)
        for (int k = 0; k < C1; k++) xd[p][t][k] = int'($urandom_range(255));
    for (int k = 0; k < C1; k++) begin
      for (int t = 0; t < T; t++) wdw[k][t] = ($urandom_range(1) == 1) ? 1 : -1;
      bd[k] = int'($urandom_range(600)) - 300;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // input map of layer 1: row p at words 3p .. 3p+2
    for (int p = 0; p < P; p++)
      for (int wd = 0; wd < 3; wd++) begin
        for (int l = 0; l < L; l++) word[l] = (wd*L + l < I1) ? J'(x[p][wd*L + l]) : '0;
        write_img(p*3 + wd, word);
      end
    // weights: layer 1 at 0 + g*I1 + i, layer 2 at 80 + i
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < I1; i++) begin
        @(negedge clk);
        wt_valid = 1; wt_addr = 13'(g*I1 + i);
        for (int l = 0; l < L; l++) wt_data[l] = (w1[g*L + l][i] > 0);
      end
    for (int i = 0; i < C1; i++) begin
      @(negedge clk);
      wt_valid = 1; wt_addr = 13'(80 + i);
      for (int l = 0; l < L; l++) wt_data[l] = w2[l][i][0];
    end
    // depthwise weights at 200 + g*T + t: bit l is channel g*L + l, tap t
    for (int g = 0; g < 2; g++)
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        wt_valid = 1; wt_addr = 13'(200 + g*T + t);
        for (int l = 0; l < L; l++) wt_data[l] = (wdw[g*L + l][t] > 0);
      end
    // depthwise taps at 500 + (p*T + t)*2 + g
    @(negedge clk);
    wt_valid = 0;
    for (int p = 0; p < PD; p++)
      for (int t = 0; t < T; t++)
        for (int g = 0; g < 2; g++) begin
          for (int l = 0; l < L; l++) word[l] = J'(xd[p][t][g*L + l]);
          write_img(500 + (p*T + t)*2 + g, word);
        end
    // beta+gamma words: layer 1 at 0,1; layer 2 at 2
    for (int g = 0; g < 2; g++) begin
      @(negedge clk);
      wt_valid = 0; bg_valid = 1; bg_addr = 8'(g);
      for (int l = 0; l < L; l++) bg_data[l] = 32'(beta_gamma_pm1(b1[g*L + l], g*L + l));
    end
    @(negedge clk);
    bg_addr = 8'd2;
    for (int l = 0; l < L; l++) bg_data[l] = 32'(b2[l]);   // gamma = 0 for {0,1}
    // depthwise beta+gamma at 3, 4: gamma = ((sum_t w - T) / 2) * (2^J - 1)
    for (int g = 0; g < 2; g++) begin
      @(negedge clk);
      bg_addr = 8'(3 + g);
      for (int l = 0; l < L; l++) begin
        int sw;
        sw = 0;
        for (int t = 0; t < T; t++) sw += wdw[g*L + l][t];
        bg_data[l] = 32'(bd[g*L + l] + ((sw - T) / 2) * ((1 << J) - 1));
      end
    end
    @(negedge clk);
    bg_valid = 0;

    // ---------------- reference results ----------------
    for (int p = 0; p < P; p++)
      for (int k = 0; k < C1; k++) begin
        longint s;
        s = b1[k];
        for (int i = 0; i < I1; i++) s += x[p][i] * w1[k][i];
        y1[p][k] = clip(s, 2);
      end
    for (int p = 0; p < P; p += 2)
      for (int k = 0; k < C2; k++) begin
        int m0, m1;
        longint s0, s1;
        s0 = b2[k]; s1 = b2[k];
        for (int i = 0; i < C1; i++) begin
          s0 += y1[p][i] * w2[k][i];
          s1 += y1[p+1][i] * w2[k][i];
        end
        m0 = clip(s0, 3); m1 = clip(s1, 3);
        y2[p/2][k] = (m0 > m1) ? m0 : m1;
      end
    for (int p = 0; p < P; p++)
      for (int k = 0; k < C1; k++) y3[p][k] = clip(longint'(y1[p][k] + xb[p][k]), 1);
    for (int p = 0; p < P; p++)
      for (int g = 0; g < 2; g++) begin
        for (int l = 0; l < L; l++) word[l] = J'(y1[p][g*L + l]);
        exp_mem[100 + p*2 + g] = word;
        for (int l = 0; l < L; l++) word[l] = J'(y3[p][g*L + l]);
        exp_mem[400 + p*2 + g] = word;
      end
    for (int p = 0; p < P/2; p++) begin
      for (int l = 0; l < L; l++) word[l] = J'(y2[p][l]);
      exp_mem[300 + p] = word;
    end
    for (int p = 0; p < PD; p++)
      for (int k = 0; k < C1; k++) begin
        longint s;
        s = bd[k];
        for (int t = 0; t < T; t++) s += xd[p][t][k] * wdw[k][t];
        y4[p][k] = clip(s, 2);
      end
    for (int p = 0; p < PD; p++)
      for (int g = 0; g < 2; g++) begin
        for (int l = 0; l < L; l++) word[l] = J'(y4[p][g*L + l]);
        exp_mem[600 + p*2 + g] = word;
      end

    // ---------------- layer 1: XNOR mode, second map written meanwhile ------
    c = '0;
    c.op = OP_MAC; c.mode = MODE_XNOR; c.n_in = 16'(I1); c.n_rows = 16'(P); c.n_groups = 2;
    c.in_base = 0; c.w_base = 0; c.b_base = 0; c.out_base = 100; c.shift = 2; c.pool = 1;
    fork
      run(c, 2*P*I1);
      begin
        // keep rewriting the second map (words 200 + 2p + g) while busy
        wait (busy);
        while (busy) begin
          for (int p = 0; p < P && busy; p++)
            for (int g = 0; g < 2; g++) begin
              for (int l = 0; l < L; l++) word[l] = J'(xb[p][g*L + l]);
              write_img(200 + p*2 + g, word);
            end
        end
      end
    join
    n_xnor++;
    n_multiword++;

    // ---------------- layer 2: AND mode with 2-row max pooling ----------------
    c = '0;
    c.op = OP_MAC; c.mode = MODE_AND; c.n_in = 16'(C1); c.n_rows = 16'(P); c.n_groups = 1;
    c.in_base = 100; c.w_base = 80; c.b_base = 2; c.out_base = 300; c.shift = 3; c.pool = 2;
    run(c, P*C1);
    n_and++;
    n_pool += P/2;

    // ---------------- layer 3: element-wise add ----------------
    c = '0;
    c.op = OP_ELTWISE; c.n_rows = 16'(P); c.n_groups = 2;
    c.in_base = 100; c.in2_base = 200; c.out_base = 400; c.shift = 1; c.pool = 1;
    run(c, 2*P);
    n_elt++;

    // ---------------- layer 4: depthwise 3x3 convolution ----------------
    c = '0;
    c.op = OP_DWCONV; c.mode = MODE_XNOR; c.n_in = 16'(T); c.n_rows = 16'(PD); c.n_groups = 2;
    c.in_base = 500; c.w_base = 200; c.b_base = 3; c.out_base = 600; c.shift = 2; c.pool = 1;
    run(c, 2*PD*T);
    n_dw++;

    // ---------------- compare ----------------
    foreach (exp_mem[a]) begin
      check(got_mem.exists(a), $sformatf("no output written to word %0d", a));
      if (got_mem.exists(a)) begin
        for (int l = 0; l < L; l++)
          check(got_mem[a][l] == exp_mem[a][l],
                $sformatf("word %0d lane %0d: got %0d expected %0d", a, l, got_mem[a][l], exp_mem[a][l]));
      end
    end
    check(got_mem.size() == exp_mem.size(), "number of written words");

    $display("mechanisms: xnor=%0d and=%0d eltwise=%0d depthwise=%0d pooled=%0d clip_hi=%0d clip_lo=%0d stalls=%0d multiword_rows=%0d",
             n_xnor, n_and, n_elt, n_dw, n_pool, n_hi, n_lo, n_stall, n_multiword);
    check(n_xnor > 0, "XNOR mode never ran");
    check(n_and > 0, "AND mode never ran");
    check(n_elt > 0, "element-wise add never ran");
    check(n_dw > 0, "depthwise layer never ran");
    check(n_pool > 0, "pooling never ran");
    check(n_hi > 0, "no clipping to 2^J-1");
    check(n_lo > 0, "no clipping to 0");
    check(n_stall > 0, "image write never stalled");
    check(n_multiword > 0, "no multi-word rows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
