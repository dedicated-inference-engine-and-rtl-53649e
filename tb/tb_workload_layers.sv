// tb_workload_layers: layers of the MSCAN-SparseInst BNN instance
// segmentation network run on the engine at its default parameters, with
// the channel counts of that network and small spatial tiles:
//   a. 1x1 binary conv of the FPN encoder, 256 -> 128 channels, 8 pixels,
//      weights +-1 (m = 0)
//   b. 3x3 binary conv of the instance activation maps, 128 -> 32 channels,
//      I = 9 * 128 = 1152 (im2col rows prepared by the host), 4 pixels, m = 0
//   c. first binary matrix product of the decoder: activation maps
//      binarized to {0,1} (the 1-bit operand, m = 1) times 8-bit features;
//      32 instances (the 32 maps of the 3x3 conv), a tile of 256 positions, 128 feature channels as rows
//   d. second binary matrix product: mask kernels binarized to +-1 (m = 0)
//      times 128-channel mask features, 64 pixels, 32 instances
//   e. 7x7 depthwise binary conv (BDWConv) of an MSCAN attention module,
//      64 channels (stage 2), 49 taps, 8 pixels, m = 0
// Data are random; beta+gamma is computed here as the off-engine processor
// would. Every output and every layer's cycle count (N + 6) is checked.
module tb_workload_layers;
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

  initial begin
    repeat (400000) @(posedge clk);
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

  logic [L-1:0][J-1:0] got_mem [int];
  always @(posedge clk) if (rst_n && out_valid) got_mem[int'(out_addr)] = out_data;

  localparam int OUT_BASE = 3072;

  // One MAC layer: P rows of I activations, G*16 output channels.
  task automatic mac_layer(string name, int I, int P, int G, bw_mode_e mode, int shift);
    int a [][];      // a[p][i]
    int w [][];      // w[k][i]: +-1 (m = 0) or 0/1 (m = 1)
    int b [];
    int row_words, t0, t1, sw;
    logic [L-1:0][J-1:0] word;
    layer_cfg_t c;
    a = new[P]; foreach (a[p]) a[p] = new[I];
    w = new[G*L]; foreach (w[k]) w[k] = new[I];
    b = new[G*L];
    row_words = (I + L - 1) / L;
    foreach (a[p]) foreach (a[p][i]) a[p][i] = int'($urandom_range(255));
    foreach (w[k]) begin
      foreach (w[k][i])
        w[k][i] = (mode == MODE_XNOR) ? (($urandom_range(1) == 1) ? 1 : -1) : int'($urandom_range(1));
      b[k] = int'($urandom_range(4000)) - 2000;
    end
    // load activations
    for (int p = 0; p < P; p++)
      for (int wd = 0; wd < row_words; wd++) begin
        for (int l = 0; l < L; l++) word[l] = (wd*L + l < I) ? J'(a[p][wd*L + l]) : '0;
        @(negedge clk);
        img_valid = 1; img_addr = 12'(p*row_words + wd); img_data = word;
      end
    @(negedge clk);
    img_valid = 0;
    // load weights and beta+gamma
    for (int g = 0; g < G; g++) begin
      for (int i = 0; i < I; i++) begin
        @(negedge clk);
        wt_valid = 1; wt_addr = 13'(g*I + i);
        for (int l = 0; l < L; l++) wt_data[l] = (w[g*L + l][i] > 0);
      end
      @(negedge clk);
      wt_valid = 0; bg_valid = 1; bg_addr = 8'(g);
      for (int l = 0; l < L; l++) begin
        sw = 0;
        foreach (w[g*L + l][i]) sw += w[g*L + l][i];
        bg_data[l] = (mode == MODE_XNOR) ? 32'(b[g*L + l] + ((sw - I) / 2) * ((1 << J) - 1))
                                         : 32'(b[g*L + l]);
      end
      @(negedge clk);
      bg_valid = 0;
    end
    got_mem.delete();
    c = '0;
    c.op = OP_MAC; c.mode = mode; c.n_in = 16'(I); c.n_rows = 16'(P); c.n_groups = 8'(G);
    c.in_base = 0; c.w_base = 0; c.b_base = 0; c.out_base = 16'(OUT_BASE);
    c.shift = 5'(shift); c.pool = 1;
    @(negedge clk);
    cfg = c; start = 1;
    @(posedge clk);
    t0 = int'($time / 10);
    #1 start = 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = int'($time / 10);
    check(t1 - t0 == G*P*I + 6, $sformatf("%s: %0d cycles, expected %0d", name, t1 - t0, G*P*I + 6));
    for (int p = 0; p < P; p++)
      for (int k = 0; k < G*L; k++) begin
        longint s, d;
        int e, adr;
        s = b[k];
        for (int i = 0; i < I; i++) s += a[p][i] * w[k][i];
        d = s >>> shift;
        e = (d > 255) ? 255 : (d < 0) ? 0 : int'(d);
        adr = OUT_BASE + p*G + k/L;
        check(got_mem.exists(adr) && int'(got_mem[adr][k%L]) == e,
              $sformatf("%s: row %0d channel %0d expected %0d", name, p, k, e));
      end
    $display("%s: I=%0d P=%0d G=%0d m=%0d, %0d cycles", name, I, P, G, mode, t1 - t0);
  endtask

  // One depthwise layer: P rows of T taps, G*16 channels, channel k of
  // the output uses only channel k of the input.
  task automatic dw_layer(string name, int T, int P, int G, int shift);
    int a [][][];    // a[p][t][k]
    int w [][];      // w[k][t]: +-1
    int b [];
    int t0, t1, sw;
    logic [L-1:0][J-1:0] word;
    layer_cfg_t c;
    a = new[P]; foreach (a[p]) begin a[p] = new[T]; foreach (a[p][t]) a[p][t] = new[G*L]; end
    w = new[G*L]; foreach (w[k]) w[k] = new[T];
    b = new[G*L];
    foreach (a[p]) foreach (a[p][t]) foreach (a[p][t][k]) a[p][t][k] = int'($urandom_range(255));
    foreach (w[k]) begin
      foreach (w[k][t]) w[k][t] = ($urandom_range(1) == 1) ? 1 : -1;
      b[k] = int'($urandom_range(1000)) - 500;
    end
    // taps: word (p*T + t)*G + g holds channels g*16 .. g*16+15
    for (int p = 0; p < P; p++)
      for (int t = 0; t < T; t++)
        for (int g = 0; g < G; g++) begin
          for (int l = 0; l < L; l++) word[l] = J'(a[p][t][g*L + l]);
          @(negedge clk);
          img_valid = 1; img_addr = 12'((p*T + t)*G + g); img_data = word;
        end
    @(negedge clk);
    img_valid = 0;
    for (int g = 0; g < G; g++) begin
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        wt_valid = 1; wt_addr = 13'(g*T + t);
        for (int l = 0; l < L; l++) wt_data[l] = (w[g*L + l][t] > 0);
      end
      @(negedge clk);
      wt_valid = 0; bg_valid = 1; bg_addr = 8'(g);
      for (int l = 0; l < L; l++) begin
        sw = 0;
        foreach (w[g*L + l][t]) sw += w[g*L + l][t];
        bg_data[l] = 32'(b[g*L + l] + ((sw - T) / 2) * ((1 << J) - 1));
      end
      @(negedge clk);
      bg_valid = 0;
    end
    got_mem.delete();
    c = '0;
    c.op = OP_DWCONV; c.mode = MODE_XNOR; c.n_in = 16'(T); c.n_rows = 16'(P);
    c.n_groups = 8'(G); c.out_base = 16'(OUT_BASE); c.shift = 5'(shift); c.pool = 1;
    @(negedge clk);
    cfg = c; start = 1;
    @(posedge clk);
    t0 = int'($time / 10);
    #1 start = 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = int'($time / 10);
    check(t1 - t0 == G*P*T + 6, $sformatf("%s: %0d cycles, expected %0d", name, t1 - t0, G*P*T + 6));
    for (int p = 0; p < P; p++)
      for (int k = 0; k < G*L; k++) begin
        longint s, d;
        int e, adr;
        s = b[k];
        for (int t = 0; t < T; t++) s += a[p][t][k] * w[k][t];
        d = s >>> shift;
        e = (d > 255) ? 255 : (d < 0) ? 0 : int'(d);
        adr = OUT_BASE + p*G + k/L;
        check(got_mem.exists(adr) && int'(got_mem[adr][k%L]) == e,
              $sformatf("%s: row %0d channel %0d expected %0d", name, p, k, e));
      end
    $display("%s: taps=%0d P=%0d G=%0d, %0d cycles", name, T, P, G, t1 - t0);
  endtask

  initial begin
    {start, img_valid, wt_valid, bg_valid} = '0;
    cfg = '0; img_addr = '0; img_data = '0; wt_addr = '0; wt_data = '0;
    bg_addr = '0; bg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    mac_layer("fpn_1x1_bconv_256_128", 256, 8, 8, MODE_XNOR, 5);
    mac_layer("iam_3x3_bconv_128_32", 1152, 4, 2, MODE_XNOR, 7);
    mac_layer("bmm_iam01_x_features", 256, 128, 2, MODE_AND, 8);
    mac_layer("bmm_kernel_pm1_x_maskfeat", 128, 64, 2, MODE_XNOR, 4);
    dw_layer("mscan_bdwconv_7x7_c64", 49, 8, 4, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
