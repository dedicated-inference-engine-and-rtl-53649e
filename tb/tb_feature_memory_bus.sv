// tb_feature_memory_bus: the bus in front of a feature memory. Random image
// writes compete with engine writes; the engine must always win, img_ready
// must drop exactly while the engine writes, and a stalled image word must
// land once accepted. Reads through port A must return the word and the
// selected lane's activation one cycle after the request; port B the word.
// Memory contents are checked against a reference model.
module tb_feature_memory_bus;
  localparam int L = 16, J = 8, AW = 6, D = 64;
  logic                 clk = 0, rst_n = 0;
  logic                 img_valid, img_ready, eng_wr_en, rda_en, rdb_en;
  logic [AW-1:0]        img_addr, eng_wr_addr, rda_addr, rdb_addr;
  logic [L-1:0][J-1:0]  img_data, eng_wr_data, rda_word, rdb_word;
  logic [3:0]           rda_lane;
  logic [J-1:0]         rda_act;
  logic                 mem_wr_en, mem_rda_en, mem_rdb_en;
  logic [AW-1:0]        mem_wr_addr, mem_rda_addr, mem_rdb_addr;
  logic [L-1:0][J-1:0]  mem_wr_data, mem_rda_data, mem_rdb_data;
  logic [L*J-1:0]       ref_mem [D];
  int                   checks = 0, failures = 0, stalls = 0;

  feature_memory_bus #(.AW(AW)) dut (.clk(clk), .rst_n(rst_n),
    .img_valid(img_valid), .img_ready(img_ready), .img_addr(img_addr), .img_data(img_data),
    .eng_wr_en(eng_wr_en), .eng_wr_addr(eng_wr_addr), .eng_wr_data(eng_wr_data),
    .rda_en(rda_en), .rda_addr(rda_addr), .rda_lane(rda_lane), .rda_word(rda_word),
    .rda_act(rda_act), .rdb_en(rdb_en), .rdb_addr(rdb_addr), .rdb_word(rdb_word),
    .mem_wr_en(mem_wr_en), .mem_wr_addr(mem_wr_addr), .mem_wr_data(mem_wr_data),
    .mem_rda_en(mem_rda_en), .mem_rda_addr(mem_rda_addr), .mem_rda_data(mem_rda_data),
    .mem_rdb_en(mem_rdb_en), .mem_rdb_addr(mem_rdb_addr), .mem_rdb_data(mem_rdb_data));

  feature_memory #(.DEPTH(D)) u_mem (.clk(clk), .rst_n(rst_n), .wr_en(mem_wr_en),
    .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .rda_en(mem_rda_en),
    .rda_addr(mem_rda_addr), .rda_data(mem_rda_data), .rdb_en(mem_rdb_en),
    .rdb_addr(mem_rdb_addr), .rdb_data(mem_rdb_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [L*J-1:0] rnd();
    logic [L*J-1:0] v;
    for (int k = 0; k < L*J/32; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [L*J-1:0] exp_a, exp_b;
    logic [3:0]     lane;
    {img_valid, eng_wr_en, rda_en, rdb_en, img_addr, eng_wr_addr, rda_addr, rdb_addr,
     img_data, eng_wr_data, rda_lane} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      img_valid = 1; img_addr = AW'(i); img_data = rnd();
      ref_mem[i] = img_data;
    end
    @(negedge clk);
    img_valid = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // a stalled image request holds; otherwise choose a new one
      if (!(img_valid && !img_ready)) begin
        img_valid = 1'($urandom);
        img_addr  = AW'($urandom);
        img_data  = rnd();
      end
      eng_wr_en   = ($urandom_range(2) == 0);
      eng_wr_addr = AW'($urandom);
      eng_wr_data = rnd();
      rda_en = 1'($urandom); rda_addr = AW'($urandom); rda_lane = 4'($urandom);
      rdb_en = 1'($urandom); rdb_addr = AW'($urandom);
      #1;
      checks++;
      if (img_ready != !eng_wr_en) begin
        failures++;
        $display("FAIL img_ready=%0d with eng_wr_en=%0d", img_ready, eng_wr_en);
      end
      if (img_valid && !img_ready) stalls++;
      if (rda_en) begin exp_a = ref_mem[rda_addr]; lane = rda_lane; end
      if (rdb_en) exp_b = ref_mem[rdb_addr];
      @(posedge clk);
      if (eng_wr_en)                   ref_mem[eng_wr_addr] = eng_wr_data;
      else if (img_valid && img_ready) ref_mem[img_addr]    = img_data;
      #1;
      if (n > 0) begin
        checks += 3;
        if (rda_word !== exp_a) begin failures++; $display("FAIL port A word"); end
        if (rda_act !== exp_a[lane*J +: J]) begin
          failures++;
          $display("FAIL port A lane %0d act %0d expected %0d", lane, rda_act, exp_a[lane*J +: J]);
        end
        if (rdb_word !== exp_b) begin failures++; $display("FAIL port B word"); end
      end
    end
    @(negedge clk);
    {img_valid, eng_wr_en, rda_en, rdb_en} = '0;
    // read everything back
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      rdb_en = 1; rdb_addr = AW'(i);
      @(negedge clk);
      rdb_en = 0;
      checks++;
      if (rdb_word !== ref_mem[i]) begin
        failures++;
        $display("FAIL contents of word %0d", i);
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("stalled image writes: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
