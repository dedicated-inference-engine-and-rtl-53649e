// tb_param_memory: random writes and reads of both banks (weights and
// beta+gamma) against reference arrays; one-cycle read latency and data
// holding while a port is idle. Uses small depths.
module tb_param_memory;
  localparam int L = 16, BW = 32, WD = 128, BD = 16;
  logic                   clk = 0, rst_n = 0;
  logic                   w_wr_en, w_rd_en, b_wr_en, b_rd_en;
  logic [6:0]             w_wr_addr, w_rd_addr;
  logic [3:0]             b_wr_addr, b_rd_addr;
  logic [L-1:0]           w_wr_data, w_rd_data;
  logic [L-1:0][BW-1:0]   b_wr_data, b_rd_data;
  logic [L-1:0]           ref_w [WD];
  logic [L*BW-1:0]        ref_b [BD];
  logic [L-1:0]           exp_w;
  logic [L*BW-1:0]        exp_b;
  int                     checks = 0, failures = 0;

  param_memory #(.W_DEPTH(WD), .B_DEPTH(BD)) dut (.clk(clk), .rst_n(rst_n),
    .w_wr_en(w_wr_en), .w_wr_addr(w_wr_addr), .w_wr_data(w_wr_data),
    .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr), .w_rd_data(w_rd_data),
    .b_wr_en(b_wr_en), .b_wr_addr(b_wr_addr), .b_wr_data(b_wr_data),
    .b_rd_en(b_rd_en), .b_rd_addr(b_rd_addr), .b_rd_data(b_rd_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {w_wr_en, w_rd_en, b_wr_en, b_rd_en, w_wr_addr, w_rd_addr, b_wr_addr, b_rd_addr,
     w_wr_data, b_wr_data} = '0;
    exp_w = '0; exp_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < WD; i++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_addr = 7'(i); w_wr_data = L'($urandom);
      ref_w[i] = w_wr_data;
      b_wr_en = (i < BD); b_wr_addr = 4'(i);
      for (int k = 0; k < L; k++) b_wr_data[k] = $urandom;
      if (i < BD) ref_b[i] = b_wr_data;
    end
    @(negedge clk);
    w_wr_en = 0; b_wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      w_wr_en = 1'($urandom); w_wr_addr = 7'($urandom); w_wr_data = L'($urandom);
      b_wr_en = 1'($urandom); b_wr_addr = 4'($urandom);
      for (int k = 0; k < L; k++) b_wr_data[k] = $urandom;
      w_rd_en = 1'($urandom); w_rd_addr = 7'($urandom);
      b_rd_en = 1'($urandom); b_rd_addr = 4'($urandom);
      if (w_rd_en) exp_w = ref_w[w_rd_addr];
      if (b_rd_en) exp_b = ref_b[b_rd_addr];
      @(posedge clk);
      if (w_wr_en) ref_w[w_wr_addr] = w_wr_data;
      if (b_wr_en) ref_b[b_wr_addr] = b_wr_data;
      #1;
      checks += 2;
      if (w_rd_data !== exp_w) begin
        failures++;
        $display("FAIL weight bank addr %0d", w_rd_addr);
      end
      if (b_rd_data !== exp_b) begin
        failures++;
        $display("FAIL bias bank addr %0d", b_rd_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
