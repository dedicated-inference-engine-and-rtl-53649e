// tb_param_memory_bus: the bus in front of a parameter memory. Weights and
// beta+gamma words are loaded through the write ports, then read through the
// engine ports: weight bits one cycle after the request, beta+gamma two
// cycles after and held unchanged until the next beta+gamma request returns.
module tb_param_memory_bus;
  localparam int L = 16, BW = 32, WAW = 6, BAW = 3;
  logic                  clk = 0, rst_n = 0;
  logic                  wt_valid, bg_valid, w_rd_en, b_rd_en;
  logic [WAW-1:0]        wt_addr, w_rd_addr;
  logic [BAW-1:0]        bg_addr, b_rd_addr;
  logic [L-1:0]          wt_data, w_bits;
  logic [L-1:0][BW-1:0]  bg_data, bias;
  logic                  m_w_wr_en, m_w_rd_en, m_b_wr_en, m_b_rd_en;
  logic [WAW-1:0]        m_w_wr_addr, m_w_rd_addr;
  logic [BAW-1:0]        m_b_wr_addr, m_b_rd_addr;
  logic [L-1:0]          m_w_wr_data, m_w_rd_data;
  logic [L-1:0][BW-1:0]  m_b_wr_data, m_b_rd_data;
  logic [L-1:0]          ref_w [64];
  logic [L*BW-1:0]       ref_b [8];
  int                    checks = 0, failures = 0;

  param_memory_bus #(.WAW(WAW), .BAW(BAW)) dut (.clk(clk), .rst_n(rst_n),
    .wt_valid(wt_valid), .wt_addr(wt_addr), .wt_data(wt_data),
    .bg_valid(bg_valid), .bg_addr(bg_addr), .bg_data(bg_data),
    .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr), .w_bits(w_bits),
    .b_rd_en(b_rd_en), .b_rd_addr(b_rd_addr), .bias(bias),
    .mem_w_wr_en(m_w_wr_en), .mem_w_wr_addr(m_w_wr_addr), .mem_w_wr_data(m_w_wr_data),
    .mem_w_rd_en(m_w_rd_en), .mem_w_rd_addr(m_w_rd_addr), .mem_w_rd_data(m_w_rd_data),
    .mem_b_wr_en(m_b_wr_en), .mem_b_wr_addr(m_b_wr_addr), .mem_b_wr_data(m_b_wr_data),
    .mem_b_rd_en(m_b_rd_en), .mem_b_rd_addr(m_b_rd_addr), .mem_b_rd_data(m_b_rd_data));

  param_memory #(.W_DEPTH(64), .B_DEPTH(8)) u_mem (.clk(clk), .rst_n(rst_n),
    .w_wr_en(m_w_wr_en), .w_wr_addr(m_w_wr_addr), .w_wr_data(m_w_wr_data),
    .w_rd_en(m_w_rd_en), .w_rd_addr(m_w_rd_addr), .w_rd_data(m_w_rd_data),
    .b_wr_en(m_b_wr_en), .b_wr_addr(m_b_wr_addr), .b_wr_data(m_b_wr_data),
    .b_rd_en(m_b_rd_en), .b_rd_addr(m_b_rd_addr), .b_rd_data(m_b_rd_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0]    exp_w;
    logic [L*BW-1:0] exp_b, pend_b;
    bit              pend1;
    {wt_valid, bg_valid, w_rd_en, b_rd_en, wt_addr, w_rd_addr, bg_addr, b_rd_addr,
     wt_data, bg_data} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      wt_valid = 1; wt_addr = WAW'(i); wt_data = L'($urandom);
      ref_w[i] = wt_data;
      bg_valid = (i < 8); bg_addr = BAW'(i);
      for (int k = 0; k < L; k++) bg_data[k] = $urandom;
      if (i < 8) ref_b[i] = bg_data;
    end
    @(negedge clk);
    wt_valid = 0; bg_valid = 0;
    exp_b = '0; pend1 = 0; pend_b = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      w_rd_en = 1'($urandom); w_rd_addr = WAW'($urandom);
      b_rd_en = ($urandom_range(3) == 0); b_rd_addr = BAW'($urandom);
      if (w_rd_en) exp_w = ref_w[w_rd_addr];
      @(posedge clk);
      #1;
      checks++;
      if (w_rd_en && w_bits !== exp_w) begin
        failures++;
        $display("FAIL weight bits");
      end
      // beta+gamma read in cycle n-1 becomes visible after this edge
      if (pend1) exp_b = pend_b;
      pend1 = b_rd_en;
      if (b_rd_en) pend_b = ref_b[b_rd_addr];
      checks++;
      if (bias !== exp_b) begin
        failures++;
        $display("FAIL beta+gamma word at step %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
