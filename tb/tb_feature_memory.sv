// tb_feature_memory: random writes and reads on both read ports against a
// reference array. Checks one-cycle read latency, that read data hold while
// the port is idle, and that a read of the word being written returns the
// old contents. Uses a 256-word instance.
module tb_feature_memory;
  localparam int L = 16, J = 8, D = 256, AW = 8;
  logic                  clk = 0, rst_n = 0;
  logic                  wr_en, rda_en, rdb_en;
  logic [AW-1:0]         wr_addr, rda_addr, rdb_addr;
  logic [L-1:0][J-1:0]   wr_data, rda_data, rdb_data;
  logic [L*J-1:0]        ref_mem [D];
  logic [L*J-1:0]        exp_a, exp_b;
  int                    checks = 0, failures = 0;

  feature_memory #(.DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en),
    .wr_addr(wr_addr), .wr_data(wr_data), .rda_en(rda_en), .rda_addr(rda_addr),
    .rda_data(rda_data), .rdb_en(rdb_en), .rdb_addr(rdb_addr), .rdb_data(rdb_data));

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
    {wr_en, rda_en, rdb_en, wr_addr, rda_addr, rdb_addr, wr_data} = '0;
    exp_a = '0; exp_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = rnd();
      ref_mem[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      wr_en    = 1'($urandom);
      wr_addr  = AW'($urandom);
      wr_data  = rnd();
      rda_en   = 1'($urandom);
      rdb_en   = 1'($urandom);
      rda_addr = ($urandom_range(3) == 0) ? wr_addr : AW'($urandom);
      rdb_addr = AW'($urandom);
      if (rda_en) exp_a = ref_mem[rda_addr];   // old contents
      if (rdb_en) exp_b = ref_mem[rdb_addr];
      @(posedge clk);
      if (wr_en) ref_mem[wr_addr] = wr_data;
      #1;
      checks += 2;
      if (rda_data !== exp_a) begin
        failures++;
        $display("FAIL port A addr %0d", rda_addr);
      end
      if (rdb_data !== exp_b) begin
        failures++;
        $display("FAIL port B addr %0d", rdb_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
