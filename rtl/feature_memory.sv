// feature_memory: on-chip memory for input images and feature maps.
//
// DEPTH words of LANES activations of J bits each, one write port and two
// read ports (A and B). Reads are synchronous: data appear in the cycle after
// the enable and hold until the next read on that port. A read of the word
// being written in the same cycle returns the old contents. The paper shows
// this memory as a block without size or organisation; word layout, depth
// and port count are this design's choices (two read ports let the adder
// array take two maps at once in element-wise adds). The array is plain RTL
// and maps to an SRAM macro in an ASIC flow. Contents are not reset.
module feature_memory #(
  parameter int unsigned LANES = bnn_pkg::N_LANES,
  parameter int unsigned J     = bnn_pkg::J_BITS,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [LANES-1:0][J-1:0] wr_data,
  input  logic                    rda_en,
  input  logic [AW-1:0]           rda_addr,
  output logic [LANES-1:0][J-1:0] rda_data,
  input  logic                    rdb_en,
  input  logic [AW-1:0]           rdb_addr,
  output logic [LANES-1:0][J-1:0] rdb_data
);
  logic [LANES-1:0][J-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rda_data <= '0;
      rdb_data <= '0;
    end else begin
      if (rda_en) rda_data <= mem[rda_addr];
      if (rdb_en) rdb_data <= mem[rdb_addr];
    end
  end
endmodule
