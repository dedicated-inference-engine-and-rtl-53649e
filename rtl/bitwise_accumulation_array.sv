// bitwise_accumulation_array: LANES bitwise MAC units in parallel.
//
// Every lane receives its own activation a'_i and its own weight bit w'_i,
// as drawn for each unit in the paper, and they share mode, enable, clear
// and last. In the engine one activation is broadcast to all lanes while
// every lane gets the weight bit of a different output channel, so the array
// produces LANES output channels of one pixel every I cycles; for depthwise
// layers every lane takes the activation of its own channel. The paper names
// the array and its function; the lane count and the shared control are this
// design's choices. Latency: acc_valid one cycle after the 'last' term.
module bitwise_accumulation_array #(
  parameter int unsigned LANES = bnn_pkg::N_LANES,
  parameter int unsigned J     = bnn_pkg::J_BITS,
  parameter int unsigned ACC_W = bnn_pkg::ACC_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        m,
  input  logic                        en,
  input  logic                        clear,
  input  logic                        last,
  input  logic [LANES-1:0][J-1:0]     a,          // activation per lane
  input  logic [LANES-1:0]            w,          // weight bit per lane
  output logic [LANES-1:0][ACC_W-1:0] acc,        // MAC results
  output logic                        acc_valid
);
  logic [LANES-1:0] lane_valid;

  for (genvar k = 0; k < LANES; k++) begin : g_mac
    bitwise_mac_unit #(.J(J), .ACC_W(ACC_W)) u_mac (
      .clk       (clk),
      .rst_n     (rst_n),
      .m         (m),
      .en        (en),
      .clear     (clear),
      .last      (last),
      .a         (a[k]),
      .w         (w[k]),
      .acc       (acc[k]),
      .acc_valid (lane_valid[k])
    );
  end

  // All lanes share their control, so their valid flags are identical.
  assign acc_valid = lane_valid[0];
endmodule
