// bitwise_mac_unit: one bitwise operation unit with its accumulator.
//
// Each enabled cycle the J-bit output of the bitwise operation unit is added
// to the "Buffer" register (the accumulator). 'clear' marks the first term
// of a new sum: the buffer is loaded instead of added to. 'last' marks the
// final term; one cycle later 'acc_valid' pulses and 'acc' holds the finished
// MAC result sum_i sum_j 2^j (a'_{i,j} op w'_i). The next sum may start in
// the very cycle that follows its 'last' term, so one MAC result is produced
// every I cycles. The adder-plus-buffer structure follows the paper; the
// clear/last handshake and the accumulator width are this design's choices.
// The accumulator wraps at 2^ACC_W; the default width never wraps for
// I <= 65793.
module bitwise_mac_unit #(
  parameter int unsigned J     = bnn_pkg::J_BITS,
  parameter int unsigned ACC_W = bnn_pkg::ACC_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             m,          // operation mode
  input  logic             en,         // a term is present this cycle
  input  logic             clear,      // first term of a new sum
  input  logic             last,       // last term of the sum
  input  logic [J-1:0]     a,          // activation a'_i
  input  logic             w,          // weight bit w'_i
  output logic [ACC_W-1:0] acc,        // MAC result (Buffer)
  output logic             acc_valid   // acc is a finished sum this cycle
);
  logic [J-1:0]     o;
  logic [ACC_W-1:0] base, next;

  bitwise_operation_unit #(.J(J)) u_bou (
    .m (m),
    .a (a),
    .w (w),
    .o (o)
  );

  always_comb begin
    base = clear ? '0 : acc;
    next = base + ACC_W'(o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      if (en) acc <= next;
      acc_valid <= en & last;
    end
  end
endmodule
