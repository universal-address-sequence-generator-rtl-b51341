// uasg_gray_counter: binary up-counter followed by m-1 two-input XOR gates
// that convert its state B(n) to the binary reflected Gray code B(n)_g:
//   g_m = b_m,   g_i = b_(i+1) xor b_i   (i = 1 .. m-1).
//
// Vector bit k holds b_(k+1) / g_(k+1), so b_1 and g_1 are bit 0. The Gray
// code is combinational from the counter register, so g changes in the same
// cycle as b. Load and increment behave as in uasg_up_counter.
module uasg_gray_counter #(
  parameter int unsigned M = uasg_pkg::UASG_M
) (
  input  logic         clk,
  input  logic         load,
  input  logic         inc,
  input  logic [M-1:0] b_init,
  output logic [M-1:0] b,
  output logic [M-1:0] g
);

  uasg_up_counter #(.M(M)) u_cnt (
    .clk    (clk),
    .load   (load),
    .inc    (inc),
    .b_init (b_init),
    .b      (b)
  );

  // m-1 XOR gates; the top bit passes straight through.
  always_comb begin
    g[M-1] = b[M-1];
    for (int i = 0; i < M - 1; i++) g[i] = b[i+1] ^ b[i];
  end

endmodule
