// uasg_ssg: switching sequence generator (SSG).
//
// A Gray counter (up-counter plus m-1 XOR gates) feeds the transition
// generator (m flip-flops plus m XOR gates). While adv is high the counter
// steps once per clock and exactly one of the m select lines is high: the
// line i = T_m(B(n)), the index of the Gray-code bit that flipped between
// B(n-1) and B(n). Starting the counter at B(0) = l shifts the switching
// sequence by l positions (T_m(B) in the paper's notation).
//
// Timing: load puts B(0) in the counter and its Gray code in the transition
// flip-flops, so in the first cycle after load sel = 0. In each later cycle
// with the counter at B(n), sel selects the vector that turns A(n-1) into
// A(n); that is the cycle the XOR adder consumes it.
module uasg_ssg #(
  parameter int unsigned M = uasg_pkg::UASG_M
) (
  input  logic         clk,
  input  logic         load,
  input  logic         adv,
  input  logic [M-1:0] b_init,
  output logic [M-1:0] b,
  output logic [M-1:0] sel
);

  logic [M-1:0] g;
  logic [M-1:0] g_init;

  uasg_gray_counter #(.M(M)) u_gray (
    .clk    (clk),
    .load   (load),
    .inc    (adv),
    .b_init (b_init),
    .b      (b),
    .g      (g)
  );

  // Gray code of B(0), used to preset the transition flip-flops on load.
  assign g_init = b_init ^ (b_init >> 1);

  uasg_transition_gen #(.M(M)) u_trans (
    .clk    (clk),
    .load   (load),
    .adv    (adv),
    .g_init (g_init),
    .g      (g),
    .sel    (sel)
  );

endmodule
