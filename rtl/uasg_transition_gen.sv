// uasg_transition_gen: the transition sequence T_m generator.
//
// m D flip-flops keep the previous Gray code B(n-1)_g and m two-input XOR
// gates compare it with the current code B(n)_g. Consecutive reflected Gray
// codes differ in exactly one bit, so sel = B(n)_g xor B(n-1)_g is one-hot and
// its set bit is the switching index T_m: sel[i-1] = 1 selects vector v_i.
//
// Interface: on adv the flip-flops capture g. On load they are preset to
// g_init, which the generator drives with the Gray code of B(0): the first
// cycle after a load then selects nothing (sel = 0). The preset is this
// design's choice; the structure itself (flip-flops plus XOR gates) is the
// paper's. An assertion checks that sel never has more than one bit set.
module uasg_transition_gen #(
  parameter int unsigned M = uasg_pkg::UASG_M
) (
  input  logic         clk,
  input  logic         load,
  input  logic         adv,
  input  logic [M-1:0] g_init,
  input  logic [M-1:0] g,
  output logic [M-1:0] sel
);

  logic [M-1:0] g_prev;

  always_ff @(posedge clk) begin
    if (load)     g_prev <= g_init;
    else if (adv) g_prev <= g;
  end

  assign sel = g ^ g_prev;

  a_sel_onehot0 : assert property (@(posedge clk) disable iff (load) $onehot0(sel))
    else $error("transition generator: select lines not one-hot: %b", sel);

endmodule
