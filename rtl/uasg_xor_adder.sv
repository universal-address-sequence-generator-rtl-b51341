// uasg_xor_adder: the bitwise XOR adder, m D flip-flops and m two-input XOR
// gates computing A(n) = A(n-1) xor v_i on each enabled clock.
//
// Reset loads the all-zero initial address, set loads any other initial
// address a_init; both are synchronous and reset wins. The register output a
// is the generated address. Writing an initial address with a nonzero value
// inverts the same bits of every address of the sequence, because XOR is
// linear. Synchronous reset/set and the separate set strobe are this
// design's choices.
module uasg_xor_adder #(
  parameter int unsigned M = uasg_pkg::UASG_M
) (
  input  logic         clk,
  input  logic         reset,
  input  logic         set,
  input  logic [M-1:0] a_init,
  input  logic         en,
  input  logic [M-1:0] v,
  output logic [M-1:0] a
);

  always_ff @(posedge clk) begin
    if (reset)    a <= '0;
    else if (set) a <= a_init;
    else if (en)  a <= a ^ v;
  end

endmodule
