// uasg_up_counter: the m-bit binary up-counter at the heart of the switching
// sequence generator.
//
// It performs the two synchronous micro-operations of the design: "load",
// which places the initial state B(0) in the counter, and "+1", which moves
// from B(n-1) to B(n). The count wraps from 2^m - 1 to 0, so the generator
// is cyclic with period 2^m.
//
// Interface: load has priority over inc. Both act on the rising edge of clk;
// b is the registered state. Choice of this design: the separate inc enable
// (a clock enable) lets the generator be paused.
module uasg_up_counter #(
  parameter int unsigned M = uasg_pkg::UASG_M
) (
  input  logic         clk,
  input  logic         load,
  input  logic         inc,
  input  logic [M-1:0] b_init,
  output logic [M-1:0] b
);

  always_ff @(posedge clk) begin
    if (load)     b <= b_init;
    else if (inc) b <= b + M'(1);
  end

endmodule
