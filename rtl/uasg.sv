// uasg: universal address sequence generator for memory built-in self-test.
//
// The generator produces every m-bit address exactly once per period of
// 2^m clocks, in an order fixed by a programmable m x m generation matrix
// V = (v_1 .. v_m) of full rank and by two constants A and B:
//   A(0) = A,   A(n) = A(n-1) xor v_i,   i = T_m(B(0) + n),
// where T_m(k) is the index of the Gray-code bit that flips between k-1 and
// k (1 for odd k, m when k wraps to 0). Three blocks in a chain do this: the
// switching sequence generator (uasg_ssg) raises one of m select lines per
// clock, the memory unit (uasg_memory_unit) returns the selected direction
// number v_i, and the XOR adder (uasg_xor_adder) folds it into the address.
// Linear, 2^j, complement, limited-activity, Gray-code and quasi-random
// (van der Corput / Sobol-like) orders differ only in the contents of V.
// A = a_init inverts chosen address bits; B = b_init shifts the order; the
// reverse order comes from starting at the forward sequence's last address.
//
// Interface (all synchronous to clk, active high):
//   reset   clears A, B, the matrix and the markers; the generator idles.
//   matrix_load_valid writes matrix_load_direction_number into cell
//           matrix_load_index (0 holds v_1) at any time.
//   start   loads A(0) = a_init and B(0) = b_init and starts a sequence.
//   ce      clock enable; with ce low nothing moves.
// Timing: the first enabled cycle after start is a fill cycle (the transition
// flip-flops take the Gray code of B(0)); from then on result holds A(n),
// result_count the counter value B(n) that goes with it, and result_sync
// flags valid addresses, A(0) (sequence_begin) and A(2^m - 1) (sequence_end).
// One address per enabled clock. The sequence repeats with period 2^m until
// the next start or reset.
//
// The three blocks, their order and the recursion are the paper's. The
// markers, the count output and the load port names follow the signal names
// of the authors' FPGA build; generating the markers here from a position
// counter (rather than passing them in from outside), the fill cycle and the
// clock enable are this design's choices.
module uasg
  import uasg_pkg::*;
#(
  parameter int unsigned M  = UASG_M,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          ce,
  input  logic          start,
  input  logic [M-1:0]  a_init,
  input  logic [M-1:0]  b_init,
  input  logic          matrix_load_valid,
  input  logic [IW-1:0] matrix_load_index,
  input  logic [M-1:0]  matrix_load_direction_number,
  output logic [M-1:0]  result,
  output logic [M-1:0]  result_count,
  output uasg_sync_t    result_sync
);

  typedef enum logic [1:0] {
    ST_IDLE,   // after reset: no sequence started
    ST_FILL,   // start seen, transition flip-flops not yet primed
    ST_RUN     // one address per enabled clock
  } state_t;

  state_t       state;
  logic         adv;
  logic [M-1:0] b;
  logic [M-1:0] sel;
  logic [M-1:0] v;
  logic [M-1:0] pos;

  // The SSG and the adder step together; in the fill cycle sel is zero, so
  // the adder keeps A(0) while the SSG moves on to the first transition.
  assign adv = ce && (state != ST_IDLE) && !start;

  uasg_ssg #(.M(M)) u_ssg (
    .clk    (clk),
    .load   (reset || start),
    .adv    (adv),
    .b_init (reset ? '0 : b_init),
    .b      (b),
    .sel    (sel)
  );

  uasg_memory_unit #(.M(M)) u_mem (
    .clk   (clk),
    .reset (reset),
    .we    (matrix_load_valid),
    .widx  (matrix_load_index),
    .wdata (matrix_load_direction_number),
    .sel   (sel),
    .v     (v)
  );

  uasg_xor_adder #(.M(M)) u_add (
    .clk    (clk),
    .reset  (reset),
    .set    (start),
    .a_init (a_init),
    .en     (adv),
    .v      (v),
    .a      (result)
  );

  // Sequencing, count pipeline and position counter for the markers.
  always_ff @(posedge clk) begin
    if (reset) begin
      state        <= ST_IDLE;
      pos          <= '0;
      result_count <= '0;
    end else if (start) begin
      state        <= ST_FILL;
      pos          <= '0;
    end else if (adv) begin
      // b is B(n) for the address the adder takes on this edge.
      result_count <= b;
      if (state == ST_FILL) begin
        state <= ST_RUN;
        pos   <= '0;
      end else begin
        pos   <= pos + M'(1);
      end
    end
  end

  always_comb begin
    result_sync.sequence_valid = (state == ST_RUN);
    result_sync.sequence_begin = (state == ST_RUN) && (pos == '0);
    result_sync.sequence_end   = (state == ST_RUN) && (pos == '1);
  end

  // In the run state the SSG must select exactly one direction number.
  a_one_vector : assert property (@(posedge clk) disable iff (reset)
                                  (adv && state == ST_RUN) |-> $onehot(sel))
    else $error("uasg: no single direction number selected (sel=%b)", sel);

endmodule
