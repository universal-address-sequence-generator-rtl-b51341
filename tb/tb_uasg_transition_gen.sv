// tb_uasg_transition_gen: drives the transition generator with the Gray codes
// of a counting sequence. At m = 4 the select index must follow the printed
// switching sequence T_4 = 4,1,2,1,3,1,2,1,4,... of the worked example; at
// m = 8 it must equal the 1-based position of the lowest set bit of the
// count (m on the wrap to zero). Also checks the preset on load (no select)
// and that a pause (adv low) leaves the select in place.
module tb_uasg_transition_gen;
  import uasg_tb_pkg::*;
  logic clk;
  logic load, adv;
  logic [3:0] gi4, g4, sel4;
  logic [7:0] gi8, g8, sel8;
  int checks = 0, failures = 0;

  localparam int T4 [16] = '{4, 1, 2, 1, 3, 1, 2, 1, 4, 1, 2, 1, 3, 1, 2, 1};

  uasg_transition_gen #(.M(4)) dut4 (.clk, .load, .adv, .g_init(gi4), .g(g4), .sel(sel4));
  uasg_transition_gen          dut8 (.clk, .load, .adv, .g_init(gi8), .g(g8), .sel(sel8));

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int idx(logic [7:0] s);
    for (int i = 0; i < 8; i++) if (s[i]) return i + 1;
    return 0;
  endfunction

  initial begin
    // preset to the Gray code of B(0) = 0 (m = 4) and 77 (m = 8)
    load = 1; adv = 0;
    gi4 = 4'(gray(0, 4)); gi8 = 8'(gray(77, 8));
    g4 = 4'hF; g8 = 8'hFF;
    @(posedge clk); #1;
    load = 0;
    g4 = 4'(gray(0, 4)); g8 = 8'(gray(77, 8));
    #1;
    checks++;
    if (sel4 !== 0 || sel8 !== 0) begin failures++; $display("select after preset"); end
    adv = 1;
    for (int n = 1; n <= 40; n++) begin
      @(posedge clk); #1;
      g4 = 4'(gray(vec_t'(n % 16), 4));
      g8 = 8'(gray(vec_t'((77 + n) % 256), 8));
      #1;
      checks++;
      if (!$onehot(sel4) || idx({4'b0, sel4}) != T4[n % 16]) begin
        failures++;
        $display("m=4 n=%0d sel=%b expected index %0d", n, sel4, T4[n % 16]);
      end
      checks++;
      if (!$onehot(sel8) || idx(sel8) != t_index(vec_t'((77 + n) % 256), 8)) begin
        failures++;
        $display("m=8 n=%0d sel=%b", n, sel8);
      end
    end
    // pause: flip-flops hold, select stays
    adv = 0;
    @(posedge clk); #1;
    checks++;
    if (idx({4'b0, sel4}) != T4[40 % 16]) begin failures++; $display("pause lost select"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
