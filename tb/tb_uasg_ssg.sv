// tb_uasg_ssg: switching sequence generator. At m = 4 the select index must
// follow the printed switching sequences for B(0) = 0000 (4,1,2,1,3,...) and
// for the shifted start B(0) = 0011 (1,3,1,2,1,4,...), row n of the tables
// being the step that produces A(n) (row 0 is the wrap). At m = 8 random
// starts are compared with the lowest-set-bit rule. The counter value and
// the empty select of the first cycle after a load are checked too.
module tb_uasg_ssg;
  import uasg_tb_pkg::*;
  logic clk;
  logic load4, adv4, load8, adv8;
  logic [3:0] bi4, b4, sel4;
  logic [7:0] bi8, b8, sel8;
  int checks = 0, failures = 0;

  localparam int T_B0  [16] = '{4, 1, 2, 1, 3, 1, 2, 1, 4, 1, 2, 1, 3, 1, 2, 1};
  localparam int T_B3  [16] = '{1, 3, 1, 2, 1, 4, 1, 2, 1, 3, 1, 2, 1, 4, 1, 2};

  uasg_ssg #(.M(4)) dut4 (.clk, .load(load4), .adv(adv4), .b_init(bi4), .b(b4), .sel(sel4));
  uasg_ssg          dut8 (.clk, .load(load8), .adv(adv8), .b_init(bi8), .b(b8), .sel(sel8));

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int idx(logic [7:0] s);
    for (int i = 0; i < 8; i++) if (s[i]) return i + 1;
    return 0;
  endfunction

  task automatic run4(logic [3:0] b0, const ref int t [16]);
    load4 = 1; adv4 = 0; bi4 = b0;
    @(posedge clk); #1;
    load4 = 0; adv4 = 1;
    checks++;
    if (sel4 !== 0 || b4 !== b0) begin failures++; $display("m=4 load: b=%b sel=%b", b4, sel4); end
    for (int n = 1; n <= 32; n++) begin
      @(posedge clk); #1;
      checks++;
      if (!$onehot(sel4) || idx({4'b0, sel4}) != t[n % 16] || b4 !== 4'(b0 + n)) begin
        failures++;
        $display("m=4 B0=%b n=%0d sel=%b b=%b expected i=%0d", b0, n, sel4, b4, t[n % 16]);
      end
    end
    adv4 = 0;
  endtask

  initial begin
    // both instances start from a load, as after a reset
    load4 = 1; adv4 = 0; bi4 = 0; load8 = 1; adv8 = 0; bi8 = 0;
    @(posedge clk); #1;
    load8 = 0;
    run4(4'b0000, T_B0);
    run4(4'b0011, T_B3);
    for (int r = 0; r < 4; r++) begin
      automatic logic [7:0] b0 = 8'($urandom);
      load8 = 1; adv8 = 0; bi8 = b0;
      @(posedge clk); #1;
      load8 = 0;
      checks++;
      if (sel8 !== 0) begin failures++; $display("m=8 select after load"); end
      for (int n = 1; n <= 300; n++) begin
        // random pauses: the select must not move while adv is low
        adv8 = ($urandom % 4) != 0;
        while (!adv8) begin
          @(posedge clk); #1;
          adv8 = ($urandom % 4) != 0;
        end
        @(posedge clk); #1;
        adv8 = 0; #1;
        checks++;
        if (!$onehot(sel8) || idx(sel8) != t_index(vec_t'(8'(b0 + n)), 8) || b8 !== 8'(b0 + n)) begin
          failures++;
          $display("m=8 B0=%0d n=%0d sel=%b b=%0d", b0, n, sel8, b8);
        end
        // a pause after the step must keep the same select line
        if (($urandom % 3) == 0) begin
          automatic logic [7:0] held = sel8;
          repeat (1 + $urandom % 2) @(posedge clk);
          #1;
          checks++;
          if (sel8 !== held || b8 !== 8'(b0 + n)) begin
            failures++;
            $display("m=8 pause changed sel=%b (was %b)", sel8, held);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
