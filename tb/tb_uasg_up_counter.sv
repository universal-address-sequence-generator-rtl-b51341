// tb_uasg_up_counter: self-checking test of the m-bit up-counter.
// Random load / increment traffic is compared cycle by cycle with a model;
// a run of 2^m increments from a random start checks the wrap to zero.
module tb_uasg_up_counter;
  localparam int unsigned M = 8;
  logic clk, load, inc;
  logic [M-1:0] b_init, b, model;
  int checks = 0, failures = 0;

  uasg_up_counter #(.M(M)) dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic l, logic i, logic [M-1:0] bi);
    load = l; inc = i; b_init = bi;
    @(posedge clk);
    if (l) model = bi; else if (i) model = model + 1'b1;
    #1;
    checks++;
    if (b !== model) begin
      failures++;
      $display("mismatch load=%0d inc=%0d b=%h expected %h", l, i, b, model);
    end
  endtask

  initial begin
    load = 0; inc = 0; b_init = 0;
    step(1, 0, 8'hA5);
    for (int k = 0; k < 500; k++)
      step(($urandom % 10) == 0, 1'($urandom % 2), M'($urandom));
    // full period from 0xF0: must pass 0xFF -> 0x00 and return to 0xF0
    step(1, 1, 8'hF0);
    for (int k = 0; k < 256; k++) step(0, 1, '0);
    checks++;
    if (b !== 8'hF0) begin failures++; $display("period wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
