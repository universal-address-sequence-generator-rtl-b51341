// tb_uasg_xor_adder: random reset / set / enable / data traffic against a
// model of A(n) = A(n-1) xor v, reset to zero and set to a given value
// (reset wins over set, both win over the XOR).
module tb_uasg_xor_adder;
  localparam int unsigned M = 8;
  logic clk, reset, set, en;
  logic [M-1:0] a_init, v, a, model;
  int checks = 0, failures = 0;

  uasg_xor_adder dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1; set = 0; en = 0; a_init = 0; v = 0;
    @(posedge clk); #1;
    model = '0;
    for (int r = 0; r < 600; r++) begin
      reset = ($urandom % 50) == 0;
      set = ($urandom % 20) == 0;
      en = 1'($urandom % 2);
      a_init = M'($urandom);
      v = M'($urandom);
      @(posedge clk);
      if (reset) model = '0;
      else if (set) model = a_init;
      else if (en) model = model ^ v;
      #1;
      checks++;
      if (a !== model) begin
        failures++;
        $display("reset=%0d set=%0d en=%0d a=%b expected %b", reset, set, en, a, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
