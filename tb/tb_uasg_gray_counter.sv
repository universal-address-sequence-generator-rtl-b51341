// tb_uasg_gray_counter: checks the Gray counter against the printed Gray
// codes of the m = 4 worked example (B(n) = 0..15 -> B(n)_g) and, at m = 8,
// against g = b xor (b >> 1) and the one-bit-change property over a period.
module tb_uasg_gray_counter;
  logic clk;
  logic load4, inc4, load8, inc8;
  logic [3:0] b_init4, b4, g4;
  logic [7:0] b_init8, b8, g8, g8_prev;
  int checks = 0, failures = 0;

  // Gray codes of 0..15 as printed in the m = 4 example, written g4..g1.
  localparam logic [3:0] G_TABLE [16] = '{
    4'b0000, 4'b0001, 4'b0011, 4'b0010, 4'b0110, 4'b0111, 4'b0101, 4'b0100,
    4'b1100, 4'b1101, 4'b1111, 4'b1110, 4'b1010, 4'b1011, 4'b1001, 4'b1000};

  uasg_gray_counter #(.M(4)) dut4 (.clk, .load(load4), .inc(inc4), .b_init(b_init4), .b(b4), .g(g4));
  uasg_gray_counter          dut8 (.clk, .load(load8), .inc(inc8), .b_init(b_init8), .b(b8), .g(g8));

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
    load4 = 1; inc4 = 0; b_init4 = 0;
    load8 = 1; inc8 = 0; b_init8 = 8'd200;
    @(posedge clk); #1;
    load4 = 0; inc4 = 1; load8 = 0; inc8 = 1;
    for (int n = 0; n < 32; n++) begin
      checks++;
      if (b4 !== 4'(n) || g4 !== G_TABLE[n % 16]) begin
        failures++;
        $display("m=4 n=%0d b=%b g=%b expected g=%b", n, b4, g4, G_TABLE[n % 16]);
      end
      @(posedge clk); #1;
    end
    g8_prev = g8;
    for (int n = 0; n < 256; n++) begin
      @(posedge clk); #1;
      checks++;
      if (g8 !== (b8 ^ (b8 >> 1)) || !$onehot(g8 ^ g8_prev)) begin
        failures++;
        $display("m=8 b=%h g=%h prev=%h", b8, g8, g8_prev);
      end
      g8_prev = g8;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
