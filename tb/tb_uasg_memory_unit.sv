// tb_uasg_memory_unit: writes random direction numbers into random cells and
// reads them back through every one-hot select, compared with a shadow
// array; an all-zero select must read zero and reset must clear every cell.
module tb_uasg_memory_unit;
  localparam int unsigned M = 8;
  logic clk, reset, we;
  logic [2:0] widx;
  logic [M-1:0] wdata, sel, v;
  logic [M-1:0] shadow [M];
  int checks = 0, failures = 0;

  uasg_memory_unit dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int k = 0; k < M; k++) begin
      sel = M'(1) << k; #1;
      checks++;
      if (v !== shadow[k]) begin failures++; $display("cell %0d read %b expected %b", k, v, shadow[k]); end
    end
    sel = '0; #1;
    checks++;
    if (v !== '0) begin failures++; $display("empty select read %b", v); end
  endtask

  initial begin
    reset = 1; we = 0; widx = 0; wdata = 0; sel = 0;
    @(posedge clk); #1;
    reset = 0;
    for (int k = 0; k < M; k++) shadow[k] = '0;
    read_all();
    for (int r = 0; r < 200; r++) begin
      we = 1'($urandom % 2); widx = 3'($urandom); wdata = M'($urandom);
      sel = M'(1) << ($urandom % M);
      @(posedge clk); #1;
      if (we) shadow[widx] = wdata;
      we = 0;
      read_all();
    end
    reset = 1;
    @(posedge clk); #1;
    reset = 0;
    for (int k = 0; k < M; k++) shadow[k] = '0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
