// tb_uasg_wide: the generator at wider address widths.
//
// m = 16: a random quasi-random matrix (lower triangular with a unit
// diagonal, hence full rank) is run for a whole period of 65536 addresses;
// every address must match the closed-form model and occur exactly once,
// and the sequence must return to A(0). m = 32: a random full-rank matrix of
// the same form, random A and B, 20000 addresses against the model with
// the begin/end markers silent away from the period ends.
module tb_uasg_wide;
  import uasg_pkg::*;
  import uasg_tb_pkg::*;

  logic clk, reset, ce, start;
  int checks = 0, failures = 0;

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- m = 16 ----
  logic [15:0] a16_init, b16_init, r16, c16, wd16;
  logic        we16;
  logic [3:0]  wi16;
  uasg_sync_t  s16;
  uasg #(.M(16)) dut16 (.clk, .reset, .ce, .start, .a_init(a16_init), .b_init(b16_init),
                        .matrix_load_valid(we16), .matrix_load_index(wi16),
                        .matrix_load_direction_number(wd16),
                        .result(r16), .result_count(c16), .result_sync(s16));

  // ---- m = 32 ----
  logic [31:0] a32_init, b32_init, r32, c32, wd32;
  logic        we32;
  logic [4:0]  wi32;
  uasg_sync_t  s32;
  uasg #(.M(32)) dut32 (.clk, .reset, .ce, .start, .a_init(a32_init), .b_init(b32_init),
                        .matrix_load_valid(we32), .matrix_load_index(wi32),
                        .matrix_load_direction_number(wd32),
                        .result(r32), .result_count(c32), .result_sync(s32));

  matrix_t v16, v32;
  bit seen [65536];

  // Row i (v_(i+1)) of a lower triangular matrix with unit diagonal, in the
  // written orientation: beta_j(i) = 0 for j > i, beta_i(i) = 1.
  function automatic vec_t tri_row(int i, int m);
    vec_t r = vec_t'($urandom) & mask(m);
    vec_t keep = ~((vec_t'(1) << (m - 1 - i)) - 1);   // bits m-1 .. m-1-i
    r &= keep & mask(m);
    r |= vec_t'(1) << (m - 1 - i);
    return r;
  endfunction

  initial begin
    reset = 1; ce = 0; start = 0;
    a16_init = 0; b16_init = 0; we16 = 0; wi16 = 0; wd16 = 0;
    a32_init = 0; b32_init = 0; we32 = 0; wi32 = 0; wd32 = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    for (int i = 0; i < 32; i++) begin
      v16[i] = (i < 16) ? tri_row(i, 16) : '0;
      v32[i] = tri_row(i, 32);
      we16 = (i < 16); wi16 = 4'(i); wd16 = 16'(v16[i]);
      we32 = 1; wi32 = 5'(i); wd32 = v32[i];
      @(posedge clk); #1;
    end
    we16 = 0; we32 = 0;
    checks++;
    if (rank(v16, 16) != 16 || rank(v32, 32) != 32) begin failures++; $display("rank"); end

    a16_init = 16'($urandom); b16_init = 16'($urandom);
    a32_init = $urandom; b32_init = $urandom;
    start = 1; ce = 1;
    @(posedge clk); #1;
    start = 0;
    @(posedge clk); #1;    // fill cycle
    foreach (seen[k]) seen[k] = 0;
    for (int n = 0; n <= 65536; n++) begin
      logic [15:0] e16;
      e16 = 16'(ref_addr(v16, vec_t'(a16_init), vec_t'(b16_init), n, 16));
      checks++;
      if (r16 !== e16 || c16 !== 16'(b16_init + 16'(n)) || !s16.sequence_valid ||
          s16.sequence_end != (n == 65535)) begin
        failures++;
        if (failures < 10) $display("m=16 n=%0d A=%h expected %h", n, r16, e16);
      end
      if (n < 65536) begin
        checks++;
        if (seen[r16]) begin failures++; $display("m=16 address %h repeated", r16); end
        seen[r16] = 1;
      end else begin
        checks++;
        if (r16 !== a16_init || !s16.sequence_begin) begin failures++; $display("m=16 no wrap"); end
      end
      if (n < 20000) begin
        logic [31:0] e32;
        e32 = 32'(ref_addr(v32, vec_t'(a32_init), vec_t'(b32_init), n, 32));
        checks++;
        if (r32 !== e32 || c32 !== b32_init + 32'(n) || s32.sequence_end ||
            (s32.sequence_begin != (n == 0)) || !s32.sequence_valid) begin
          failures++;
          if (failures < 10) $display("m=32 n=%0d A=%h expected %h", n, r32, e32);
        end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
