// tb_uasg: end-to-end test of the generator at its default width (m = 8).
//
// It loads, one after another, the seven generation matrices of the authors'
// m = 8 demonstration (two Sobol-type, three Gray-code, two counter
// sequences), runs each for more than a full period and compares every
// address, count and marker with the closed-form model of uasg_tb_pkg. For
// three of them the expected order is also known in plain terms and checked
// directly: the linear counter gives A(n) = n, the first Gray-code matrix
// the standard Gray code n xor (n >> 1), the first Sobol matrix the
// bit-reversed Gray code. Over one period the number of distinct addresses
// must be 2^rank(V).
// Further runs exercise: a nonzero initial address (bit inversion), a
// shifted start B(0) = l with A(0) = A(l) (shifted copy), the reverse order
// from the last address of the forward order (for a shifted order with the
// counter started at 2^m - l), pauses on ce, the fill cycle,
// the wrap into a second period, a reset during a run and a reload of the
// matrix. Each of these is counted and must happen at least once.
module tb_uasg;
  import uasg_pkg::*;
  import uasg_tb_pkg::*;

  localparam int M = UASG_M;
  localparam int N = 1 << M;

  logic clk, reset, ce, start;
  logic [M-1:0] a_init, b_init;
  logic matrix_load_valid;
  logic [$clog2(M)-1:0] matrix_load_index;
  logic [M-1:0] matrix_load_direction_number;
  logic [M-1:0] result, result_count;
  uasg_sync_t result_sync;

  int checks = 0, failures = 0;
  int n_fill = 0, n_pause = 0, n_wrap = 0, n_invert = 0, n_shift = 0,
      n_down = 0, n_reset = 0, n_reload = 0, n_begin = 0, n_end = 0;

  uasg dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  matrix_t v;
  logic [M-1:0] seq [N];   // addresses of the last run's first period

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic load_matrix(input logic [M-1:0] rows [M]);
    for (int k = 0; k < M; k++) begin
      matrix_load_valid = 1;
      matrix_load_index = ($clog2(M))'(k);
      matrix_load_direction_number = rows[k];
      v[k] = vec_t'(rows[k]);
      @(posedge clk); #1;
    end
    matrix_load_valid = 0;
    n_reload++;
  endtask

  // Start a sequence and follow it for `steps` addresses, with random
  // pauses when `pauses` is set. Every address lands in seq[].
  task automatic run(input logic [M-1:0] a0, input logic [M-1:0] b0,
                     input int steps, input bit pauses, input string name);
    a_init = a0; b_init = b0; start = 1; ce = 1;
    @(posedge clk); #1;
    start = 0;
    check(!result_sync.sequence_valid, {name, ": valid during fill"});
    ce = 1;
    @(posedge clk); #1;   // fill cycle
    n_fill++;
    for (int n = 0; n < steps; n++) begin
      logic [M-1:0] exp_a;
      exp_a = M'(ref_addr(v, vec_t'(a0), vec_t'(b0), n, M));
      check(result_sync.sequence_valid, $sformatf("%s n=%0d valid", name, n));
      check(result === exp_a,
            $sformatf("%s n=%0d A=%b expected %b", name, n, result, exp_a));
      check(result_count === M'(b0 + M'(n)),
            $sformatf("%s n=%0d count=%0d", name, n, result_count));
      check(result_sync.sequence_begin === (n % N == 0) &&
            result_sync.sequence_end === (n % N == N - 1),
            $sformatf("%s n=%0d markers %b", name, n, result_sync));
      if (result_sync.sequence_begin) n_begin++;
      if (result_sync.sequence_end) n_end++;
      if (n < N) seq[n] = result;
      if (n == N) begin
        n_wrap++;
        check(result === a0, {name, ": no return to A(0) after a period"});
      end
      if (pauses && ($urandom % 5) == 0) begin
        logic [M-1:0] held = result;
        ce = 0;
        repeat (1 + $urandom % 3) @(posedge clk);
        #1;
        n_pause++;
        check(result === held && result_sync.sequence_valid, {name, ": pause moved the address"});
        ce = 1;
      end
      @(posedge clk); #1;
    end
  endtask

  function automatic int distinct();
    bit seen [N];
    int c = 0;
    foreach (seen[k]) seen[k] = 0;
    for (int k = 0; k < N; k++) if (!seen[seq[k]]) begin seen[seq[k]] = 1; c++; end
    return c;
  endfunction

  function automatic logic [M-1:0] bitrev(logic [M-1:0] x);
    for (int k = 0; k < M; k++) bitrev[k] = x[M-1-k];
  endfunction

  // Generation matrices of the m = 8 demonstration, cell 0 = v_1.
  localparam logic [M-1:0] SOBOL_MIN [M] = '{8'b10000000, 8'b01000000, 8'b00100000, 8'b00010000,
                                             8'b00001000, 8'b00000100, 8'b00000010, 8'b00000001};
  localparam logic [M-1:0] SOBOL_MAX [M] = '{8'b10000000, 8'b11000000, 8'b11100000, 8'b11110000,
                                             8'b11111000, 8'b11111100, 8'b11111110, 8'b11111111};
  localparam logic [M-1:0] GRAY_1    [M] = '{8'b00000001, 8'b00000010, 8'b00000100, 8'b00001000,
                                             8'b00010000, 8'b00100000, 8'b01000000, 8'b10000000};
  localparam logic [M-1:0] GRAY_2    [M] = '{8'b11111111, 8'b11111110, 8'b11111100, 8'b11111000,
                                             8'b11110000, 8'b11100000, 8'b11000000, 8'b10000000};
  localparam logic [M-1:0] GRAY_3    [M] = '{8'b11111110, 8'b11111101, 8'b11111011, 8'b11110111,
                                             8'b11101111, 8'b11011111, 8'b10111111, 8'b01111111};
  localparam logic [M-1:0] COUNTER_1 [M] = '{8'b11111111, 8'b00000011, 8'b00000101, 8'b00001001,
                                             8'b00010001, 8'b00100001, 8'b01000001, 8'b10000001};
  localparam logic [M-1:0] COUNTER_2 [M] = '{8'b00000001, 8'b00000011, 8'b00000111, 8'b00001111,
                                             8'b00011111, 8'b00111111, 8'b01111111, 8'b11111111};

  task automatic demo(input logic [M-1:0] rows [M], input string name);
    int r, d;
    load_matrix(rows);
    run('0, '0, N + 8, 1'b0, name);
    r = rank(v, M);
    d = distinct();
    check(d == (1 << r), $sformatf("%s: %0d distinct addresses, rank %0d", name, d, r));
    $display("%-10s rank %0d, %0d distinct addresses per period", name, r, d);
  endtask

  initial begin
    reset = 1; ce = 0; start = 0; a_init = 0; b_init = 0;
    matrix_load_valid = 0; matrix_load_index = 0; matrix_load_direction_number = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    check(!result_sync.sequence_valid && result === '0, "reset state");

    demo(SOBOL_MIN, "SOBOL_MIN");
    for (int n = 0; n < N; n++) check(seq[n] === bitrev(M'(n ^ (n >> 1))), "Sobol-min closed form");
    demo(SOBOL_MAX, "SOBOL_MAX");
    demo(GRAY_1, "GRAY_1");
    for (int n = 0; n < N; n++) check(seq[n] === M'(n ^ (n >> 1)), "Gray closed form");
    demo(GRAY_2, "GRAY_2");
    demo(GRAY_3, "GRAY_3");
    demo(COUNTER_1, "COUNTER_1");
    demo(COUNTER_2, "COUNTER_2");
    for (int n = 0; n < N; n++) check(seq[n] === M'(n), "linear closed form");

    // Nonzero A(0): same order, chosen bits inverted.
    begin
      logic [M-1:0] base [N];
      automatic logic [M-1:0] inv = 8'h5A;
      base = seq;
      run(inv, '0, N, 1'b1, "inverted");
      for (int n = 0; n < N; n++) check(seq[n] === (base[n] ^ inv), "inversion by A(0)");
      n_invert++;
    end

    // Shifted copy: B(0) = l and A(0) = A(l) of the unshifted run.
    load_matrix(SOBOL_MAX);
    run('0, '0, N, 1'b0, "unshifted");
    begin
      logic [M-1:0] base [N];
      automatic int l = 77;
      base = seq;
      run(base[l], M'(l), N, 1'b1, "shifted");
      for (int n = 0; n < N; n++) check(seq[n] === base[(n + l) % N], "shifted copy");
      n_shift++;
      // Reverse order: start at the last address of the forward order.
      run(base[N-1], '0, N, 1'b1, "down");
      for (int n = 0; n < N; n++) check(seq[n] === base[N-1-n], "down sequence");
      n_down++;
      // Reverse of a shifted order: the counter must start at 2^m - l.
      base = seq;
      run(base[0], M'(l), N, 1'b0, "shifted up");
      base = seq;
      run(base[N-1], M'(N - l), N, 1'b1, "shifted down");
      for (int n = 0; n < N; n++) check(seq[n] === base[N-1-n], "down sequence of a shifted order");
      n_down++;
    end

    // Reset in the middle of a run: the generator must go idle.
    a_init = '0; b_init = '0; start = 1; ce = 1;
    @(posedge clk); #1;
    start = 0;
    repeat (20) @(posedge clk);
    #1;
    reset = 1;
    @(posedge clk); #1;
    reset = 0;
    check(!result_sync.sequence_valid && result === '0 && result_count === '0, "reset during run");
    n_reset++;
    repeat (3) @(posedge clk);
    #1;
    check(!result_sync.sequence_valid, "idle after reset");

    $display("mechanisms: fill=%0d pause=%0d wrap=%0d invert=%0d shift=%0d down=%0d reset=%0d reload=%0d begin=%0d end=%0d",
             n_fill, n_pause, n_wrap, n_invert, n_shift, n_down, n_reset, n_reload, n_begin, n_end);
    if (n_fill == 0 || n_pause == 0 || n_wrap == 0 || n_invert == 0 || n_shift == 0 ||
        n_down == 0 || n_reset == 0 || n_reload == 0 || n_begin == 0 || n_end == 0) begin
      failures++;
      $display("FAIL some mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
