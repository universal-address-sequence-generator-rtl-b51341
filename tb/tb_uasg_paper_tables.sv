// tb_uasg_paper_tables: replays the m = 4 worked examples on the generator
// (M = 4) and compares every address with the sequences printed for them.
//
//  1. V = (1011, 1000, 0101, 1111), B(0) = 0000:
//     up order from A(0) = 0000, reverse order from A(0) = 1111, and the
//     copy with the fourth bit inverted from A(0) = 1000.
//  2. The same V with B(0) = 0011, from A(0) = 0000 and from A(0) = 1000
//     (the latter is the up order shifted by three positions).
//  3. The six standard orders: linear, 2^j with j = 2, complement, limited
//     switching activity, Gray code and the quasi-random (van der Corput)
//     order, the last printed from A(0) = 1000.
// Expected values are the printed 4-bit addresses, a4 first.
module tb_uasg_paper_tables;
  import uasg_pkg::*;

  localparam int M = 4;

  logic clk, reset, ce, start;
  logic [M-1:0] a_init, b_init;
  logic matrix_load_valid;
  logic [1:0] matrix_load_index;
  logic [M-1:0] matrix_load_direction_number;
  logic [M-1:0] result, result_count;
  uasg_sync_t result_sync;

  int checks = 0, failures = 0;

  uasg #(.M(M)) dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [M-1:0] seq_t [16];
  typedef logic [M-1:0] mat_t [M];

  task automatic load_matrix(input mat_t rows);
    for (int k = 0; k < M; k++) begin
      matrix_load_valid = 1;
      matrix_load_index = 2'(k);
      matrix_load_direction_number = rows[k];
      @(posedge clk); #1;
    end
    matrix_load_valid = 0;
  endtask

  // Runs 17 addresses (one period and the return to A(0)); the address is
  // sampled one cycle per step and must match the printed column.
  task automatic run(input logic [M-1:0] a0, input logic [M-1:0] b0,
                     input seq_t expect_a, input string name);
    a_init = a0; b_init = b0; start = 1; ce = 1;
    @(posedge clk); #1;
    start = 0;
    @(posedge clk); #1;   // fill cycle
    for (int n = 0; n <= 16; n++) begin
      checks++;
      if (result !== expect_a[n % 16] || !result_sync.sequence_valid) begin
        failures++;
        $display("FAIL %s n=%0d A=%b expected %b", name, n, result, expect_a[n % 16]);
      end
      @(posedge clk); #1;
    end
  endtask

  // --- matrix (4) and its printed sequences --------------------------------
  localparam mat_t V4 = '{4'b1011, 4'b1000, 4'b0101, 4'b1111};
  localparam seq_t UP = '{4'b0000, 4'b1011, 4'b0011, 4'b1000, 4'b1101, 4'b0110, 4'b1110, 4'b0101,
                          4'b1010, 4'b0001, 4'b1001, 4'b0010, 4'b0111, 4'b1100, 4'b0100, 4'b1111};
  localparam seq_t DOWN = '{4'b1111, 4'b0100, 4'b1100, 4'b0111, 4'b0010, 4'b1001, 4'b0001, 4'b1010,
                            4'b0101, 4'b1110, 4'b0110, 4'b1101, 4'b1000, 4'b0011, 4'b1011, 4'b0000};
  localparam seq_t UP_STAR = '{4'b1000, 4'b0011, 4'b1011, 4'b0000, 4'b0101, 4'b1110, 4'b0110, 4'b1101,
                               4'b0010, 4'b1001, 4'b0001, 4'b1010, 4'b1111, 4'b0100, 4'b1100, 4'b0111};
  localparam seq_t SH_A0 = '{4'b0000, 4'b0101, 4'b1110, 4'b0110, 4'b1101, 4'b0010, 4'b1001, 4'b0001,
                             4'b1010, 4'b1111, 4'b0100, 4'b1100, 4'b0111, 4'b1000, 4'b0011, 4'b1011};
  localparam seq_t SH_A8 = '{4'b1000, 4'b1101, 4'b0110, 4'b1110, 4'b0101, 4'b1010, 4'b0001, 4'b1001,
                             4'b0010, 4'b0111, 4'b1100, 4'b0100, 4'b1111, 4'b0000, 4'b1011, 4'b0011};

  // --- the six standard orders ---------------------------------------------
  localparam mat_t V_LIN  = '{4'b0001, 4'b0011, 4'b0111, 4'b1111};
  localparam mat_t V_2J   = '{4'b0100, 4'b1100, 4'b1101, 4'b1111};
  localparam mat_t V_COMP = '{4'b1111, 4'b1110, 4'b1100, 4'b1000};
  localparam mat_t V_LIM  = '{4'b1111, 4'b1110, 4'b1101, 4'b1011};
  localparam mat_t V_GRAY = '{4'b0001, 4'b0010, 4'b0100, 4'b1000};
  localparam mat_t V_RND  = '{4'b1000, 4'b1100, 4'b1110, 4'b1111};
  localparam seq_t S_LIN  = '{4'b0000, 4'b0001, 4'b0010, 4'b0011, 4'b0100, 4'b0101, 4'b0110, 4'b0111,
                              4'b1000, 4'b1001, 4'b1010, 4'b1011, 4'b1100, 4'b1101, 4'b1110, 4'b1111};
  localparam seq_t S_2J   = '{4'b0000, 4'b0100, 4'b1000, 4'b1100, 4'b0001, 4'b0101, 4'b1001, 4'b1101,
                              4'b0010, 4'b0110, 4'b1010, 4'b1110, 4'b0011, 4'b0111, 4'b1011, 4'b1111};
  localparam seq_t S_COMP = '{4'b0000, 4'b1111, 4'b0001, 4'b1110, 4'b0010, 4'b1101, 4'b0011, 4'b1100,
                              4'b0100, 4'b1011, 4'b0101, 4'b1010, 4'b0110, 4'b1001, 4'b0111, 4'b1000};
  localparam seq_t S_LIM  = '{4'b0000, 4'b1111, 4'b0001, 4'b1110, 4'b0011, 4'b1100, 4'b0010, 4'b1101,
                              4'b0110, 4'b1001, 4'b0111, 4'b1000, 4'b0101, 4'b1010, 4'b0100, 4'b1011};
  localparam seq_t S_GRAY = '{4'b0000, 4'b0001, 4'b0011, 4'b0010, 4'b0110, 4'b0111, 4'b0101, 4'b0100,
                              4'b1100, 4'b1101, 4'b1111, 4'b1110, 4'b1010, 4'b1011, 4'b1001, 4'b1000};
  localparam seq_t S_RND  = '{4'b1000, 4'b0000, 4'b1100, 4'b0100, 4'b1010, 4'b0010, 4'b1110, 4'b0110,
                              4'b1001, 4'b0001, 4'b1101, 4'b0101, 4'b1011, 4'b0011, 4'b1111, 4'b0111};

  initial begin
    reset = 1; ce = 0; start = 0; a_init = 0; b_init = 0;
    matrix_load_valid = 0; matrix_load_index = 0; matrix_load_direction_number = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;

    load_matrix(V4);
    run(4'b0000, 4'b0000, UP, "up");
    run(4'b1111, 4'b0000, DOWN, "down");
    run(4'b1000, 4'b0000, UP_STAR, "up, bit 4 inverted");
    run(4'b0000, 4'b0011, SH_A0, "B(0)=0011 A(0)=0000");
    run(4'b1000, 4'b0011, SH_A8, "B(0)=0011 A(0)=1000");

    load_matrix(V_LIN);  run(4'b0000, 4'b0000, S_LIN,  "linear");
    load_matrix(V_2J);   run(4'b0000, 4'b0000, S_2J,   "2^j, j=2");
    load_matrix(V_COMP); run(4'b0000, 4'b0000, S_COMP, "complement");
    load_matrix(V_LIM);  run(4'b0000, 4'b0000, S_LIM,  "limited");
    load_matrix(V_GRAY); run(4'b0000, 4'b0000, S_GRAY, "gray code");
    load_matrix(V_RND);  run(4'b1000, 4'b0000, S_RND,  "van der Corput");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
