// uasg_memory_unit: storage for the m direction numbers v_1 .. v_m, the rows
// of the m x m generation matrix V.
//
// It is a register-type memory of m cells of m bits. Reading is done by the
// SSG's one-hot select lines: v = OR over i of (sel[i] AND cell[i]), so a
// select of all zeros reads zero. Writing (the r/w line, we = 1) stores wdata
// in cell widx on the rising clock edge; cell k holds v_(k+1). A direction
// number is stored as it is written in the text, beta_1(i) in the most
// significant bit, so that it can be XORed straight into the address.
//
// The paper gives the function (m cells, read and write) but not the
// circuit; the register array with one-hot read, the binary write index and
// the clearing of all cells on reset are this design's choices. A write
// that lands in the same cycle as a read of the same cell is seen from the
// next cycle on.
module uasg_memory_unit #(
  parameter int unsigned M  = uasg_pkg::UASG_M,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic [M-1:0]  wdata,
  input  logic [M-1:0]  sel,
  output logic [M-1:0]  v
);

  logic [M-1:0] cells [M];

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int k = 0; k < M; k++) cells[k] <= '0;
    end else if (we && (32'(widx) < M)) begin
      cells[widx] <= wdata;
    end
  end

  always_comb begin
    v = '0;
    for (int k = 0; k < M; k++) v |= cells[k] & {M{sel[k]}};
  end

endmodule
