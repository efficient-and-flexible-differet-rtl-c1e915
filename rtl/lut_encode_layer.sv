// lut_encode_layer: fixed-window precomputed encoding of x * V.
//
// The IN_W-bit input x is cut into NWIN = ceil(IN_W / WIN) windows of WIN
// bits (the last one zero-padded). Window j selects entry x_j of the
// precomputed table {i * V}, and the selected value is moved to its weight
// 2^(WIN*j) and truncated to OUT_W bits. The NWIN outputs sum to x * V
// modulo 2^OUT_W. On an FPGA each output bit is one LUT whose INIT is a
// column of the table, so the layer costs one LUT of delay and replaces
// IN_W partial products with NWIN.
//
// Used twice in the multiplier: the iM layer (WIN = 4) turns a 16-bit
// quotient digit into four qM terms, and the iM' layer (WIN = 6) turns the
// low 64 bits of one triplet term into eleven terms of Z * M' mod 2^64.
// Purely combinational.
module lut_encode_layer #(
  parameter int IN_W  = 16,
  parameter int WIN   = 4,
  parameter int VW    = 1028,
  parameter int OUT_W = 1105,
  parameter int NWIN  = (IN_W + WIN - 1) / WIN
) (
  input  logic [IN_W-1:0]  x,
  input  logic [VW-1:0]    table_q [2**WIN],
  output logic [OUT_W-1:0] terms [NWIN]
);

  localparam int XW = NWIN * WIN;
  localparam int EW = (VW + XW > OUT_W) ? VW + XW : OUT_W;

  logic [XW-1:0] xp;
  assign xp = XW'(x);

  for (genvar j = 0; j < NWIN; j++) begin : g_win
    logic [EW-1:0] ext;
    assign ext      = EW'(table_q[xp[WIN*j +: WIN]]) << (WIN * j);
    assign terms[j] = ext[OUT_W-1:0];
  end

endmodule
