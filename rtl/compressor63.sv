// compressor63: the 6-to-3 counter cell, applied bit by bit to six W-bit
// vectors.
//
// For every bit position the six input bits A0..A5 are counted and the
// three-bit count is returned as three vectors of weight 1, 2 and 4:
//   O0 = XOR of all Ai                  (bit 0 of the count)
//   O1 = XOR of all products Ai*Aj      (bit 1 of the count)
//   O2 = XOR of all products of 4 bits  (bit 2 of the count)
// Each output bit is a function of six bits only, so on an FPGA it maps to
// a single LUT6 and the cell has one LUT of delay, against two LUTs and a
// net for two cascaded carry-save adders. The printed form of O2 joins the
// 4-bit products with an AND sign; only the XOR (the fourth elementary
// symmetric function mod 2) gives bit 2 of the count, and that is what is
// built here.
//
// Outputs are already weighted: s1 = O1 << 1, s2 = O2 << 2, all truncated
// to W bits. Purely combinational. s0 + s1 + s2 equals the sum of the six
// inputs modulo 2^W.
module compressor63 #(
  parameter int W = 64
) (
  input  logic [W-1:0] a [6],
  output logic [W-1:0] s0,
  output logic [W-1:0] s1,
  output logic [W-1:0] s2
);

  logic [W-1:0] o0, o1, o2;

  always_comb begin
    o0 = a[0] ^ a[1] ^ a[2] ^ a[3] ^ a[4] ^ a[5];
    o1 = '0;
    for (int i = 0; i < 6; i++)
      for (int j = i + 1; j < 6; j++)
        o1 ^= a[i] & a[j];
    o2 = '0;
    for (int i = 0; i < 6; i++)
      for (int j = i + 1; j < 6; j++)
        for (int m = j + 1; m < 6; m++)
          for (int n = m + 1; n < 6; n++)
            o2 ^= a[i] & a[j] & a[m] & a[n];
  end

  assign s0 = o0;
  assign s1 = {o1[W-2:0], 1'b0};
  assign s2 = {o2[W-3:0], 2'b00};

endmodule
