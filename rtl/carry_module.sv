// carry_module: the two carry bits lost when the intermediate triplet
// (Z0, Z1, Z2) is shifted right by k.
//
// After each compression the low k bits of Z0 + Z1 + Z2 sum to 0 mod 2^k,
// so their true sum is 0, 2^k or 2^(k+1): the carry into bit k is 0, 1 or
// 2, and it depends only on bits k-1 and k-2 of the three terms. Let n_m
// be the number of ones among the bits k-1 and n_l among the bits k-2.
//   C_l = 1 when any of the six bits is one (otherwise the low sum is below
//         2^k and therefore zero).
//   C_m = 1 when n_m = 3, when n_m = 2 and n_l > 0, or when n_m = 1 and
//         n_l = 3.
// The carry value is C_l + C_m. Each bit is one LUT6; the LUT contents are
// the INIT values 0xFFFFFFFFFFFFFFFE (C_l) and 0xFFFEFE80FE808000 (C_m)
// with LUT input I5..I3 = the three bits k-1 and I2..I0 = the three bits
// k-2 (the published C_l constant has lost some of its F digits; an OR of
// six inputs is all ones except bit 0). Purely combinational.
module carry_module (
  input  logic [2:0] bit_hi,  // bit k-1 of Z2, Z1, Z0
  input  logic [2:0] bit_lo,  // bit k-2 of Z2, Z1, Z0
  output logic       c_l,
  output logic       c_m
);

  localparam logic [63:0] INIT_CL = 64'hFFFF_FFFF_FFFF_FFFE;
  localparam logic [63:0] INIT_CM = 64'hFFFE_FE80_FE80_8000;

  logic [5:0] idx;

  assign idx = {bit_hi, bit_lo};
  assign c_l = INIT_CL[idx];
  assign c_m = INIT_CM[idx];

endmodule
