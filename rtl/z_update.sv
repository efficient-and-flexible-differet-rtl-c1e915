// z_update: one DRMMM iteration of the intermediate result,
//   Z_(i) = (Z_(i-1) + a_i * B * r^t + q * M) >> k,
// with Z kept as three full-length terms Z0 + Z1 + Z2 so that no carry is
// ever propagated inside the loop.
//
// The register holds the triplet as it leaves the compressor, before the
// shift. In each iteration:
//   * carry_module reads bits k-1 and k-2 of the three terms and gives the
//     carry c = C_l + C_m that the low k bits (which sum to 0 mod 2^k)
//     pass into bit k;
//   * the shifted terms Zj >> k and the carry become Z_(i-1) (the carry as
//     one small vector {C_m, C_l & ~C_m});
//   * pp_generator gives the k partial products of a_i * B << kt;
//   * the q*M terms arrive from the last stage of q_pipeline;
//   * a compressor_tree of 6-to-3 counters takes the 3 + 1 + k + ceil(k/w)
//     vectors (24 for the default) to three, which are registered.
// On an FPGA the critical path is one LUT (partial products, carry module
// and iM encoding in parallel) plus three counter levels: four LUTs.
//
// Each term is W = |M| + k(t+1) + 1 bits wide. The exact pre-shift sum
// stays below 2^W, and since all vectors are nonnegative every term is
// bounded by that sum, so dropping bits above W loses nothing. (The paper
// sizes the terms as kt + |M| + k + f(k,w) with f left open; f = 1 here.)
//
// Interface: `clr` zeroes the triplet (Z_(-1) = 0); `en` performs one
// iteration. y and the carry bits describe Z_(i-1) = y0 + y1 + y2 + C_l + C_m
// and are read by q_pipeline (low kt bits) and by final_reduction.
module z_update
  import drmmm_pkg::*;
#(
  parameter int N    = 1024,
  parameter int K    = 16,
  parameter int T    = 4,
  parameter int WM   = 4,
  parameter int W    = triplet_width(N, K, T),
  parameter int NQM  = (K + WM - 1) / WM
) (
  input  logic          clk,
  input  logic          clr,
  input  logic          en,
  input  logic [K-1:0]  a_digit,
  input  logic [N-1:0]  b,
  input  logic [W-1:0]  qm_terms [NQM],
  output logic [W-1:0]  y [3],        // triplet terms after the k-bit shift
  output logic          c_l,          // carry bits of that shift
  output logic          c_m
);

  localparam int NUP = 4 + K + NQM;

  logic [W-1:0] x_q [3];

  // shift and carry recovery
  for (genvar j = 0; j < 3; j++) begin : g_shift
    assign y[j] = x_q[j] >> K;
  end

  carry_module u_carry (
    .bit_hi({x_q[2][K-1], x_q[1][K-1], x_q[0][K-1]}),
    .bit_lo({x_q[2][K-2], x_q[1][K-2], x_q[0][K-2]}),
    .c_l   (c_l),
    .c_m   (c_m)
  );

  // partial products of a_i * B << kt
  logic [W-1:0] pp [K];
  pp_generator #(.W(W), .NB(N), .K(K), .T(T)) u_pp (
    .a_digit(a_digit),
    .b      (b),
    .pp     (pp)
  );

  // gather the vectors to compress
  logic [W-1:0] terms [NUP];
  always_comb begin
    terms[0] = y[0];
    terms[1] = y[1];
    terms[2] = y[2];
    terms[3] = W'({c_m, c_l & ~c_m});
    for (int j = 0; j < K; j++)   terms[4+j]   = pp[j];
    for (int j = 0; j < NQM; j++) terms[4+K+j] = qm_terms[j];
  end

  logic [W-1:0] x_next [3];
  compressor_tree #(.W(W), .NIN(NUP), .NOUT(3)) u_tree (
    .din (terms),
    .dout(x_next)
  );

  always_ff @(posedge clk) begin
    if (clr)     x_q <= '{default: '0};
    else if (en) x_q <= x_next;
  end

  // The quotient digit must make the low k bits of the new triplet vanish
  // modulo 2^k; otherwise the shift would drop value.
  logic [K-1:0] low_sum;
  assign low_sum = x_next[0][K-1:0] + x_next[1][K-1:0] + x_next[2][K-1:0];
  always_ff @(posedge clk) begin
    if (en && !clr) begin
      assert (low_sum == '0)
        else $error("z_update: low %0d bits of the triplet do not sum to 0 mod 2^k", K);
    end
  end

endmodule
