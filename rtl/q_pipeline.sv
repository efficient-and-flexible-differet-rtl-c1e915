// q_pipeline: the cross-iteration pipeline that computes the quotient digit
// q = ((Z mod r^t) * M' mod r^t) >> k(t-1) and, in its last stage, q * M.
//
// Why it works: when the digit is started, t-1 earlier digits are still in
// flight. Their combined value P already satisfies Z + P*M = 0 mod r^(t-1),
// so the t-digit product (Z mod r^t) * M' mod r^t has P as its low t-1
// digits and the new quotient digit as its top digit. Because the multiplier
// digits enter t digits higher (pp_generator), nothing added in the next
// t-1 iterations changes the low digits that matter, and the digit computed
// from Z_(i-1) is exactly the one the update needs t-1 iterations later.
//
// Stages of the default instance (k = 16, t = 4, w' = 6, w = 4), one per
// iteration, with a register after each of the first t-1:
//   1  iM' encoding of the low 64 bits of Z0, Z1, Z2 (3 x 11 terms) plus the
//      carry term c*M' (c = C_l + C_m from carry_module), and two levels of
//      6-to-3 counters: 34 -> 9 vectors;                          -> Reg 1
//   2  9 -> 2 vectors (two 6-to-3 levels and a carry-save adder);  -> Reg 2
//   3  64-bit addition; its top k bits are the quotient digit;     -> Reg 3
//   t  iM encoding of the digit: ceil(k/w) = 4 terms of q*M, fed straight
//      into the update compressor of the same iteration.
// For t = 3 stages 1 and 2 share a cycle, for t = 2 stages 1 to 3 do; for
// t > 4 the digit passes t-4 extra registers. That placement is this
// design's choice; the paper only fixes the four-stage split.
//
// Interface: `clr` zeroes every register (all in-flight digits are 0 at the
// start of a multiplication); `en` advances the pipeline by one iteration.
// The tables come from precomp_table and must be ready.
module q_pipeline
  import drmmm_pkg::*;
#(
  parameter int N    = 1024,
  parameter int K    = 16,
  parameter int T    = 4,
  parameter int WM   = 4,
  parameter int WMP  = 6,
  parameter int W    = triplet_width(N, K, T),
  parameter int NQM  = (K + WM - 1) / WM
) (
  input  logic              clk,
  input  logic              clr,
  input  logic              en,
  input  logic [K*T-1:0]    y_low [3],          // Z terms mod 2^kt, after the shift
  input  logic              c_l,                // carry bits of the shift
  input  logic              c_m,
  input  logic [K*T-1:0]    mp_table [2**WMP],  // i*M' mod 2^kt
  input  logic [N+WM-1:0]   m_table  [2**WM],   // i*M
  output logic [K-1:0]      q_digit,            // digit used in this iteration
  output logic [W-1:0]      qm_terms [NQM]      // its q*M terms
);

  localparam int KT   = K * T;
  localparam int NWE  = (KT + WMP - 1) / WMP;   // windows per triplet term
  localparam int NS1  = 3 * NWE + 1;            // 34 for the default
  localparam int NMID = c63_count(NS1, 2);      // 9 for the default

  // ---------------- stage 1: iM' encoding and 34 -> 9 --------------------
  logic [KT-1:0] s1_terms [NS1];
  for (genvar e = 0; e < 3; e++) begin : g_enc
    logic [KT-1:0] t_e [NWE];
    lut_encode_layer #(.IN_W(KT), .WIN(WMP), .VW(KT), .OUT_W(KT)) u_enc (
      .x      (y_low[e]),
      .table_q(mp_table),
      .terms  (t_e)
    );
    for (genvar j = 0; j < NWE; j++) begin : g_t
      assign s1_terms[e*NWE+j] = t_e[j];
    end
  end
  // c*M' with c in {0,1,2}: entry c of the same table (C_m implies C_l).
  assign s1_terms[NS1-1] = mp_table[{{(WMP-2){1'b0}}, c_m, c_l & ~c_m}];

  logic [KT-1:0] s1_out [NMID];
  compressor_tree #(.W(KT), .NIN(NS1), .NOUT(NMID)) u_tree1 (
    .din (s1_terms),
    .dout(s1_out)
  );

  // ---------------- stage 2: 9 -> 2 ---------------------------------------
  logic [KT-1:0] s2_in  [NMID];
  logic [KT-1:0] s2_out [2];
  if (T >= 4) begin : g_reg1
    logic [KT-1:0] r1 [NMID];
    always_ff @(posedge clk) begin
      if (clr)     r1 <= '{default: '0};
      else if (en) r1 <= s1_out;
    end
    assign s2_in = r1;
  end else begin : g_noreg1
    assign s2_in = s1_out;
  end

  compressor_tree #(.W(KT), .NIN(NMID), .NOUT(2)) u_tree2 (
    .din (s2_in),
    .dout(s2_out)
  );

  // ---------------- stage 3: addition, top digit --------------------------
  logic [KT-1:0] s3_in [2];
  if (T >= 3) begin : g_reg2
    logic [KT-1:0] r2 [2];
    always_ff @(posedge clk) begin
      if (clr)     r2 <= '{default: '0};
      else if (en) r2 <= s2_out;
    end
    assign s3_in = r2;
  end else begin : g_noreg2
    assign s3_in = s2_out;
  end

  logic [KT-1:0] q_full;
  assign q_full = s3_in[0] + s3_in[1];

  logic [K-1:0] r3;
  always_ff @(posedge clk) begin
    if (clr)     r3 <= '0;
    else if (en) r3 <= q_full[KT-1 -: K];
  end

  // extra delay for t > 4
  if (T > 4) begin : g_delay
    logic [K-1:0] dly [T-4];
    always_ff @(posedge clk) begin
      if (clr) dly <= '{default: '0};
      else if (en) begin
        dly[0] <= r3;
        for (int i = 1; i < T - 4; i++) dly[i] <= dly[i-1];
      end
    end
    assign q_digit = dly[T-5];
  end else begin : g_nodelay
    assign q_digit = r3;
  end

  // ---------------- stage t: iM encoding -----------------------------------
  lut_encode_layer #(.IN_W(K), .WIN(WM), .VW(N + WM), .OUT_W(W)) u_qm (
    .x      (q_digit),
    .table_q(m_table),
    .terms  (qm_terms)
  );

endmodule
