// drmmm_top: different-radix Montgomery modular multiplier (DRMMM).
//
// Computes Z = A * B * 2^(-k*d) mod M for an odd N-bit modulus M, with
// d = ceil(N/k) digits of k bits, one digit of A per clock. The quotient
// digit is computed in a higher radix, r^t, from the low kt bits of the
// running result, through a t-stage pipeline that spans t iterations; the
// multiplier digit enters t digits higher (a_i * B * r^t) so that the
// pipeline's latency never blocks the loop. The running result is kept as
// three carry-free terms.
//
// Structure (default N = 1024, k = 16, t = 4, windows w = 4 and w' = 6):
//   precomp_table x2  i*M (16 entries) and i*M' mod 2^64 (64 entries)
//   q_pipeline        quotient digit and q*M terms
//   z_update          carry module, shift, partial products, 24 -> 3
//                     compression, triplet register
//   final_reduction   triplet sum and conditional subtraction of M
//   drmmm_ctrl        iteration sequencing
//
// Interface (all synchronous to clk, active-low synchronous reset):
//   mod_load  one-cycle pulse with mod_m = M (odd) and mod_mp =
//             -M^(-1) mod 2^(kt). Fills the tables in 2^w' - 1 cycles;
//             mod_ready is high when they are ready. Only load when no
//             multiplication is running (`ready`, or the `done` cycle).
//   start     one-cycle pulse with a_in = A, b_in = B (A, B < M), accepted
//             when `ready` is high. `done` pulses with z_out = Z < M
//             exactly d + t + 4 cycles later (72 cycles by default).
// The operands and the result are in the Montgomery domain as usual: for
// A' = A*R mod M, B' = B*R mod M (R = 2^(kd)) the output is A*B*R mod M.
module drmmm_top
  import drmmm_pkg::*;
#(
  parameter int N   = N_M_DEF,
  parameter int K   = K_DEF,
  parameter int T   = T_DEF,
  parameter int WM  = WM_DEF,
  parameter int WMP = WMP_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mod_load,
  input  logic [N-1:0]  mod_m,
  input  logic [K*T-1:0] mod_mp,
  output logic          mod_ready,
  input  logic          start,
  input  logic [N-1:0]  a_in,
  input  logic [N-1:0]  b_in,
  output logic          ready,
  output logic          done,
  output logic [N-1:0]  z_out
);

  localparam int KT    = K * T;
  localparam int D     = cdiv(N, K);
  localparam int NITER = D + T;
  localparam int W     = triplet_width(N, K, T);
  localparam int NQM   = cdiv(K, WM);

  // ---------------- modulus and precomputed tables ------------------------
  logic [N-1:0]    m_q;
  logic [N+WM-1:0] m_table  [2**WM];
  logic [KT-1:0]   mp_table [2**WMP];
  logic            m_tab_ready, mp_tab_ready;

  always_ff @(posedge clk) begin
    if (mod_load) m_q <= mod_m;
  end

  precomp_table #(.WIN(WM), .VW(N + WM)) u_mtab (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (mod_load),
    .value  ((N + WM)'(mod_m)),
    .ready  (m_tab_ready),
    .table_q(m_table)
  );

  precomp_table #(.WIN(WMP), .VW(KT)) u_mptab (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (mod_load),
    .value  (mod_mp),
    .ready  (mp_tab_ready),
    .table_q(mp_table)
  );

  assign mod_ready = m_tab_ready && mp_tab_ready;

  // ---------------- control -----------------------------------------------
  logic clr, iter_en, fin_start, fin_done;

  drmmm_ctrl #(.NITER(NITER)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .tables_ready(mod_ready),
    .fin_done    (fin_done),
    .ready       (ready),
    .clr         (clr),
    .iter_en     (iter_en),
    .fin_start   (fin_start),
    .done        (done)
  );

  // ---------------- operands ----------------------------------------------
  // A is consumed k bits per iteration, zeros are shifted in for the last t.
  logic [D*K-1:0] a_q;
  logic [N-1:0]   b_q;

  always_ff @(posedge clk) begin
    if (clr) begin
      a_q <= (D * K)'(a_in);
      b_q <= b_in;
    end else if (iter_en) begin
      a_q <= a_q >> K;
    end
  end

  // ---------------- iteration datapath ------------------------------------
  logic [W-1:0] y [3];
  logic         c_l, c_m;
  logic [W-1:0] qm_terms [NQM];
  logic [KT-1:0] y_low [3];
  logic [K-1:0]  q_digit;

  for (genvar j = 0; j < 3; j++) begin : g_low
    assign y_low[j] = y[j][KT-1:0];
  end

  q_pipeline #(.N(N), .K(K), .T(T), .WM(WM), .WMP(WMP), .W(W)) u_qpipe (
    .clk     (clk),
    .clr     (clr),
    .en      (iter_en),
    .y_low   (y_low),
    .c_l     (c_l),
    .c_m     (c_m),
    .mp_table(mp_table),
    .m_table (m_table),
    .q_digit (q_digit),
    .qm_terms(qm_terms)
  );

  z_update #(.N(N), .K(K), .T(T), .WM(WM), .W(W)) u_zupd (
    .clk     (clk),
    .clr     (clr),
    .en      (iter_en),
    .a_digit (a_q[K-1:0]),
    .b       (b_q),
    .qm_terms(qm_terms),
    .y       (y),
    .c_l     (c_l),
    .c_m     (c_m)
  );

  // ---------------- final summation and reduction -------------------------
  logic sub_taken;

  final_reduction #(.N(N), .W(W)) u_final (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (fin_start),
    .y        (y),
    .c_l      (c_l),
    .c_m      (c_m),
    .m        (m_q),
    .z        (z_out),
    .done     (fin_done),
    .sub_taken(sub_taken)
  );

  // ---------------- usage rules --------------------------------------------
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(start && !ready))
        else $error("drmmm_top: start while not ready is ignored");
      assert (!(mod_load && !ready && !done && mod_ready))
        else $error("drmmm_top: modulus loaded during a multiplication");
    end
  end

endmodule
