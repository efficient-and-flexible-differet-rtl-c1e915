// drmmm_run: testbench helper that drives one drmmm_top instance of a given
// size through NMOD moduli and NOPS multiplications per modulus and checks
// every result independently: Z < M and Z * 2^(kd) = A * B (mod M), plus
// the start-to-done latency of d + t + 4 cycles. When finished it raises
// `finished` and reports its check and failure counts.
module drmmm_run #(
  parameter int N    = 256,
  parameter int K    = 16,
  parameter int T    = 4,
  parameter int NMOD = 2,
  parameter int NOPS = 4
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int KT  = K * T;
  localparam int D   = (N + K - 1) / K;
  localparam int LAT = D + T + 4;
  localparam int XW  = 2 * (D * K) + K;

  logic          rst_n;
  logic          mod_load;
  logic [N-1:0]  mod_m;
  logic [KT-1:0] mod_mp;
  logic          mod_ready;
  logic          start;
  logic [N-1:0]  a_in, b_in;
  logic          ready, done;
  logic [N-1:0]  z_out;

  drmmm_top #(.N(N), .K(K), .T(T)) dut (
    .clk(clk), .rst_n(rst_n),
    .mod_load(mod_load), .mod_m(mod_m), .mod_mp(mod_mp), .mod_ready(mod_ready),
    .start(start), .a_in(a_in), .b_in(b_in),
    .ready(ready), .done(done), .z_out(z_out)
  );

  function automatic logic [N-1:0] rand_wide();
    logic [32*((N+31)/32)-1:0] v;
    for (int i = 0; i < (N + 31) / 32; i++) v[32*i +: 32] = $urandom;
    return v[N-1:0];
  endfunction

  function automatic logic [KT-1:0] neg_inv(input logic [N-1:0] m);
    logic [KT-1:0] x, ml;
    ml = KT'(m);
    x  = ml;
    for (int i = 0; i < 8; i++) x = x * (KT'(2) - ml * x);
    return -x;
  endfunction

  task automatic run_op(input logic [N-1:0] a, input logic [N-1:0] b, input logic [N-1:0] m);
    int cyc;
    logic [XW-1:0] lhs, rhs, mm;
    while (!ready) @(negedge clk);
    a_in = a; b_in = b; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 10 * LAT) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != LAT) begin
      failures++;
      $display("FAIL: N=%0d K=%0d T=%0d latency %0d, expected %0d", N, K, T, cyc, LAT);
    end
    mm  = XW'(m);
    lhs = (XW'(z_out) << (K * D)) % mm;
    rhs = (XW'(a) * XW'(b)) % mm;
    if (z_out >= m || lhs != rhs) begin
      failures++;
      $display("FAIL: N=%0d K=%0d T=%0d wrong product", N, K, T);
    end
  endtask

  initial begin
    logic [N-1:0] m;
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; mod_load = 1'b0; start = 1'b0;
    mod_m = '0; mod_mp = '0; a_in = '0; b_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int mi = 0; mi < NMOD; mi++) begin
      m = rand_wide();
      m[N-1] = 1'b1;
      m[0]   = 1'b1;
      mod_m = m; mod_mp = neg_inv(m); mod_load = 1'b1;
      @(negedge clk);
      mod_load = 1'b0;
      while (!mod_ready) @(negedge clk);
      run_op(m - 1, m - 1, m);
      for (int i = 0; i < NOPS; i++) run_op(rand_wide() % m, rand_wide() % m, m);
    end
    finished = 1'b1;
  end

endmodule
