// tb_drmmm_top: end-to-end test of the DRMMM multiplier at its default size
// (1024-bit modulus, k = 16, t = 4).
//
// For several random odd moduli (plus the all-ones modulus) it loads M and
// M' = -M^(-1) mod 2^64 (computed here by Newton iteration), waits for the
// tables, then runs a batch of multiplications, back to back, with random
// operands and with the corner operands 0, 1 and M-1. Each result is checked
// independently of the design: Z < M and Z * 2^(kd) = A * B (mod M), using
// wide integer arithmetic. The start-to-done latency must be d + t + 4
// cycles. It also counts how often the mechanisms of the design occur -
// a shift carry (C_l), a final subtraction taken and skipped, a table
// reload, a nonzero quotient digit - and counts a failure for any that
// never occurs. A shift carry of 2 (C_m) is counted and printed but not
// required: with the 24 -> 3 counter tree of this instance the low bits of
// the triplet have not been seen to reach 2^(k+1) (tb_carry_module and
// tb_z_update drive that case directly).
module tb_drmmm_top;

  localparam int N   = 1024;
  localparam int K   = 16;
  localparam int T   = 4;
  localparam int KT  = K * T;
  localparam int D   = (N + K - 1) / K;
  localparam int LAT = D + T + 4;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          mod_load;
  logic [N-1:0]  mod_m;
  logic [KT-1:0] mod_mp;
  logic          mod_ready;
  logic          start;
  logic [N-1:0]  a_in, b_in;
  logic          ready, done;
  logic [N-1:0]  z_out;

  drmmm_top dut (
    .clk(clk), .rst_n(rst_n),
    .mod_load(mod_load), .mod_m(mod_m), .mod_mp(mod_mp), .mod_ready(mod_ready),
    .start(start), .a_in(a_in), .b_in(b_in),
    .ready(ready), .done(done), .z_out(z_out)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_c1 = 0, n_c2 = 0, n_sub = 0, n_nosub = 0, n_reload = 0, n_q = 0;

  // mechanism counters, sampled on iteration cycles
  always @(posedge clk) begin
    if (dut.iter_en) begin
      if (dut.c_l && !dut.c_m) n_c1++;
      if (dut.c_m) n_c2++;
      if (dut.q_digit != '0) n_q++;
    end
    if (dut.fin_done) begin
      if (dut.sub_taken) n_sub++;
      else n_nosub++;
    end
  end

  function automatic logic [N-1:0] rand_wide();
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  // -M^(-1) mod 2^64 by Newton iteration (x = M is correct to 3 bits).
  function automatic logic [KT-1:0] neg_inv(input logic [N-1:0] m);
    logic [KT-1:0] x, ml;
    ml = m[KT-1:0];
    x  = ml;
    for (int i = 0; i < 6; i++) x = x * (KT'(2) - ml * x);
    return -x;
  endfunction

  task automatic load_modulus(input logic [N-1:0] m);
    @(negedge clk);
    mod_m    = m;
    mod_mp   = neg_inv(m);
    mod_load = 1'b1;
    @(negedge clk);
    mod_load = 1'b0;
    while (!mod_ready) @(negedge clk);
    n_reload++;
  endtask

  task automatic check_result(input logic [N-1:0] a, input logic [N-1:0] b,
                              input logic [N-1:0] m, input logic [N-1:0] z);
    logic [2*N+K-1:0] lhs, rhs, mm;
    mm  = (2*N+K)'(m);
    lhs = ((2*N+K)'(z) << (K * D)) % mm;
    rhs = ((2*N+K)'(a) * (2*N+K)'(b)) % mm;
    checks++;
    if (z >= m || lhs != rhs) begin
      failures++;
      $display("FAIL: wrong Montgomery product (z >= m: %0d)", z >= m);
    end
  endtask

  task automatic run_op(input logic [N-1:0] a, input logic [N-1:0] b,
                        input logic [N-1:0] m);
    int cyc;
    while (!ready) @(negedge clk);
    a_in  = a;
    b_in  = b;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    a_in  = rand_wide();   // operands must be latched at start
    b_in  = rand_wide();
    cyc   = 1;
    while (!done && cyc < 10 * LAT) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != LAT) begin
      failures++;
      $display("FAIL: latency %0d, expected %0d", cyc, LAT);
    end
    check_result(a, b, m, z_out);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] m;
    rst_n    = 1'b0;
    mod_load = 1'b0;
    start    = 1'b0;
    mod_m    = '0;
    mod_mp   = '0;
    a_in     = '0;
    b_in     = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int mi = 0; mi < 5; mi++) begin
      if (mi == 4) m = '1;
      else begin
        m = rand_wide();
        m[N-1] = 1'b1;
        m[0]   = 1'b1;
        if (mi == 3) m[N-1] = 1'b0;   // a modulus shorter than N bits
      end
      load_modulus(m);
      run_op('0, rand_wide() % m, m);
      run_op(N'(1), N'(1), m);
      run_op(m - 1, m - 1, m);
      for (int i = 0; i < 6; i++) run_op(rand_wide() % m, rand_wide() % m, m);
    end

    checks++; if (n_c1 == 0)     begin failures++; $display("FAIL: carry 1 never seen"); end
    checks++; if (n_sub == 0)    begin failures++; $display("FAIL: final subtraction never taken"); end
    checks++; if (n_nosub == 0)  begin failures++; $display("FAIL: final subtraction never skipped"); end
    checks++; if (n_reload < 2)  begin failures++; $display("FAIL: no modulus reload"); end
    checks++; if (n_q == 0)      begin failures++; $display("FAIL: quotient always zero"); end
    $display("mechanisms: carry1=%0d carry2=%0d sub=%0d nosub=%0d reloads=%0d nonzero_q=%0d",
             n_c1, n_c2, n_sub, n_nosub, n_reload, n_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
