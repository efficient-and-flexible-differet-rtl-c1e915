// tb_z_update: checks one iteration of the triplet update (64-bit B,
// k = 16, t = 4). Each cycle the testbench reads the current value
// Z = y0 + y1 + y2 + C_l + C_m, draws a digit a_i, an operand B and four
// q*M-like terms, the last one chosen so that the pre-shift sum is a
// multiple of 2^k (as a correct quotient digit guarantees), and after the
// clock checks that the new value is exactly
//   (Z + a_i * B * 2^(kt) + sum of the terms) / 2^k.
// It also counts the cycles with a shift carry of 1 and of 2.
module tb_z_update;

  localparam int N = 64, K = 16, T = 4, WM = 4, NQM = 4;
  localparam int W = N + K * (T + 1) + 1;

  logic          clk = 1'b0;
  logic          clr, en;
  logic [K-1:0]  a_digit;
  logic [N-1:0]  b;
  logic [W-1:0]  qm_terms [NQM];
  logic [W-1:0]  y [3];
  logic          c_l, c_m;

  z_update #(.N(N), .K(K), .T(T), .WM(WM)) dut (
    .clk(clk), .clr(clr), .en(en), .a_digit(a_digit), .b(b),
    .qm_terms(qm_terms), .y(y), .c_l(c_l), .c_m(c_m)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_c1 = 0, n_c2 = 0;

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] cur_value();
    return y[0] + y[1] + y[2] + W'(c_l) + W'(c_m);
  endfunction

  initial begin
    logic [W-1:0] expect_v;
    clr = 1'b1; en = 1'b0; a_digit = '0; b = '0;
    for (int j = 0; j < NQM; j++) qm_terms[j] = '0;
    @(negedge clk);
    clr = 1'b0;
    checks++;
    if (cur_value() != '0) begin failures++; $display("FAIL: clr"); end
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] pre, low;
      en      = ($urandom % 6) != 0;
      a_digit = K'($urandom);
      b       = {$urandom, $urandom};
      pre     = cur_value() + ((W'(a_digit) * W'(b)) << (K * T));
      for (int j = 0; j < NQM - 1; j++) begin
        qm_terms[j] = (W'({$urandom, $urandom}) * W'(16'($urandom))) << (4 * j);
        pre += qm_terms[j];
      end
      low = W'(K'(-pre));
      qm_terms[NQM-1] = (W'({$urandom, $urandom}) << K) | low;
      pre += qm_terms[NQM-1];
      expect_v = en ? (pre >> K) : cur_value();
      @(negedge clk);
      if (c_m) n_c2++;
      else if (c_l) n_c1++;
      checks++;
      if (cur_value() != expect_v) begin
        failures++;
        $display("FAIL: cycle %0d value mismatch", n);
      end
    end
    $display("carry counts: c=1 %0d, c=2 %0d", n_c1, n_c2);
    checks++;
    if (n_c1 == 0) begin failures++; $display("FAIL: carry 1 never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
