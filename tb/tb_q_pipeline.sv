// tb_q_pipeline: checks the quotient pipeline for t = 4 (the paper's split)
// and t = 2 (everything in one stage), with a 64-bit modulus and k = 16.
// Each cycle the testbench drives random triplet low bits and a carry
// (0, 1 or 2), with random stalls (en low). For every enabled cycle it
// computes q = (((y0 + y1 + y2 + c) mod 2^kt) * M' mod 2^kt) >> k(t-1)
// itself; that digit must appear on q_digit exactly t-1 enabled cycles
// later (zero before that, after clr), and the q*M terms must sum to
// q_digit * M.
module tb_q_pipeline;

  localparam int N = 64, K = 16, WM = 4, WMP = 6;
  localparam int T4 = 4, KT4 = K * T4, W4 = N + K * (T4 + 1) + 1;
  localparam int T2 = 2, KT2 = K * T2, W2 = N + K * (T2 + 1) + 1;
  localparam int NQM = 4;

  logic clk = 1'b0;
  logic clr, en;
  logic [N+WM-1:0] m_table [2**WM];
  logic c_l, c_m;

  logic [KT4-1:0] y4 [3];
  logic [KT4-1:0] mp4_table [2**WMP];
  logic [K-1:0]   q4;
  logic [W4-1:0]  qm4 [NQM];

  logic [KT2-1:0] y2 [3];
  logic [KT2-1:0] mp2_table [2**WMP];
  logic [K-1:0]   q2;
  logic [W2-1:0]  qm2 [NQM];

  q_pipeline #(.N(N), .K(K), .T(T4), .WM(WM), .WMP(WMP)) dut4 (
    .clk(clk), .clr(clr), .en(en), .y_low(y4), .c_l(c_l), .c_m(c_m),
    .mp_table(mp4_table), .m_table(m_table), .q_digit(q4), .qm_terms(qm4)
  );

  q_pipeline #(.N(N), .K(K), .T(T2), .WM(WM), .WMP(WMP)) dut2 (
    .clk(clk), .clr(clr), .en(en), .y_low(y2), .c_l(c_l), .c_m(c_m),
    .mp_table(mp2_table), .m_table(m_table), .q_digit(q2), .qm_terms(qm2)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [N-1:0]   m;
  logic [KT4-1:0] mp4;
  logic [KT2-1:0] mp2;
  logic [K-1:0]   hist4 [$];
  logic [K-1:0]   hist2 [$];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_outputs();
    logic [K-1:0]  e4, e2;
    logic [W4-1:0] s4;
    logic [W2-1:0] s2;
    e4 = (hist4.size() >= T4 - 1) ? hist4[hist4.size() - (T4 - 1)] : '0;
    e2 = (hist2.size() >= T2 - 1) ? hist2[hist2.size() - (T2 - 1)] : '0;
    s4 = '0; s2 = '0;
    for (int j = 0; j < NQM; j++) begin s4 += qm4[j]; s2 += qm2[j]; end
    checks += 4;
    if (q4 != e4) begin failures++; $display("FAIL: t=4 digit %h expected %h", q4, e4); end
    if (q2 != e2) begin failures++; $display("FAIL: t=2 digit %h expected %h", q2, e2); end
    if (s4 != W4'(q4) * W4'(m)) begin failures++; $display("FAIL: t=4 qM terms"); end
    if (s2 != W2'(q2) * W2'(m)) begin failures++; $display("FAIL: t=2 qM terms"); end
  endtask

  initial begin
    m   = {$urandom, $urandom} | 64'h1;
    mp4 = {$urandom, $urandom};
    mp2 = mp4[KT2-1:0];
    for (int i = 0; i < 2**WM; i++)  m_table[i]   = (N+WM)'(m) * (N+WM)'(i);
    for (int i = 0; i < 2**WMP; i++) mp4_table[i] = mp4 * KT4'(i);
    for (int i = 0; i < 2**WMP; i++) mp2_table[i] = mp2 * KT2'(i);
    clr = 1'b1; en = 1'b0; c_l = 1'b0; c_m = 1'b0;
    for (int e = 0; e < 3; e++) begin y4[e] = '0; y2[e] = '0; end
    @(negedge clk);
    clr = 1'b0;
    check_outputs();
    for (int n = 0; n < 3000; n++) begin
      int c;
      en = ($urandom % 5) != 0;
      for (int e = 0; e < 3; e++) begin
        y4[e] = {$urandom, $urandom};
        y2[e] = y4[e][KT2-1:0];
      end
      c   = $urandom % 3;
      c_l = (c != 0);
      c_m = (c == 2);
      if (en) begin
        logic [KT4-1:0] z4;
        logic [KT2-1:0] z2;
        z4 = y4[0] + y4[1] + y4[2] + KT4'(c);
        z2 = y2[0] + y2[1] + y2[2] + KT2'(c);
        z4 = z4 * mp4;
        z2 = z2 * mp2;
        hist4.push_back(z4[KT4-1 -: K]);
        hist2.push_back(z2[KT2-1 -: K]);
      end
      @(negedge clk);
      check_outputs();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
