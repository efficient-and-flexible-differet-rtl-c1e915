// tb_pp_generator: the k partial products must sum to a_i * B * 2^(kt),
// for random digits and operands (k = 8, t = 2, 32-bit B), including the
// digits 0 and 2^k - 1.
module tb_pp_generator;

  localparam int W = 60, NB = 32, K = 8, T = 2;

  logic [K-1:0]  a_digit;
  logic [NB-1:0] b;
  logic [W-1:0]  pp [K];

  pp_generator #(.W(W), .NB(NB), .K(K), .T(T)) dut (.a_digit(a_digit), .b(b), .pp(pp));

  int checks = 0;
  int failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      logic [W-1:0] s, r;
      a_digit = (n == 0) ? '0 : (n == 1) ? '1 : K'($urandom);
      b       = $urandom;
      #1;
      s = '0;
      for (int j = 0; j < K; j++) s += pp[j];
      r = (W'(a_digit) * W'(b)) << (K * T);
      checks++;
      if (s != r) begin failures++; $display("FAIL: a=%h b=%h", a_digit, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
