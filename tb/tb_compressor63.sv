// tb_compressor63: checks the 6-to-3 counter cell.
// 1) Every one of the 64 patterns of six bits, placed at every bit position
//    of a 16-bit vector: the three output bits at that position must be the
//    binary count of ones (weights 1, 2, 4).
// 2) Random 64-bit vectors: s0 + s1 + s2 must equal the sum of the six
//    inputs modulo 2^64.
module tb_compressor63;

  localparam int W = 64;

  logic [W-1:0] a [6];
  logic [W-1:0] s0, s1, s2;

  compressor63 #(.W(W)) dut (.a(a), .s0(s0), .s1(s1), .s2(s2));

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
    for (int pos = 0; pos < W - 2; pos += 7) begin
      for (int p = 0; p < 64; p++) begin
        int cnt;
        cnt = 0;
        for (int i = 0; i < 6; i++) begin
          a[i] = '0;
          a[i][pos] = p[i];
          cnt += p[i];
        end
        #1;
        checks++;
        if ({s2[pos+2], s1[pos+1], s0[pos]} != 3'(cnt)) begin
          failures++;
          $display("FAIL: pattern %b at bit %0d gives %b%b%b", p[5:0], pos,
                   s2[pos+2], s1[pos+1], s0[pos]);
        end
      end
    end
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] ref_sum;
      ref_sum = '0;
      for (int i = 0; i < 6; i++) begin
        a[i] = {$urandom, $urandom};
        ref_sum += a[i];
      end
      #1;
      checks++;
      if (W'(s0 + s1 + s2) != ref_sum) begin
        failures++;
        $display("FAIL: random sum mismatch");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
