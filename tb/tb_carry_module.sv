// tb_carry_module: checks the two carry bits against real arithmetic.
// Random triplets of 8-bit values are drawn with z0 + z1 + z2 = 0 mod 256
// (the state the multiplier guarantees); the true carry (z0+z1+z2) / 256
// (0, 1 or 2) must equal C_l + C_m, computed from bits 7 and 6 only. All
// three carry values must be seen. C_l must also be the OR of its six
// inputs for every input pattern.
module tb_carry_module;

  logic [2:0] bit_hi, bit_lo;
  logic       c_l, c_m;

  carry_module dut (.bit_hi(bit_hi), .bit_lo(bit_lo), .c_l(c_l), .c_m(c_m));

  int checks = 0;
  int failures = 0;
  int seen [3] = '{0, 0, 0};

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 64; p++) begin
      {bit_hi, bit_lo} = 6'(p);
      #1;
      checks++;
      if (c_l != (p != 0)) begin failures++; $display("FAIL: C_l for %b", p[5:0]); end
    end
    for (int n = 0; n < 5000; n++) begin
      logic [7:0] z0, z1, z2;
      int total;
      z0 = (n == 0) ? 8'd0 : 8'($urandom);
      z1 = (n == 0) ? 8'd0 : 8'($urandom);
      z2 = 8'(-(z0 + z1));
      total = int'(z0) + int'(z1) + int'(z2);
      bit_hi = {z2[7], z1[7], z0[7]};
      bit_lo = {z2[6], z1[6], z0[6]};
      #1;
      checks++;
      seen[total / 256]++;
      if (int'(c_l) + int'(c_m) != total / 256) begin
        failures++;
        $display("FAIL: %0d+%0d+%0d carry %0d got C_l=%0d C_m=%0d", z0, z1, z2, total / 256, c_l, c_m);
      end
    end
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (seen[c] == 0) begin failures++; $display("FAIL: carry %0d never drawn", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
