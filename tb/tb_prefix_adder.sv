// tb_prefix_adder: compares the Kogge-Stone adder with plain addition for
// a 130-bit and a 1026-bit instance: random operands, all-ones plus one,
// and carry-in 0 and 1; both the sum and the carry out are checked.
module tb_prefix_adder;

  localparam int WA = 130, WB = 1026;

  logic [WA-1:0] a1, b1, s1;
  logic [WB-1:0] a2, b2, s2;
  logic          cin, co1, co2;

  prefix_adder #(.W(WA)) dut_a (.a(a1), .b(b1), .cin(cin), .sum(s1), .cout(co1));
  prefix_adder #(.W(WB)) dut_b (.a(a2), .b(b2), .cin(cin), .sum(s2), .cout(co2));

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
    for (int n = 0; n < 600; n++) begin
      logic [WA:0] r1;
      logic [WB:0] r2;
      for (int i = 0; i < (WB + 31) / 32; i++) begin
        a2[32*i +: 32] = $urandom;
        b2[32*i +: 32] = $urandom;
      end
      if (n == 0) begin a2 = '1; b2 = '0; end
      if (n == 1) begin a2 = '1; b2 = WB'(1); end
      a1  = a2[WA-1:0];
      b1  = b2[WA-1:0];
      cin = n[0];
      #1;
      r1 = (WA+1)'(a1) + (WA+1)'(b1) + (WA+1)'(cin);
      r2 = (WB+1)'(a2) + (WB+1)'(b2) + (WB+1)'(cin);
      checks += 2;
      if ({co1, s1} != r1) begin failures++; $display("FAIL: 130-bit case %0d", n); end
      if ({co2, s2} != r2) begin failures++; $display("FAIL: 1026-bit case %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
