// tb_lut_encode_layer: a table of i * V (18-bit V, 6-bit windows) is
// filled by the testbench; for random 16-bit x (three windows, the last one
// only four bits wide) the terms must sum to x * V modulo 2^40, and each
// term must be its window's entry at weight 2^(6j).
module tb_lut_encode_layer;

  localparam int IN_W = 16, WIN = 6, VW = 24, OUT_W = 40, NWIN = 3;

  logic [IN_W-1:0]  x;
  logic [VW-1:0]    table_q [2**WIN];
  logic [OUT_W-1:0] terms [NWIN];

  lut_encode_layer #(.IN_W(IN_W), .WIN(WIN), .VW(VW), .OUT_W(OUT_W)) dut (
    .x(x), .table_q(table_q), .terms(terms)
  );

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
    for (int r = 0; r < 5; r++) begin
      logic [17:0] v;
      v = 18'($urandom);
      for (int i = 0; i < 2**WIN; i++) table_q[i] = VW'(v) * VW'(i);
      for (int n = 0; n < 300; n++) begin
        logic [OUT_W-1:0] s;
        x = (n == 0) ? '1 : IN_W'($urandom);
        #1;
        s = '0;
        for (int j = 0; j < NWIN; j++) s += terms[j];
        checks++;
        if (s != OUT_W'(OUT_W'(x) * OUT_W'(v))) begin failures++; $display("FAIL: x=%h", x); end
        checks++;
        if (terms[2] != (OUT_W'(VW'(v) * VW'(x[15:12])) << 12)) begin
          failures++; $display("FAIL: last window term");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
