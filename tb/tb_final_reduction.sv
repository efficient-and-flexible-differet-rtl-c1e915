// tb_final_reduction: for a random odd 64-bit M and a random Z < 2M, the
// testbench splits Z into three terms and the two carry bits, starts the
// block and expects `done` exactly three cycles later with z = Z mod M and
// sub_taken = (Z >= M). Both outcomes must occur.
module tb_final_reduction;

  localparam int N = 64, W = 100;

  logic          clk = 1'b0;
  logic          rst_n, start;
  logic [W-1:0]  y [3];
  logic          c_l, c_m;
  logic [N-1:0]  m, z;
  logic          done, sub_taken;

  final_reduction #(.N(N), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .y(y), .c_l(c_l), .c_m(c_m),
    .m(m), .z(z), .done(done), .sub_taken(sub_taken)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_sub = 0, n_nosub = 0;

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; c_l = 1'b0; c_m = 1'b0; m = '0;
    for (int j = 0; j < 3; j++) y[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      logic [W-1:0] zv, rest, expect_z;
      int c, cyc;
      m    = {$urandom, $urandom} | 64'h1;
      zv   = (W'({$urandom, $urandom, $urandom}) % (W'(m) * 2));
      if (n == 0) zv = W'(m);
      if (n == 1) zv = W'(m) - 1;
      c    = (zv >= 2) ? int'($urandom % 3) : 0;
      rest = zv - W'(c);
      y[0] = W'({$urandom, $urandom, $urandom}) % (rest + 1);
      y[1] = W'({$urandom, $urandom, $urandom}) % (rest - y[0] + 1);
      y[2] = rest - y[0] - y[1];
      c_l  = (c != 0);
      c_m  = (c == 2);
      expect_z = (zv >= W'(m)) ? zv - W'(m) : zv;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int j = 0; j < 3; j++) y[j] = '0;   // inputs only sampled at start
      cyc = 1;
      while (!done && cyc < 20) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc != 3) begin failures++; $display("FAIL: done after %0d cycles", cyc); end
      if (W'(z) != expect_z) begin failures++; $display("FAIL: result case %0d", n); end
      if (sub_taken != (zv >= W'(m))) begin failures++; $display("FAIL: sub_taken case %0d", n); end
      if (sub_taken) n_sub++; else n_nosub++;
    end
    checks += 2;
    if (n_sub == 0)   begin failures++; $display("FAIL: subtraction never taken"); end
    if (n_nosub == 0) begin failures++; $display("FAIL: subtraction never skipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
