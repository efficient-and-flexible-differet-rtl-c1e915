// tb_precomp_table: loads several values into a 16-entry, 40-bit table and
// checks that `ready` rises exactly 15 cycles after `load` and that entry i
// holds i * V mod 2^40.
module tb_precomp_table;

  localparam int WIN = 4, VW = 40;

  logic          clk = 1'b0;
  logic          rst_n, load, ready;
  logic [VW-1:0] value;
  logic [VW-1:0] table_q [2**WIN];

  precomp_table #(.WIN(WIN), .VW(VW)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .value(value), .ready(ready), .table_q(table_q)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; load = 1'b0; value = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20; n++) begin
      int cyc;
      logic [VW-1:0] v;
      v = (n == 0) ? '1 : {8'($urandom), $urandom};
      value = v;
      load  = 1'b1;
      @(negedge clk);
      load  = 1'b0;
      value = '0;
      cyc = 0;
      while (!ready && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2**WIN - 1) begin failures++; $display("FAIL: ready after %0d cycles", cyc); end
      for (int i = 0; i < 2**WIN; i++) begin
        checks++;
        if (table_q[i] != VW'(v * VW'(i))) begin failures++; $display("FAIL: entry %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
