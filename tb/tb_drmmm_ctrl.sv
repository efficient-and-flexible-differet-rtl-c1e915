// tb_drmmm_ctrl: checks the sequencer with NITER = 5. A start while the
// tables are not ready must be ignored. An accepted start must give one
// `clr` cycle, exactly NITER consecutive `iter_en` cycles, then one
// `fin_start` cycle; `done` must follow fin_done and `ready` must return.
module tb_drmmm_ctrl;

  localparam int NITER = 5;

  logic clk = 1'b0;
  logic rst_n, start, tables_ready, fin_done;
  logic ready, clr, iter_en, fin_start, done;

  drmmm_ctrl #(.NITER(NITER)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .tables_ready(tables_ready),
    .fin_done(fin_done), .ready(ready), .clr(clr), .iter_en(iter_en),
    .fin_start(fin_start), .done(done)
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

  task automatic expect_bit(input logic v, input logic e, input string what);
    checks++;
    if (v !== e) begin failures++; $display("FAIL: %s = %0d, expected %0d", what, v, e); end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; tables_ready = 1'b0; fin_done = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // start without tables: ignored
    start = 1'b1;
    #1 expect_bit(clr, 1'b0, "clr without tables");
    expect_bit(ready, 1'b0, "ready without tables");
    @(negedge clk);
    start = 1'b0;
    expect_bit(iter_en, 1'b0, "iter_en after ignored start");
    tables_ready = 1'b1;
    for (int op = 0; op < 10; op++) begin
      int wait_fin;
      wait_fin = int'($urandom % 4);
      #1 expect_bit(ready, 1'b1, "ready when idle");
      start = 1'b1;
      #1 expect_bit(clr, 1'b1, "clr on start");
      @(negedge clk);
      start = 1'b0;
      for (int i = 0; i < NITER; i++) begin
        expect_bit(iter_en, 1'b1, "iter_en");
        expect_bit(fin_start, 1'b0, "fin_start during iterations");
        expect_bit(ready, 1'b0, "ready while busy");
        @(negedge clk);
      end
      expect_bit(iter_en, 1'b0, "iter_en after NITER");
      expect_bit(fin_start, 1'b1, "fin_start");
      @(negedge clk);
      expect_bit(fin_start, 1'b0, "fin_start one cycle");
      repeat (wait_fin) begin
        expect_bit(done, 1'b0, "done early");
        @(negedge clk);
      end
      fin_done = 1'b1;
      #1 expect_bit(done, 1'b1, "done");
      @(negedge clk);
      fin_done = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
