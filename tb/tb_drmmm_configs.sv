// tb_drmmm_configs: runs the multiplier in other configurations than the
// default, side by side:
//   * N = 1024, k = 4, t = 4: the radix-4 operating point of the published
//     comparison (1024-bit operands), here with the array-multiplier
//     datapath; 264 cycles per multiplication;
//   * N = 256, k = 16 with t = 2, 3 and 6: every register placement of the
//     quotient pipeline (stages merged, the paper's split plus delay);
//   * N = 250, k = 8, t = 3: a modulus width that is not a multiple of k.
// Each instance checks its own results (drmmm_run); this testbench adds
// them up.
module tb_drmmm_configs;

  localparam int NI = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fin [NI];
  int   chk [NI];
  int   fl  [NI];

  drmmm_run #(.N(1024), .K(4),  .T(4), .NMOD(2), .NOPS(4)) u_r4  (.clk(clk), .finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  drmmm_run #(.N(256),  .K(16), .T(2), .NMOD(3), .NOPS(6)) u_t2  (.clk(clk), .finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  drmmm_run #(.N(256),  .K(16), .T(3), .NMOD(3), .NOPS(6)) u_t3  (.clk(clk), .finished(fin[2]), .checks(chk[2]), .failures(fl[2]));
  drmmm_run #(.N(256),  .K(16), .T(6), .NMOD(3), .NOPS(6)) u_t6  (.clk(clk), .finished(fin[3]), .checks(chk[3]), .failures(fl[3]));
  drmmm_run #(.N(250),  .K(8),  .T(3), .NMOD(3), .NOPS(6)) u_odd (.clk(clk), .finished(fin[4]), .checks(chk[4]), .failures(fl[4]));

  int checks = 0;
  int failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    all_done = 1'b0;
    while (!all_done) begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NI; i++) all_done &= fin[i];
    end
    for (int i = 0; i < NI; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
