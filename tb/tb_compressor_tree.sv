// tb_compressor_tree: checks the three tree shapes used by the multiplier,
// 24 -> 3 (wide), 34 -> 9 and 9 -> 2, and an 11 -> 3 tree whose levels
// end in a partly filled cell. For random inputs the outputs must sum to
// the inputs modulo 2^W. For the 24 -> 3 tree the inputs are kept small
// enough that their exact sum fits in W bits, and then the outputs must
// sum to it exactly, with no bit lost.
module tb_compressor_tree;

  localparam int WA = 200;
  localparam int WB = 64;

  logic [WA-1:0] a_in [24];
  logic [WA-1:0] a_out [3];
  logic [WB-1:0] b_in [34];
  logic [WB-1:0] b_out [9];
  logic [WB-1:0] c_in [9];
  logic [WB-1:0] c_out [2];
  logic [WB-1:0] d_in [11];
  logic [WB-1:0] d_out [3];

  compressor_tree #(.W(WA), .NIN(24), .NOUT(3)) dut_a (.din(a_in), .dout(a_out));
  compressor_tree #(.W(WB), .NIN(34), .NOUT(9)) dut_b (.din(b_in), .dout(b_out));
  compressor_tree #(.W(WB), .NIN(9),  .NOUT(2)) dut_c (.din(c_in), .dout(c_out));
  compressor_tree #(.W(WB), .NIN(11), .NOUT(3)) dut_d (.din(d_in), .dout(d_out));

  int checks = 0;
  int failures = 0;

  function automatic logic [WA-1:0] rnd_a();
    logic [WA-1:0] v;
    for (int i = 0; i < (WA + 31) / 32; i++) v[32*i +: 32] = $urandom;
    return v >> 5;   // 24 such values cannot overflow WA bits
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [WA+8:0] ra, sa;
      logic [WB-1:0] rb, sb, rc, sc, rd, sd;
      ra = '0; rb = '0; rc = '0; rd = '0;
      for (int i = 0; i < 24; i++) begin a_in[i] = rnd_a(); ra += (WA+9)'(a_in[i]); end
      for (int i = 0; i < 34; i++) begin b_in[i] = {$urandom, $urandom}; rb += b_in[i]; end
      for (int i = 0; i < 9; i++)  begin c_in[i] = {$urandom, $urandom}; rc += c_in[i]; end
      for (int i = 0; i < 11; i++) begin d_in[i] = {$urandom, $urandom}; rd += d_in[i]; end
      #1;
      sa = '0; sb = '0; sc = '0; sd = '0;
      for (int i = 0; i < 3; i++) sa += (WA+9)'(a_out[i]);
      for (int i = 0; i < 9; i++) sb += b_out[i];
      for (int i = 0; i < 2; i++) sc += c_out[i];
      for (int i = 0; i < 3; i++) sd += d_out[i];
      checks += 4;
      if (sa != ra) begin failures++; $display("FAIL: 24->3 exact sum"); end
      if (sb != rb) begin failures++; $display("FAIL: 34->9 sum"); end
      if (sc != rc) begin failures++; $display("FAIL: 9->2 sum"); end
      if (sd != rd) begin failures++; $display("FAIL: 11->3 sum"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
