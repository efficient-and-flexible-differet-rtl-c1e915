// compressor_tree: parallel compressor that reduces NIN W-bit vectors to
// NOUT vectors with the same sum modulo 2^W.
//
// The tree is built from levels of compressor63 cells (a complete tree of
// 6-to-3 counters, one LUT of delay per level on an FPGA). A level groups
// its vectors by six; a last group of four or five vectors goes through a
// partly empty cell, a last group of up to three passes through. Levels are
// added until at most max(NOUT, 3) vectors remain; when NOUT is 2 a final
// carry-save adder takes three vectors to two. Unused outputs are zero.
//
// The instances used by the multiplier (all from the paper's radix-2^16,
// four-stage design): 24 -> 12 -> 6 -> 3 for the triplet update, 34 -> 18
// -> 9 for the first quotient stage and 9 -> 6 -> 3 -> 2 for the second.
// Purely combinational. With nonnegative inputs whose exact sum fits in W
// bits, no output bit is ever lost, because every output is at most the sum.
module compressor_tree
  import drmmm_pkg::*;
#(
  parameter int W    = 64,
  parameter int NIN  = 24,
  parameter int NOUT = 3
) (
  input  logic [W-1:0] din  [NIN],
  output logic [W-1:0] dout [NOUT]
);

  localparam int NL    = c63_levels(NIN, NOUT);
  localparam int NLAST = c63_count(NIN, NL);
  localparam bit USE32 = (NOUT == 2) && (NLAST == 3);

  // Each level block holds the vectors leaving it in vout; only the first
  // c63_count(NIN, l+1) entries are live, the rest are tied to zero.
  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int NC   = c63_count(NIN, l);
    localparam int NN   = c63_count(NIN, l + 1);
    localparam int NG   = NC / 6;
    localparam int REM  = NC % 6;
    logic [W-1:0] vin  [NIN];
    logic [W-1:0] vout [NIN];
    if (l == 0) begin : g_first
      assign vin = din;
    end else begin : g_next
      assign vin = g_lvl[l-1].vout;
    end
    for (genvar g = 0; g < NG; g++) begin : g_grp
      logic [W-1:0] a [6];
      for (genvar j = 0; j < 6; j++) begin : g_a
        assign a[j] = vin[6*g+j];
      end
      compressor63 #(.W(W)) u_c63 (
        .a (a),
        .s0(vout[3*g]),
        .s1(vout[3*g+1]),
        .s2(vout[3*g+2])
      );
    end
    if (REM > 3) begin : g_part
      logic [W-1:0] a [6];
      for (genvar j = 0; j < 6; j++) begin : g_a
        if (j < REM) begin : g_live
          assign a[j] = vin[6*NG+j];
        end else begin : g_zero
          assign a[j] = '0;
        end
      end
      compressor63 #(.W(W)) u_c63 (
        .a (a),
        .s0(vout[3*NG]),
        .s1(vout[3*NG+1]),
        .s2(vout[3*NG+2])
      );
    end else begin : g_pass
      for (genvar j = 0; j < REM; j++) begin : g_p
        assign vout[3*NG+j] = vin[6*NG+j];
      end
    end
    for (genvar j = NN; j < NIN; j++) begin : g_unused
      assign vout[j] = '0;
    end
  end

  // Vectors left after the 6-to-3 levels.
  logic [W-1:0] last [NIN];
  if (NL == 0) begin : g_nolvl
    assign last = din;
  end else begin : g_haslvl
    assign last = g_lvl[NL-1].vout;
  end

  if (USE32) begin : g_csa
    csa32 #(.W(W)) u_csa (
      .x(last[0]),
      .y(last[1]),
      .z(last[2]),
      .s(dout[0]),
      .c(dout[1])
    );
  end else begin : g_direct
    for (genvar j = 0; j < NOUT; j++) begin : g_o
      if (j < NLAST) begin : g_live
        assign dout[j] = last[j];
      end else begin : g_zero
        assign dout[j] = '0;
      end
    end
  end

endmodule
