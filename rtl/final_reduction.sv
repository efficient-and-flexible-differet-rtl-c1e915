// final_reduction: turns the redundant result of the last iteration into
// the Montgomery product, Z = y0 + y1 + y2 + C_l + C_m, then Z - M if
// Z >= M (Algorithm lines "Z_out = Z; if Z_out >= M then Z_out -= M").
//
// The true Z is below 2M < 2^(N+1), so all arithmetic is done on N+2 bits.
// Three register stages, started by a one-cycle `start`:
//   1  carry-save adder y0 + y1 + y2 -> (s, c); C_l fills the empty bit 0
//      of c and C_m becomes the carry-in of the adder;
//   2  Kogge-Stone prefix adder: Z = s + c + C_m;
//   3  prefix adder: D = Z + ~M + 1; the result is D when D is not
//      negative, Z otherwise.
// `done` pulses with the result in `z` three cycles after `start`;
// `sub_taken` tells whether the subtraction was used. The split into three
// cycles is this design's choice; the paper only says a (multi-stage)
// parallel prefix adder does the final summation and reduction.
module final_reduction #(
  parameter int N = 1024,
  parameter int W = 1105
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] y [3],
  input  logic         c_l,
  input  logic         c_m,
  input  logic [N-1:0] m,
  output logic [N-1:0] z,
  output logic         done,
  output logic         sub_taken
);

  localparam int ZW = N + 2;

  // stage 1
  logic [ZW-1:0] cs_s, cs_c;
  csa32 #(.W(ZW)) u_csa (
    .x(y[0][ZW-1:0]),
    .y(y[1][ZW-1:0]),
    .z(y[2][ZW-1:0]),
    .s(cs_s),
    .c(cs_c)
  );

  logic [ZW-1:0] s_q, c_q;
  logic          cin_q, v1_q;

  // stage 2
  logic [ZW-1:0] zsum;
  logic          zsum_co;
  prefix_adder #(.W(ZW)) u_add (
    .a   (s_q),
    .b   (c_q),
    .cin (cin_q),
    .sum (zsum),
    .cout(zsum_co)
  );

  logic [ZW-1:0] z_q;
  logic          v2_q;

  // stage 3
  logic [ZW-1:0] diff;
  logic          diff_co;
  prefix_adder #(.W(ZW)) u_sub (
    .a   (z_q),
    .b   (~ZW'(m)),
    .cin (1'b1),
    .sum (diff),
    .cout(diff_co)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
      done <= 1'b0;
    end else begin
      v1_q <= start;
      v2_q <= v1_q;
      done <= v2_q;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      s_q   <= cs_s;
      c_q   <= {cs_c[ZW-1:1], c_l};
      cin_q <= c_m;
    end
    if (v1_q) z_q <= zsum;
    if (v2_q) begin
      z         <= diff[ZW-1] ? z_q[N-1:0] : diff[N-1:0];
      sub_taken <= !diff[ZW-1];
    end
  end

  // Both carries out are unused by construction: the sum fits in ZW bits and
  // the sign of the difference is its top bit.
  logic unused_co;
  assign unused_co = zsum_co ^ diff_co;

endmodule
