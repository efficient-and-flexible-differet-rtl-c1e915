// precomp_table: the precomputed table {i * V mod 2^VW : 0 <= i < 2^WIN}
// read by a LUT-based encoding layer.
//
// On an FPGA with a fixed modulus these multiples are constants folded into
// LUT INIT values. Here the modulus is an input, so the table is a register
// array filled after a load: a pulse on `load` captures V, entry 0 is
// cleared, and one entry per clock is written from an accumulator that
// adds V each cycle. `ready` rises 2^WIN - 1 cycles after `load` and stays
// high until the next load; the table must not be read while `ready` is
// low. Synchronous, active-low reset clears `ready` only.
module precomp_table #(
  parameter int WIN = 4,
  parameter int VW  = 1028
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [VW-1:0] value,
  output logic          ready,
  output logic [VW-1:0] table_q [2**WIN]
);

  localparam int NE = 2 ** WIN;

  logic [VW-1:0]  val_q;
  logic [VW-1:0]  acc_q;
  logic [WIN-1:0] idx_q;
  logic           busy_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      ready  <= 1'b0;
      idx_q  <= '0;
    end else if (load) begin
      busy_q     <= 1'b1;
      ready      <= 1'b0;
      idx_q      <= WIN'(1);
      val_q      <= value;
      acc_q      <= value;
      table_q[0] <= '0;
    end else if (busy_q) begin
      table_q[idx_q] <= acc_q;
      acc_q          <= acc_q + val_q;
      idx_q          <= idx_q + WIN'(1);
      if (idx_q == WIN'(NE - 1)) begin
        busy_q <= 1'b0;
        ready  <= 1'b1;
      end
    end
  end

endmodule
