// mag_sq: power of one FFT bin, |y|^2 = re^2 + im^2.
//
// The superbin sums of the scheme add bin powers (energies), so the square
// root of a magnitude detector is not needed. The result is exact: 2*DW bits
// unsigned (both squares are at most 2^(2DW-2)).
//
// Timing: one register stage; out_vld/out_idx follow in_vld/in_idx by one clock.
// Paper: the |.|^2 of the superbin equation and of the receiver overview; the
// FPGA diagram prints a square-root magnitude instead, which is not followed.
module mag_sq
  import css_pkg::*;
#(
  parameter int unsigned IDXW = SF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_vld,
  input  logic [IDXW-1:0]       in_idx,
  input  logic signed [DW-1:0]  in_re,
  input  logic signed [DW-1:0]  in_im,
  output logic                  out_vld,
  output logic [IDXW-1:0]       out_idx,
  output logic [2*DW-1:0]       pwr
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_vld <= 1'b0;
      out_idx <= '0;
      pwr     <= '0;
    end else begin
      out_vld <= in_vld;
      if (in_vld) begin
        out_idx <= in_idx;
        pwr     <= (2*DW)'(in_re * in_re) + (2*DW)'(in_im * in_im);
      end
    end
  end
endmodule
