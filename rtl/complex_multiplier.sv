// complex_multiplier: registered complex product p = a * b.
//
// p_re = a_re*b_re - a_im*b_im and p_im = a_re*b_im + a_im*b_re are computed
// at full precision, shifted right by SHIFT (15 for Q1.15 operands) and
// saturated to DW bits. The receiver uses it twice: to mix the real ADC stream
// down with the NCO (b = carrier, a_im = 0) and to dechirp the decimated
// baseband with the reference chirp.
//
// Timing: one register stage; vld is ce delayed by one clock.
// Paper: 'complex multiplier' in downconversion and dechirping. Own choices:
// widths, truncation and saturation.
module complex_multiplier
  import css_pkg::*;
#(
  parameter int unsigned SHIFT = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [DW-1:0] a_re,
  input  logic signed [DW-1:0] a_im,
  input  logic signed [DW-1:0] b_re,
  input  logic signed [DW-1:0] b_im,
  output logic signed [DW-1:0] p_re,
  output logic signed [DW-1:0] p_im,
  output logic                 vld
);
  logic signed [2*DW:0] full_re, full_im;

  always_comb begin
    full_re = (2*DW+1)'(a_re * b_re) - (2*DW+1)'(a_im * b_im);
    full_im = (2*DW+1)'(a_re * b_im) + (2*DW+1)'(a_im * b_re);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_re <= '0;
      p_im <= '0;
      vld  <= 1'b0;
    end else begin
      vld <= ce;
      if (ce) begin
        p_re <= sat_dw(48'(full_re >>> SHIFT));
        p_im <= sat_dw(48'(full_im >>> SHIFT));
      end
    end
  end
endmodule
