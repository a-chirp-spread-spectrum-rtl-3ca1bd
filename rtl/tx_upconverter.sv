// tx_upconverter: quadrature mixer and adder that move the complex baseband
// chirp to the passband carrier and form the single real DAC sample.
//
// The two products ch_re*lo_re and ch_im*lo_im are formed in parallel and then
// added. With the local oscillator lo = exp(-j*w*t) = cos - j*sin this gives
// ch_re*cos - ch_im*sin = Re{c * exp(+j*w*t)}: the chirp centred on +f_c. The
// Q1.15 x Q1.15 sum is scaled to OW bits and offset by half scale, which is
// the offset-binary code a DAC expects.
//
// Timing: two pipeline stages on the sample enable (products, then sum), so
// dac follows its inputs by two enables.
// Paper: complex multiplier with two outputs followed by an adder, then a DAC.
// Own choices: the assignment of the two products, 14-bit offset-binary output.
module tx_upconverter #(
  parameter int unsigned DW = 16,
  parameter int unsigned OW = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [DW-1:0] ch_re,
  input  logic signed [DW-1:0] ch_im,
  input  logic signed [DW-1:0] lo_re,
  input  logic signed [DW-1:0] lo_im,
  output logic [OW-1:0]        dac
);
  logic signed [2*DW-1:0] p_re, p_im;   // the multiplier's two outputs
  logic signed [2*DW:0]   sum;

  assign sum = {p_re[2*DW-1], p_re} + {p_im[2*DW-1], p_im};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_re <= '0;
      p_im <= '0;
      dac  <= OW'(1) << (OW - 1);
    end else if (ce) begin
      p_re <= ch_re * lo_re;
      p_im <= ch_im * lo_im;
      // the sum is A^2*cos(.) with A < 2^(DW-1), so |sum| < 2^(2DW-2):
      // bit 2DW-2 is the sign and the top OW bits from there are full scale
      dac  <= sum[2*DW-2 -: OW] ^ (OW'(1) << (OW - 1));
    end
  end
endmodule
