// nco: numerically controlled oscillator producing the complex carrier
// exp(-j*2*pi*f_c*t) = cos(theta) - j*sin(theta).
//
// A PW-bit phase accumulator advances by the frequency control word fcw on every
// sample enable (f_c = fcw * f_s / 2^PW); its top LW bits index 2^LW-entry
// cosine and sine tables computed at elaboration. 'sync' clears the phase.
// Outputs are registered: they show the phase that was in the accumulator at
// the previous enable, one clock after that enable.
// Paper: an NCO generates the carrier f_c, output printed as exp(-j2pi f_c t).
// Own choices: 32-bit accumulator, 1,024-entry tables, 16-bit outputs.
module nco #(
  parameter int unsigned PW = 32,
  parameter int unsigned LW = 10,
  parameter int unsigned DW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic                 sync,
  input  logic [PW-1:0]        fcw,
  output logic signed [DW-1:0] lo_re,
  output logic signed [DW-1:0] lo_im
);
  logic signed [DW-1:0] cos_t [2**LW];
  logic signed [DW-1:0] sin_t [2**LW];
  logic [PW-1:0]        phase;

  initial begin
    for (int i = 0; i < 2**LW; i++) begin
      cos_t[i] = DW'($rtoi(0.999 * real'((1 << (DW-1)) - 1) * $cos(2.0 * 3.14159265358979323846 * i / real'(2**LW))));
      sin_t[i] = DW'($rtoi(0.999 * real'((1 << (DW-1)) - 1) * $sin(2.0 * 3.14159265358979323846 * i / real'(2**LW))));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || sync) begin
      phase <= '0;
      lo_re <= '0;
      lo_im <= '0;
    end else if (ce) begin
      phase <= phase + fcw;
      lo_re <= cos_t[phase[PW-1 -: LW]];
      lo_im <= -sin_t[phase[PW-1 -: LW]];
    end
  end
endmodule
