// chirp_rom: one part (real or imaginary) of the base complex chirp, as a ROM.
//
// The table holds c(m) = A*exp(j*pi*x*(x - N)/N), x = m/U the time in chips,
// m = 0..DEPTH-1, DEPTH = N*U: a linear up-chirp sweeping the LoRa band from
// -B/2 to +B/2 once per symbol, sampled U times per chip. Reading it from address m + k*U (mod DEPTH) plays the chirp
// cyclically shifted by k chips; multiplying such a chirp by the conjugate base
// chirp leaves a tone that lands in FFT bin k. With CONJ=1 the table holds the
// conjugate (down) chirp used as the receiver's dechirping reference.
// OFS_NUM/OFS_DEN (signed) shifts the sampling instants by that fraction of a
// table step. The transmitter uses -(U-1)/2: the receiver's decimating filter
// averages U samples, so its output represents the middle of its window, and
// with this offset that middle falls exactly on an integer chip time. This
// matters for the symmetric chirp: a cyclic shift by a non-integer number of
// chips gives a phase jump of 2*pi*(fraction) at the wrap point, which smears
// the dechirped tone over neighbouring bins.
// IMAG selects the imaginary part (sin) instead of the real part (cos), so a
// transmitter or receiver uses two instances, as in the paper's block diagrams.
// The contents are computed once at elaboration; the phase m^2 is reduced
// modulo 2*N*U^2 in integer arithmetic so that no precision is lost.
//
// Interface: addr in, data out one clock later (synchronous ROM read).
// Paper: 32,768-point TX ROM pair, 1,024-point RX ROM pair. Own choices: the
// chirp formula's scaling (symbol k -> bin k), 16-bit samples, amplitude.
module chirp_rom #(
  parameter int unsigned DEPTH   = 32768,
  parameter int unsigned UPSCALE = 32,
  parameter int unsigned DW      = 16,
  parameter bit          IMAG    = 1'b0,
  parameter bit          CONJ    = 1'b0,
  parameter int          OFS_NUM = 0,     // sample-time offset of OFS_NUM/OFS_DEN
  parameter int          OFS_DEN = 1,     // table steps

  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [AW-1:0]        addr,
  output logic signed [DW-1:0] data
);
  logic signed [DW-1:0] rom [DEPTH];

  initial begin
    longint modulus, a, ph;
    // phase = pi*x*(x - N)/N with x = (m + OFS_NUM/OFS_DEN)/U the time in chips;
    // with a = D*m + OFS_NUM this is pi*a*(a - N*U*D)/(N*U^2*D^2)
    modulus = 2 * longint'(DEPTH) * longint'(UPSCALE) * longint'(OFS_DEN) * longint'(OFS_DEN);
    for (int unsigned m = 0; m < DEPTH; m++) begin
      a     = longint'(OFS_DEN) * longint'(m) + longint'(OFS_NUM);
      ph    = (a * (a - longint'(DEPTH) * longint'(OFS_DEN))) % modulus;
      if (ph < 0) ph += modulus;
      if (IMAG) rom[m] = DW'($rtoi(0.999 * real'((1 << (DW-1)) - 1) * (CONJ ? -1.0 : 1.0) *
                                   $sin(2.0 * 3.14159265358979323846 * real'(ph) / real'(modulus))));
      else      rom[m] = DW'($rtoi(0.999 * real'((1 << (DW-1)) - 1) *
                                   $cos(2.0 * 3.14159265358979323846 * real'(ph) / real'(modulus))));
    end
  end

  always_ff @(posedge clk) data <= rom[addr];
endmodule
