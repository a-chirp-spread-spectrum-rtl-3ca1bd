// css_pkg: constants shared by the chirp-spread-spectrum power-line transmitter
// and receiver. The prototype uses spreading factor 10 (1,024 chips per symbol),
// a x32 oversampled chirp (32,768 points at 1.6 MHz for a 50 kHz LoRa
// bandwidth), superbins of 64 FFT bins (16 symbols, 4 bits each) and a running
// sum over Q = 64 repeated symbols. SF, the oversampling factor and Q follow the
// paper's FPGA prototype; the superbin size of 64 is this design's choice, taken
// from the superbin size the paper uses in its statistics.
package css_pkg;
  localparam int unsigned SF      = 10;              // spreading factor
  localparam int unsigned N       = 1 << SF;         // chips per symbol
  localparam int unsigned UPSCALE = 32;              // TX oversampling = RX decimation
  localparam int unsigned P       = 64;              // FFT bins per superbin
  localparam int unsigned G       = N / P;           // superbins = symbols
  localparam int unsigned Q       = 64;              // running-sum length
  localparam int unsigned DW      = 16;              // baseband sample width
  localparam int unsigned ADC_W   = 14;              // ADC sample width
  localparam int unsigned DAC_W   = 14;              // DAC code width
  localparam int unsigned FCW_W   = 32;              // NCO frequency word width

  // One complex baseband sample.
  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[DW-1:0];
  endfunction
endpackage
