// css_tx: chirp-spread-spectrum power-line transmitter.
//
// Data flow: choose_symbol turns the value to send into a chirp shift
// (superbin symbol g -> chip g*P+P-1, times the oversampling factor) and keeps
// it for Q symbols; address_counter steps through the 2^SF*UPSCALE-point chirp
// table once per symbol, offset by that shift, so the two chirp ROMs (real and
// imaginary part) play a cyclically shifted, oversampled up-chirp; the NCO
// provides the carrier and tx_upconverter mixes the complex chirp to the
// carrier frequency and adds the two products into the real DAC code.
//
// Timing: everything advances on the sample enable 'ce', one chirp table point
// per enable. With UPSCALE = 32 and a 1.6 MHz enable the chirp spans a 50 kHz
// band and a symbol lasts 32,768 enables (20.48 ms). 'restart' starts a new
// symbol on the next enable and clears the carrier phase; the first symbol
// after reset should be started with it. The DAC code trails the ROM address
// by one clock plus two enables.
// Paper: the block structure (Choose Symbol, 15-bit address counter, a pair of
// 32,768-point ROMs, NCO, complex multiplier and adder, DAC). Own choices: the
// single sample enable for the whole datapath, widths, symbol placement, and
// sampling the table at (m - (UPSCALE-1)/2)/UPSCALE chips so that the
// receiver's 32-sample averages land on whole chips (see chirp_rom).
module css_tx
  import css_pkg::*;
#(
  parameter int unsigned SF_P      = SF,
  parameter int unsigned UPSCALE_P = UPSCALE,
  parameter int unsigned P_P       = P,
  parameter int unsigned Q_P       = Q,
  localparam int unsigned GW       = SF_P - $clog2(P_P),
  localparam int unsigned AW       = SF_P + $clog2(UPSCALE_P)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic             restart,
  input  logic [FCW_W-1:0] fcw,
  input  logic [GW-1:0]    data_in,
  output logic             new_word,
  output logic [GW-1:0]    cur_sym,
  output logic             sym_start,
  output logic [DAC_W-1:0] dac
);
  logic [AW-1:0]        shift, addr;
  logic                 sym_load;
  logic signed [DW-1:0] ch_re, ch_im, lo_re, lo_im;

  choose_symbol #(.SF(SF_P), .P(P_P), .UPSCALE(UPSCALE_P), .Q(Q_P)) u_choose (
    .clk, .rst_n, .sym_load, .data_in, .shift, .cur_sym, .new_word);

  address_counter #(.AW(AW)) u_addr (
    .clk, .rst_n, .ce, .restart, .shift, .addr, .sym_start, .sym_load);

  chirp_rom #(.DEPTH(1 << AW), .UPSCALE(UPSCALE_P), .DW(DW), .IMAG(1'b0), .CONJ(1'b0),
              .OFS_NUM(1 - int'(UPSCALE_P)), .OFS_DEN(2))
    u_rom_re (.clk, .addr, .data(ch_re));
  chirp_rom #(.DEPTH(1 << AW), .UPSCALE(UPSCALE_P), .DW(DW), .IMAG(1'b1), .CONJ(1'b0),
              .OFS_NUM(1 - int'(UPSCALE_P)), .OFS_DEN(2))
    u_rom_im (.clk, .addr, .data(ch_im));

  nco #(.PW(FCW_W), .LW(10), .DW(DW)) u_nco (
    .clk, .rst_n, .ce, .sync(restart), .fcw, .lo_re, .lo_im);

  tx_upconverter #(.DW(DW), .OW(DAC_W)) u_up (
    .clk, .rst_n, .ce, .ch_re, .ch_im, .lo_re, .lo_im, .dac);
endmodule
