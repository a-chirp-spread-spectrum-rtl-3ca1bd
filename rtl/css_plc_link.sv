// css_plc_link: top level, one chirp-spread-spectrum transmitter and one
// LoRa-Mod-Enhanced receiver.
//
// In the field the two ends are separate devices joined by the power line:
// DAC, power amplifier, coupler, line, coupler and ADC. That analog path is
// outside this module, so the transmitter's DAC code is an output and the
// receiver's ADC sample is an input; a testbench (or a line model) closes the
// loop. Both ends share the clock and the 1.6 MHz sample enable here; each has
// its own start signal (tx_restart starts a transmitted symbol, rx_sync marks a
// symbol start in the received stream, standing in for a symbol
// synchronisation circuit).
//
// Interface: see css_tx and css_rx; the receiver's test aids (4-tap channel
// emulator, noise injection) and its S/H streams, decisions and UART line are
// brought out unchanged.
module css_plc_link
  import css_pkg::*;
#(
  localparam int unsigned GW = SF - $clog2(P),
  localparam int unsigned SW = 2 * DW + $clog2(P),
  localparam int unsigned HW = SW + $clog2(Q)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ce,
  // transmitter
  input  logic                    tx_restart,
  input  logic [FCW_W-1:0]        tx_fcw,
  input  logic [GW-1:0]           tx_data,
  output logic                    tx_new_word,
  output logic [GW-1:0]           tx_sym,
  output logic                    tx_sym_start,
  output logic [DAC_W-1:0]        dac,
  // receiver
  input  logic signed [ADC_W-1:0] adc,
  input  logic                    rx_sync,
  input  logic [FCW_W-1:0]        rx_fcw,
  input  logic                    chan_en,
  input  logic signed [DW-1:0]    taps [4],
  input  logic                    awgn_en,
  input  logic [15:0]             noise_level,
  output logic                    s_vld,
  output logic [GW-1:0]           s_idx,
  output logic [SW-1:0]           s_val,
  output logic                    mod_vld,
  output logic [GW-1:0]           mod_sym,
  output logic                    h_vld,
  output logic [GW-1:0]           h_idx,
  output logic [HW-1:0]           h_val,
  output logic                    enh_vld,
  output logic [GW-1:0]           enh_sym,
  output logic                    fft_overrun,
  output logic                    report_dropped,
  output logic                    uart_txd
);
  css_tx u_tx (
    .clk, .rst_n, .ce, .restart(tx_restart), .fcw(tx_fcw), .data_in(tx_data),
    .new_word(tx_new_word), .cur_sym(tx_sym), .sym_start(tx_sym_start), .dac);

  css_rx u_rx (
    .clk, .rst_n, .ce, .adc, .sync(rx_sync), .fcw(rx_fcw),
    .chan_en, .taps, .awgn_en, .noise_level,
    .s_vld, .s_idx, .s_val, .mod_vld, .mod_sym,
    .h_vld, .h_idx, .h_val, .enh_vld, .enh_sym,
    .fft_overrun, .report_dropped, .uart_txd);
endmodule
