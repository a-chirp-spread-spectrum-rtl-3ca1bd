// css_rx: LoRa-Mod / LoRa-Mod-Enhanced receiver.
//
// Data flow, at the ADC sample enable 'ce' (1.6 MHz):
//   ADC sample -> [channel_emulator] -> [+ awgn_gen noise] -> downconversion
//   (NCO and complex multiplier, real input) -> two fir_decimator (I, Q; /32)
// then, at the 50 kHz chip rate:
//   dechirping (complex multiplier with the 1,024-point conjugate chirp ROMs,
//   addressed by a 10-bit address_counter) -> fft -> mag_sq -> superbin_sum
//   (S, G superbins of P bins) -> find_max on S: LoRa-Mod decision;
//   S(g) -> moving_sum g (one per superbin, running sum over Q symbols)
//   -> H -> find_max on H: LoRa-Mod-Enhanced decision.
// S and H of every symbol are also sent out by report_framer and uart_tx.
// The channel emulator and the noise source are test aids; with chan_en and
// awgn_en low the ADC samples pass straight on.
//
// Synchronisation: 'sync' marks a symbol start in the ADC stream. It restarts
// the decimators, the chip address counter and the FFT input, so the next
// decimated sample is chip 0 of a symbol. Because energy may spread over the
// bins of a superbin, sync only has to be accurate to a few chips, and early
// rather than late (late sync moves energy to higher bins, i.e. towards the
// next superbin). Where sync comes from (e.g. a mains zero-crossing detector)
// is outside this block.
//
// Timing: decisions appear once per symbol (2^SF chips), about
// N/2*log2(N) + N clocks after the symbol's last chip; mod_* and enh_* pulse
// for one clock each, with the winning superbin index and its value.
// The clock must give at least N/2*log2(N) + N + 2 clocks per symbol (6,146
// for N = 1,024, against 32,768 ADC enables per symbol) for the FFT to keep up.
// Paper: the block structure and its order, decimation by 32, 1,024-point
// reference chirp, 4-tap channel emulator with 4-chip spacing, AWGN injection,
// recursive moving sums, UART reporting. Own choices: widths, scaling, the
// two's complement ADC format, the order of channel, noise and bypasses.
// Lint notes: the imaginary decimator's valid, the chip counter's symbol
// markers and the two maxima values are left unused on purpose (the valids
// are identical to the real path's, the markers and maxima are not needed by
// the decisions).
module css_rx
  import css_pkg::*;
#(
  parameter int unsigned SF_P  = SF,
  parameter int unsigned R_P   = UPSCALE,
  parameter int unsigned P_P   = P,
  parameter int unsigned Q_P   = Q,
  parameter int unsigned TAP_SPACING = 4 * UPSCALE,
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned BAUD   = 115_200,
  localparam int unsigned NPT  = 1 << SF_P,
  localparam int unsigned GW   = SF_P - $clog2(P_P),
  localparam int unsigned G_P  = 1 << GW,
  localparam int unsigned SW   = 2 * DW + $clog2(P_P),
  localparam int unsigned HW   = SW + $clog2(Q_P)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [ADC_W-1:0] adc,
  input  logic                 sync,
  input  logic [FCW_W-1:0]     fcw,
  // test aids
  input  logic                 chan_en,
  input  logic signed [DW-1:0] taps [4],
  input  logic                 awgn_en,
  input  logic [15:0]          noise_level,
  // LoRa-Mod statistic and decision
  output logic                 s_vld,
  output logic [GW-1:0]        s_idx,
  output logic [SW-1:0]        s_val,
  output logic                 mod_vld,
  output logic [GW-1:0]        mod_sym,
  // LoRa-Mod-Enhanced statistic and decision
  output logic                 h_vld,
  output logic [GW-1:0]        h_idx,
  output logic [HW-1:0]        h_val,
  output logic                 enh_vld,
  output logic [GW-1:0]        enh_sym,
  // status and report
  output logic                 fft_overrun,
  output logic                 report_dropped,
  output logic                 uart_txd
);
  // ---------------- ADC-rate front end ----------------
  logic signed [DW-1:0] x_in, x_chan, noise, x_noisy;
  assign x_in = {adc, {(DW-ADC_W){1'b0}}};

  channel_emulator #(.TAPS(4), .SPACING(TAP_SPACING)) u_chan (
    .clk, .rst_n, .ce, .din(x_in), .tap(taps), .dout(x_chan));

  awgn_gen u_awgn (.clk, .rst_n, .ce, .level(noise_level), .noise);

  always_ff @(posedge clk) begin
    if (!rst_n) x_noisy <= '0;
    else if (ce)
      x_noisy <= sat_dw(48'(chan_en ? x_chan : x_in) + 48'(awgn_en ? noise : DW'(0)));
  end

  logic signed [DW-1:0] lo_re, lo_im, bb_re, bb_im;
  logic                 bb_vld;
  nco #(.PW(FCW_W), .LW(10), .DW(DW)) u_nco (
    .clk, .rst_n, .ce, .sync(1'b0), .fcw, .lo_re, .lo_im);

  complex_multiplier u_downconv (
    .clk, .rst_n, .ce, .a_re(x_noisy), .a_im(DW'(0)), .b_re(lo_re), .b_im(lo_im),
    .p_re(bb_re), .p_im(bb_im), .vld(bb_vld));

  // ---------------- decimation to the chip rate ----------------
  logic signed [DW-1:0] dec_re, dec_im;
  logic                 dec_vld, dec_vld_im;
  fir_decimator #(.R(R_P)) u_dec_re (
    .clk, .rst_n, .ce(bb_vld), .restart(sync), .din(bb_re), .dout(dec_re), .vld(dec_vld));
  fir_decimator #(.R(R_P)) u_dec_im (
    .clk, .rst_n, .ce(bb_vld), .restart(sync), .din(bb_im), .dout(dec_im), .vld(dec_vld_im));

  // ---------------- dechirping ----------------
  logic [SF_P-1:0]      chip_addr;
  logic                 chip_start, chip_load, dec_vld_d;
  logic signed [DW-1:0] ref_re, ref_im, dc_re, dc_im;
  logic                 dc_vld;

  address_counter #(.AW(SF_P)) u_chip_addr (
    .clk, .rst_n, .ce(dec_vld), .restart(sync), .shift('0), .addr(chip_addr),
    .sym_start(chip_start), .sym_load(chip_load));

  // the reference is sampled at integer chip times, where the transmitter's
  // sampling offset puts the centres of the decimator's windows
  chirp_rom #(.DEPTH(NPT), .UPSCALE(1), .DW(DW), .IMAG(1'b0), .CONJ(1'b1))
    u_ref_re (.clk, .addr(chip_addr), .data(ref_re));
  chirp_rom #(.DEPTH(NPT), .UPSCALE(1), .DW(DW), .IMAG(1'b1), .CONJ(1'b1))
    u_ref_im (.clk, .addr(chip_addr), .data(ref_im));

  // the ROM answers one clock after the decimator output, which then holds
  always_ff @(posedge clk) begin
    if (!rst_n || sync) dec_vld_d <= 1'b0;
    else                dec_vld_d <= dec_vld;
  end

  complex_multiplier u_dechirp (
    .clk, .rst_n, .ce(dec_vld_d), .a_re(dec_re), .a_im(dec_im), .b_re(ref_re), .b_im(ref_im),
    .p_re(dc_re), .p_im(dc_im), .vld(dc_vld));

  // ---------------- FFT and bin power ----------------
  logic                 bin_vld, pw_vld;
  logic [SF_P-1:0]      bin_idx, pw_idx;
  logic signed [DW-1:0] bin_re, bin_im;
  logic [2*DW-1:0]      pwr;

  fft #(.NPT(NPT)) u_fft (
    .clk, .rst_n, .restart(sync), .in_vld(dc_vld), .in_re(dc_re), .in_im(dc_im),
    .out_vld(bin_vld), .out_idx(bin_idx), .out_re(bin_re), .out_im(bin_im),
    .overrun(fft_overrun));

  mag_sq #(.IDXW(SF_P)) u_pwr (
    .clk, .rst_n, .in_vld(bin_vld), .in_idx(bin_idx), .in_re(bin_re), .in_im(bin_im),
    .out_vld(pw_vld), .out_idx(pw_idx), .pwr);

  // ---------------- LoRa-Mod: superbins ----------------
  superbin_sum #(.NPT(NPT), .P(P_P), .IW(2*DW)) u_superbin (
    .clk, .rst_n, .in_vld(pw_vld), .in_idx(pw_idx), .in_pwr(pwr),
    .s_vld, .s_idx, .s_val);

  logic [SW-1:0] mod_val;
  find_max #(.G(G_P), .VW(SW)) u_max_mod (
    .clk, .rst_n, .in_vld(s_vld), .in_idx(s_idx), .in_val(s_val),
    .dec_vld(mod_vld), .dec_idx(mod_sym), .dec_val(mod_val));

  // ---------------- LoRa-Mod-Enhanced: one running sum per superbin ----------------
  logic [HW-1:0] h_sum [G_P];
  logic [G_P-1:0] h_upd;
  logic [GW-1:0] s_idx_d;

  for (genvar g = 0; g < G_P; g++) begin : g_sum
    moving_sum #(.Q(Q_P), .IW(SW)) u_msum (
      .clk, .rst_n, .in_vld(s_vld && s_idx == GW'(g)), .din(s_val),
      .out_vld(h_upd[g]), .sum(h_sum[g]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s_idx_d <= '0;
    else if (s_vld) s_idx_d <= s_idx;
  end

  assign h_vld = |h_upd;
  assign h_idx = s_idx_d;
  assign h_val = h_sum[s_idx_d];

  logic [HW-1:0] enh_val;
  find_max #(.G(G_P), .VW(HW)) u_max_enh (
    .clk, .rst_n, .in_vld(h_vld), .in_idx(h_idx), .in_val(h_val),
    .dec_vld(enh_vld), .dec_idx(enh_sym), .dec_val(enh_val));

  // ---------------- report over UART ----------------
  logic       tx_valid, tx_ready;
  logic [7:0] tx_data;
  report_framer #(.G(G_P), .SW(SW), .HW(HW)) u_report (
    .clk, .rst_n, .s_vld, .s_idx, .s_val, .h_vld, .h_idx, .h_val,
    .tx_valid, .tx_data, .tx_ready, .dropped(report_dropped));

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n, .valid(tx_valid), .data(tx_data), .ready(tx_ready), .txd(uart_txd));
endmodule
