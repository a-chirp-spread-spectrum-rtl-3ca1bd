// tb_css_plc_link: end-to-end test of the whole link at the default sizes
// (SF=10, x32 oversampling, 64-chip superbins so 16 symbols, Q=64, 50 MHz
// clock, 115,200 baud). The transmitter's DAC code is looped back to the
// receiver's ADC input through an attenuator (offset binary -> two's
// complement, arithmetic shift); the sample enable is high on every clock, so
// a symbol lasts 32,768 clocks.
// Phase 1 (64 symbols): symbol A over the receiver's 4-tap multipath channel
// (taps 0.6, 0.3, -0.25, 0.15, 4 chips apart), no noise. Every LoRa-Mod
// decision must be A.
// Phase 2 (72 symbols): the transmitter takes the next data word (B) after its
// Q repetitions, the signal is attenuated by 2^8 and noise is added so that the
// in-band SNR is about -19 dB (printed). LoRa-Mod decisions are only counted;
// the LoRa-Mod-Enhanced decision must be B once its 64-symbol window holds
// only B symbols.
// The receiver's sync pulse is placed where the first transmitted sample
// reaches its decimators: the DAC carries sample 0 three clocks after the
// restart clock edge and the receiver registers it twice before decimating.
// In phase 2 the testbench also prints the symbol superbin's S and H over the
// mean of the other 15 superbins (the normalised symbol energy), and requires
// the H ratio to exceed 1.05 whenever the window is full (with Q = 64 the
// noise superbins' H varies by only a few per cent, so this is a clear margin).
// Also checked: no FFT overrun, UART report frames (decoded from the serial
// line, header A5 5A) arrive, and each mechanism (multipath, noise, new data
// word, symbol change seen by the receiver, full running-sum window, report
// frame, report dropped because the UART was busy) happens at least once.
module tb_css_plc_link;
  import css_pkg::*;
  localparam int GW = SF - $clog2(P);
  localparam int SYM_CLKS = N * UPSCALE;
  localparam int N1 = 64, N2 = 72;
  localparam int SYM_A = 9, SYM_B = 4;
  localparam int BIT_CLKS = 50_000_000 / 115_200;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 1;
  always #5 clk = ~clk;

  logic tx_restart = 0, rx_sync = 0;
  logic [FCW_W-1:0] fcw = 32'h2000_0000;   // carrier fs/8 = 200 kHz at 1.6 MHz
  logic [GW-1:0] tx_data = GW'(SYM_A), tx_sym, s_idx, mod_sym, h_idx, enh_sym;
  logic tx_new_word, tx_sym_start;
  logic [DAC_W-1:0] dac;
  logic signed [ADC_W-1:0] adc;
  logic chan_en = 0, awgn_en = 0;
  logic signed [DW-1:0] taps [4];
  logic [15:0] noise_level = 0;
  logic s_vld, mod_vld, h_vld, enh_vld, fft_overrun, report_dropped, uart_txd;
  logic [2*DW+$clog2(P)-1:0] s_val;
  logic [2*DW+$clog2(P)+$clog2(Q)-1:0] h_val;
  int att = 2;

  css_plc_link dut (
    .clk, .rst_n, .ce, .tx_restart, .tx_fcw(fcw), .tx_data, .tx_new_word, .tx_sym,
    .tx_sym_start, .dac, .adc, .rx_sync, .rx_fcw(fcw), .chan_en, .taps, .awgn_en,
    .noise_level, .s_vld, .s_idx, .s_val, .mod_vld, .mod_sym, .h_vld, .h_idx, .h_val,
    .enh_vld, .enh_sym, .fft_overrun, .report_dropped, .uart_txd);

  // the line: offset-binary DAC code to two's complement, attenuated
  assign adc = ADC_W'($signed(dac ^ DAC_W'(1 << (DAC_W - 1))) >>> att);

  int n_multipath = 0, n_noise = 0, n_new_word = 0, n_rx_change = 0, n_window_full = 0;
  int n_frames = 0, n_drops = 0, n_bytes = 0, mod_err_noisy = 0, mod_ok_noisy = 0;
  int sent [$];
  real s_cur [16], h_cur [16];
  real sep_s_sum = 0, sep_h_sum = 0, sep_h_min = 1.0e30;
  int  n_sep = 0;
  logic dec_noisy = 0;   // noise was on when the latest decision was taken
  int n_dec = 0, same_run = 0, last_sent = -1, last_enh = -1;

  initial begin
    repeat (SYM_CLKS * (N1 + N2 + 3)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // symbols as they go on air, and what the receiver decides
  logic started = 0;
  always @(posedge clk) if (tx_restart) started <= 1;

  always @(posedge clk) if (rst_n) begin
    if (tx_sym_start && started) sent.push_back(int'(tx_sym));
    if (tx_new_word) n_new_word++;
    if (report_dropped) n_drops++;
    if (fft_overrun) begin
      checks++; failures++;
      $display("FAIL fft overrun");
    end
    if (s_vld) s_cur[s_idx] = real'(s_val);
    if (h_vld) h_cur[h_idx] = real'(h_val);
    if (mod_vld) begin
      int g;
      g = sent.pop_front();
      n_dec++;
      if (g == last_sent) same_run++; else same_run = 1;
      last_sent = g;
      if (chan_en) n_multipath++;
      if (awgn_en) n_noise++;
      dec_noisy = awgn_en;
      if (!awgn_en) begin
        checks++;
        if (int'(mod_sym) != g) begin
          failures++;
          $display("FAIL LoRa-Mod decision %0d sent %0d (symbol %0d)", mod_sym, g, n_dec);
        end
      end else if (int'(mod_sym) == g) mod_ok_noisy++;
      else mod_err_noisy++;
    end
    if (enh_vld) begin
      if (same_run >= Q) begin
        real ms, mh;
        ms = 0; mh = 0;
        for (int i = 0; i < 16; i++) if (i != last_sent) begin ms += s_cur[i] / 15.0; mh += h_cur[i] / 15.0; end
        if (dec_noisy) begin
          n_sep++;
          sep_s_sum += s_cur[last_sent] / ms;
          sep_h_sum += h_cur[last_sent] / mh;
          if (h_cur[last_sent] / mh < sep_h_min) sep_h_min = h_cur[last_sent] / mh;
        end
        n_window_full++;
        checks++;
        if (int'(enh_sym) != last_sent) begin
          failures++;
          $display("FAIL LoRa-Mod-Enhanced decision %0d sent %0d (symbol %0d)", enh_sym, last_sent, n_dec);
        end
      end
      if (last_enh >= 0 && int'(enh_sym) != last_enh) n_rx_change++;
      last_enh = int'(enh_sym);
    end
  end

  // UART receiver: 8N1, sampled in the middle of each bit
  initial begin
    logic [7:0] b, prev;
    prev = 0;
    forever begin
      @(negedge uart_txd);
      if (!rst_n) continue;
      repeat (BIT_CLKS / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (BIT_CLKS) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (BIT_CLKS) @(posedge clk);
      checks++;
      if (uart_txd !== 1'b1) begin failures++; $display("FAIL UART stop bit"); end
      n_bytes++;
      if (prev == 8'hA5 && b == 8'h5A) n_frames++;
      prev = b;
    end
  end

  initial begin
    real a_eff, sigma, snr_db;
    taps[0] = 16'sd9830; taps[1] = 16'sd4915; taps[2] = -16'sd4096; taps[3] = 16'sd2458;
    repeat (5) @(posedge clk);
    rst_n = 1;
    chan_en = 1;
    repeat (3) @(posedge clk);
    // restart the transmitter, and mark the same sample as a symbol start at the receiver
    @(negedge clk) tx_restart = 1;
    @(negedge clk) tx_restart = 0;
    repeat (3) @(negedge clk);
    rx_sync = 1;
    @(negedge clk) rx_sync = 0;
    tx_data = GW'(SYM_B);              // taken after Q repetitions of A
    wait (n_dec == N1);
    // phase 2: weak signal and noise
    att = 8;
    noise_level = 16'd2048;
    awgn_en = 1;
    // in-band SNR: carrier amplitude a_eff (after multipath, 16-bit units), real
    // white noise of sigma spread over 800 kHz, of which 50 kHz is in band
    a_eff  = 8192.0 / 256.0 * 4.0 * $sqrt(0.6 * 0.6 + 0.3 * 0.3 + 0.25 * 0.25 + 0.15 * 0.15);
    sigma  = 1.155 * 2048.0;
    snr_db = 10.0 * $log10((a_eff * a_eff / 2.0) / (sigma * sigma / 16.0));
    $display("phase 2: in-band SNR about %0.1f dB", snr_db);
    wait (n_dec == N1 + N2);
    $display("LoRa-Mod in noise: %0d right, %0d wrong", mod_ok_noisy, mod_err_noisy);
    // symbol superbin over the mean of the other superbins, in noise, full window
    $display("normalised symbol energy: S %0.2f (mean), H %0.2f (mean), H %0.2f (min), over %0d symbols",
             sep_s_sum / n_sep, sep_h_sum / n_sep, sep_h_min, n_sep);
    checks++;
    if (n_sep == 0 || sep_h_min <= 1.05) begin
      failures++;
      $display("FAIL H does not separate the symbol from the noise superbins");
    end
    $display("mechanisms: multipath %0d noise %0d new_word %0d rx_change %0d window_full %0d frames %0d bytes %0d drops %0d",
             n_multipath, n_noise, n_new_word, n_rx_change, n_window_full, n_frames, n_bytes, n_drops);
    if (n_multipath == 0 || n_noise == 0 || n_new_word == 0 || n_rx_change == 0 ||
        n_window_full == 0 || n_frames == 0 || n_drops == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    checks++;
    if (last_enh != SYM_B) begin
      failures++;
      $display("FAIL final LoRa-Mod-Enhanced decision %0d", last_enh);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
