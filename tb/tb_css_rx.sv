// tb_css_rx: receiver at reduced size (SF=8: 256 chips, decimation 8,
// superbins of 16 chips so 16 symbols, Q=4, channel taps 4 chips = 32 ADC
// samples apart), ADC enable every 2 clocks. The ADC stream is generated here
// from the closed form of a chirp-spread-spectrum symbol on a carrier at a
// quarter of the ADC rate:
//   x[t] = A*cos(pi*y*(y-N)/N + 2*pi*t/4),  y = (m - (R-1)/2)/R,
//   m = (t mod N*R + k*R) mod N*R,
//   k = g*16 + 15 for symbol g.
// Checks, per received symbol: the LoRa-Mod decision (argmax of S) and the
// LoRa-Mod-Enhanced decision (argmax of H) equal the symbol sent (the latter
// once the Q-symbol window holds only that symbol); each H(g) equals the sum
// of the last Q values of S(g) recorded from the S stream; the symbol's
// superbin holds most of the energy. Phases: clean line, 4-tap multipath from
// the channel emulator, multipath plus noise, and a symbol change. Counts how
// often each mechanism (multipath, noise, running-sum window full, symbol
// change, UART frame, dropped frame) occurred and fails for one that never did.
module tb_css_rx;
  localparam real PI = 3.14159265358979323846;
  localparam int N = 256, R = 8, PB = 16, G = 16, QQ = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0, sync = 0;
  logic signed [13:0] adc = 0;
  logic [31:0] fcw = 32'h4000_0000;
  logic chan_en = 0, awgn_en = 0;
  logic signed [15:0] taps [4];
  logic [15:0] noise_level = 0;
  logic s_vld, mod_vld, h_vld, enh_vld, fft_overrun, report_dropped, uart_txd;
  logic [3:0] s_idx, mod_sym, h_idx, enh_sym;
  logic [35:0] s_val;
  logic [37:0] h_val;
  always #5 clk = ~clk;

  css_rx #(.SF_P(8), .R_P(R), .P_P(PB), .Q_P(QQ), .TAP_SPACING(4 * R),
           .CLK_HZ(115200 * 4), .BAUD(115200)) dut (.*);

  // ---------------- observation ----------------
  longint s_hist [G][$];
  longint s_now [G];
  int cur_sym_sent = 0, sym_since_change = 0, rx_syms = 0;
  int n_multipath = 0, n_noise = 0, n_window_full = 0, n_change = 0, n_frames = 0, n_drops = 0;
  int mod_ok = 0, mod_err = 0;

  always @(posedge clk) if (rst_n) begin
    if (report_dropped) n_drops++;
    if (s_vld) begin
      s_now[s_idx] = longint'(s_val);
      s_hist[s_idx].push_back(longint'(s_val));
      if (s_hist[s_idx].size() > QQ) void'(s_hist[s_idx].pop_front());
    end
    if (h_vld) begin
      automatic longint want = 0;
      foreach (s_hist[h_idx][i]) want += s_hist[h_idx][i];
      checks++;
      if (longint'(h_val) != want) begin failures++; $display("FAIL H(%0d)=%0d want %0d", h_idx, h_val, want); end
    end
    if (mod_vld) begin
      automatic longint tot = 0;
      rx_syms++;
      foreach (s_now[g]) tot += s_now[g];
      if (rx_syms > 1) begin   // the first symbol after reset is partial
        if (!awgn_en) begin
          checks++;
          if (mod_sym != 4'(cur_sym_sent)) begin failures++; $display("FAIL LoRa-Mod decided %0d sent %0d", mod_sym, cur_sym_sent); end
          checks++;
          if (s_now[cur_sym_sent] * 10 < tot * 8) begin failures++; $display("FAIL superbin energy share %f", real'(s_now[cur_sym_sent]) / real'(tot)); foreach (s_now[g]) $write("%0d ", s_now[g]); $display(""); end
        end
        if (mod_sym == 4'(cur_sym_sent)) mod_ok++; else mod_err++;
      end
    end
    if (enh_vld && rx_syms > 1 && sym_since_change > QQ) begin
      checks++;
      n_window_full++;
      if (enh_sym != 4'(cur_sym_sent)) begin failures++; $display("FAIL LoRa-Mod-Enhanced decided %0d sent %0d", enh_sym, cur_sym_sent); end
    end
  end

  // count UART frames by their start bits after idle gaps
  initial begin
    wait (rst_n);
    forever begin
      @(negedge uart_txd);
      n_frames++;
      // a frame is 194 bytes of 10 bits, 4 clocks per bit
      repeat (194 * 40 - 8) @(posedge clk);
    end
  end

  // ---------------- stimulus ----------------
  task automatic send_symbol(input int g);
    int k = g * PB + PB - 1;
    for (int t = 0; t < N * R; t++) begin
      int m = (t + k * R) % (N * R);
      longint a = 2 * longint'(m) - (R - 1);   // sample instants offset by -(R-1)/2, as in the transmitter
      longint md = 8 * longint'(N) * R * R;
      real th = 2.0 * PI * real'(((a * (a - 2 * N * R)) % md + md) % md) / real'(md) + 2.0 * PI * real'(t % 4) / 4.0;
      @(negedge clk);
      ce = 1;
      adc = 14'($rtoi(3000.0 * $cos(th)));
      @(posedge clk);
      @(negedge clk) ce = 0;
      sync = (t == 0 && first_sync);
      if (sync) first_sync = 0;
      @(posedge clk);
      @(negedge clk) sync = 0;
    end
  endtask
  bit first_sync = 1;

  task automatic send_n(input int g, input int n);
    if (g != cur_sym_sent) begin n_change++; sym_since_change = 0; end
    for (int i = 0; i < n; i++) begin
      // decisions for a symbol come during the next one
      send_symbol(g);
      cur_sym_sent = g;
      sym_since_change++;
      if (chan_en) n_multipath++;
      if (awgn_en) n_noise++;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    taps[0] = 16'sd16384; taps[1] = 16'sd9000; taps[2] = 16'sd6000; taps[3] = 16'sd3000;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cur_sym_sent = 6;
    send_n(6, 6);                      // clean
    chan_en = 1;
    send_n(6, 6);                      // multipath
    send_n(11, 8);                     // symbol change under multipath
    awgn_en = 1; noise_level = 16'd3000;
    send_n(2, 10);                     // multipath and noise
    repeat (6000) @(posedge clk);
    $display("LoRa-Mod decisions: %0d right, %0d wrong", mod_ok, mod_err);
    $display("mechanisms: multipath %0d noise %0d window_full %0d change %0d frames %0d drops %0d",
             n_multipath, n_noise, n_window_full, n_change, n_frames, n_drops);
    checks++;
    if (n_multipath == 0 || n_noise == 0 || n_window_full == 0 || n_change == 0 || n_frames == 0 || n_drops == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    checks++;
    if (fft_overrun) begin failures++; $display("FAIL FFT overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
