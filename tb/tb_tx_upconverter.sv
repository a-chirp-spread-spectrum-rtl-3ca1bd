// tb_tx_upconverter: random chirp and carrier samples; checks the DAC code
// against Re{c}*Re{lo} + Im{c}*Im{lo}, scaled to 14 bits and offset by half
// scale, and the two-enable latency.
module tb_tx_upconverter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [15:0] ch_re, ch_im, lo_re, lo_im;
  logic [13:0] dac;
  always #5 clk = ~clk;

  tx_upconverter dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q[$];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    #1;
    checks++;
    if (dac != 14'h2000) begin failures++; $display("FAIL reset code"); end
    for (int c = 0; c < 2000; c++) begin
      real a, th;
      @(negedge clk);
      // operands of magnitude at most 32734, as from the ROM and NCO
      a = 32734.0 * $sqrt(real'($urandom_range(1000)) / 1000.0);
      th = 6.2831853 * real'($urandom_range(9999)) / 10000.0;
      ch_re = 16'($rtoi(a * $cos(th)));  ch_im = 16'($rtoi(a * $sin(th)));
      th = 6.2831853 * real'($urandom_range(9999)) / 10000.0;
      lo_re = 16'($rtoi(32734.0 * $cos(th)));  lo_im = 16'($rtoi(32734.0 * $sin(th)));
      ce = 1'b1;
      begin
        longint s;
        s = longint'(ch_re) * lo_re + longint'(ch_im) * lo_im;
        q.push_back(int'((s >>> 17) & 64'h3fff) ^ 'h2000);
      end
      @(posedge clk); #1;
      if (q.size() > 1) begin
        automatic int want = q.pop_front();
        checks++;
        if (int'(dac) != want) begin failures++; $display("FAIL dac %0h want %0h", dac, want); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
