// tb_awgn_gen: statistics of the noise source. With level 1.0 (256 in Q8.8)
// the output must have mean near 0, standard deviation near 295.6 LSB and
// never exceed +-2040; kurtosis near 3 (Gaussian, not uniform); doubling the
// level doubles sigma; level 0 gives silence; the output holds when disabled.
// The first 500 outputs are also compared bit for bit with a model written
// here from the published taus88 recurrence (three Tausworthe generators with
// shifts 13/19/12, 2/25/4, 3/11/17, XORed): 4 outputs per sample, their 16
// bytes summed, minus 2040, times level/256.
module tb_awgn_gen;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0, rst_n = 0, ce = 0;
  logic [15:0] level = 16'd256;
  logic signed [15:0] noise;
  always #5 clk = ~clk;

  awgn_gen dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic stats(input int n, output real mean, output real sd, output real kurt, output int peak);
    real s1 = 0, s2 = 0, s4 = 0, v;
    peak = 0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #1;
      v = real'(noise);
      s1 += v; s2 += v * v;
      if (int'(fabs(real'(noise))) > peak) peak = int'(fabs(real'(noise)));
    end
    mean = s1 / n;
    sd   = $sqrt(s2 / n - mean * mean);
    kurt = 0;
  endtask

  function automatic int model_sample(inout logic [31:0] s1, inout logic [31:0] s2, inout logic [31:0] s3);
    int acc = 0;
    for (int k = 0; k < 4; k++) begin
      logic [31:0] b, w;
      b  = ((s1 << 13) ^ s1) >> 19;  s1 = ((s1 & 32'hFFFFFFFE) << 12) ^ b;
      b  = ((s2 << 2) ^ s2) >> 25;   s2 = ((s2 & 32'hFFFFFFF8) << 4) ^ b;
      b  = ((s3 << 3) ^ s3) >> 11;   s3 = ((s3 & 32'hFFFFFFF0) << 17) ^ b;
      w  = s1 ^ s2 ^ s3;
      for (int i = 0; i < 4; i++) acc += int'(w[8*i +: 8]);
    end
    return acc - 2040;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mean, sd, kurt, m4;
    int peak;
    logic signed [15:0] held;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1; ce = 1;
    begin
      logic [31:0] m1 = 32'h1234_5678, m2 = 32'h9abc_def1, m3 = 32'h0fed_cba9;
      int want, bad = 0;
      for (int i = 0; i < 500; i++) begin
        @(posedge clk); #1;
        want = model_sample(m1, m2, m3);
        checks++;
        if (int'(noise) != want) begin
          failures++;
          if (bad++ < 5) $display("FAIL sample %0d got %0d want %0d", i, noise, want);
        end
      end
    end
    stats(40000, mean, sd, kurt, peak);
    $display("level 1.0: mean %f sd %f peak %0d", mean, sd, peak);
    check(fabs(mean) < 6.0, "mean");
    check(sd > 286.0 && sd < 305.0, "sigma");
    check(peak <= 2040 && peak > 900, "range");
    // fourth moment: Gaussian 3*sd^4, uniform would be 1.8*sd^4
    m4 = 0;
    for (int i = 0; i < 20000; i++) begin
      @(posedge clk); #1;
      m4 += real'(noise) ** 4;
    end
    m4 = m4 / 20000.0 / (sd ** 4);
    $display("kurtosis %f", m4);
    check(m4 > 2.6 && m4 < 3.2, "kurtosis");
    @(negedge clk) level = 16'd512;
    stats(20000, mean, sd, kurt, peak);
    check(sd > 572.0 && sd < 610.0, "sigma x2");
    @(negedge clk) level = 16'd0;
    stats(100, mean, sd, kurt, peak);
    check(peak == 0, "silent at level 0");
    @(negedge clk) level = 16'd256; ce = 0;
    @(posedge clk); #1 held = noise;
    repeat (10) @(posedge clk);
    #1 check(noise == held, "hold when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
