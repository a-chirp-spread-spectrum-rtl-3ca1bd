// tb_channel_emulator: checks the 4-tap response against a direct-form model,
// at the default spacing of 128 samples and with random taps, including a
// single-tap impulse to show the 3*128-sample delay of the last tap.
module tb_channel_emulator;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [15:0] din = 0, dout;
  logic signed [15:0] tap [4];
  always #5 clk = ~clk;

  channel_emulator dut (.*);

  logic signed [15:0] hist [$];

  function automatic int model();
    longint acc = 0;
    for (int t = 0; t < 4; t++)
      if (hist.size() > t * 128) acc += longint'(hist[hist.size() - 1 - t * 128]) * tap[t];
    acc = acc >>> 14;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int imp_seen = 0;
    foreach (tap[i]) tap[i] = 0;
    tap[3] = 16384;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // impulse through the last tap only
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      ce = 1; din = (c == 0) ? 16'sd1000 : 16'sd0;
      hist.push_back(din);
      @(posedge clk); #1;
      if (dout == 16'sd1000) begin
        checks++; imp_seen++;
        if (c != 384) begin failures++; $display("FAIL impulse at %0d", c); end
      end
    end
    checks++;
    if (imp_seen != 1) begin failures++; $display("FAIL impulse count %0d", imp_seen); end
    tap[0] = 16384; tap[1] = -16'sd6000; tap[2] = 16'sd4000; tap[3] = 16'sd9000;
    for (int c = 0; c < 3000; c++) begin
      int want;
      @(negedge clk);
      ce = ($urandom_range(4) != 0);
      din = 16'($urandom_range(40000) - 20000);
      if (ce) hist.push_back(din);
      want = model();
      @(posedge clk); #1;
      if (ce) begin
        checks++;
        if (dout != 16'(want)) begin failures++; $display("FAIL c=%0d %0d want %0d", c, dout, want); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
