// tb_chirp_rom: checks chirp table contents against the closed form
// c(m) = A*exp(j*pi*x*(x-N)/N), x = m/U, at the transmitter size (32,768 points, x32)
// and the conjugate receiver table (1,024 points), to within 1 LSB, and the
// one-clock read latency.
module tb_chirp_rom;
  localparam real PI = 3.14159265358979323846;
  localparam real AMP = 0.999 * 32767.0;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [14:0] ta;
  logic [9:0]  ra;
  logic signed [15:0] t_re, t_im, r_re, r_im;

  chirp_rom u_tre (.clk, .addr(ta), .data(t_re));
  chirp_rom #(.IMAG(1'b1)) u_tim (.clk, .addr(ta), .data(t_im));
  chirp_rom #(.DEPTH(1024), .UPSCALE(1), .CONJ(1'b1)) u_rre (.clk, .addr(ra), .data(r_re));
  chirp_rom #(.DEPTH(1024), .UPSCALE(1), .IMAG(1'b1), .CONJ(1'b1)) u_rim (.clk, .addr(ra), .data(r_im));

  task automatic chk(input int got, input real want, input string what);
    checks++;
    if ((real'(got) - want) > 1.01 || (want - real'(got)) > 1.01) begin
      failures++;
      $display("FAIL %s got %0d want %f", what, got, want);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real th;
    for (int i = 0; i < 400; i++) begin
      int unsigned m, n;
      m = (i < 40) ? i * 819 : $urandom_range(32767);
      n = (i < 40) ? i * 25  : $urandom_range(1023);
      @(negedge clk); ta = 15'(m); ra = 10'(n);
      @(posedge clk); #1;
      th = PI * real'((longint'(m) * (longint'(m) - 32768)) % (2 * 32768 * 32)) / real'(32768 * 32);
      chk(t_re, AMP * $cos(th), "tx re");
      chk(t_im, AMP * $sin(th), "tx im");
      th = PI * real'((longint'(n) * (longint'(n) - 1024)) % 2048) / 1024.0;
      chk(r_re, AMP * $cos(th), "rx re");
      chk(r_im, -AMP * $sin(th), "rx im");
    end
    // decimating the x32 table by 32 gives the 1,024-point chirp
    @(negedge clk); ta = 15'(32 * 77); ra = 10'(77);
    @(posedge clk); #1;
    checks++;
    if (t_re != r_re || t_im != -r_im) begin failures++; $display("FAIL decimated table"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
