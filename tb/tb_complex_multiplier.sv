// tb_complex_multiplier: random operands; checks (a*b) >>> 15, saturated, and
// that vld follows ce by one clock.
module tb_complex_multiplier;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0;
  logic signed [15:0] a_re, a_im, b_re, b_im, p_re, p_im;
  logic vld;
  always #5 clk = ~clk;

  complex_multiplier dut (.*);

  function automatic int sat(longint v);
    v = v >>> 15;
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int wr, wi;
      @(negedge clk);
      a_re = 16'($urandom); a_im = 16'($urandom); b_re = 16'($urandom); b_im = 16'($urandom);
      if (c % 7 == 0) b_im = 0;
      ce = ($urandom_range(3) != 0);
      wr = sat(longint'(a_re) * b_re - longint'(a_im) * b_im);
      wi = sat(longint'(a_re) * b_im + longint'(a_im) * b_re);
      @(posedge clk); #1;
      checks++;
      if (vld != ce) begin failures++; $display("FAIL vld"); end
      if (ce) begin
        checks++;
        if (p_re != 16'(wr) || p_im != 16'(wi)) begin
          failures++; $display("FAIL %0d %0d want %0d %0d", p_re, p_im, wr, wi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
