// tb_nco: checks the carrier exp(-j*theta) against cos/-sin of the
// accumulated phase (within the table's phase quantisation), the enable and
// the phase reset.
module tb_nco;
  localparam real PI = 3.14159265358979323846;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0, rst_n = 0, ce = 0, sync = 0;
  logic [31:0] fcw;
  logic signed [15:0] lo_re, lo_im;
  always #5 clk = ~clk;

  nco dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ph;
    real th, tol;
    fcw = 32'd536870912 / 5 * 3 + 32'd12345;     // arbitrary carrier
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ph = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      ce   = ($urandom_range(1) == 1);
      sync = (c == 1500);
      @(posedge clk); #1;
      if (sync) begin
        ph = 0;
        checks++;
        if (lo_re != 0 || lo_im != 0) begin failures++; $display("FAIL sync"); end
      end else if (ce) begin
        // output shows the table entry of the phase before this step
        th = 2.0 * PI * real'(ph >> 22) / 1024.0;
        tol = 2.0;
        checks++;
        if (fabs(real'(lo_re) - 32734.0 * $cos(th)) > tol || fabs(real'(lo_im) + 32734.0 * $sin(th)) > tol) begin
          failures++; $display("FAIL c=%0d re=%0d im=%0d th=%f", c, lo_re, lo_im, th);
        end
        ph = (ph + fcw) & 64'hFFFF_FFFF;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
