// tb_fft: 1,024-point transforms of random and tone inputs, compared with a
// directly computed DFT divided by N (tolerance 4 LSB for the per-stage
// truncation); bins must arrive in order, one per clock, and the first bin
// exactly N/2*log2(N)+1 clocks after the last input sample. Two symbols are
// sent back to back at 8 clocks per sample (ping-pong operation), then one
// symbol too early to check the overrun flag.
module tb_fft;
  localparam int N = 1024;
  localparam real PI = 3.14159265358979323846;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  logic clk = 0, rst_n = 0, restart = 0, in_vld = 0;
  logic signed [15:0] in_re = 0, in_im = 0, out_re, out_im;
  logic out_vld, overrun;
  logic [9:0] out_idx;
  always #5 clk = ~clk;

  fft dut (.*);

  real xr [2][N], xi [2][N];
  real wr [N], wi [N];
  int  sym_out = 0, bin = 0, maxerr = 0;
  longint cyc = 0, last_in_cyc = 0;
  bit first_seen = 0;

  real ct [N], st [N];
  logic in_last = 0;
  initial for (int m = 0; m < N; m++) begin ct[m] = $cos(2.0 * PI * m / N); st[m] = $sin(2.0 * PI * m / N); end

  // reference DFT / N of the symbol being output, computed on its first bin
  always @(posedge clk) begin
    cyc++;
    if (in_vld && in_last) last_in_cyc = cyc;
    if (rst_n && out_vld) begin
      automatic int s = sym_out % 2;
      automatic int k = int'(out_idx);
      if (k == 0) begin
        checks++;
        // out_vld rises N/2*log2(N)+1 edges after the last sample's edge and
        // is seen here on the edge after that
        if (cyc - last_in_cyc != longint'(N / 2 * 10 + 2) && sym_out == 0) begin
          failures++; $display("FAIL latency %0d", cyc - last_in_cyc);
        end
        for (int kk = 0; kk < N; kk++) begin
          automatic real ar = 0, ai = 0;
          for (int n = 0; n < N; n++) begin
            automatic int m = (kk * n) % N;
            ar += xr[s][n] * ct[m] + xi[s][n] * st[m];
            ai += xi[s][n] * ct[m] - xr[s][n] * st[m];
          end
          wr[kk] = ar / N; wi[kk] = ai / N;
        end
      end
      checks++;
      if (k != bin) begin failures++; $display("FAIL order %0d want %0d", k, bin); end
      if (fabs(real'(out_re) - wr[k]) > 4.0 || fabs(real'(out_im) - wi[k]) > 4.0) begin
        failures++; $display("FAIL sym %0d bin %0d got %0d,%0d want %f,%f", sym_out, k, out_re, out_im, wr[k], wi[k]);
      end
      if ($rtoi(fabs(real'(out_re) - wr[k])) > maxerr) maxerr = $rtoi(fabs(real'(out_re) - wr[k]));
      bin = (bin + 1) % N;
      if (k == N - 1) sym_out++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int s, input int kind, input int gap);
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (kind == 0) begin
        in_re = 16'($urandom_range(40000) - 20000);
        in_im = 16'($urandom_range(40000) - 20000);
      end else begin
        in_re = 16'($rtoi(12000.0 * $cos(2.0 * PI * 37.0 * n / N) + 3000.0 * $cos(2.0 * PI * 901.0 * n / N)));
        in_im = 16'($rtoi(12000.0 * $sin(2.0 * PI * 37.0 * n / N) + 3000.0 * $sin(2.0 * PI * 901.0 * n / N)));
      end
      xr[s][n] = in_re; xi[s][n] = in_im;
      in_vld = 1;
      in_last = (n == N - 1);
      @(posedge clk);
      @(negedge clk) in_vld = 0;
      repeat (gap - 2) @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    send(0, 0, 8);
    send(1, 1, 8);
    wait (sym_out == 2);
    checks++;
    if (overrun) begin failures++; $display("FAIL overrun at 8 clocks/sample"); end
    // a symbol arriving in 2 clocks per sample cannot be processed in time
    send(0, 0, 2);
    send(1, 0, 2);
    repeat (10) @(posedge clk);
    checks++;
    if (!overrun) begin failures++; $display("FAIL overrun not flagged"); end
    $display("max error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
