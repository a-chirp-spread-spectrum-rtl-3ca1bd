// tb_fir_decimator: checks that every 32 enabled input samples give one output
// equal to their mean (arithmetic shift of the sum), that vld comes once per
// group one clock after the 32nd sample, and that restart realigns the groups.
// Also checks the rejection of a tone at the output rate (a null of the filter).
module tb_fir_decimator;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0, restart = 0;
  logic signed [15:0] din = 0, dout;
  logic vld;
  always #5 clk = ~clk;

  fir_decimator dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum = 0;
    int n = 0, outs = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      bit fire;
      @(negedge clk);
      ce = ($urandom_range(2) != 0);
      restart = (c == 9000);
      din = 16'($urandom);
      fire = 0;
      if (restart) begin sum = 0; n = 0; end
      else if (ce) begin
        sum += din; n++;
        if (n == 32) fire = 1;
      end
      @(posedge clk); #1;
      checks++;
      if (vld != fire) begin failures++; $display("FAIL vld at %0d", c); end
      if (fire) begin
        checks++;
        outs++;
        if (dout != 16'(sum >>> 5)) begin failures++; $display("FAIL dout %0d want %0d", dout, sum >>> 5); end
        sum = 0; n = 0;
      end
    end
    // a tone at 50 kHz (period 32 input samples) is cancelled
    @(negedge clk) restart = 1; ce = 0;
    @(negedge clk) restart = 0;
    for (int c = 0; c < 320; c++) begin
      @(negedge clk) ce = 1; din = 16'($rtoi(20000.0 * $sin(6.2831853 * c / 32.0)));
      @(posedge clk); #1;
      if (vld) begin
        checks++;
        if (dout > 2 || dout < -2) begin failures++; $display("FAIL tone leaks %0d", dout); end
      end
    end
    $display("outputs %0d", outs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
