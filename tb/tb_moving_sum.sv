// tb_moving_sum: random input values; checks the output against a directly
// summed window of the last Q inputs, for Q = 64 (default) and Q = 5,
// including the partial sums while the window fills.
module tb_moving_sum;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_vld = 0;
  logic [37:0] din = 0;
  logic [43:0] sum;
  logic [40:0] sum5;
  logic out_vld, out_vld5;
  always #5 clk = ~clk;

  moving_sum dut (.clk, .rst_n, .in_vld, .din, .out_vld, .sum);
  moving_sum #(.Q(5)) dut5 (.clk, .rst_n, .in_vld, .din, .out_vld(out_vld5), .sum(sum5));

  longint hist [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      automatic longint w64 = 0, w5 = 0;
      @(negedge clk);
      in_vld = ($urandom_range(2) != 0);
      din = (c > 1500) ? {38{1'b1}} : {6'($urandom), 32'($urandom)};
      if (in_vld) hist.push_back(longint'(din));
      for (int i = 0; i < hist.size() && i < 64; i++) w64 += hist[hist.size() - 1 - i];
      for (int i = 0; i < hist.size() && i < 5; i++) w5 += hist[hist.size() - 1 - i];
      @(posedge clk); #1;
      checks++;
      if (out_vld != in_vld || longint'(sum) != w64 || longint'(sum5) != w5) begin
        failures++; $display("FAIL c=%0d sum %0d want %0d, %0d want %0d", c, sum, w64, sum5, w5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
