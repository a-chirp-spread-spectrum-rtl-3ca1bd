// tb_superbin_sum: streams the 1,024 bin powers of several symbols (with gaps)
// and checks each S(g) against the sum of bins g*64 .. g*64+63, its index, and
// that exactly 16 values come per symbol.
module tb_superbin_sum;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_vld = 0, s_vld;
  logic [9:0] in_idx = 0;
  logic [31:0] in_pwr = 0;
  logic [3:0] s_idx;
  logic [37:0] s_val;
  always #5 clk = ~clk;

  superbin_sum dut (.*);

  longint ref_s [$];
  int got = 0;
  always @(posedge clk) if (rst_n && s_vld) begin
    automatic longint want = ref_s.pop_front();
    checks++;
    if (longint'(s_val) != want || s_idx != 4'(got % 16)) begin
      failures++; $display("FAIL S(%0d)=%0d want %0d", s_idx, s_val, want);
    end
    got++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int sym = 0; sym < 4; sym++) begin
      automatic longint acc = 0;
      for (int k = 0; k < 1024; k++) begin
        @(negedge clk);
        in_vld = 1; in_idx = 10'(k);
        in_pwr = (sym == 3) ? 32'hFFFF_FFFF : $urandom;
        acc += longint'(in_pwr);
        if (k % 64 == 63) begin ref_s.push_back(acc); acc = 0; end
        if ($urandom_range(3) == 0) begin @(negedge clk) in_vld = 0; end
      end
      @(negedge clk) in_vld = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (got != 64) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
