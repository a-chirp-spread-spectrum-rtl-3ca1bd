// tb_mag_sq: random bins including full-scale corners; checks re^2+im^2 and
// that the valid and the index follow by one clock.
module tb_mag_sq;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_vld = 0, out_vld;
  logic [9:0] in_idx = 0, out_idx;
  logic signed [15:0] in_re = 0, in_im = 0;
  logic [31:0] pwr;
  always #5 clk = ~clk;

  mag_sq dut (.*);

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
      longint want;
      @(negedge clk);
      in_vld = ($urandom_range(3) != 0);
      in_idx = 10'($urandom);
      in_re = (c == 5) ? -16'sd32768 : 16'($urandom);
      in_im = (c == 5) ? -16'sd32768 : 16'($urandom);
      want = longint'(in_re) * in_re + longint'(in_im) * in_im;
      @(posedge clk); #1;
      checks++;
      if (out_vld != in_vld || (in_vld && (longint'(pwr) != want || out_idx != in_idx))) begin
        failures++; $display("FAIL pwr %0d want %0d", pwr, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
