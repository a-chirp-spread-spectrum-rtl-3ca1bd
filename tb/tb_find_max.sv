// tb_find_max: random frames of 16 values (some with ties); checks the index
// and value of the maximum (lowest index on a tie) and the decision timing.
module tb_find_max;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_vld = 0, dec_vld;
  logic [3:0] in_idx = 0, dec_idx;
  logic [43:0] in_val = 0, dec_val;
  always #5 clk = ~clk;

  find_max dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 500; f++) begin
      automatic longint best = -1;
      automatic int bi = 0;
      for (int g = 0; g < 16; g++) begin
        @(negedge clk);
        in_vld = 1; in_idx = 4'(g);
        in_val = (f % 3 == 0) ? 44'($urandom_range(4)) : {12'($urandom), 32'($urandom)};
        if (longint'(in_val) > best) begin best = longint'(in_val); bi = g; end
        @(posedge clk); #1;
        checks++;
        if (dec_vld != (g == 15)) begin failures++; $display("FAIL dec_vld"); end
        if (g == 15 && (dec_idx != 4'(bi) || longint'(dec_val) != best)) begin
          failures++; $display("FAIL frame %0d idx %0d want %0d", f, dec_idx, bi);
        end
        if ($urandom_range(3) == 0) begin @(negedge clk) in_vld = 0; end
      end
      @(negedge clk) in_vld = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
