// tb_address_counter: 4-bit counter; checks the address sequence, that the
// shift is taken only at the symbol boundary or on restart, and the
// sym_start / sym_load markers, against a reference model.
module tb_address_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0, restart = 0;
  logic [3:0] shift = 0, addr;
  logic sym_start, sym_load;
  always #5 clk = ~clk;

  address_counter #(.AW(4)) dut (.*);

  int cnt = 0, sh = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 1500; c++) begin
      @(negedge clk);
      checks++;
      if (addr != 4'(cnt + sh) || sym_start != (cnt == 0)) begin
        failures++;
        $display("FAIL c=%0d addr=%0d want %0d start=%0b", c, addr, 4'(cnt + sh), sym_start);
      end
      ce      = ($urandom_range(3) != 0);
      restart = ($urandom_range(60) == 0);
      shift   = 4'($urandom);
      #1;
      checks++;
      if (sym_load != (restart || (ce && cnt == 15))) begin failures++; $display("FAIL sym_load"); end
      @(posedge clk);
      if (restart) begin cnt = 0; sh = shift; end
      else if (ce) begin
        if (cnt == 15) begin cnt = 0; sh = shift; end
        else cnt++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
