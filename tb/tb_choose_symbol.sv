// tb_choose_symbol: SF=6, P=4, x2 oversampling, Q=3. Checks that each new value
// is taken once every Q symbol loads, held in between, and mapped to the
// shift (g*P + P-1)*UPSCALE; and the default configuration's mapping.
module tb_choose_symbol;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sym_load = 0;
  logic [3:0] data_in = 0, cur_sym;
  logic [6:0] shift;
  logic new_word;
  always #5 clk = ~clk;

  choose_symbol #(.SF(6), .P(4), .UPSCALE(2), .Q(3)) dut (.*);

  // default size: 16 symbols, shift = (g*64+63)*32
  logic [3:0]  d_data = 0, d_sym;
  logic [14:0] d_shift;
  logic d_new;
  choose_symbol u_def (.clk, .rst_n, .sym_load(1'b0), .data_in(d_data), .shift(d_shift),
                       .cur_sym(d_sym), .new_word(d_new));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int loads = 0, exp_sym = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < 16; g++) begin
      @(negedge clk) d_data = 4'(g); #1;
      checks++;
      if (d_shift != 15'((g * 64 + 63) * 32)) begin failures++; $display("FAIL default g=%0d", g); end
    end
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      data_in  = 4'($urandom);
      sym_load = ($urandom_range(2) == 0);
      #1;
      if (sym_load) begin
        automatic int want = (loads % 3 == 0) ? int'(data_in) : exp_sym;
        checks++;
        if (shift != 7'((want * 4 + 3) * 2)) begin failures++; $display("FAIL shift %0d want %0d", shift, (want*4+3)*2); end
        @(posedge clk); #1;
        checks++;
        if (cur_sym != 4'(want) || new_word != (loads % 3 == 0)) begin
          failures++; $display("FAIL cur_sym %0d want %0d", cur_sym, want);
        end
        exp_sym = want;
        loads++;
      end else begin
        @(posedge clk); #1;
        checks++;
        if (cur_sym != 4'(exp_sym) || new_word) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
