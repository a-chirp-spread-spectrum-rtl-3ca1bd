// tb_uart_tx: 50 MHz clock, 115,200 baud (434 clocks per bit). A receiver
// model samples the line in the middle of each bit and checks start bit,
// data (LSB first), stop bit and the bit period, for back-to-back bytes.
module tb_uart_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid = 0, ready, txd;
  logic [7:0] data = 0;
  always #10 clk = ~clk;   // 50 MHz

  uart_tx dut (.*);

  localparam int DIV = 50_000_000 / 115_200;
  byte unsigned sent [$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver model
  initial begin
    int rx = 0;
    wait (rst_n);
    forever begin
      logic [7:0] b;
      @(negedge txd);
      repeat (DIV / 2) @(posedge clk);
      checks++;
      if (txd != 0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        b[i] = txd;
      end
      repeat (DIV) @(posedge clk);
      checks++;
      if (txd != 1) begin failures++; $display("FAIL stop bit"); end
      checks++;
      if (b != sent.pop_front()) begin failures++; $display("FAIL byte %0h", b); end
      rx++;
    end
  end

  initial begin
    longint t0, t1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    checks++;
    if (!ready || !txd) begin failures++; $display("FAIL idle"); end
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      data = (i == 0) ? 8'h55 : 8'($urandom);
      valid = 1;
      sent.push_back(data);
      @(posedge clk);
      #1 valid = 0;
      if (i == 0) t0 = $time;
      wait (ready);
      if (i == 0) begin
        t1 = $time;
        checks++;
        // 10 bits of DIV clocks (20 ns each)
        if ((t1 - t0) / 20 < 10 * DIV - 2 || (t1 - t0) / 20 > 10 * DIV + 2) begin
          failures++; $display("FAIL byte time %0d clocks", (t1 - t0) / 20);
        end
      end
    end
    repeat (DIV * 2) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL bytes not received"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
