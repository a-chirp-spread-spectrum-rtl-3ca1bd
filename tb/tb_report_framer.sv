// tb_report_framer: feeds S and H streams of 16 superbins for several symbols,
// lets a byte sink accept bytes with random stalls, and checks each frame's
// header, values and byte order; a symbol that completes during a frame must
// be dropped and flagged.
module tb_report_framer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic s_vld = 0, h_vld = 0;
  logic [3:0] s_idx = 0, h_idx = 0;
  logic [37:0] s_val = 0;
  logic [43:0] h_val = 0;
  logic tx_valid, tx_ready = 0, dropped;
  logic [7:0] tx_data;
  always #5 clk = ~clk;

  report_framer dut (.*);

  byte unsigned exp_q [$];
  int drops = 0, nbytes = 0;

  always @(posedge clk) if (rst_n) begin
    if (dropped) drops++;
    if (tx_valid && tx_ready) begin
      checks++;
      nbytes++;
      if (exp_q.size() == 0 || tx_data != exp_q.pop_front()) begin
        failures++; $display("FAIL byte %0d: %0h", nbytes, tx_data);
      end
    end
  end
  always @(negedge clk) tx_ready = ($urandom_range(3) == 0);

  task automatic symbol(input bit expect_sent);
    logic [47:0] v [32];
    for (int g = 0; g < 16; g++) begin
      @(negedge clk); s_vld = 1; s_idx = 4'(g); s_val = {6'($urandom), 32'($urandom)};
      v[g] = 48'(s_val);
    end
    @(negedge clk) s_vld = 0;
    for (int g = 0; g < 16; g++) begin
      @(negedge clk); h_vld = 1; h_idx = 4'(g); h_val = {12'($urandom), 32'($urandom)};
      v[16 + g] = 48'(h_val);
    end
    @(negedge clk) h_vld = 0;
    if (expect_sent) begin
      exp_q.push_back(8'hA5); exp_q.push_back(8'h5A);
      for (int i = 0; i < 32; i++)
        for (int b = 5; b >= 0; b--) exp_q.push_back(v[i][8*b +: 8]);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    symbol(1);
    symbol(0);          // arrives while the first frame is being sent
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    symbol(1);
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (drops != 1 || nbytes != 2 * 194) begin failures++; $display("FAIL drops %0d bytes %0d", drops, nbytes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
