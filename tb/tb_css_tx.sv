// tb_css_tx: transmitter at reduced size (SF=6, x4 oversampling, superbins of
// 8 chips, Q=2; 256-point chirp table). With the sample enable every clock,
// after a restart the DAC code at the (t+3)-th clock must equal the mix of the
// closed-form chirp sample exp(j*pi*x*(x-64)/64), x = (m - 3/2)/4,
// m = (t mod 256 + shift) mod 256 (sampling offset -(U-1)/2), and the carrier
// phase t*fcw:  (ch_re*cos - ch_im*sin) >> 17, offset binary, where the shift
// is (g*8+7)*4 for the symbol g on air and a new data value is taken every
// Q symbols. Both a zero carrier and a non-zero carrier are run.
module tb_css_tx;
  localparam real PI  = 3.14159265358979323846;
  localparam real AMP = 0.999 * 32767.0;
  localparam int  DEPTH = 256, U = 4, PB = 8, QQ = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ce = 0, restart = 0;
  logic [31:0] fcw = 0;
  logic [2:0] data_in = 0, cur_sym;
  logic new_word, sym_start;
  logic [13:0] dac;
  always #5 clk = ~clk;

  css_tx #(.SF_P(6), .UPSCALE_P(U), .P_P(PB), .Q_P(QQ)) dut (.*);

  function automatic int expect_dac(input int m, input longint unsigned ph);
    int cr, ci, lr, li;
    real th, phi;
    longint s;
    longint a;
    a   = 2 * longint'(m) - (U - 1);   // sampling instants offset by -(U-1)/2
    th  = 2.0 * PI * real'(((a * (a - 2 * DEPTH)) % (8 * DEPTH * U) + 8 * DEPTH * U) % (8 * DEPTH * U)) / real'(8 * DEPTH * U);
    phi = 2.0 * PI * real'(ph >> 22) / 1024.0;
    cr = $rtoi(AMP * $cos(th));  ci = $rtoi(AMP * $sin(th));
    lr = $rtoi(AMP * $cos(phi)); li = -$rtoi(AMP * $sin(phi));
    s  = longint'(cr) * lr + longint'(ci) * li;
    return int'((s >>> 17) & 'h3fff) ^ 'h2000;
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sym_hist [64];

  // e counts clock edges from the restart edge (e = 0). Symbol j starts at
  // edge j*DEPTH, where the value to send is sampled; the DAC code after edge
  // e carries sample e-3.
  task automatic run(input logic [31:0] f, input int nsym);
    int loads = 0, words = 0, exp_words = 0;
    longint unsigned ph = 0;
    fcw = f;
    @(negedge clk) data_in = 3'($urandom); restart = 1; ce = 1;
    for (int e = 0; e <= nsym * DEPTH + 2; e++) begin
      if (e % DEPTH == 0) begin
        if (loads % QQ == 0) begin sym_hist[e / DEPTH] = int'(data_in); exp_words++; end
        else sym_hist[e / DEPTH] = sym_hist[e / DEPTH - 1];
        loads++;
      end
      @(posedge clk); #1;
      restart = 0;
      if (new_word) words++;
      if (e % DEPTH == 0) begin
        checks++;
        if (cur_sym != 3'(sym_hist[e / DEPTH])) begin failures++; $display("FAIL cur_sym %0d", cur_sym); end
        @(negedge clk) data_in = 3'($urandom);
      end
      if (e >= 3) begin
        automatic int ts = e - 3;
        automatic int m = (ts % DEPTH + (sym_hist[ts / DEPTH] * PB + PB - 1) * U) % DEPTH;
        checks++;
        if (int'(dac) != expect_dac(m, ph)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d dac %0h want %0h", ts, dac, expect_dac(m, ph));
        end
        ph = (ph + f) & 64'hFFFF_FFFF;
      end
    end
    // the new word of the last load is counted one edge later
    @(posedge clk); #1 if (new_word) words++;
    checks++;
    if (words != exp_words) begin failures++; $display("FAIL words %0d want %0d", words, exp_words); end
  endtask


  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(32'd0, 5);
    run(32'h1234_5678, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
