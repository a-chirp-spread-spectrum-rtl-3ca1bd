// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, 1 stop bit.
//
// A byte offered with valid while ready is high is shifted out LSB first after
// a start bit (0) and followed by a stop bit (1); each bit lasts
// CLK_HZ/BAUD clocks (434 for 50 MHz and 115,200 baud). The line idles high.
//
// Timing: the start bit begins on the clock after the byte is taken; ready
// returns high when the stop bit has been held for one bit time.
// Paper: a UART at 115,200 baud carries the receiver's S and H outputs.
// Own choices: frame format 8N1 and the 50 MHz system clock.
module uart_tx #(
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned BAUD   = 115_200,
  localparam int unsigned DIV   = CLK_HZ / BAUD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);
  logic [$clog2(DIV+1)-1:0] baud_cnt;
  logic [3:0]               bit_cnt;   // bits left to send, incl. start and stop
  logic [9:0]               shreg;     // {stop, data, start}, LSB on the line

  assign ready = (bit_cnt == '0);
  assign txd   = ready ? 1'b1 : shreg[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      baud_cnt <= '0;
      bit_cnt  <= '0;
      shreg    <= '1;
    end else if (ready) begin
      if (valid) begin
        shreg    <= {1'b1, data, 1'b0};
        bit_cnt  <= 4'd10;
        baud_cnt <= '0;
      end
    end else if (baud_cnt == ($clog2(DIV+1))'(DIV - 1)) begin
      baud_cnt <= '0;
      shreg    <= {1'b1, shreg[9:1]};
      bit_cnt  <= bit_cnt - 1'b1;
    end else begin
      baud_cnt <= baud_cnt + 1'b1;
    end
  end
endmodule
