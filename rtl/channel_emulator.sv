// channel_emulator: test-only frequency-selective channel placed in front of
// the receiver's noise injection.
//
// A shift register keeps the last (TAPS-1)*SPACING+1 input samples; the output
// is the weighted sum of TAPS of them, SPACING samples apart:
//   dout[n] = sum_t tap[t] * din[n - t*SPACING]   (taps in Q1.14, 16384 = 1.0)
// With SPACING = 4 LoRa chips x 32 ADC samples per chip = 128, this is the
// 4-tap response with 4 chips between taps that the prototype uses to emulate
// multipath. The sum is saturated to DW bits.
//
// Timing: registered output, updated on each sample enable, one enable after
// the input that it includes as its newest term.
// Paper: shift register and multiplier, 4 taps, 4-chip separation. Own
// choices: run-time tap gains and their Q1.14 format.
module channel_emulator
  import css_pkg::*;
#(
  parameter int unsigned TAPS    = 4,
  parameter int unsigned SPACING = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [DW-1:0] din,
  input  logic signed [DW-1:0] tap [TAPS],
  output logic signed [DW-1:0] dout
);
  localparam int unsigned LEN = (TAPS - 1) * SPACING;   // older samples kept

  logic signed [DW-1:0] line [LEN];   // line[i] = din delayed by i+1 enables
  logic signed [47:0]   acc;

  always_comb begin
    acc = 48'(din) * 48'(tap[0]);
    for (int t = 1; t < TAPS; t++)
      acc += 48'(line[t*SPACING-1]) * 48'(tap[t]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LEN; i++) line[i] <= '0;
      dout <= '0;
    end else if (ce) begin
      line[0] <= din;
      for (int i = 1; i < LEN; i++) line[i] <= line[i-1];
      dout <= sat_dw(acc >>> 14);
    end
  end
endmodule
