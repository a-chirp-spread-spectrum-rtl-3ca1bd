// fir_decimator: low-pass filter and decimate by R (1.6 MHz -> 50 kHz for R=32).
//
// The filter is an R-tap FIR with equal taps 1/R evaluated only at the output
// instants (integrate and dump): R consecutive input samples are summed and the
// sum, divided by R, is one output sample. Its response has nulls at every
// multiple of the output rate, so the images that fold onto the baseband on
// decimation are suppressed; across the +-25 kHz LoRa band the droop is at
// most 3.9 dB. 'restart' empties the accumulator so that the next input sample
// starts a new group, which aligns the output samples with the symbol start.
//
// Timing: vld pulses for one clock, one clock after the enable that delivered
// the R-th sample of a group; dout holds until the next output.
// Paper: FIR decimation filter, factor 32. Own choice: boxcar coefficients
// (the paper gives none).
module fir_decimator
  import css_pkg::*;
#(
  parameter int unsigned R = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic                 restart,
  input  logic signed [DW-1:0] din,
  output logic signed [DW-1:0] dout,
  output logic                 vld
);
  localparam int unsigned RW = $clog2(R);
  localparam int unsigned AW = DW + RW;

  logic [RW-1:0]        cnt;
  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] nxt;

  assign nxt = acc + AW'(din);

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      cnt  <= '0;
      acc  <= '0;
      vld  <= 1'b0;
      if (!rst_n) dout <= '0;
    end else begin
      vld <= 1'b0;
      if (ce) begin
        if (cnt == RW'(R - 1)) begin
          cnt  <= '0;
          acc  <= '0;
          dout <= DW'(nxt >>> RW);
          vld  <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
          acc <= nxt;
        end
      end
    end
  end
endmodule
