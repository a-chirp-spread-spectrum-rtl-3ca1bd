// moving_sum: recursive running sum of the last Q values of one superbin (the
// LoRa-Mod-Enhanced statistic H, kept as Q times the running mean).
//
//   H[n] = H[n-1] + S[n] - S[n-Q]
//
// A Q-deep shift register ('delay by Q') supplies S[n-Q]; the accumulator is
// the 'delay by 1' register. Both start cleared, so the first Q-1 outputs are
// sums over fewer values. The subtraction never underflows: S[n-Q] is always
// one of the terms in H[n-1].
//
// Timing: sum updates on the clock edge of each in_vld; out_vld pulses with it.
// Paper: the recursive moving sum structure (shift register, subtractor,
// delay by one, adder) and Q = 64 in the prototype. The paper's equation
// divides by Q; the sum is kept undivided because the decision is an argmax.
module moving_sum #(
  parameter int unsigned Q  = 64,
  parameter int unsigned IW = 38,
  localparam int unsigned OW = IW + $clog2(Q)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_vld,
  input  logic [IW-1:0] din,
  output logic          out_vld,
  output logic [OW-1:0] sum
);
  logic [IW-1:0] sr [Q];   // sr[Q-1] is the value that leaves the window

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < Q; i++) sr[i] <= '0;
      sum     <= '0;
      out_vld <= 1'b0;
    end else begin
      out_vld <= in_vld;
      if (in_vld) begin
        sr[0] <= din;
        for (int i = 1; i < Q; i++) sr[i] <= sr[i-1];
        sum <= sum + OW'(din) - OW'(sr[Q-1]);
      end
    end
  end
endmodule
