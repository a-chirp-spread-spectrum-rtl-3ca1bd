// superbin_sum: splits the N bin powers of a symbol into G = N/P superbins and
// sums each one (the LoRa-Mod statistic S).
//
//   S(g) = sum_{n = g*P}^{g*P+P-1} |y(n)|^2,   g = 0 .. G-1
//
// Because the FFT delivers the bins in order, the G adders of the block
// diagram are time-shared as one accumulator: it is cleared at the first bin
// of each superbin and S(g) is emitted after its last bin. Bin indices come
// with the data, so the split needs no counter of its own.
//
// Timing: s_vld pulses one clock after the last bin of a superbin
// (in_idx % P == P-1); s_idx is g.
// Paper: the split into G bins and the summation of P bins per superbin.
// Own choice: 0-based superbin g covers bins g*P .. g*P+P-1.
module superbin_sum #(
  parameter int unsigned NPT = 1024,
  parameter int unsigned P   = 64,
  parameter int unsigned IW  = 32,
  localparam int unsigned LOGN = $clog2(NPT),
  localparam int unsigned LOGP = $clog2(P),
  localparam int unsigned OW   = IW + LOGP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_vld,
  input  logic [LOGN-1:0]      in_idx,
  input  logic [IW-1:0]        in_pwr,
  output logic                 s_vld,
  output logic [LOGN-LOGP-1:0] s_idx,
  output logic [OW-1:0]        s_val
);
  logic [OW-1:0] acc, nxt;
  logic          first, last;

  assign first = (in_idx[LOGP-1:0] == '0);
  assign last  = (in_idx[LOGP-1:0] == '1);
  assign nxt   = (first ? '0 : acc) + OW'(in_pwr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc   <= '0;
      s_vld <= 1'b0;
      s_idx <= '0;
      s_val <= '0;
    end else begin
      s_vld <= 1'b0;
      if (in_vld) begin
        acc <= nxt;
        if (last) begin
          s_vld <= 1'b1;
          s_idx <= in_idx[LOGN-1:LOGP];
          s_val <= nxt;
        end
      end
    end
  end
endmodule
