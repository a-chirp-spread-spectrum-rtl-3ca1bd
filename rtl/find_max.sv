// find_max: demodulation decision, the index of the largest of G values.
//
// Values of one symbol arrive as a stream with their index 0..G-1; the block
// keeps the running maximum and, after index G-1, outputs the winner. Ties go
// to the lower index. Used on the superbin sums S (LoRa-Mod decision) and on
// the running sums H (LoRa-Mod-Enhanced decision).
//
// Timing: dec_vld pulses one clock after the value with index G-1.
// Paper: the find-max step that ends LoRa demodulation. Own choices: streaming
// form and tie rule.
module find_max #(
  parameter int unsigned G  = 16,
  parameter int unsigned VW = 44,
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_vld,
  input  logic [GW-1:0] in_idx,
  input  logic [VW-1:0] in_val,
  output logic          dec_vld,
  output logic [GW-1:0] dec_idx,
  output logic [VW-1:0] dec_val
);
  logic [GW-1:0] best_idx, nxt_idx;
  logic [VW-1:0] best_val, nxt_val;

  always_comb begin
    if (in_idx == '0 || in_val > best_val) begin
      nxt_idx = in_idx;
      nxt_val = in_val;
    end else begin
      nxt_idx = best_idx;
      nxt_val = best_val;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best_idx <= '0;
      best_val <= '0;
      dec_vld  <= 1'b0;
      dec_idx  <= '0;
      dec_val  <= '0;
    end else begin
      dec_vld <= 1'b0;
      if (in_vld) begin
        best_idx <= nxt_idx;
        best_val <= nxt_val;
        if (in_idx == GW'(G - 1)) begin
          dec_vld <= 1'b1;
          dec_idx <= nxt_idx;
          dec_val <= nxt_val;
        end
      end
    end
  end
endmodule
