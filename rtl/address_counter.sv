// address_counter: chirp ROM address generator.
//
// A free-running AW-bit counter steps once per sample enable and wraps once per
// symbol (2^AW samples). The ROM address is count + shift (mod 2^AW): adding a
// shift of k*U plays the chirp cyclically shifted by k chips, which is how the
// transmitter modulates (15-bit counter for the 32,768-point ROM). The receiver
// uses the same block with a zero shift (10-bit counter, 1,024-point ROM).
// The shift is sampled at the first sample of each symbol, so a symbol is never
// changed part-way through. 'restart' forces the next sample to be sample 0 of a
// new symbol; it is the hook for symbol synchronisation.
//
// Timing: addr and sym_start come from registers; sym_start is high while addr
// holds the first address of a symbol. sym_load is combinational and marks the
// clock edge at which 'shift' is sampled for the next symbol (the last sample of
// a symbol, or a restart), so a symbol source can change its output on that
// same edge.
module address_counter #(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ce,
  input  logic          restart,
  input  logic [AW-1:0] shift,
  output logic [AW-1:0] addr,
  output logic          sym_start,
  output logic          sym_load
);
  logic [AW-1:0] count, shift_q;
  logic          first;

  // count is the index of the sample now presented on addr
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count   <= '0;
      shift_q <= '0;
      first   <= 1'b1;
    end else if (restart) begin
      count   <= '0;
      shift_q <= shift;
      first   <= 1'b1;
    end else if (ce) begin
      count <= count + 1'b1;
      first <= (count == {AW{1'b1}});
      if (count == {AW{1'b1}}) shift_q <= shift;
    end
  end

  // the edge at which a new symbol begins and 'shift' is sampled
  assign sym_load  = restart | (ce & (count == {AW{1'b1}}));
  assign addr      = count + shift_q;
  assign sym_start = first;
endmodule
