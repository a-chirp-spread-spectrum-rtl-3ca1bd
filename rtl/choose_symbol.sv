// choose_symbol: maps the data to be sent onto a superbin symbol and repeats it.
//
// The receiver groups the 2^SF FFT bins into G = 2^SF/P superbins, so only G
// symbols are used, each carrying SF-log2(P) bits. Symbol g is sent as the
// chirp shifted by k = g*P + (P-1) chips, the highest bin of superbin g: echoes
// of the signal dechirp to lower bins and therefore stay inside the superbin.
// Each value is sent Q times in a row so that the receiver's running sums can
// average over it (LoRa-Mod-Enhanced); a new data_in is taken every Q symbols.
//
// Interface: sym_load is the address counter's symbol-boundary edge; 'shift'
// (combinational) is the ROM address offset k*UPSCALE of the symbol that starts
// at the next sym_load; cur_sym is the symbol now on air; new_word pulses when a
// new data_in has been taken. After reset the first sym_load takes data_in.
// By construction the low log2(P) + log2(UPSCALE) bits of shift are constant
// ((P-1)*UPSCALE); a synthesis tool will fold them away.
// Paper: symbol spacing P, repetition of the same symbol, the 'Shift Address'
// into the address counter. Own choice: placing the symbol at the top bin of its
// superbin, reading data_in as a parallel word.
module choose_symbol #(
  parameter int unsigned SF      = 10,
  parameter int unsigned P       = 64,
  parameter int unsigned UPSCALE = 32,
  parameter int unsigned Q       = 64,
  localparam int unsigned GW     = SF - $clog2(P),
  localparam int unsigned AW     = SF + $clog2(UPSCALE),
  localparam int unsigned QW     = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sym_load,
  input  logic [GW-1:0] data_in,
  output logic [AW-1:0] shift,
  output logic [GW-1:0] cur_sym,
  output logic          new_word
);
  logic [QW-1:0] rep;
  logic [GW-1:0] next_sym;
  logic [SF-1:0] chip;
  logic          take;

  assign take     = (rep == QW'(Q - 1));
  assign next_sym = take ? data_in : cur_sym;
  assign chip     = SF'({next_sym, {$clog2(P){1'b1}}});   // next_sym*P + P-1
  assign shift    = AW'(chip) * AW'(UPSCALE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rep      <= QW'(Q - 1);
      cur_sym  <= '0;
      new_word <= 1'b0;
    end else begin
      new_word <= sym_load & take;
      if (sym_load) begin
        cur_sym <= next_sym;
        rep     <= take ? '0 : rep + 1'b1;
      end
    end
  end
endmodule
