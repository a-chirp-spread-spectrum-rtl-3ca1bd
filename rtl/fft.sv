// fft: streaming N-point FFT, one symbol at a time.
//
// Architecture: in-place radix-2 decimation-in-time with one butterfly per
// clock and two memory banks used ping-pong. Incoming samples are written in
// bit-reversed order into the input bank; when N samples have arrived the
// banks swap and the engine runs log2(N) stages of N/2 butterflies on the full
// bank while the next symbol fills the other one. Each butterfly computes
//   t = W^k * x[i1];  x[i0] = (x[i0] + t)/2;  x[i1] = (x[i0] - t)/2
// so the result is the DFT divided by N and never grows beyond DW bits
// (products and halvings are rounded to nearest, sums saturated). The twiddles W^k = exp(-j2*pi*k/N)
// are a Q1.15 table computed at elaboration. The bins are then streamed out in
// natural order 0..N-1, one per clock.
//
// Timing: the transform of a symbol starts the clock after its N-th sample and
// its bin 0 appears N/2*log2(N) + 1 clocks later; bins follow one per clock.
// The next symbol's last sample must therefore come at least
// N/2*log2(N) + N + 2 clocks after the previous symbol's last sample
// (6,146 clocks for N = 1,024); otherwise 'overrun' is set and that symbol is
// dropped. 'restart' discards a partly collected symbol (resynchronisation).
// Paper: an FFT after the dechirping multiplier. Everything inside is this
// design's own choice; the paper gives no FFT architecture.
module fft
  import css_pkg::*;
#(
  parameter int unsigned NPT = 1024,
  localparam int unsigned LOGN = $clog2(NPT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 restart,
  input  logic                 in_vld,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_vld,
  output logic [LOGN-1:0]      out_idx,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im,
  output logic                 overrun
);
  typedef enum logic [1:0] {IDLE, BFLY, OUTPUT} state_t;

  logic signed [DW-1:0] mre [2][NPT];
  logic signed [DW-1:0] mim [2][NPT];
  logic signed [DW-1:0] tw_re [NPT/2];
  logic signed [DW-1:0] tw_im [NPT/2];

  initial begin
    for (int k = 0; k < NPT/2; k++) begin
      tw_re[k] = DW'($rtoi(32767.0 * $cos(2.0 * 3.14159265358979323846 * k / real'(NPT))));
      tw_im[k] = DW'($rtoi(-32767.0 * $sin(2.0 * 3.14159265358979323846 * k / real'(NPT))));
    end
  end

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] a);
    for (int i = 0; i < LOGN; i++) bitrev[i] = a[LOGN-1-i];
  endfunction

  // input side
  logic            wbank;
  logic [LOGN-1:0] in_cnt;
  // engine
  state_t          state;
  logic            cbank;
  logic [$clog2(LOGN+1)-1:0] stage;
  logic [LOGN-2:0] j;
  logic [LOGN-1:0] ocnt;

  // butterfly addressing and arithmetic
  logic [LOGN-1:0]       i0, i1, lowmask;
  logic [LOGN-2:0]       twi;
  logic signed [DW-1:0]  x0r, x0i, x1r, x1i, wr, wi;
  logic signed [2*DW:0]  tr_full, ti_full;
  logic signed [DW+1:0]  tr, ti;
  logic signed [DW-1:0]  y0r, y0i, y1r, y1i;
  logic                  last_bfly, sym_done;

  always_comb begin
    lowmask = LOGN'((1 << stage) - 1);
    i0  = LOGN'((({1'b0, j} & ~lowmask) << 1) | ({1'b0, j} & lowmask));
    i1  = i0 | LOGN'(1 << stage);
    twi = (LOGN-1)'(({1'b0, j} & lowmask) << (LOGN - 1 - int'(stage)));
    x0r = mre[cbank][i0];  x0i = mim[cbank][i0];
    x1r = mre[cbank][i1];  x1i = mim[cbank][i1];
    wr  = tw_re[twi];      wi  = tw_im[twi];
    tr_full = (2*DW+1)'(x1r * wr) - (2*DW+1)'(x1i * wi);
    ti_full = (2*DW+1)'(x1r * wi) + (2*DW+1)'(x1i * wr);
    // round to nearest (add half an LSB before each right shift)
    tr  = (DW+2)'((tr_full + (2*DW+1)'(1 << (DW-2))) >>> (DW-1));
    ti  = (DW+2)'((ti_full + (2*DW+1)'(1 << (DW-2))) >>> (DW-1));
    y0r = sat_dw(48'((48'(x0r) + 48'(tr) + 48'sd1) >>> 1));
    y0i = sat_dw(48'((48'(x0i) + 48'(ti) + 48'sd1) >>> 1));
    y1r = sat_dw(48'((48'(x0r) - 48'(tr) + 48'sd1) >>> 1));
    y1i = sat_dw(48'((48'(x0i) - 48'(ti) + 48'sd1) >>> 1));
    last_bfly = (j == '1) && (stage == ($clog2(LOGN+1))'(LOGN - 1));
    sym_done  = in_vld && (in_cnt == '1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank   <= 1'b0;
      in_cnt  <= '0;
      state   <= IDLE;
      cbank   <= 1'b1;
      stage   <= '0;
      j       <= '0;
      ocnt    <= '0;
      out_vld <= 1'b0;
      out_idx <= '0;
      out_re  <= '0;
      out_im  <= '0;
      overrun <= 1'b0;
    end else begin
      out_vld <= 1'b0;
      // collect samples
      if (restart) begin
        in_cnt <= '0;
      end else if (in_vld) begin
        mre[wbank][bitrev(in_cnt)] <= in_re;
        mim[wbank][bitrev(in_cnt)] <= in_im;
        in_cnt <= in_cnt + 1'b1;
      end
      // engine
      unique case (state)
        IDLE: begin
          if (sym_done && !restart) begin
            cbank <= wbank;
            wbank <= ~wbank;
            stage <= '0;
            j     <= '0;
            state <= BFLY;
          end
        end
        BFLY: begin
          mre[cbank][i0] <= y0r;  mim[cbank][i0] <= y0i;
          mre[cbank][i1] <= y1r;  mim[cbank][i1] <= y1i;
          j <= j + 1'b1;
          if (j == '1) stage <= stage + 1'b1;
          if (last_bfly) begin
            ocnt  <= '0;
            state <= OUTPUT;
          end
        end
        OUTPUT: begin
          out_vld <= 1'b1;
          out_idx <= ocnt;
          out_re  <= mre[cbank][ocnt];
          out_im  <= mim[cbank][ocnt];
          ocnt    <= ocnt + 1'b1;
          if (ocnt == '1) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
      if (sym_done && !restart && state != IDLE) overrun <= 1'b1;
    end
  end
endmodule
