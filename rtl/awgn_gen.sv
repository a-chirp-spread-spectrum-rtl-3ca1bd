// awgn_gen: test-only Gaussian noise source with a programmable level.
//
// Uniform bits come from a combined Tausworthe generator (three 32-bit shift
// generators XORed, L'Ecuyer's "taus88", period about 2^88). Four generator
// steps are unrolled per enable to give 128 fresh bits, read as 16 unsigned
// bytes. By the central limit theorem their sum, centred on zero, is close to
// Gaussian: sigma = sqrt(16*(256^2-1)/12) = 295.6 LSB, range +-2040 (+-6.9 sigma).
// The centred sum is multiplied by 'level' (Q8.8) so the output sigma is
// 1.155*level LSB, saturated to DW bits.
//
// Timing: 'noise' is registered and changes on each enable.
// Paper: a Gaussian noise generator adding AWGN of arbitrary level, 16-bit
// output. The paper's core spans +-9.1 sigma with period 2^176; this simpler
// generator spans +-6.9 sigma with period about 2^88.
module awgn_gen
  import css_pkg::*;
#(
  parameter logic [31:0] SEED1 = 32'h1234_5678,
  parameter logic [31:0] SEED2 = 32'h9abc_def1,
  parameter logic [31:0] SEED3 = 32'h0fed_cba9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic [15:0]          level,
  output logic signed [DW-1:0] noise
);
  typedef struct packed {
    logic [31:0] s1, s2, s3;
  } taus_t;

  function automatic taus_t taus_step(input taus_t s);
    taus_t n;
    n.s1 = ((s.s1 & 32'hFFFF_FFFE) << 12) ^ (((s.s1 << 13) ^ s.s1) >> 19);
    n.s2 = ((s.s2 & 32'hFFFF_FFF8) << 4)  ^ (((s.s2 << 2)  ^ s.s2) >> 25);
    n.s3 = ((s.s3 & 32'hFFFF_FFF0) << 17) ^ (((s.s3 << 3)  ^ s.s3) >> 11);
    return n;
  endfunction

  taus_t        st, nx [4];
  logic [127:0] bits;
  logic [11:0]  bsum;
  logic signed [12:0] centred;
  logic signed [31:0] scaled;

  always_comb begin
    nx[0] = taus_step(st);
    for (int i = 1; i < 4; i++) nx[i] = taus_step(nx[i-1]);
    for (int i = 0; i < 4; i++) bits[32*i +: 32] = nx[i].s1 ^ nx[i].s2 ^ nx[i].s3;
    bsum = '0;
    for (int i = 0; i < 16; i++) bsum += 12'(bits[8*i +: 8]);
    centred = $signed({1'b0, bsum}) - 13'sd2040;
    scaled  = (32'(centred) * $signed({16'd0, level})) >>> 8;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      // seeds must satisfy s1 > 1, s2 > 7, s3 > 15
      st    <= '{s1: SEED1, s2: SEED2, s3: SEED3};
      noise <= '0;
    end else if (ce) begin
      st    <= nx[3];
      noise <= sat_dw(48'(scaled));
    end
  end
endmodule
