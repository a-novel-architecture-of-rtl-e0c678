// twiddle_rom -- stage-addressed twiddle factor ROM.
//
// The ROM holds log2N words, one per FFT stage, and each word holds the N/2
// twiddle factors that the N/2 butterflies use in that stage, so it has the
// paper's size of log2N x N/2 entries, its stage bus as address and N/2
// outputs, one per butterfly. Butterfly j in stage s uses
//   W_N^k = cos(2*pi*k/N) - j*sin(2*pi*k/N),  k = (j mod 2**s) * 2**(log2N-1-s),
// the in-place decimation-in-time schedule (see fft_pkg). Entries are
// computed at elaboration from that formula and rounded to TW_W-bit signed
// numbers with TW_FRAC fraction bits; no table file is read. The read is
// combinational: the outputs follow sb within the same cycle. A stage-bus
// value above log2N-1 (possible when log2N is not a power of two) reads the
// stage-0 word; the control unit never produces one.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int N   = 8,
  localparam int M   = $clog2(N),
  localparam int SBW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [SBW-1:0] sb,          // stage bus (address)
  output twid_t          w [N/2]      // twiddle for butterfly 0..N/2-1
);

  localparam real PI = 3.14159265358979323846;

  twid_t rom [M][N/2];

  for (genvar s = 0; s < M; s++) begin : g_stage
    for (genvar j = 0; j < N/2; j++) begin : g_bf
      localparam int    K   = twiddle_exp(j, s, M);
      localparam real   ANG = 2.0 * PI * real'(K) / real'(N);
      localparam coef_t CRE = coef_t'(int'($cos(ANG) * real'(1 << TW_FRAC)));
      localparam coef_t CIM = coef_t'(int'(-$sin(ANG) * real'(1 << TW_FRAC)));
      assign rom[s][j] = '{re: CRE, im: CIM};
    end
  end

  always_comb begin
    for (int j = 0; j < N/2; j++) begin
      w[j] = (int'(sb) < M) ? rom[int'(sb)][j] : rom[0][j];
    end
  end

endmodule
