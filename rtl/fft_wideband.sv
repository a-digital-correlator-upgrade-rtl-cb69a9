// fft_wideband: streaming NFFT-point FFT of a real signal arriving PAR
// samples per clock, producing the NFFT/2 positive-frequency channels.
//
// It uses the four-step split NFFT = PAR * M (M = NFFT/PAR).  Sample
// n = PAR*m + p arrives on lane p at clock m.  Each lane runs an M-point
// radix-2 SDF FFT over m (log2(M) fft_sdf_stage stages, sharing control),
// whose output leaves in bit-reversed order k1 = bitrev(r).  Lane p is then
// multiplied by the twiddle W_NFFT^(p*k1), and a direct PAR-point DFT across
// the lanes gives X[k1 + M*k2].  Only k2 < PAR/2 are computed: those are the
// channels 0..NFFT/2-1 of the real input, PAR/2 channels per clock.  The
// text names a 4096-point real FFT giving 2048 channels on 8 x (18b+18b)
// outputs; this internal structure is this design's own (the CASPER library
// FFT is not reproduced), as are the Q1.17 twiddles and rounding.
//
// Scaling: shift_sched[s] halves the output of SDF stage s; the direct DFT
// is scaled down by 2^(number of ones in shift_sched[top log2(PAR) bits]).
// With all ones the transform is X/NFFT.  `ovf` is sticky saturation.
//
// Outputs per valid clock: out_k1 and PAR/2 complex channels,
// channel(q) = out_k1 + M*q.  out_sof marks the first clock of each spectrum.
// Timing: log2(M) + 2 register stages; streams continuously (the last
// spectrum leaves as the next one enters).
module fft_wideband
  import ami_pkg::*;
#(
  parameter int NFFT = 4096,
  parameter int PAR  = 16
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic [$clog2(NFFT)-1:0]           shift_sched,
  input  logic                              in_valid,
  input  dsample_t [PAR-1:0]     in_data,
  output logic                              out_valid,
  output logic                              out_sof,
  output logic [$clog2(NFFT/PAR)-1:0]       out_k1,
  output dsample_t [PAR/2-1:0]   out_re,
  output dsample_t [PAR/2-1:0]   out_im,
  output logic                              ovf
);
  localparam int M    = NFFT / PAR;
  localparam int S    = $clog2(M);
  localparam int P2   = $clog2(PAR);
  localparam int NOUT = PAR / 2;
  localparam int AW   = 2 * DW + P2 + 2;

  // ---- per-lane M-point SDF FFTs ----
  logic                         sv [S+1];
  dsample_t [PAR-1:0] sre [S+1];
  dsample_t [PAR-1:0] sim [S+1];
  logic [S-1:0]                 sovf;

  assign sv[0]  = in_valid;
  assign sre[0] = in_data;
  assign sim[0] = '0;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.D(M >> (s + 1)), .LANES(PAR)) u_st (
      .clk, .rst, .shift(shift_sched[s]),
      .in_valid(sv[s]), .in_re(sre[s]), .in_im(sim[s]),
      .out_valid(sv[s+1]), .out_re(sre[s+1]), .out_im(sim[s+1]), .ovf(sovf[s])
    );
  end

  // ---- lane twiddles W_NFFT^(p*k1) ----
  typedef logic signed [DW-1:0] ltab_t [M];
  function automatic ltab_t gen_lc(int p);
    ltab_t t;
    for (int k = 0; k < M; k++) t[k] = fx_cos(longint'(p * k), longint'(NFFT));
    return t;
  endfunction
  function automatic ltab_t gen_ls(int p);
    ltab_t t;
    for (int k = 0; k < M; k++) t[k] = fx_sin(longint'(p * k), longint'(NFFT));
    return t;
  endfunction

  logic [S-1:0] r;          // output position of the SDF chain
  logic [S-1:0] k1, k1_t;
  logic         v_t, sof_t;
  always_comb k1 = S'(bitrev(16'(r), S));

  always_ff @(posedge clk) begin
    if (rst) begin
      r <= '0; v_t <= 1'b0; out_valid <= 1'b0;
    end else begin
      v_t       <= sv[S];
      out_valid <= v_t;
      if (sv[S]) r <= r + S'(1);
    end
    if (sv[S]) begin
      k1_t  <= k1;
      sof_t <= (r == '0);
    end
    if (v_t) begin
      out_k1  <= k1_t;
      out_sof <= sof_t;
    end
  end

  dsample_t [PAR-1:0] y_re, y_im;
  for (genvar p = 0; p < PAR; p++) begin : g_tw
    localparam ltab_t LC = gen_lc(p);
    localparam ltab_t LS = gen_ls(p);
    logic signed [2*DW:0] m_re, m_im;
    always_comb begin
      m_re = (2*DW+1)'(sre[S][p]) * (2*DW+1)'(LC[k1]) + (2*DW+1)'(sim[S][p]) * (2*DW+1)'(LS[k1]);
      m_im = (2*DW+1)'(sim[S][p]) * (2*DW+1)'(LC[k1]) - (2*DW+1)'(sre[S][p]) * (2*DW+1)'(LS[k1]);
    end
    always_ff @(posedge clk)
      if (sv[S]) begin
        y_re[p] <= (p == 0) ? sre[S][p] : rnd_sat(48'(m_re), DW - 1);
        y_im[p] <= (p == 0) ? sim[S][p] : rnd_sat(48'(m_im), DW - 1);
      end
  end

  // ---- direct PAR-point DFT across lanes, first NOUT outputs ----
  int dft_sh;
  always_comb begin
    dft_sh = 0;
    for (int i = S; i < S + P2; i++) dft_sh += int'(shift_sched[i]);
  end

  logic [NOUT-1:0] dovf;
  for (genvar q = 0; q < NOUT; q++) begin : g_dft
    logic signed [AW-1:0] acc_re, acc_im;
    logic signed [DW-1:0] o_re, o_im;
    always_comb begin
      acc_re = '0;
      acc_im = '0;
      for (int p = 0; p < PAR; p++) begin
        acc_re += AW'(y_re[p]) * AW'(fx_cos(longint'(p * q), longint'(PAR)))
                + AW'(y_im[p]) * AW'(fx_sin(longint'(p * q), longint'(PAR)));
        acc_im += AW'(y_im[p]) * AW'(fx_cos(longint'(p * q), longint'(PAR)))
                - AW'(y_re[p]) * AW'(fx_sin(longint'(p * q), longint'(PAR)));
      end
      o_re = rnd_sat(48'(acc_re), DW - 1 + dft_sh);
      o_im = rnd_sat(48'(acc_im), DW - 1 + dft_sh);
      dovf[q] = ((48'(acc_re) >>> (DW - 1 + dft_sh)) > 48'sd131071) ||
                ((48'(acc_re) >>> (DW - 1 + dft_sh)) < -48'sd131072) ||
                ((48'(acc_im) >>> (DW - 1 + dft_sh)) > 48'sd131071) ||
                ((48'(acc_im) >>> (DW - 1 + dft_sh)) < -48'sd131072);
    end
    always_ff @(posedge clk)
      if (v_t) begin
        out_re[q] <= o_re;
        out_im[q] <= o_im;
      end
  end

  always_ff @(posedge clk) begin
    if (rst)                      ovf <= 1'b0;
    else if ((|sovf) || (v_t && |dovf)) ovf <= 1'b1;
  end
endmodule
