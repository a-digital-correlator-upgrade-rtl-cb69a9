// autocorr: per-antenna autocorrelation ("rain gauge") sub-system.
//
// For every channel of every spectrum the power P = re^2 + im^2 is formed and
// added into two per-channel accumulators: the plain power sum, and the power
// signed by the noise-injection Walsh state (+P with the noise source in one
// state, -P in the other), i.e. the P_on - P_off difference that measures the
// system temperature.  The text describes the power, the vector accumulator
// and the Walsh demodulation; the memory layout, widths and dump format here
// are own choices.
//
// Input is the channeliser stream: NOUT channels per valid clock,
// channel(q) = in_k1 + (NCHAN/NOUT)*q, in_sof on the first clock of each
// spectrum.  `noise` is sampled at in_sof and holds for the whole spectrum.
// After acc_len spectra (acc_len >= 1) the sums are presented on dump_* during
// the last spectrum of the integration, one clock per k1, and the
// accumulation restarts.  `noise` = 1 gives -P (own sign convention).
// Timing: dump_* appear two clocks after the matching input word.
module autocorr
  import ami_pkg::*;
#(
  parameter int NCHAN = 2048,
  parameter int NOUT  = 8,
  parameter int AW    = 64
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [31:0]                   acc_len,
  input  logic                          noise,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic [$clog2(NCHAN/NOUT)-1:0] in_k1,
  input  dsample_t [NOUT-1:0]           in_re,
  input  dsample_t [NOUT-1:0]           in_im,
  output logic                          dump_valid,
  output logic                          dump_sof,
  output logic [$clog2(NCHAN/NOUT)-1:0] dump_k1,
  output logic [NOUT-1:0][AW-1:0]       dump_pwr,
  output logic signed [NOUT-1:0][AW-1:0] dump_demod
);
  localparam int M  = NCHAN / NOUT;
  localparam int KW = $clog2(M);
  localparam int PW = 2 * DW;

  logic [31:0] sc;
  logic        started, noise_r;
  logic [31:0] sc_now;
  logic        noise_now;

  always_comb begin
    sc_now    = sc;
    noise_now = noise_r;
    if (in_sof) begin
      noise_now = noise;
      sc_now    = (!started || sc >= acc_len - 32'd1) ? 32'd0 : sc + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sc <= '0; started <= 1'b0; noise_r <= 1'b0;
    end else if (in_valid && in_sof) begin
      sc <= sc_now; started <= 1'b1; noise_r <= noise;
    end
  end

  // stage 1: powers
  logic              v1, first1, last1, sof1, neg1;
  logic [KW-1:0]     k1_1;
  logic [NOUT-1:0][PW-1:0] p1;

  always_ff @(posedge clk) begin
    v1 <= rst ? 1'b0 : (in_valid && (started || in_sof));
    if (in_valid) begin
      first1 <= (sc_now == 32'd0);
      last1  <= (sc_now >= acc_len - 32'd1);
      sof1   <= in_sof;
      neg1   <= noise_now;
      k1_1   <= in_k1;
      for (int q = 0; q < NOUT; q++)
        p1[q] <= PW'(in_re[q]) * PW'(in_re[q]) + PW'(in_im[q]) * PW'(in_im[q]);
    end
  end

  // stage 2: read-modify-write of the accumulators
  logic [AW-1:0] pwr_mem [NOUT][M];
  logic [AW-1:0] dem_mem [NOUT][M];

  always_ff @(posedge clk) begin
    dump_valid <= rst ? 1'b0 : (v1 && last1);
    if (v1) begin
      dump_k1  <= k1_1;
      dump_sof <= sof1;
      for (int q = 0; q < NOUT; q++) begin
        logic [AW-1:0] ps, ds, pin, din;
        pin = AW'(p1[q]);
        din = neg1 ? -pin : pin;
        ps  = first1 ? pin : pwr_mem[q][k1_1] + pin;
        ds  = first1 ? din : dem_mem[q][k1_1] + din;
        pwr_mem[q][k1_1] <= ps;
        dem_mem[q][k1_1] <= ds;
        dump_pwr[q]      <= ps;
        dump_demod[q]    <= ds;
      end
    end
  end
endmodule
