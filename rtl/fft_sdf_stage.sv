// fft_sdf_stage: one radix-2 decimation-in-frequency single-delay-feedback
// stage, applied to LANES independent streams that share one control path.
//
// With butterfly span D: in the first D samples of every 2D block the input
// is stored in a D-deep FIFO and the FIFO's old contents (the twiddled
// differences of the previous block) are output; in the second D samples
// the butterfly forms a+b (output now) and (a-b)*W_{2D}^k, k = 0..D-1
// (stored, output during the next block's first half).  The stage therefore
// outputs, per block, D sums followed by D differences.  When `shift` is set
// sums and differences are halved (rounded); otherwise they saturate and
// raise `ovf`.  Twiddles are Q1.17 constants built at elaboration.
// Timing: one register stage; output starts after the first D inputs and then
// follows in_valid one-for-one.  Advances only on in_valid.
module fft_sdf_stage
  import ami_pkg::*;
#(
  parameter int D     = 1,
  parameter int LANES = 1
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           shift,
  input  logic                           in_valid,
  input  dsample_t [LANES-1:0] in_re,
  input  dsample_t [LANES-1:0] in_im,
  output logic                           out_valid,
  output dsample_t [LANES-1:0] out_re,
  output dsample_t [LANES-1:0] out_im,
  output logic                           ovf
);
  localparam int CW = $clog2(2 * D);            // block counter width
  localparam int FW = (D > 1) ? $clog2(D) : 1;  // FIFO pointer width

  typedef logic signed [DW-1:0] tw_tab_t [D];
  function automatic tw_tab_t gen_cos();
    tw_tab_t t;
    for (int k = 0; k < D; k++) t[k] = fx_cos(longint'(k), longint'(2 * D));
    return t;
  endfunction
  function automatic tw_tab_t gen_sin();
    tw_tab_t t;
    for (int k = 0; k < D; k++) t[k] = fx_sin(longint'(k), longint'(2 * D));
    return t;
  endfunction
  localparam tw_tab_t COS_T = gen_cos();
  localparam tw_tab_t SIN_T = gen_sin();

  logic [CW-1:0] c;
  logic [FW-1:0] fp;
  logic          primed;
  wire           phase_b = c[CW-1];
  wire  [FW-1:0] kidx    = c[FW-1:0];

  logic signed [DW-1:0] cw, sw;
  always_comb begin
    cw = COS_T[(D > 1) ? kidx : '0];
    sw = SIN_T[(D > 1) ? kidx : '0];
  end

  logic [LANES-1:0] lane_ovf;

  always_ff @(posedge clk) begin
    if (rst) begin
      c <= '0; fp <= '0; primed <= 1'b0; out_valid <= 1'b0; ovf <= 1'b0;
    end else begin
      out_valid <= in_valid && (primed || phase_b);
      if (in_valid) begin
        c  <= c + CW'(1);
        fp <= (fp == FW'(D - 1)) ? '0 : fp + FW'(1);
        if (phase_b) primed <= 1'b1;
        if (|lane_ovf) ovf <= 1'b1;
      end
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [DW-1:0] f_re [D];
    logic signed [DW-1:0] f_im [D];
    logic signed [DW-1:0] a_re, a_im, s_re, s_im, d_re, d_im, t_re, t_im;
    logic signed [DW:0]   sum_re, sum_im, dif_re, dif_im;
    logic signed [2*DW:0] m_re, m_im;

    always_comb begin
      a_re   = f_re[fp];
      a_im   = f_im[fp];
      sum_re = (DW+1)'(a_re) + (DW+1)'(in_re[l]);
      sum_im = (DW+1)'(a_im) + (DW+1)'(in_im[l]);
      dif_re = (DW+1)'(a_re) - (DW+1)'(in_re[l]);
      dif_im = (DW+1)'(a_im) - (DW+1)'(in_im[l]);
      s_re   = rnd_sat(48'(sum_re), shift ? 1 : 0);
      s_im   = rnd_sat(48'(sum_im), shift ? 1 : 0);
      d_re   = rnd_sat(48'(dif_re), shift ? 1 : 0);
      d_im   = rnd_sat(48'(dif_im), shift ? 1 : 0);
      // (d_re + j d_im) * (cos - j sin)
      m_re   = (2*DW+1)'(d_re) * (2*DW+1)'(cw) + (2*DW+1)'(d_im) * (2*DW+1)'(sw);
      m_im   = (2*DW+1)'(d_im) * (2*DW+1)'(cw) - (2*DW+1)'(d_re) * (2*DW+1)'(sw);
      t_re   = rnd_sat(48'(m_re), DW - 1);
      t_im   = rnd_sat(48'(m_im), DW - 1);
      lane_ovf[l] = phase_b && !shift &&
                    ((sum_re != (DW+1)'(s_re)) || (sum_im != (DW+1)'(s_im)) ||
                     (dif_re != (DW+1)'(d_re)) || (dif_im != (DW+1)'(d_im)));
    end

    always_ff @(posedge clk) begin
      if (in_valid) begin
        if (!phase_b) begin
          f_re[fp]  <= in_re[l];
          f_im[fp]  <= in_im[l];
          out_re[l] <= a_re;
          out_im[l] <= a_im;
        end else begin
          f_re[fp]  <= t_re;
          f_im[fp]  <= t_im;
          out_re[l] <= s_re;
          out_im[l] <= s_im;
        end
      end
    end
  end
endmodule
