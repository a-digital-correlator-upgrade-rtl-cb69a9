// requant: per-channel equalisation and 4-bit requantisation.
//
// Each channel sample X (18+18 bit) is multiplied by a runtime-programmable
// complex coefficient C (16+16 bit, one per channel, held in a coefficient
// RAM) giving a 35+35 bit product, then rounded to a 4-bit integer per
// component and saturated to -7..+7 (the symmetric range of the text;
// -8 is never produced).  Output value = round(Re/Im(X*C) / 2^RQ_SHIFT);
// the position of the output bits (RQ_SHIFT) and round-half-up are this
// design's choices, the text gives only "round to [-7,+7] with saturation".
//
// Coefficient writes: coef_we with coef_addr = channel (0..NCHAN-1).
// Stream: NOUT channels per valid clock, channel(q) = in_k1 + (NCHAN/NOUT)*q.
// Output samples are cplx4_t {re, im}.  Timing: two register stages.
module requant
  import ami_pkg::*;
#(
  parameter int NCHAN    = 2048,
  parameter int NOUT     = 8,
  parameter int CW       = 16,
  parameter int RQ_SHIFT = 20
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          coef_we,
  input  logic [$clog2(NCHAN)-1:0]      coef_addr,
  input  logic signed [CW-1:0]          coef_re,
  input  logic signed [CW-1:0]          coef_im,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic [$clog2(NCHAN/NOUT)-1:0] in_k1,
  input  dsample_t [NOUT-1:0]           in_re,
  input  dsample_t [NOUT-1:0]           in_im,
  output logic                          out_valid,
  output logic                          out_sof,
  output logic [$clog2(NCHAN/NOUT)-1:0] out_k1,
  output cplx4_t [NOUT-1:0]             out_data
);
  localparam int M  = NCHAN / NOUT;
  localparam int KW = $clog2(M);
  localparam int PW = DW + CW + 1;   // 35-bit complex product components

  logic [2*CW-1:0] cram [NOUT][M];

  always_ff @(posedge clk)
    if (coef_we) cram[coef_addr / M][coef_addr % M] <= {coef_re, coef_im};

  function automatic logic signed [QB-1:0] q4(logic signed [PW-1:0] x);
    logic signed [PW-1:0] r;
    r = (x + (PW'(1) <<< (RQ_SHIFT - 1))) >>> RQ_SHIFT;
    if (r > PW'(7))  return 4'sd7;
    if (r < -PW'(7)) return -4'sd7;
    return r[QB-1:0];
  endfunction

  logic                v1, sof1;
  logic [KW-1:0]       k1_1;
  logic signed [NOUT-1:0][PW-1:0] pr, pi;   // packed storage, read through casts

  always_ff @(posedge clk) begin
    v1 <= rst ? 1'b0 : in_valid;
    out_valid <= rst ? 1'b0 : v1;
    if (in_valid) begin
      sof1 <= in_sof;
      k1_1 <= in_k1;
      for (int q = 0; q < NOUT; q++) begin
        logic signed [CW-1:0] cr, ci;
        {cr, ci} = cram[q][in_k1];
        pr[q] <= PW'(in_re[q]) * PW'(cr) - PW'(in_im[q]) * PW'(ci);
        pi[q] <= PW'(in_re[q]) * PW'(ci) + PW'(in_im[q]) * PW'(cr);
      end
    end
    if (v1) begin
      out_sof <= sof1;
      out_k1  <= k1_1;
      for (int q = 0; q < NOUT; q++) begin
        out_data[q].re <= q4(signed'(pr[q]));
        out_data[q].im <= q4(signed'(pi[q]));
      end
    end
  end
endmodule
