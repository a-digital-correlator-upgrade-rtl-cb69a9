// pfb_fir: the FIR (polyphase weighting) front end of the polyphase filterbank.
//
// The filterbank splits the real sample stream into NFFT/2 channels with a
// TAPS-tap polyphase FIR followed by an NFFT-point real FFT (fft_wideband).
// For frame f (NFFT consecutive samples) and branch b = PAR*m + p this block
// outputs
//     y_f[b] = sum_{a=0}^{TAPS-1} h[(TAPS-1-a)*NFFT + b] * x_{f-a}[b],
// where x_{f-a} is the frame a frames older.  h is a Hamming-windowed sinc of
// length TAPS*NFFT with one channel of main-lobe width, computed at
// elaboration and stored as 18-bit Q1.17 constants (the usual CASPER choice;
// the text gives only the tap count and the 18-bit width).  Each lane keeps
// the previous TAPS-1 frames in a memory of NFFT/PAR words.
//
// Data: PAR signed IW-bit samples (Q1.(IW-1)) in, PAR signed 18-bit (Q1.17)
// out, rounded and saturated.  Frames start at the first valid word after
// reset; `out_sof` marks word 0 of each output frame.  The first TAPS-1
// output frames use uninitialised history.  Timing: two register stages.
module pfb_fir
  import ami_pkg::*;
#(
  parameter int TAPS = 4,
  parameter int NFFT = 4096,
  parameter int PAR  = 16,
  parameter int IW   = 8
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [PAR-1:0][IW-1:0] in_data,
  output logic                        out_valid,
  output logic                        out_sof,
  output dsample_t [PAR-1:0] out_data
);
  localparam int M  = NFFT / PAR;
  localparam int MW = $clog2(M);
  localparam int L  = TAPS * NFFT;
  localparam int PW = IW + DW;                 // product width
  localparam int SW = PW + $clog2(TAPS) + 1;   // sum width

  typedef logic signed [DW-1:0] coef_tab_t [M];

  // windowed sinc, peak normalised to just below 1.0
  function automatic coef_tab_t gen_coef(int a, int p);
    coef_tab_t t;
    real x, s, w, v;
    int  k;
    for (int m = 0; m < M; m++) begin
      k = (TAPS - 1 - a) * NFFT + m * PAR + p;
      x = (real'(k) - real'(L - 1) / 2.0) / real'(NFFT);
      s = (x == 0.0) ? 1.0 : $sin(3.14159265358979323846 * x) / (3.14159265358979323846 * x);
      w = 0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(L - 1));
      v = s * w * 131071.0;
      v = (v >= 0.0) ? v + 0.5 : v - 0.5;
      t[m] = DW'(longint'(v));
    end
    return t;
  endfunction

  logic [MW-1:0] m;
  logic          v1, sof1;

  always_ff @(posedge clk) begin
    if (rst) begin
      m <= '0; v1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) m <= m + MW'(1);
    end
    if (in_valid) sof1 <= (m == '0);
    if (v1) out_sof <= sof1;
  end

  for (genvar p = 0; p < PAR; p++) begin : g_lane
    logic [(TAPS-1)*IW-1:0] hist_mem [M];
    logic [(TAPS-1)*IW-1:0] hist;
    logic signed [PW-1:0]   prod [TAPS];
    logic signed [IW-1:0]   xa   [TAPS];

    always_comb begin
      hist  = hist_mem[m];
      xa[0] = in_data[p];
      for (int a = 1; a < TAPS; a++) xa[a] = hist[(a-1)*IW +: IW];
    end

    for (genvar a = 0; a < TAPS; a++) begin : g_tap
      localparam coef_tab_t C = gen_coef(a, p);
      always_ff @(posedge clk)
        if (in_valid) prod[a] <= PW'(xa[a]) * PW'(C[m]);
    end

    always_ff @(posedge clk) begin
      if (in_valid) begin
        if (TAPS > 2) hist_mem[m] <= {hist[(TAPS-2)*IW-1:0], in_data[p]};
        else          hist_mem[m] <= in_data[p];
      end
    end

    logic signed [SW-1:0] sum;
    always_comb begin
      sum = '0;
      for (int a = 0; a < TAPS; a++) sum += SW'(prod[a]);
    end

    always_ff @(posedge clk)
      if (v1) out_data[p] <= rnd_sat(48'(sum), IW - 1);
  end
endmodule
