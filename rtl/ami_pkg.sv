// ami_pkg: constants and small helpers shared by the correlator RTL.
//
// Sizes that come from the described instrument: 16 ADC samples of 8 bits
// per 312.5 MHz clock, a 4-tap, 4096-point polyphase filterbank giving 2048
// channels, 18-bit channeliser arithmetic, 4+4-bit requantised samples,
// 1024 samples per packet and per X-engine integration, and an 8-byte packet
// header.  The header bit layout, the twiddle/coefficient formats and the
// helpers below are this design's own choices.
package ami_pkg;

  localparam int ADC_BITS   = 8;     // ADC sample width
  localparam int PAR        = 16;    // samples per clock into the F-engine
  localparam int NFFT       = 4096;  // real FFT length
  localparam int NCHAN      = 2048;  // channels per band
  localparam int DW         = 18;    // channeliser data width
  localparam int QB         = 4;     // requantised sample width (per component)
  localparam int T_WIN      = 1024;  // samples per packet / X-engine window
  localparam int WORDS_PKT  = T_WIN * 2 * QB / 64;  // 64-bit payload words per packet (128)

  // Named signed element types, so that elements of packed arrays of
  // samples stay signed when selected.
  typedef logic signed [DW-1:0]       dsample_t;   // channeliser sample
  typedef logic signed [ADC_BITS-1:0] adc_t;       // ADC sample

  // 64-bit packet header (8 bytes).  Layout chosen here:
  //   [63:24] timestamp (window count since the PPS arm)
  //   [23:16] source antenna/F-engine id
  //   [15:0]  global channel id: band*2048 + channel
  typedef struct packed {
    logic [39:0] timestamp;
    logic [7:0]  ant;
    logic [15:0] chan;
  } pkt_hdr_t;

  // 4+4-bit complex sample packed as {re, im}
  typedef struct packed {
    logic signed [QB-1:0] re;
    logic signed [QB-1:0] im;
  } cplx4_t;

  // Q1.17 fixed point cosine/sine of 2*pi*num/den, rounded, clamped to the
  // 18-bit range.  Used only to build constant tables at elaboration.
  function automatic logic signed [DW-1:0] fx_cos(longint num, longint den);
    real v;
    v = $cos(2.0 * 3.14159265358979323846 * real'(num) / real'(den)) * 131072.0;
    v = (v >= 0.0) ? v + 0.5 : v - 0.5;
    if (v > 131071.0) v = 131071.0;
    if (v < -131072.0) v = -131072.0;
    return DW'(longint'(v));
  endfunction

  function automatic logic signed [DW-1:0] fx_sin(longint num, longint den);
    real v;
    v = $sin(2.0 * 3.14159265358979323846 * real'(num) / real'(den)) * 131072.0;
    v = (v >= 0.0) ? v + 0.5 : v - 0.5;
    if (v > 131071.0) v = 131071.0;
    if (v < -131072.0) v = -131072.0;
    return DW'(longint'(v));
  endfunction

  // Round-half-up right shift by sh, then saturate to DW bits.
  function automatic logic signed [DW-1:0] rnd_sat(logic signed [47:0] x, int sh);
    logic signed [47:0] r;
    r = (sh > 0) ? ((x + (48'sd1 <<< (sh - 1))) >>> sh) : x;
    if (r > 48'sd131071) return 18'sh1FFFF;
    if (r < -48'sd131072) return 18'sh20000;
    return r[DW-1:0];
  endfunction

  // Bit reversal of the low n bits of x
  function automatic logic [15:0] bitrev(logic [15:0] x, int n);
    logic [15:0] r;
    r = '0;
    for (int i = 0; i < n; i++) r[i] = x[n-1-i];
    return r;
  endfunction

endpackage
