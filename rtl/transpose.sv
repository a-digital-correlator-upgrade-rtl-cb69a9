// transpose: corner turn of 1024 spectra x 2048 channels through external
// QDR SRAM, so that each channel's T_WIN consecutive samples can be sent as
// one packet.
//
// Two steps.  (1) An on-chip double-buffered "corner" memory gathers 8
// consecutive spectra; each 64-bit entry holds 8 time samples (one byte
// each, 4+4 bits) of one channel.  (2) While the next 8 spectra arrive, the
// 2048 entries of the finished group are written to QDR at address
// {window parity, channel, group}; one QDR word per clock, which exactly
// matches the input rate (8 channels per clock).  A full window of T_WIN
// spectra occupies one half of the QDR; while the next window is written to
// the other half, the finished one is read back channel by channel, 128
// words (1024 samples) per channel, again one word per input clock.  The text
// gives the 2048 x 1024 transpose and its use of the QDR; the two-step
// method, address map and timing are this design's own.
//
// Everything advances on in_valid, so the input must be a continuous train of
// whole spectra, NOUT = 8 channels per clock.  QDR: separate write and read
// ports (as QDR has), read data returns QDR_LAT clocks after qdr_re.
// Output: out_valid/out_data with out_chan, out_word (0..T_WIN/8-1) and
// out_win (window count since start, used as the packet timestamp).  The
// first window appears about 1 + 2048/NCHAN-th of a window after it ends.
module transpose
  import ami_pkg::*;
#(
  parameter int NCHAN   = 2048,
  parameter int T_WIN   = 1024,
  parameter int QDR_AW  = 20,
  parameter int QDR_LAT = 4
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic [$clog2(NCHAN/8)-1:0]    in_k1,
  input  cplx4_t [7:0]                  in_data,
  // QDR SRAM
  output logic                          qdr_we,
  output logic [QDR_AW-1:0]             qdr_waddr,
  output logic [63:0]                   qdr_wdata,
  output logic                          qdr_re,
  output logic [QDR_AW-1:0]             qdr_raddr,
  input  logic [63:0]                   qdr_rdata,
  // channel-ordered output
  output logic                          out_valid,
  output logic [63:0]                   out_data,
  output logic [$clog2(NCHAN)-1:0]      out_chan,
  output logic [$clog2(T_WIN/8)-1:0]    out_word,
  output logic [39:0]                   out_win
);
  localparam int NOUT = 8;
  localparam int M    = NCHAN / NOUT;
  localparam int KW   = $clog2(M);
  localparam int CHW  = $clog2(NCHAN);
  localparam int G    = T_WIN / 8;
  localparam int GW   = $clog2(G);

  if (1 + CHW + GW > QDR_AW) begin : g_chk
    $error("QDR address too narrow");
  end

  logic [63:0] cb [2][NOUT][M];

  logic            started;
  logic [KW-1:0]   wcnt;
  logic [2:0]      sp_t;
  logic [GW-1:0]   sp_g;
  logic [39:0]     sp_win;
  wire             take = in_valid && (started || in_sof);

  // group read (corner buffer -> QDR)
  logic            ra_active, ra_par, ra_wpar;
  logic [CHW-1:0]  ra_c;
  logic [GW-1:0]   ra_g;
  logic [39:0]     ra_win;
  // window read (QDR -> output)
  logic            b_active, b_par;
  logic [CHW-1:0]  b_c;
  logic [GW-1:0]   b_g;
  logic [39:0]     b_win, rd_win;

  always_ff @(posedge clk) begin
    if (take)
      for (int q = 0; q < NOUT; q++) cb[sp_g[0]][q][in_k1][8*sp_t +: 8] <= in_data[q];
  end

  always_ff @(posedge clk) begin
    qdr_we <= 1'b0;
    qdr_re <= 1'b0;
    if (rst) begin
      started <= 1'b0; wcnt <= '0; sp_t <= '0; sp_g <= '0; sp_win <= '0;
      ra_active <= 1'b0; b_active <= 1'b0;
    end else if (take) begin
      started <= 1'b1;
      // input position
      wcnt <= wcnt + KW'(1);
      if (wcnt == KW'(M - 1)) begin
        sp_t <= sp_t + 3'd1;
        if (sp_t == 3'd7) begin
          sp_g <= (sp_g == GW'(G - 1)) ? '0 : sp_g + GW'(1);
          if (sp_g == GW'(G - 1)) sp_win <= sp_win + 40'd1;
        end
      end
      // window read: one QDR word per clock
      if (b_active) begin
        qdr_re    <= 1'b1;
        qdr_raddr <= QDR_AW'({b_par, b_c, b_g});
        rd_win    <= b_win;
        b_g       <= b_g + GW'(1);
        if (b_g == GW'(G - 1)) begin
          b_c <= b_c + CHW'(1);
          if (b_c == CHW'(NCHAN - 1)) b_active <= 1'b0;
        end
      end
      // group read: one corner-buffer entry per clock into QDR
      if (ra_active) begin
        qdr_we    <= 1'b1;
        qdr_waddr <= QDR_AW'({ra_wpar, ra_c, ra_g});
        qdr_wdata <= cb[ra_par][3'(ra_c / CHW'(M))][KW'(ra_c % CHW'(M))];
        ra_c      <= ra_c + CHW'(1);
        if (ra_c == CHW'(NCHAN - 1)) begin
          ra_active <= 1'b0;
          if (ra_g == GW'(G - 1)) begin   // a whole window is now in QDR
            b_active <= 1'b1;
            b_c      <= '0;
            b_g      <= '0;
            b_par    <= ra_wpar;
            b_win    <= ra_win;
          end
        end
      end
      // a group of 8 spectra is complete
      if (wcnt == KW'(M - 1) && sp_t == 3'd7) begin
        ra_active <= 1'b1;
        ra_c      <= '0;
        ra_par    <= sp_g[0];
        ra_g      <= sp_g;
        ra_win    <= sp_win;
        ra_wpar   <= sp_win[0];
      end
    end
  end

  // sideband pipeline matching the QDR read latency
  logic            pv   [QDR_LAT+1];
  logic [CHW-1:0]  pc   [QDR_LAT+1];
  logic [GW-1:0]   pg   [QDR_LAT+1];
  logic [39:0]     pw   [QDR_LAT+1];

  always_comb begin
    pv[0] = qdr_re;
    pc[0] = qdr_raddr[GW +: CHW];
    pg[0] = qdr_raddr[GW-1:0];
    pw[0] = rd_win;
  end

  always_ff @(posedge clk) begin
    for (int i = 1; i <= QDR_LAT; i++) begin
      pv[i] <= rst ? 1'b0 : pv[i-1];
      pc[i] <= pc[i-1];
      pg[i] <= pg[i-1];
      pw[i] <= pw[i-1];
    end
  end

  always_comb begin
    out_valid = pv[QDR_LAT];
    out_data  = qdr_rdata;
    out_chan  = pc[QDR_LAT];
    out_word  = pg[QDR_LAT];
    out_win   = pw[QDR_LAT];
  end
endmodule
