// f_engine: one F-engine, channelising one band of one antenna.
//
// Pipeline (as in the described firmware): phase demodulation by the
// antenna's Walsh pattern -> coarse delay (0..16383 samples) -> 4-tap
// polyphase FIR -> 4096-point real FFT (2048 channels, 18-bit) -> (a) the
// autocorrelation sub-system and (b) equalisation and 4-bit requantisation
// -> 2048 x 1024 corner turn through QDR -> packetiser with internal-route
// bypass -> two 10GbE ports and the internal port.  Two Walsh generators
// (phase switch and noise injection) drive the front-end GPIOs; their
// delayed copies demodulate the phase switching and the autocorrelation.
//
// Interface: PAR ADC samples per clock on adc_data when adc_valid and run
// are high (run comes from pps_sync).  All control inputs are plain
// registers written by the board's control processor.  walsh_we writes bit
// walsh_din at walsh_addr of generator walsh_sel (0 phase, 1 noise).
// Latency from ADC to packet is about 1.01 windows (the corner turn).
module f_engine
  import ami_pkg::*;
#(
  parameter int NFFT      = 4096,
  parameter int PAR       = 16,
  parameter int TAPS      = 4,
  parameter int T_WIN     = 1024,
  parameter int N_NODES   = 10,
  parameter int CH_USED   = (NFFT / 2 / N_NODES) * N_NODES,
  parameter int MAX_DELAY = 16384,
  parameter int WALSH_LEN = 64,
  parameter int WALSH_DLY = 1024,
  parameter int RQ_SHIFT  = 20,
  parameter int QDR_AW    = 20,
  parameter int QDR_LAT   = 4,
  parameter int F_PKT_BUF = 2
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           run,
  input  adc_t [PAR-1:0]                 adc_data,
  input  logic                           adc_valid,
  // control
  input  logic [7:0]                     ant_id,
  input  logic                           band,
  input  logic [7:0]                     node_id,
  input  logic [$clog2(MAX_DELAY)-1:0]   delay,
  input  logic                           delay_load,
  input  logic [$clog2(NFFT)-1:0]        shift_sched,
  input  logic [31:0]                    ac_acc_len,
  input  logic [23:0]                    walsh_step,
  input  logic                           walsh_we,
  input  logic                           walsh_sel,
  input  logic [$clog2(WALSH_LEN)-1:0]   walsh_addr,
  input  logic                           walsh_din,
  input  logic [$clog2(WALSH_DLY)-1:0]   phase_dly,
  input  logic [$clog2(WALSH_DLY)-1:0]   noise_dly,
  input  logic                           coef_we,
  input  logic [$clog2(NFFT/2)-1:0]      coef_addr,
  input  logic signed [15:0]             coef_re,
  input  logic signed [15:0]             coef_im,
  // front-end switching
  output logic                           phase_gpio,
  output logic                           noise_gpio,
  // autocorrelation results
  output logic                           ac_valid,
  output logic                           ac_sof,
  output logic [$clog2(NFFT/PAR)-1:0]    ac_k1,
  output logic [PAR/2-1:0][63:0]         ac_pwr,
  output logic signed [PAR/2-1:0][63:0]  ac_demod,
  // QDR
  output logic                           qdr_we,
  output logic [QDR_AW-1:0]              qdr_waddr,
  output logic [63:0]                    qdr_wdata,
  output logic                           qdr_re,
  output logic [QDR_AW-1:0]              qdr_raddr,
  input  logic [63:0]                    qdr_rdata,
  // packets: ports 0,1 = 10GbE, 2 = internal route
  output logic [2:0]                     tx_valid,
  output logic [2:0][63:0]               tx_data,
  output logic [2:0]                     tx_sop,
  output logic [2:0]                     tx_eop,
  output logic [2:0][7:0]                tx_dest,
  input  logic [2:0]                     tx_ready,
  // status
  output logic                           fft_ovf,
  output logic                           pkt_ovf
);
  localparam int NCHAN = NFFT / 2;
  localparam int NOUT  = PAR / 2;
  localparam int KW    = $clog2(NFFT / PAR);

  logic phase_dm, noise_dm;

  walsh_gen #(.LUT_LEN(WALSH_LEN), .MAX_DELAY(WALSH_DLY)) u_wphase (
    .clk, .rst, .en(run), .step_cycles(walsh_step),
    .lut_we(walsh_we && !walsh_sel), .lut_addr(walsh_addr), .lut_din(walsh_din),
    .delay(phase_dly), .gpio_out(phase_gpio), .demod_out(phase_dm));
  walsh_gen #(.LUT_LEN(WALSH_LEN), .MAX_DELAY(WALSH_DLY)) u_wnoise (
    .clk, .rst, .en(run), .step_cycles(walsh_step),
    .lut_we(walsh_we && walsh_sel), .lut_addr(walsh_addr), .lut_din(walsh_din),
    .delay(noise_dly), .gpio_out(noise_gpio), .demod_out(noise_dm));

  logic           pd_v;
  adc_t [PAR-1:0] pd_d;
  phase_demod #(.PAR(PAR)) u_pd (
    .clk, .rst, .in_valid(adc_valid && run), .in_data(adc_data), .walsh(phase_dm),
    .out_valid(pd_v), .out_data(pd_d));

  logic                     cd_v;
  logic [PAR-1:0][7:0]      cd_d;
  coarse_delay #(.PAR(PAR), .W(8), .MAX_DELAY(MAX_DELAY)) u_cd (
    .clk, .rst, .delay_in(delay), .load(delay_load),
    .in_valid(pd_v), .in_data(pd_d), .out_valid(cd_v), .out_data(cd_d));

  logic               fir_v, fir_sof;
  dsample_t [PAR-1:0] fir_d;
  pfb_fir #(.TAPS(TAPS), .NFFT(NFFT), .PAR(PAR), .IW(8)) u_fir (
    .clk, .rst, .in_valid(cd_v), .in_data(cd_d),
    .out_valid(fir_v), .out_sof(fir_sof), .out_data(fir_d));

  logic                fft_v, fft_sof;
  logic [KW-1:0]       fft_k1;
  dsample_t [NOUT-1:0] fft_re, fft_im;
  fft_wideband #(.NFFT(NFFT), .PAR(PAR)) u_fft (
    .clk, .rst, .shift_sched, .in_valid(fir_v), .in_data(fir_d),
    .out_valid(fft_v), .out_sof(fft_sof), .out_k1(fft_k1), .out_re(fft_re), .out_im(fft_im),
    .ovf(fft_ovf));

  autocorr #(.NCHAN(NCHAN), .NOUT(NOUT)) u_ac (
    .clk, .rst, .acc_len(ac_acc_len), .noise(noise_dm),
    .in_valid(fft_v), .in_sof(fft_sof), .in_k1(fft_k1), .in_re(fft_re), .in_im(fft_im),
    .dump_valid(ac_valid), .dump_sof(ac_sof), .dump_k1(ac_k1), .dump_pwr(ac_pwr),
    .dump_demod(ac_demod));

  logic              rq_v, rq_sof;
  logic [KW-1:0]     rq_k1;
  cplx4_t [NOUT-1:0] rq_d;
  requant #(.NCHAN(NCHAN), .NOUT(NOUT), .RQ_SHIFT(RQ_SHIFT)) u_rq (
    .clk, .rst, .coef_we, .coef_addr, .coef_re, .coef_im,
    .in_valid(fft_v), .in_sof(fft_sof), .in_k1(fft_k1), .in_re(fft_re), .in_im(fft_im),
    .out_valid(rq_v), .out_sof(rq_sof), .out_k1(rq_k1), .out_data(rq_d));

  logic                          tr_v;
  logic [63:0]                   tr_d;
  logic [$clog2(NCHAN)-1:0]      tr_chan;
  logic [$clog2(T_WIN/8)-1:0]    tr_word;
  logic [39:0]                   tr_win;
  transpose #(.NCHAN(NCHAN), .T_WIN(T_WIN), .QDR_AW(QDR_AW), .QDR_LAT(QDR_LAT)) u_tr (
    .clk, .rst, .in_valid(rq_v), .in_sof(rq_sof), .in_k1(rq_k1), .in_data(rq_d),
    .qdr_we, .qdr_waddr, .qdr_wdata, .qdr_re, .qdr_raddr, .qdr_rdata,
    .out_valid(tr_v), .out_data(tr_d), .out_chan(tr_chan), .out_word(tr_word), .out_win(tr_win));

  f_packetiser #(.NCHAN(NCHAN), .T_WIN(T_WIN), .N_NODES(N_NODES), .CH_USED(CH_USED),
                 .PKT_BUF(F_PKT_BUF)) u_pk (
    .clk, .rst, .ant_id, .band, .node_id,
    .in_valid(tr_v), .in_data(tr_d), .in_chan(tr_chan), .in_word(tr_word), .in_win(tr_win),
    .out_valid(tx_valid), .out_data(tx_data), .out_sop(tx_sop), .out_eop(tx_eop),
    .out_dest(tx_dest), .out_ready(tx_ready), .overflow(pkt_ovf));
endmodule
