// roach2_node: one processing board of the packetised FX correlator.
//
// Each board digitises the low and high baseband of one antenna (two ADCs,
// 16 samples of 8 bits per 312.5 MHz clock each), channelises each band in
// its own F-engine, sends each channel's packets to the X-engine node that
// owns that channel (channel mod N_NODES), and, as an X-engine, correlates
// all antennas for its own channels.  The same four 10GbE ports carry the
// outgoing F-engine packets and the incoming X-engine packets (low band on
// ports 0,1, high band on 2,3); packets for the board's own channels take
// the internal route, where the two F-engines' internal outputs are merged
// into the X-engine's fifth input.  Integrated visibilities leave on an
// 8-bit stream to the 1GbE MAC.  A PPS edge, after `arm`, starts both
// F-engines together (pps_sync).
//
// Parts not in this RTL appear as ports: the ADC capture (adc*_data), the
// 10GbE MACs (sfp_tx_* / sfp_rx_*), the 1GbE MAC (gbe_*), and three of the
// four QDR SRAMs (qdr_f0/qdr_f1 for the corner turns, qdr_x for the vector
// accumulator).  Control registers are plain inputs shared by both bands
// except the per-band delay and equaliser coefficients.  Defaults are the
// 10-antenna Small Array configuration.
module roach2_node
  import ami_pkg::*;
#(
  parameter int NFFT      = 4096,
  parameter int PAR       = 16,
  parameter int TAPS      = 4,
  parameter int T_WIN     = 1024,
  parameter int N_NODES   = 10,
  parameter int N_ANT     = 10,
  parameter int CH_USED   = (NFFT / 2 / N_NODES) * N_NODES,
  parameter int MAX_DELAY = 16384,
  parameter int WALSH_LEN = 64,
  parameter int WALSH_DLY = 1024,
  parameter int RQ_SHIFT  = 20,
  parameter int SLOTS     = 4,
  parameter int T_PAR     = 2,
  parameter int QDR_AW    = 20,
  parameter int QDR_LAT   = 4,
  parameter int F_PKT_BUF = 2,
  parameter int X_PKT_BUF = 2
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           pps,
  input  logic                           arm,
  output logic                           running,
  // ADC capture, band 0 (low) and band 1 (high)
  input  adc_t [1:0][PAR-1:0]            adc_data,
  input  logic [1:0]                     adc_valid,
  // control registers
  input  logic [7:0]                     node_id,
  input  logic [1:0][$clog2(MAX_DELAY)-1:0] delay,
  input  logic                           delay_load,
  input  logic [$clog2(NFFT)-1:0]        shift_sched,
  input  logic [31:0]                    ac_acc_len,
  input  logic [31:0]                    x_acc_len,
  input  logic [23:0]                    walsh_step,
  input  logic                           walsh_we,
  input  logic                           walsh_sel,
  input  logic [$clog2(WALSH_LEN)-1:0]   walsh_addr,
  input  logic                           walsh_din,
  input  logic [$clog2(WALSH_DLY)-1:0]   phase_dly,
  input  logic [$clog2(WALSH_DLY)-1:0]   noise_dly,
  input  logic [1:0]                     coef_we,
  input  logic [$clog2(NFFT/2)-1:0]      coef_addr,
  input  logic signed [15:0]             coef_re,
  input  logic signed [15:0]             coef_im,
  // front-end switching GPIOs, per band
  output logic [1:0]                     phase_gpio,
  output logic [1:0]                     noise_gpio,
  // autocorrelation dumps, per band
  output logic [1:0]                     ac_valid,
  output logic [1:0]                     ac_sof,
  output logic [1:0][$clog2(NFFT/PAR)-1:0] ac_k1,
  output logic [1:0][PAR/2-1:0][63:0]    ac_pwr,
  output logic [1:0][PAR/2-1:0][63:0]    ac_demod,
  // QDR SRAMs
  output logic [1:0]                     qdr_f_we,
  output logic [1:0][QDR_AW-1:0]         qdr_f_waddr,
  output logic [1:0][63:0]               qdr_f_wdata,
  output logic [1:0]                     qdr_f_re,
  output logic [1:0][QDR_AW-1:0]         qdr_f_raddr,
  input  logic [1:0][63:0]               qdr_f_rdata,
  output logic                           qdr_x_we,
  output logic [QDR_AW-1:0]              qdr_x_waddr,
  output logic [31:0]                    qdr_x_wdata,
  output logic                           qdr_x_re,
  output logic [QDR_AW-1:0]              qdr_x_raddr,
  input  logic [31:0]                    qdr_x_rdata,
  // 10GbE ports (to and from the switch)
  output logic [3:0]                     sfp_tx_valid,
  output logic [3:0][63:0]               sfp_tx_data,
  output logic [3:0]                     sfp_tx_sop,
  output logic [3:0]                     sfp_tx_eop,
  output logic [3:0][7:0]                sfp_tx_dest,
  input  logic [3:0]                     sfp_tx_ready,
  input  logic [3:0]                     sfp_rx_valid,
  input  logic [3:0][63:0]               sfp_rx_data,
  input  logic [3:0]                     sfp_rx_sop,
  input  logic [3:0]                     sfp_rx_eop,
  // 1GbE visibility output
  output logic                           gbe_valid,
  output logic [7:0]                     gbe_data,
  output logic                           gbe_sop,
  output logic                           gbe_eop,
  input  logic                           gbe_ready,
  // status
  output logic [1:0]                     fft_ovf,
  output logic [1:0]                     pkt_ovf,
  output logic [15:0]                    bad_pkts,
  output logic [15:0]                    late_pkts,
  output logic                           out_ovf,
  output logic [31:0]                    pps_cnt
);
  logic [1:0][2:0]       tx_valid, tx_sop, tx_eop, tx_ready;
  logic [1:0][2:0][63:0] tx_data;
  logic [1:0][2:0][7:0]  tx_dest;

  pps_sync u_pps (.clk, .rst, .pps, .arm, .run(running), .pps_cnt);

  for (genvar b = 0; b < 2; b++) begin : g_band
    f_engine #(.NFFT(NFFT), .PAR(PAR), .TAPS(TAPS), .T_WIN(T_WIN), .N_NODES(N_NODES),
               .CH_USED(CH_USED), .MAX_DELAY(MAX_DELAY), .WALSH_LEN(WALSH_LEN),
               .WALSH_DLY(WALSH_DLY), .RQ_SHIFT(RQ_SHIFT), .QDR_AW(QDR_AW),
               .QDR_LAT(QDR_LAT), .F_PKT_BUF(F_PKT_BUF)) u_f (
      .clk, .rst, .run(running), .adc_data(adc_data[b]), .adc_valid(adc_valid[b]),
      .ant_id(node_id), .band(1'(b)), .node_id, .delay(delay[b]), .delay_load,
      .shift_sched, .ac_acc_len, .walsh_step, .walsh_we, .walsh_sel, .walsh_addr, .walsh_din,
      .phase_dly, .noise_dly, .coef_we(coef_we[b]), .coef_addr, .coef_re, .coef_im,
      .phase_gpio(phase_gpio[b]), .noise_gpio(noise_gpio[b]),
      .ac_valid(ac_valid[b]), .ac_sof(ac_sof[b]), .ac_k1(ac_k1[b]), .ac_pwr(ac_pwr[b]),
      .ac_demod(ac_demod[b]),
      .qdr_we(qdr_f_we[b]), .qdr_waddr(qdr_f_waddr[b]), .qdr_wdata(qdr_f_wdata[b]),
      .qdr_re(qdr_f_re[b]), .qdr_raddr(qdr_f_raddr[b]), .qdr_rdata(qdr_f_rdata[b]),
      .tx_valid(tx_valid[b]), .tx_data(tx_data[b]), .tx_sop(tx_sop[b]), .tx_eop(tx_eop[b]),
      .tx_dest(tx_dest[b]), .tx_ready(tx_ready[b]), .fft_ovf(fft_ovf[b]), .pkt_ovf(pkt_ovf[b]));

    for (genvar k = 0; k < 2; k++) begin : g_sfp
      assign sfp_tx_valid[2*b+k] = tx_valid[b][k];
      assign sfp_tx_data[2*b+k]  = tx_data[b][k];
      assign sfp_tx_sop[2*b+k]   = tx_sop[b][k];
      assign sfp_tx_eop[2*b+k]   = tx_eop[b][k];
      assign sfp_tx_dest[2*b+k]  = tx_dest[b][k];
      assign tx_ready[b][k]      = sfp_tx_ready[2*b+k];
    end
  end

  // internal route: merge the two F-engines' own-node packets
  logic        int_valid, int_sop, int_eop;
  logic [63:0] int_data;
  logic [1:0]  int_ready;
  pkt_merge #(.W(64)) u_merge (
    .clk, .rst,
    .in_valid({tx_valid[1][2], tx_valid[0][2]}), .in_data({tx_data[1][2], tx_data[0][2]}),
    .in_sop({tx_sop[1][2], tx_sop[0][2]}), .in_eop({tx_eop[1][2], tx_eop[0][2]}),
    .in_ready(int_ready), .out_valid(int_valid), .out_data(int_data),
    .out_sop(int_sop), .out_eop(int_eop));
  assign tx_ready[0][2] = int_ready[0];
  assign tx_ready[1][2] = int_ready[1];

  x_engine #(.NCHAN(NFFT / 2), .T_WIN(T_WIN), .N_NODES(N_NODES), .CH_USED(CH_USED),
             .N_ANT(N_ANT), .SLOTS(SLOTS), .T_PAR(T_PAR), .QDR_AW(QDR_AW),
             .QDR_LAT(QDR_LAT), .X_PKT_BUF(X_PKT_BUF)) u_x (
    .clk, .rst, .node_id, .acc_len(x_acc_len),
    .rx_valid({int_valid, sfp_rx_valid}), .rx_data({int_data, sfp_rx_data}),
    .rx_sop({int_sop, sfp_rx_sop}), .rx_eop({int_eop, sfp_rx_eop}),
    .qdr_we(qdr_x_we), .qdr_waddr(qdr_x_waddr), .qdr_wdata(qdr_x_wdata),
    .qdr_re(qdr_x_re), .qdr_raddr(qdr_x_raddr), .qdr_rdata(qdr_x_rdata),
    .gbe_valid, .gbe_data, .gbe_sop, .gbe_eop, .gbe_ready, .bad_pkts, .late_pkts, .out_ovf);
endmodule
