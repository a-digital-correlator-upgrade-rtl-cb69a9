// tb_roach2_node: end-to-end test of a two-board array at reduced size.
//
// Two roach2_node boards (node 0 and 1, one antenna each, two bands each)
// run with a 256-point FFT (128 channels/band, 16 samples/clock), 32-sample
// windows, all channels used, 8 samples per clock into the X-engine,
// behavioural QDR SRAMs and ADC data valid on every other clock.  The 10GbE
// switch is modelled by wiring each board's SFP transmit port k to the other
// board's receive port k (with two nodes each port has only one remote
// destination).  Both boards receive the same random ADC stream, use the
// same delays and Walsh patterns, so every visibility must satisfy
// V(0,1) = V(0,0) = V(1,1) with zero imaginary part.  The 1GbE byte streams
// of both boards are parsed and every visibility packet (after the first two
// integrations, which hold start-up history) is checked for this, plus
// header (node id, channel ownership) and length.
//
// Mechanisms counted (each must occur at least once, or it is a failure):
// PPS start, phase/noise Walsh toggles, delay load, autocorrelation dumps
// (with noise demodulation differing from total power), requantiser
// saturation, internal (non-Ethernet) packets, SFP packets, X-engine channel
// releases, visibility packets on 1GbE.  bad_pkts, FFT and FIFO overflow must
// stay zero.
module tb_roach2_node;
  import ami_pkg::*;
  localparam int NFFT = 256, PAR = 16, TW = 64, NN = 2, NA = 2, CU = 128, AW = 12, TP = 8;
  localparam int NCH = NFFT / 2, NWD = NA * (NA + 1), MD = 1024, WL = 64, WD = 1024;
  logic clk = 0, rst = 1, pps = 0, arm = 0;
  adc_t [1:0][PAR-1:0] adc_data;
  logic [1:0] adc_valid = 0;
  logic [1:0][$clog2(MD)-1:0] delay = 0;
  logic delay_load = 0, walsh_we = 0, walsh_sel = 0, walsh_din = 0;
  logic [$clog2(WL)-1:0] walsh_addr = 0;
  logic [1:0] coef_we = 0;
  logic [$clog2(NCH)-1:0] coef_addr = 0;
  logic signed [15:0] coef_re = 0, coef_im = 0;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  // per-board wires
  logic [1:0] running, gbe_valid, gbe_sop, gbe_eop, out_ovf, qdr_x_we, qdr_x_re;
  logic [1:0][1:0] phase_gpio, noise_gpio, ac_valid, ac_sof, qdr_f_we, qdr_f_re, fft_ovf, pkt_ovf;
  logic [1:0][1:0][3:0] ac_k1;
  logic [1:0][1:0][7:0][63:0] ac_pwr, ac_demod;
  logic [1:0][1:0][AW-1:0] qdr_f_waddr, qdr_f_raddr;
  logic [1:0][1:0][63:0] qdr_f_wdata, qdr_f_rdata;
  logic [1:0][AW-1:0] qdr_x_waddr, qdr_x_raddr;
  logic [1:0][31:0] qdr_x_wdata, qdr_x_rdata, pps_cnt;
  logic [1:0][3:0] tx_valid, tx_sop, tx_eop;
  logic [1:0][3:0][63:0] tx_data;
  logic [1:0][3:0][7:0] tx_dest;
  logic [1:0][7:0] gbe_data;
  logic [1:0][15:0] bad_pkts, late_pkts;

  for (genvar n = 0; n < 2; n++) begin : g_node
    roach2_node #(.NFFT(NFFT), .PAR(PAR), .T_WIN(TW), .N_NODES(NN), .N_ANT(NA), .CH_USED(CU),
                  .MAX_DELAY(MD), .WALSH_LEN(WL), .WALSH_DLY(WD), .QDR_AW(AW),
                  .T_PAR(TP), .F_PKT_BUF(8), .X_PKT_BUF(128)) dut (
      .clk, .rst, .pps, .arm, .running(running[n]), .adc_data, .adc_valid,
      .node_id(8'(n)), .delay, .delay_load, .shift_sched('1), .ac_acc_len(32'd4),
      .x_acc_len(32'd4), .walsh_step(24'd37), .walsh_we, .walsh_sel, .walsh_addr, .walsh_din,
      .phase_dly(10'd0), .noise_dly(10'd3), .coef_we, .coef_addr, .coef_re, .coef_im,
      .phase_gpio(phase_gpio[n]), .noise_gpio(noise_gpio[n]), .ac_valid(ac_valid[n]),
      .ac_sof(ac_sof[n]), .ac_k1(ac_k1[n]), .ac_pwr(ac_pwr[n]), .ac_demod(ac_demod[n]),
      .qdr_f_we(qdr_f_we[n]), .qdr_f_waddr(qdr_f_waddr[n]), .qdr_f_wdata(qdr_f_wdata[n]),
      .qdr_f_re(qdr_f_re[n]), .qdr_f_raddr(qdr_f_raddr[n]), .qdr_f_rdata(qdr_f_rdata[n]),
      .qdr_x_we(qdr_x_we[n]), .qdr_x_waddr(qdr_x_waddr[n]), .qdr_x_wdata(qdr_x_wdata[n]),
      .qdr_x_re(qdr_x_re[n]), .qdr_x_raddr(qdr_x_raddr[n]), .qdr_x_rdata(qdr_x_rdata[n]),
      .sfp_tx_valid(tx_valid[n]), .sfp_tx_data(tx_data[n]), .sfp_tx_sop(tx_sop[n]),
      .sfp_tx_eop(tx_eop[n]), .sfp_tx_dest(tx_dest[n]), .sfp_tx_ready(4'hf),
      .sfp_rx_valid(tx_valid[1-n]), .sfp_rx_data(tx_data[1-n]), .sfp_rx_sop(tx_sop[1-n]),
      .sfp_rx_eop(tx_eop[1-n]), .gbe_valid(gbe_valid[n]), .gbe_data(gbe_data[n]),
      .gbe_sop(gbe_sop[n]), .gbe_eop(gbe_eop[n]), .gbe_ready(1'b1), .fft_ovf(fft_ovf[n]),
      .pkt_ovf(pkt_ovf[n]), .bad_pkts(bad_pkts[n]), .late_pkts(late_pkts[n]),
      .out_ovf(out_ovf[n]), .pps_cnt(pps_cnt[n]));
    for (genvar b = 0; b < 2; b++) begin : g_fq
      qdr_model #(.AW(AW), .DW(64), .LAT(4)) u_qf (
        .clk, .we(qdr_f_we[n][b]), .waddr(qdr_f_waddr[n][b]), .wdata(qdr_f_wdata[n][b]),
        .re(qdr_f_re[n][b]), .raddr(qdr_f_raddr[n][b]), .rdata(qdr_f_rdata[n][b]));
    end
    qdr_model #(.AW(AW), .DW(32), .LAT(4)) u_qx (
      .clk, .we(qdr_x_we[n]), .waddr(qdr_x_waddr[n]), .wdata(qdr_x_wdata[n]),
      .re(qdr_x_re[n]), .raddr(qdr_x_raddr[n]), .rdata(qdr_x_rdata[n]));
  end

  // mechanism counters
  int n_pps, n_phase, n_noise, n_delay, n_ac, n_acdem, n_sat, n_int, n_sfp, n_rel, n_vis;
  int n_bytes [2];
  logic [7:0] pkt [2][$];
  logic [1:0][1:0] phase_q, noise_q;

  always @(posedge clk) if (!rst) begin
    if (running[0] && running[1]) n_pps++;
    for (int n = 0; n < 2; n++) begin
      for (int b = 0; b < 2; b++) begin
        if (phase_gpio[n][b] != phase_q[n][b]) n_phase++;
        if (noise_gpio[n][b] != noise_q[n][b]) n_noise++;
        if (ac_valid[n][b]) begin
          n_ac++;
          if (ac_demod[n][b][0] != ac_pwr[n][b][0]) n_acdem++;
        end
      end
      phase_q[n] <= phase_gpio[n]; noise_q[n] <= noise_gpio[n];
      for (int k = 0; k < 4; k++) if (tx_valid[n][k] && tx_sop[n][k]) n_sfp++;
    end
    if (g_node[0].dut.g_band[0].u_f.rq_v)
      for (int q = 0; q < 8; q++)
        if ($signed(g_node[0].dut.g_band[0].u_f.rq_d[q].re) == 7 ||
            $signed(g_node[0].dut.g_band[0].u_f.rq_d[q].re) == -7) n_sat++;
    if (g_node[0].dut.int_valid && g_node[0].dut.int_sop) n_int++;
    if (g_node[0].dut.u_x.ib_sof) n_rel++;
    // 1GbE parser and visibility check
    for (int n = 0; n < 2; n++)
      if (gbe_valid[n]) begin
        if (gbe_sop[n]) pkt[n].delete();
        pkt[n].push_back(gbe_data[n]);
        if (gbe_eop[n]) check_pkt(n);
      end
  end

  task automatic check_pkt(int n);
    int w [NWD];
    int ch;
    checks++;
    if (pkt[n].size() != 8 + 4 * NWD) begin
      failures++; $display("node %0d: packet of %0d bytes", n, pkt[n].size()); return;
    end
    for (int i = 0; i < NWD; i++)
      w[i] = int'({pkt[n][8 + 4*i], pkt[n][9 + 4*i], pkt[n][10 + 4*i], pkt[n][11 + 4*i]});
    ch = int'({pkt[n][6], pkt[n][7]}) % NCH;
    // the first two integrations include uninitialised filter history
    if ({pkt[n][0], pkt[n][1], pkt[n][2], pkt[n][3], pkt[n][4]} < 40'd8) return;
    checks += 3;
    if (pkt[n][5] != 8'(n) || ch % NN != n || ch >= CU) begin
      failures++; $display("node %0d: bad header chan %0d", n, ch);
    end
    // order (0,0) re im, (0,1) re im, (1,1) re im
    if (w[1] != 0 || w[3] != 0 || w[5] != 0 || w[0] != w[2] || w[0] != w[4] || w[0] < 0) begin
      failures++;
      if (failures < 8) $display("node %0d chan %0d: vis %0d %0d %0d %0d %0d %0d", n, ch,
                                 w[0], w[1], w[2], w[3], w[4], w[5]);
    end
    if (w[0] == 0) begin failures++; $display("node %0d chan %0d: zero power", n, ch); end
    n_vis++;
  endtask

  initial begin
    n_pps = 0; n_phase = 0; n_noise = 0; n_delay = 0; n_ac = 0; n_acdem = 0; n_sat = 0;
    n_int = 0; n_sfp = 0; n_rel = 0; n_vis = 0;
    phase_q = '0; noise_q = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // Walsh patterns: phase = alternate 4 on/4 off, noise = alternate 1/1
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < WL; a++) begin
        walsh_we <= 1; walsh_sel <= 1'(s); walsh_addr <= 6'(a);
        walsh_din <= (s == 0) ? a[2] : a[0];
        @(posedge clk);
      end
    walsh_we <= 0;
    // requantiser gains: every 4th channel large (saturates), the rest moderate
    for (int c = 0; c < NCH; c++) begin
      coef_we <= 2'b11; coef_addr <= 7'(c);
      coef_re <= (c % 4 == 0) ? 16'sd32767 : 16'sd2000; coef_im <= 16'sd300;
      @(posedge clk);
    end
    coef_we <= 0;
    delay <= {10'd37, 10'd5}; delay_load <= 1; n_delay++;
    @(posedge clk);
    delay_load <= 0;
    arm <= 1;
    repeat (10) @(posedge clk);
    pps <= 1; repeat (4) @(posedge clk); pps <= 0;
    repeat (3) @(posedge clk);
    adc_on = 1;
    repeat (2 * 15 * TW * NFFT / PAR) @(posedge clk);
    pps <= 1; repeat (4) @(posedge clk); pps <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (n_pps == 0 || pps_cnt[0] != 1) begin failures++; $display("PPS start/count not seen"); end
    begin
      string nm [10] = '{"phase walsh", "noise walsh", "delay load", "autocorr dump",
                         "noise demod", "requant saturation", "internal packet", "sfp packet",
                         "n+2 release", "1GbE visibility packet"};
      int cnt [10];
      cnt = '{n_phase, n_noise, n_delay, n_ac, n_acdem, n_sat, n_int, n_sfp, n_rel, n_vis};
      for (int i = 0; i < 10; i++) begin
        checks++;
        $display("mechanism %-24s %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("mechanism %s never happened", nm[i]); end
      end
    end
    for (int n = 0; n < 2; n++) begin
      checks++;
      if (bad_pkts[n] != 0 || fft_ovf[n] != 0 || pkt_ovf[n] != 0 || out_ovf[n]) begin
        failures++; $display("node %0d: bad %0d fft_ovf %b pkt_ovf %b out_ovf %b", n,
                             bad_pkts[n], fft_ovf[n], pkt_ovf[n], out_ovf[n]);
      end
      $display("node %0d late packets %0d", n, late_pkts[n]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC: identical random samples for both boards, valid every other clock
  // (the reduced array has fewer X-engines per channel than the real one,
  // so the sample rate is halved to keep the X-engines within their rate)
  bit adc_on = 0;
  always @(posedge clk) adc_valid <= {2{adc_on && !adc_valid[0]}};
  always @(posedge clk)
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < PAR; p++) adc_data[b][p] <= adc_t'($urandom_range(0, 200) - 100);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
