// x_input_buffer: X-engine input buffering, output control and multiplexor.
//
// NPORTS inputs (four 10GbE ports and the internal route) each have a packet
// decoder and a circular buffer.  A buffer holds, for each antenna, SLOTS
// channel slots of T_WIN/8 64-bit words; slot = seq mod SLOTS.  Packets from
// the antennas arrive in no fixed order and on any port, so the output
// control records, per slot, which port delivered each antenna's packet.
// As in the described design, channel seq n is taken as complete when a
// packet of seq n+2 (or later) completes; it is then streamed out: the
// multiplexor picks every antenna's word from the port that holds it, and
// T_PAR time samples of all N_ANT antennas leave per clock (T_WIN/T_PAR
// clocks per channel).  An antenna whose packet never came reads as zeros
// and is cleared in out_mask.  SLOTS, T_PAR, the per-antenna banks and the
// zero fill are this design's own choices.
//
// Output: out_valid, out_sof/out_eof on the first/last clock of a channel,
// out_data[ant][t] (cplx4_t), and the channel's lc, timestamp and mask.
module x_input_buffer
  import ami_pkg::*;
#(
  parameter int NCHAN   = 2048,
  parameter int T_WIN   = 1024,
  parameter int N_NODES = 10,
  parameter int CH_USED = (NCHAN / N_NODES) * N_NODES,
  parameter int N_ANT   = 10,
  parameter int NPORTS  = 5,
  parameter int SLOTS   = 4,
  parameter int T_PAR   = 2
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic [7:0]                       node_id,
  input  logic [NPORTS-1:0]                in_valid,
  input  logic [NPORTS-1:0][63:0]          in_data,
  input  logic [NPORTS-1:0]                in_sop,
  input  logic [NPORTS-1:0]                in_eop,
  output logic                             out_valid,
  output logic                             out_sof,
  output logic                             out_eof,
  output cplx4_t [N_ANT-1:0][T_PAR-1:0]    out_data,
  output logic [15:0]                      out_lc,
  output logic [39:0]                      out_win,
  output logic [N_ANT-1:0]                 out_mask,
  output logic [15:0]                      bad_pkts,
  output logic [15:0]                      late_pkts
);
  localparam int G   = T_WIN / 8;
  localparam int GW  = $clog2(G);
  localparam int AAW = $clog2(N_ANT);
  localparam int SW  = $clog2(SLOTS);
  localparam int PW  = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  localparam int SUB = 8 / T_PAR;          // clocks per 64-bit word
  localparam int UW  = (SUB > 1) ? $clog2(SUB) : 1;

  // ---------------- decoders and circular buffers ----------------
  logic [NPORTS-1:0]           wr_en, done;
  logic [NPORTS-1:0][AAW-1:0]  wr_ant, done_ant;
  logic [NPORTS-1:0][SW-1:0]   wr_slot;
  logic [NPORTS-1:0][GW-1:0]   wr_word;
  logic [NPORTS-1:0][63:0]     wr_data;
  logic [NPORTS-1:0][47:0]     done_seq;
  logic [NPORTS-1:0][15:0]     done_lc, bad;
  logic [NPORTS-1:0][39:0]     done_win;

  logic [SW-1:0]  rd_slot;
  logic [GW-1:0]  rd_word;
  logic [63:0]    bank_q [NPORTS][N_ANT];

  for (genvar k = 0; k < NPORTS; k++) begin : g_port
    x_packet_decode #(.NCHAN(NCHAN), .T_WIN(T_WIN), .N_NODES(N_NODES), .CH_USED(CH_USED),
                      .N_ANT(N_ANT), .SLOTS(SLOTS)) u_dec (
      .clk, .rst, .node_id,
      .in_valid(in_valid[k]), .in_data(in_data[k]), .in_sop(in_sop[k]), .in_eop(in_eop[k]),
      .wr_en(wr_en[k]), .wr_ant(wr_ant[k]), .wr_slot(wr_slot[k]), .wr_word(wr_word[k]),
      .wr_data(wr_data[k]), .done(done[k]), .done_ant(done_ant[k]), .done_seq(done_seq[k]),
      .done_lc(done_lc[k]), .done_win(done_win[k]), .bad_pkts(bad[k]));

    for (genvar a = 0; a < N_ANT; a++) begin : g_ant
      logic [63:0] mem [SLOTS * G];
      always_ff @(posedge clk)
        if (wr_en[k] && wr_ant[k] == AAW'(a)) mem[{wr_slot[k], wr_word[k]}] <= wr_data[k];
      assign bank_q[k][a] = mem[{rd_slot, rd_word}];
    end
  end

  always_comb begin
    bad_pkts = '0;
    for (int k = 0; k < NPORTS; k++) bad_pkts += bad[k];
  end

  // ---------------- output control ----------------
  logic [47:0]          s_seq  [SLOTS];
  logic [15:0]          s_lc   [SLOTS];
  logic [39:0]          s_win  [SLOTS];
  logic [N_ANT-1:0]     s_mask [SLOTS];
  logic [PW-1:0]        s_src  [SLOTS][N_ANT];
  logic [47:0]          max_seq, next_out;
  logic                 any_seen;

  logic                 rd_active;
  logic [UW-1:0]        rd_sub;
  logic [47:0]          rd_seq;

  wire can_release = !rd_active && any_seen && (max_seq >= next_out + 48'd2);

  always_ff @(posedge clk) begin
    if (rst) begin
      max_seq <= '0; next_out <= '0; any_seen <= 1'b0; late_pkts <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        s_mask[s] <= '0;
        s_seq[s]  <= '1;
      end
    end else begin
      // several ports may complete in the same clock: update local copies
      logic [47:0]      ns [SLOTS];
      logic [N_ANT-1:0] nm [SLOTS];
      logic [47:0]      mx;
      logic [15:0]      nl;
      for (int s = 0; s < SLOTS; s++) begin
        ns[s] = s_seq[s];
        nm[s] = s_mask[s];
      end
      mx = max_seq;
      nl = late_pkts;
      for (int k = 0; k < NPORTS; k++) begin
        if (done[k]) begin
          logic [SW-1:0] sl;
          sl = done_seq[k][SW-1:0];
          if (done_seq[k] < next_out) begin
            nl = nl + 16'd1;
          end else begin
            if (ns[sl] != done_seq[k]) begin
              ns[sl]    = done_seq[k];
              nm[sl]    = '0;
              s_lc[sl]  <= done_lc[k];
              s_win[sl] <= done_win[k];
            end
            nm[sl][done_ant[k]] = 1'b1;
            s_src[sl][done_ant[k]] <= PW'(k);
          end
          if (!any_seen || done_seq[k] > mx) mx = done_seq[k];
          any_seen <= 1'b1;
        end
      end
      for (int s = 0; s < SLOTS; s++) begin
        s_seq[s]  <= ns[s];
        s_mask[s] <= nm[s];
      end
      max_seq   <= mx;
      late_pkts <= nl;
      if (can_release) next_out <= next_out + 48'd1;
    end
  end

  // ---------------- readout through the multiplexor ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      rd_active <= 1'b0;
      rd_sub    <= '0;
      rd_word   <= '0;
    end else if (can_release) begin
      rd_active <= 1'b1;
      rd_seq    <= next_out;
      rd_slot   <= next_out[SW-1:0];
      rd_word   <= '0;
      rd_sub    <= '0;
    end else if (rd_active) begin
      rd_sub <= (int'(rd_sub) == SUB - 1) ? '0 : rd_sub + UW'(1);
      if (int'(rd_sub) == SUB - 1) begin
        rd_word <= rd_word + GW'(1);
        if (rd_word == GW'(G - 1)) rd_active <= 1'b0;
      end
    end
  end

  wire slot_ok = (s_seq[rd_slot] == rd_seq);

  always_ff @(posedge clk) begin
    out_valid <= rst ? 1'b0 : rd_active;
    out_sof   <= rd_active && rd_word == '0 && rd_sub == '0;
    out_eof   <= rd_active && rd_word == GW'(G - 1) && int'(rd_sub) == SUB - 1;
    out_lc    <= s_lc[rd_slot];
    out_win   <= s_win[rd_slot];
    for (int a = 0; a < N_ANT; a++) begin
      logic        have;
      logic [63:0] w;
      have        = slot_ok && s_mask[rd_slot][a];
      w           = bank_q[s_src[rd_slot][a]][a];
      out_mask[a] <= have;
      for (int t = 0; t < T_PAR; t++)
        out_data[a][t] <= have ? cplx4_t'(w[8 * (int'(rd_sub) * T_PAR + t) +: 8]) : '0;
    end
  end
endmodule
