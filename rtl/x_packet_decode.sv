// x_packet_decode: receives F-engine packets on one X-engine input port.
//
// At the header word (in_sop) it unpacks pkt_hdr_t, checks that the channel
// belongs to this node (channel mod N_NODES == node_id, channel < CH_USED),
// and computes the node-local channel index lc = 2*(channel/N_NODES) + band
// (the two bands are produced at the same time, so they are interleaved)
// (CPN = CH_USED/N_NODES channels per band per node) and the sequence number
// seq = timestamp*(2*CPN) + lc, which increases by one per channel processed
// by this node.  The payload words that follow are written to the circular
// buffer at slot seq mod SLOTS, antenna ant, word 0..T_WIN/8-1.  After the
// last word a completion event (done_*) reports the antenna, seq, lc and
// timestamp.  Packets for other nodes, or of the wrong length, are dropped
// and counted in `bad_pkts`.  The header layout and the sequence numbering
// are this design's own; the text says only that the decoder sits in front
// of each circular buffer.  Timing: writes and done are registered, one
// clock after the input word.
module x_packet_decode
  import ami_pkg::*;
#(
  parameter int NCHAN   = 2048,
  parameter int T_WIN   = 1024,
  parameter int N_NODES = 10,
  parameter int CH_USED = (NCHAN / N_NODES) * N_NODES,
  parameter int N_ANT   = 10,
  parameter int SLOTS   = 4
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [7:0]                   node_id,
  input  logic                         in_valid,
  input  logic [63:0]                  in_data,
  input  logic                         in_sop,
  input  logic                         in_eop,
  output logic                         wr_en,
  output logic [$clog2(N_ANT)-1:0]     wr_ant,
  output logic [$clog2(SLOTS)-1:0]     wr_slot,
  output logic [$clog2(T_WIN/8)-1:0]   wr_word,
  output logic [63:0]                  wr_data,
  output logic                         done,
  output logic [$clog2(N_ANT)-1:0]     done_ant,
  output logic [47:0]                  done_seq,
  output logic [15:0]                  done_lc,
  output logic [39:0]                  done_win,
  output logic [15:0]                  bad_pkts
);
  localparam int G   = T_WIN / 8;
  localparam int GW  = $clog2(G);
  localparam int CPN = CH_USED / N_NODES;
  localparam int LCH = 2 * CPN;
  localparam int AAW = $clog2(N_ANT);
  localparam int SW  = $clog2(SLOTS);

  pkt_hdr_t    h;
  logic [10:0] c;
  logic        bnd, ok_hdr;
  logic [15:0] lc_c;
  assign h = pkt_hdr_t'(in_data);
  always_comb begin
    bnd    = h.chan[$clog2(NCHAN)];
    c      = 11'(h.chan[$clog2(NCHAN)-1:0]);
    ok_hdr = (32'(c) % N_NODES == 32'(node_id)) && (32'(c) < CH_USED) &&
             (32'(h.ant) < N_ANT);
    lc_c   = 16'(2 * (32'(c) / N_NODES) + (bnd ? 1 : 0));
  end

  logic              active;
  logic [GW:0]       cnt;
  logic [AAW-1:0]    ant_r;
  logic [47:0]       seq_r;
  logic [15:0]       lc_r;
  logic [39:0]       win_r;

  always_ff @(posedge clk) begin
    wr_en <= 1'b0;
    done  <= 1'b0;
    if (rst) begin
      active <= 1'b0; bad_pkts <= '0;
    end else if (in_valid) begin
      if (in_sop) begin
        active <= ok_hdr;
        cnt    <= '0;
        ant_r  <= AAW'(h.ant);
        lc_r   <= lc_c;
        win_r  <= h.timestamp;
        seq_r  <= 48'(h.timestamp) * 48'(LCH) + 48'(lc_c);
        if (!ok_hdr) bad_pkts <= bad_pkts + 16'd1;
      end else if (active) begin
        wr_en   <= 1'b1;
        wr_ant  <= ant_r;
        wr_slot <= seq_r[SW-1:0];
        wr_word <= GW'(cnt);
        wr_data <= in_data;
        cnt     <= cnt + (GW+1)'(1);
        if (in_eop) begin
          active <= 1'b0;
          if (cnt == (GW+1)'(G - 1)) begin
            done     <= 1'b1;
            done_ant <= ant_r;
            done_seq <= seq_r;
            done_lc  <= lc_r;
            done_win <= win_r;
          end else begin
            bad_pkts <= bad_pkts + 16'd1;
          end
        end
      end
    end
  end
endmodule
