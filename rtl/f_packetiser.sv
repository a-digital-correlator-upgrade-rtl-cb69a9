// f_packetiser: turns the channel-ordered F-engine stream into UDP payloads
// for the X-engines and decides where each one goes.
//
// A packet is one channel of one band for one window: an 8-byte header
// (pkt_hdr_t: timestamp = window count, source antenna id, global channel
// id = band*NCHAN + channel) followed by T_WIN/8 64-bit words (1024 4+4-bit
// samples, 1 kB).  Channel c is processed by X-engine node c mod N_NODES;
// channels at or above CH_USED (the Small Array processes 2040 of the 2048
// channels so they share evenly among 10 nodes) are dropped.  A packet for
// this board's own node goes to the internal port (2), bypassing Ethernet;
// the others alternate between the two 10GbE ports (0, 1) by
// (c / N_NODES) mod 2.  The header contents and the 1 kB + 8 byte size follow
// the text; the field layout, the modulo mapping and the port choice are
// this design's own.
//
// Each port has a payload FIFO (PKT_BUF packets, default two) and a header FIFO; a port sends
// header then payload (out_sop on the header, out_eop on the last word)
// whenever it holds a complete packet and out_ready is high.  out_dest is
// the destination node (the 10GbE core would map it to an address).
// `overflow` is sticky if a FIFO ever overflowed.
module f_packetiser
  import ami_pkg::*;
#(
  parameter int NCHAN   = 2048,
  parameter int T_WIN   = 1024,
  parameter int N_NODES = 10,
  parameter int CH_USED = (NCHAN / N_NODES) * N_NODES,
  parameter int PKT_BUF = 2        // packets buffered per port (power of 2)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [7:0]                 ant_id,
  input  logic                       band,
  input  logic [7:0]                 node_id,
  input  logic                       in_valid,
  input  logic [63:0]                in_data,
  input  logic [$clog2(NCHAN)-1:0]   in_chan,
  input  logic [$clog2(T_WIN/8)-1:0] in_word,
  input  logic [39:0]                in_win,
  output logic [2:0]                 out_valid,
  output logic [2:0][63:0]           out_data,
  output logic [2:0]                 out_sop,
  output logic [2:0]                 out_eop,
  output logic [2:0][7:0]            out_dest,
  input  logic [2:0]                 out_ready,
  output logic                       overflow
);
  localparam int G   = T_WIN / 8;
  localparam int GW  = $clog2(G);
  localparam int CHW = $clog2(NCHAN);

  // routing decision for the incoming word
  logic [7:0] dest;
  logic [1:0] port;
  logic       keep;
  always_comb begin
    dest = 8'((32'(in_chan)) % N_NODES);
    keep = 32'(in_chan) < CH_USED;
    if (dest == node_id) port = 2'd2;
    else                 port = 2'(((32'(in_chan)) / N_NODES) % 2);
  end

  pkt_hdr_t   hdr;
  always_comb begin
    hdr.timestamp = in_win;
    hdr.ant       = ant_id;
    hdr.chan      = 16'({band, in_chan});
  end

  logic [2:0] ovf;

  for (genvar k = 0; k < 3; k++) begin : g_port
    logic        p_push, p_empty, p_full, p_ovf, h_empty, h_full, h_ovf;
    logic        h_push, p_pop, h_pop;
    logic [63:0] p_dout;
    logic [71:0] h_dout;
    logic [$clog2(PKT_BUF*G):0] p_cnt;
    logic [$clog2(2*PKT_BUF):0] h_cnt;
    logic        busy;
    logic [GW:0] sent;

    assign p_push = in_valid && keep && (port == 2'(k));
    assign h_push = p_push && (in_word == GW'(G - 1));

    sync_fifo #(.W(64), .DEPTH(PKT_BUF * G)) u_pay (
      .clk, .rst, .push(p_push), .din(in_data), .pop(p_pop),
      .dout(p_dout), .empty(p_empty), .full(p_full), .count(p_cnt), .overflow(p_ovf));
    sync_fifo #(.W(72), .DEPTH(2 * PKT_BUF)) u_hdr (
      .clk, .rst, .push(h_push), .din({dest, hdr}), .pop(h_pop),
      .dout(h_dout), .empty(h_empty), .full(h_full), .count(h_cnt), .overflow(h_ovf));

    // busy = sending payload; sent counts payload words
    always_comb begin
      out_valid[k] = 1'b0;
      out_sop[k]   = 1'b0;
      out_eop[k]   = 1'b0;
      out_data[k]  = p_dout;
      out_dest[k]  = h_dout[71:64];
      h_pop        = 1'b0;
      p_pop        = 1'b0;
      if (!busy) begin
        if (!h_empty) begin
          out_valid[k] = 1'b1;
          out_sop[k]   = 1'b1;
          out_data[k]  = h_dout[63:0];
        end
      end else begin
        out_valid[k] = 1'b1;
        out_eop[k]   = (sent == (GW+1)'(G - 1));
        p_pop        = out_ready[k];
        h_pop        = out_ready[k] && out_eop[k];
      end
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        busy <= 1'b0; sent <= '0;
      end else if (out_ready[k]) begin
        if (!busy && !h_empty) begin
          busy <= 1'b1; sent <= '0;
        end else if (busy) begin
          sent <= sent + (GW+1)'(1);
          if (sent == (GW+1)'(G - 1)) busy <= 1'b0;
        end
      end
    end

    assign ovf[k] = p_ovf | h_ovf;
  end

  assign overflow = |ovf;
endmodule
