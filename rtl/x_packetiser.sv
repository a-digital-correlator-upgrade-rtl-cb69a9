// x_packetiser: formats accumulated visibilities for the 1GbE output.
//
// One packet per frequency channel per integration, carrying every baseline
// (as the text states).  Packet = 8 header bytes, then the NW 32-bit
// visibility words most significant byte first.  Header (own layout):
// 40-bit timestamp (window count of the last window of the integration),
// 8-bit node id, 16-bit global channel id = band*NCHAN + channel, where the
// node-local index lc maps back to band = lc mod 2 and
// channel = (lc / 2)*N_NODES + node_id.  Words are buffered in a FIFO;
// the byte stream runs whenever out_ready is high, out_sop on the first
// header byte and out_eop on the last payload byte.  `overflow` is sticky.
module x_packetiser #(
  parameter int NW      = 110,
  parameter int NCHAN   = 2048,
  parameter int N_NODES = 10,
  parameter int CPN     = 204,
  parameter int PKT_BUF = 2        // packets buffered (power of 2)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         node_id,
  input  logic               in_valid,
  input  logic               in_sop,
  input  logic               in_eop,
  input  logic [31:0]        in_data,
  input  logic [15:0]        in_lc,
  input  logic [39:0]        in_win,
  output logic               out_valid,
  output logic [7:0]         out_data,
  output logic               out_sop,
  output logic               out_eop,
  input  logic               out_ready,
  output logic               overflow
);
  localparam int DEPTH = 1 << $clog2(PKT_BUF * NW);
  localparam int BW    = $clog2(8 + 4 * NW);

  logic [63:0] hdr;
  logic        bnd;
  logic [15:0] ch;
  always_comb begin
    bnd = in_lc[0];
    ch  = 16'((32'(in_lc) / 2) * N_NODES + 32'(node_id));
    hdr = {in_win, node_id, 16'({bnd, ch[$clog2(NCHAN)-1:0]})};
  end

  logic        p_empty, p_full, p_ovf, h_empty, h_full, h_ovf, p_pop, h_pop;
  logic [31:0] p_dout;
  logic [63:0] h_dout;
  logic [$clog2(DEPTH):0] p_cnt;
  logic [$clog2(2*PKT_BUF):0] h_cnt;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_pay (
    .clk, .rst, .push(in_valid), .din(in_data), .pop(p_pop),
    .dout(p_dout), .empty(p_empty), .full(p_full), .count(p_cnt), .overflow(p_ovf));
  sync_fifo #(.W(64), .DEPTH(2 * PKT_BUF)) u_hdr (
    .clk, .rst, .push(in_valid && in_eop), .din(hdr), .pop(h_pop),
    .dout(h_dout), .empty(h_empty), .full(h_full), .count(h_cnt), .overflow(h_ovf));

  logic          busy;
  logic [BW-1:0] bi;     // byte index within the packet
  localparam int NB = 8 + 4 * NW;

  always_comb begin
    out_valid = busy;
    out_sop   = busy && bi == '0;
    out_eop   = busy && bi == BW'(NB - 1);
    if (bi < BW'(8)) out_data = h_dout[8 * (7 - int'(bi)) +: 8];
    else             out_data = p_dout[8 * (3 - int'(bi[1:0])) +: 8];
    p_pop = busy && out_ready && bi >= BW'(8) && bi[1:0] == 2'd3;
    h_pop = busy && out_ready && out_eop;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; bi <= '0;
    end else if (!busy) begin
      // start once the whole packet is buffered
      if (!h_empty) begin busy <= 1'b1; bi <= '0; end
    end else if (out_ready) begin
      bi <= bi + BW'(1);
      if (out_eop) busy <= 1'b0;
    end
  end

  assign overflow = p_ovf | h_ovf;
endmodule
