// x_engine: the X-engine pipeline of one board.
//
// Five packet inputs (four 10GbE ports and the internal route) feed
// x_input_buffer (packet decode, circular buffers, output control,
// multiplexor), whose channel windows go through the windowed
// cross-multiplication engine (xeng, 1024-sample integration), the QDR
// vector accumulator (vacc, acc_len windows) and the output packetiser
// (one packet per channel per integration, 8-bit stream to the 1GbE MAC).
// The chain and its parts follow the described firmware; LCH = 2*CPN is the
// number of channels this node processes (204 per band on the 10-node
// Small Array).
module x_engine
  import ami_pkg::*;
#(
  parameter int NCHAN   = 2048,
  parameter int T_WIN   = 1024,
  parameter int N_NODES = 10,
  parameter int CH_USED = (NCHAN / N_NODES) * N_NODES,
  parameter int N_ANT   = 10,
  parameter int SLOTS   = 4,
  parameter int T_PAR   = 2,
  parameter int QDR_AW  = 20,
  parameter int QDR_LAT = 4,
  parameter int X_PKT_BUF = 2
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [7:0]               node_id,
  input  logic [31:0]              acc_len,
  input  logic [4:0]               rx_valid,
  input  logic [4:0][63:0]         rx_data,
  input  logic [4:0]               rx_sop,
  input  logic [4:0]               rx_eop,
  output logic                     qdr_we,
  output logic [QDR_AW-1:0]        qdr_waddr,
  output logic [31:0]              qdr_wdata,
  output logic                     qdr_re,
  output logic [QDR_AW-1:0]        qdr_raddr,
  input  logic [31:0]              qdr_rdata,
  output logic                     gbe_valid,
  output logic [7:0]               gbe_data,
  output logic                     gbe_sop,
  output logic                     gbe_eop,
  input  logic                     gbe_ready,
  output logic [15:0]              bad_pkts,
  output logic [15:0]              late_pkts,
  output logic                     out_ovf
);
  localparam int CPN = CH_USED / N_NODES;
  localparam int NW  = N_ANT * (N_ANT + 1);

  logic                          ib_v, ib_sof, ib_eof;
  cplx4_t [N_ANT-1:0][T_PAR-1:0] ib_d;
  logic [15:0]                   ib_lc;
  logic [39:0]                   ib_win;
  logic [N_ANT-1:0]              ib_mask;

  x_input_buffer #(.NCHAN(NCHAN), .T_WIN(T_WIN), .N_NODES(N_NODES), .CH_USED(CH_USED),
                   .N_ANT(N_ANT), .NPORTS(5), .SLOTS(SLOTS), .T_PAR(T_PAR)) u_ib (
    .clk, .rst, .node_id, .in_valid(rx_valid), .in_data(rx_data), .in_sop(rx_sop),
    .in_eop(rx_eop), .out_valid(ib_v), .out_sof(ib_sof), .out_eof(ib_eof), .out_data(ib_d),
    .out_lc(ib_lc), .out_win(ib_win), .out_mask(ib_mask), .bad_pkts, .late_pkts);

  logic               xe_v, xe_sop, xe_eop;
  logic signed [31:0] xe_d;
  logic [15:0]        xe_lc;
  logic [39:0]        xe_win;
  xeng #(.N_ANT(N_ANT), .T_PAR(T_PAR)) u_xe (
    .clk, .rst, .in_valid(ib_v), .in_sof(ib_sof), .in_eof(ib_eof), .in_data(ib_d),
    .in_lc(ib_lc), .in_win(ib_win), .out_valid(xe_v), .out_sop(xe_sop), .out_eop(xe_eop),
    .out_data(xe_d), .out_lc(xe_lc), .out_win(xe_win));

  logic               va_v, va_sop, va_eop;
  logic signed [31:0] va_d;
  logic [15:0]        va_lc;
  logic [39:0]        va_win;
  vacc #(.NW(NW), .LCH(2 * CPN), .QDR_AW(QDR_AW), .QDR_LAT(QDR_LAT)) u_va (
    .clk, .rst, .acc_len, .in_valid(xe_v), .in_sop(xe_sop), .in_eop(xe_eop), .in_data(xe_d),
    .in_lc(xe_lc), .in_win(xe_win), .qdr_we, .qdr_waddr, .qdr_wdata, .qdr_re, .qdr_raddr,
    .qdr_rdata, .out_valid(va_v), .out_sop(va_sop), .out_eop(va_eop), .out_data(va_d),
    .out_lc(va_lc), .out_win(va_win));

  x_packetiser #(.NW(NW), .NCHAN(NCHAN), .N_NODES(N_NODES), .CPN(CPN), .PKT_BUF(X_PKT_BUF)) u_xp (
    .clk, .rst, .node_id, .in_valid(va_v), .in_sop(va_sop), .in_eop(va_eop), .in_data(va_d),
    .in_lc(va_lc), .in_win(va_win), .out_valid(gbe_valid), .out_data(gbe_data),
    .out_sop(gbe_sop), .out_eop(gbe_eop), .out_ready(gbe_ready), .overflow(out_ovf));
endmodule
