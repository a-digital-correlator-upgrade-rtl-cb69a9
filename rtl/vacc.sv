// vacc: long-term vector accumulator for the X-engine output, in QDR SRAM.
//
// Each channel's visibility vector (NW 32-bit words, from xeng) is added to
// a running sum held in external QDR at address lc*NW + word.  An
// integration covers acc_len consecutive windows (1024 samples each; about
// 1000 windows, ~1 s, in normal use).  In its first window the incoming
// vector is written as is; in later windows the old sum is read, added and
// written back; in the last window the sums are also sent on out_* to the
// output packetiser.  QDR reads return QDR_LAT clocks after the request, so
// the input is delayed by the same amount before the add; a given address
// recurs only once per window, so there is no read-after-write hazard.  The
// text gives the QDR-based long-term accumulation; the address map, window
// counting and this pipeline are this design's own.
module vacc #(
  parameter int NW      = 110,
  parameter int LCH     = 408,
  parameter int QDR_AW  = 20,
  parameter int QDR_LAT = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         acc_len,     // windows per integration, >= 1
  input  logic                in_valid,
  input  logic                in_sop,
  input  logic                in_eop,
  input  logic signed [31:0]  in_data,
  input  logic [15:0]         in_lc,
  input  logic [39:0]         in_win,
  output logic                qdr_we,
  output logic [QDR_AW-1:0]   qdr_waddr,
  output logic [31:0]         qdr_wdata,
  output logic                qdr_re,
  output logic [QDR_AW-1:0]   qdr_raddr,
  input  logic [31:0]         qdr_rdata,
  output logic                out_valid,
  output logic                out_sop,
  output logic                out_eop,
  output logic signed [31:0]  out_data,
  output logic [15:0]         out_lc,
  output logic [39:0]         out_win
);
  localparam int OW = $clog2(NW);

  if ($clog2(LCH * NW) > QDR_AW) begin : g_chk
    $error("QDR address too narrow");
  end

  logic [39:0]   base;       // first window of the current integration
  logic          started;    // base is valid
  logic          ipar;       // parity of the integration count
  logic [LCH-1:0] cpar;      // integration parity each channel was last opened in
  logic [OW-1:0] wi;
  logic [39:0]   b_now, rel;
  logic          adv, first, last;

  // integration bookkeeping: the first window seen opens an integration;
  // windows arrive in order, so base moves on by acc_len at most once
  always_comb begin
    b_now = started ? base : in_win;
    rel   = in_win - b_now;
    adv   = (rel >= 40'(acc_len));
    if (adv) begin
      b_now = b_now + 40'(acc_len);
      rel   = rel - 40'(acc_len);
    end
    // a channel that missed the start of this integration starts it late
    first = (rel == 40'd0) || (cpar[in_lc] != (ipar ^ adv));
    last  = (rel >= 40'(acc_len) - 40'd1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      base <= '0; started <= 1'b0; ipar <= 1'b0; wi <= '0;
    end else if (in_valid) begin
      wi <= in_eop ? '0 : wi + OW'(1);
      if (in_sop) begin
        base        <= b_now;
        started     <= 1'b1;
        ipar        <= ipar ^ adv;
        cpar[in_lc] <= ipar ^ adv;
      end
    end
  end

  // the flags are decided on the first word and held for the vector
  logic first_h, last_h, first_w, last_w;
  always_ff @(posedge clk)
    if (in_valid && in_sop) begin first_h <= first; last_h <= last; end
  assign first_w = in_sop ? first : first_h;
  assign last_w  = in_sop ? last  : last_h;

  wire [QDR_AW-1:0] addr = QDR_AW'(32'(in_lc) * NW + 32'(in_sop ? '0 : wi));

  always_ff @(posedge clk) begin
    qdr_re    <= in_valid;
    qdr_raddr <= addr;
  end

  // delay line matching the QDR read latency (plus the request register)
  typedef struct packed {
    logic               v, sop, eop, first, last;
    logic signed [31:0] d;
    logic [QDR_AW-1:0]  a;
    logic [15:0]        lc;
    logic [39:0]        win;
  } pipe_t;
  pipe_t pipe [QDR_LAT + 1];

  always_ff @(posedge clk) begin
    pipe[0] <= '{v: in_valid && !rst, sop: in_sop, eop: in_eop, first: first_w, last: last_w,
                 d: in_data, a: addr, lc: in_lc, win: in_win};
    for (int i = 1; i <= QDR_LAT; i++) pipe[i] <= rst ? '0 : pipe[i-1];
  end

  pipe_t       p;
  logic [31:0] sum;
  always_comb begin
    p   = pipe[QDR_LAT];
    sum = p.first ? p.d : qdr_rdata + p.d;
  end

  always_ff @(posedge clk) begin
    qdr_we    <= p.v;
    qdr_waddr <= p.a;
    qdr_wdata <= sum;
    out_valid <= p.v && p.last;
    out_sop   <= p.sop;
    out_eop   <= p.eop;
    out_data  <= sum;
    out_lc    <= p.lc;
    out_win   <= p.win;
  end
endmodule
