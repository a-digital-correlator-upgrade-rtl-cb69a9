// tb_vacc: a reduced vector accumulator (6-word vectors, 3 channels,
// behavioural QDR with 4-clock latency) integrates seven windows of random
// signed vectors with an accumulation length of 3, with idle gaps between
// vectors.  The testbench checks that exactly the two complete integrations
// are output, each word equal to the sum of its three inputs, with the
// right channel tag, window tag (last window of the integration) and
// sop/eop framing; the partial seventh window must not appear.
module tb_vacc;
  localparam int NW = 6, LCH = 3, AW = 6, LAT = 4, AL = 3, NWIN = 7;
  logic clk = 0, rst = 1, in_valid = 0, in_sop = 0, in_eop = 0;
  logic signed [31:0] in_data = 0, out_data;
  logic [15:0] in_lc = 0, out_lc;
  logic [39:0] in_win = 0, out_win;
  logic qdr_we, qdr_re, out_valid, out_sop, out_eop;
  logic [AW-1:0] qdr_waddr, qdr_raddr;
  logic [31:0] qdr_wdata, qdr_rdata;
  int checks = 0, failures = 0, nout = 0;
  int acc [2][LCH][NW];
  always #1 clk = ~clk;

  vacc #(.NW(NW), .LCH(LCH), .QDR_AW(AW), .QDR_LAT(LAT)) dut (
    .clk, .rst, .acc_len(32'(AL)), .in_valid, .in_sop, .in_eop, .in_data, .in_lc, .in_win,
    .qdr_we, .qdr_waddr, .qdr_wdata, .qdr_re, .qdr_raddr, .qdr_rdata,
    .out_valid, .out_sop, .out_eop, .out_data, .out_lc, .out_win);
  qdr_model #(.AW(AW), .DW(32), .LAT(LAT)) qdr (
    .clk, .we(qdr_we), .waddr(qdr_waddr), .wdata(qdr_wdata), .re(qdr_re), .raddr(qdr_raddr),
    .rdata(qdr_rdata));

  initial begin
    acc = '{default: 0};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NWIN; n++)
      for (int c = 0; c < LCH; c++) begin
        for (int w = 0; w < NW; w++) begin
          int d;
          d = int'($urandom_range(0, 2000000)) - 1000000;
          if (n / AL < 2) acc[n / AL][c][w] += d;
          in_valid <= 1; in_sop <= (w == 0); in_eop <= (w == NW - 1);
          in_data <= d; in_lc <= 16'(c); in_win <= 40'(n);
          @(posedge clk);
        end
        for (int g = 0; g < c % 3; g++) begin in_valid <= 0; @(posedge clk); end
      end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != 2 * LCH * NW) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && !rst) begin
    int i, c, w;
    i = nout / (LCH * NW); c = (nout / NW) % LCH; w = nout % NW;
    checks++;
    if (i > 1) failures++;
    else if (out_data != acc[i][c][w] || out_lc != 16'(c) || out_win != 40'(AL * i + AL - 1) ||
             out_sop != (w == 0) || out_eop != (w == NW - 1)) begin
      failures++;
      if (failures < 8) $display("i%0d c%0d w%0d got %0d lc %0d win %0d want %0d", i, c, w,
                                 out_data, out_lc, out_win, acc[i][c][w]);
    end
    nout++;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
