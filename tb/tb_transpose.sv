// tb_transpose: a reduced corner turn (64 channels x 32 spectra per window,
// 10-bit QDR address space, behavioural QDR with 4-clock read latency) is fed
// six windows of a continuous spectrum stream whose samples are random.
// Each output word of channel c, word w, window n must hold samples of
// spectra 8w..8w+7 of window n, byte t = spectrum 8w+t.  The testbench checks
// every output word of windows 0..3, its channel/word/window tags, the
// channel-major order and that nothing else is output.
module tb_transpose;
  import ami_pkg::*;
  localparam int NCHAN = 64, TW = 32, M = NCHAN / 8, NW = 6, AW = 10, LAT = 4;
  localparam int WPC = TW / 8;
  logic clk = 0, rst = 1, in_valid = 0, in_sof = 0;
  logic [2:0] in_k1 = 0;
  cplx4_t [7:0] in_data;
  logic qdr_we, qdr_re;
  logic [AW-1:0] qdr_waddr, qdr_raddr;
  logic [63:0] qdr_wdata, qdr_rdata, out_data;
  logic out_valid;
  logic [5:0] out_chan;
  logic [1:0] out_word;
  logic [39:0] out_win;
  logic [7:0] smp [NW][TW][NCHAN];
  int checks = 0, failures = 0, nout = 0;
  always #1 clk = ~clk;

  transpose #(.NCHAN(NCHAN), .T_WIN(TW), .QDR_AW(AW), .QDR_LAT(LAT)) dut (
    .clk, .rst, .in_valid, .in_sof, .in_k1, .in_data, .qdr_we, .qdr_waddr, .qdr_wdata,
    .qdr_re, .qdr_raddr, .qdr_rdata, .out_valid, .out_data, .out_chan, .out_word, .out_win);
  qdr_model #(.AW(AW), .DW(64), .LAT(LAT)) qdr (
    .clk, .we(qdr_we), .waddr(qdr_waddr), .wdata(qdr_wdata), .re(qdr_re), .raddr(qdr_raddr),
    .rdata(qdr_rdata));

  initial begin
    foreach (smp[n, s, c]) smp[n][s][c] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NW; n++)
      for (int s = 0; s < TW; s++)
        for (int k = 0; k < M; k++) begin
          in_valid <= 1; in_sof <= (k == 0); in_k1 <= 3'(k);
          for (int q = 0; q < 8; q++) in_data[q] <= cplx4_t'(smp[n][s][k + M * q]);
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (TW * M + 50) @(posedge clk);
    checks++;
    if (nout < 4 * NCHAN * WPC) begin failures++; $display("only %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && !rst && nout < 4 * NCHAN * WPC) begin
    int n, c, w;
    logic [63:0] e;
    n = nout / (NCHAN * WPC); c = (nout / WPC) % NCHAN; w = nout % WPC;
    for (int t = 0; t < 8; t++) e[8 * t +: 8] = smp[n][8 * w + t][c];
    checks++;
    if (out_win != 40'(n) || out_chan != 6'(c) || out_word != 2'(w) || out_data != e) begin
      failures++;
      if (failures < 8)
        $display("out %0d: win %0d chan %0d word %0d data %h, want %0d %0d %0d %h",
                 nout, out_win, out_chan, out_word, out_data, n, c, w, e);
    end
    nout++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
