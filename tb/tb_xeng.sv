// tb_xeng: a 4-antenna, 2-samples-per-clock cross-multiplier integrates four
// back-to-back windows of 48 random 4-bit complex samples (full range
// -8..7, one window with a gap in the valid stream).  The testbench computes
// sum a_i * conj(a_j) for every pair i <= j directly in signed arithmetic and
// checks all 20 output words of every window (baseline order (0,0),(0,1)..,
// re then im), the sop/eop framing and the lc/win tags.
module tb_xeng;
  import ami_pkg::*;
  localparam int NA = 4, TP = 2, L = 24, NF = 4, NBL = NA * (NA + 1) / 2;
  logic clk = 0, rst = 1, in_valid = 0, in_sof = 0, in_eof = 0;
  cplx4_t [NA-1:0][TP-1:0] in_data;
  logic [15:0] in_lc = 0, out_lc;
  logic [39:0] in_win = 0, out_win;
  logic out_valid, out_sop, out_eop;
  logic signed [31:0] out_data;
  int checks = 0, failures = 0, nout = 0;
  int expv [NF][2 * NBL];
  always #1 clk = ~clk;

  xeng #(.N_ANT(NA), .T_PAR(TP)) dut (
    .clk, .rst, .in_valid, .in_sof, .in_eof, .in_data, .in_lc, .in_win,
    .out_valid, .out_sop, .out_eop, .out_data, .out_lc, .out_win);

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NF; f++) begin
      int sr [NA][L * TP], si [NA][L * TP];
      foreach (sr[a, t]) begin
        sr[a][t] = int'($urandom_range(0, 15)) - 8;
        si[a][t] = int'($urandom_range(0, 15)) - 8;
      end
      for (int b = 0, i = 0; i < NA; i++)
        for (int j = i; j < NA; j++, b++) begin
          int re, im;
          re = 0; im = 0;
          for (int t = 0; t < L * TP; t++) begin
            re += sr[i][t] * sr[j][t] + si[i][t] * si[j][t];
            im += si[i][t] * sr[j][t] - sr[i][t] * si[j][t];
          end
          expv[f][2 * b] = re; expv[f][2 * b + 1] = im;
        end
      for (int w = 0; w < L; w++) begin
        in_valid <= 1; in_sof <= (w == 0); in_eof <= (w == L - 1);
        in_lc <= 16'(100 + f); in_win <= 40'(7 + f);
        for (int a = 0; a < NA; a++)
          for (int t = 0; t < TP; t++) begin
            in_data[a][t].re <= 4'(sr[a][TP * w + t]);
            in_data[a][t].im <= 4'(si[a][TP * w + t]);
          end
        @(posedge clk);
        if (f == 1 && w == 5) begin in_valid <= 0; repeat (3) @(posedge clk); end
      end
    end
    in_valid <= 0;
    repeat (3 * NBL) @(posedge clk);
    checks++;
    if (nout != NF * 2 * NBL) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && !rst) begin
    int f, k;
    f = nout / (2 * NBL); k = nout % (2 * NBL);
    checks++;
    if (out_data != expv[f][k] || out_sop != (k == 0) || out_eop != (k == 2 * NBL - 1) ||
        out_lc != 16'(100 + f) || out_win != 40'(7 + f)) begin
      failures++;
      if (failures < 8) $display("f%0d k%0d got %0d want %0d", f, k, out_data, expv[f][k]);
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
