// tb_autocorr: a reduced 64-channel (8 outputs x 8 words) accumulator is fed
// eight spectra of random 18-bit complex samples with the noise-diode state
// alternating per spectrum and an accumulation length of 3.  The testbench
// keeps its own power and demodulated sums and checks every dumped word,
// the dump frame marker and that dumps happen only in the last spectrum of
// each accumulation (spectra 3 and 6; the partial seventh/eighth never dump).
module tb_autocorr;
  import ami_pkg::*;
  localparam int NCHAN = 64, NOUT = 8, M = NCHAN / NOUT, NS = 8, AL = 3;
  logic clk = 0, rst = 1, noise = 0, in_valid = 0, in_sof = 0;
  logic [2:0] in_k1 = 0;
  dsample_t [NOUT-1:0] in_re, in_im;
  logic dump_valid, dump_sof;
  logic [2:0] dump_k1;
  logic [NOUT-1:0][63:0] dump_pwr;
  logic signed [NOUT-1:0][63:0] dump_demod;
  int checks = 0, failures = 0, ndump = 0;
  longint pw [NOUT][M], dm [NOUT][M];
  longint epw [NS][NOUT][M], edm [NS][NOUT][M];
  always #1 clk = ~clk;

  autocorr #(.NCHAN(NCHAN), .NOUT(NOUT)) dut (
    .clk, .rst, .acc_len(32'(AL)), .noise, .in_valid, .in_sof, .in_k1, .in_re, .in_im,
    .dump_valid, .dump_sof, .dump_k1, .dump_pwr, .dump_demod);

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < M; k++) begin
        in_valid <= 1; in_sof <= (k == 0); in_k1 <= 3'(k); noise <= s[0];
        for (int q = 0; q < NOUT; q++) begin
          int re, im;
          re = int'($urandom_range(0, 262143)) - 131072;
          im = int'($urandom_range(0, 262143)) - 131072;
          in_re[q] <= 18'(re); in_im[q] <= 18'(im);
          if (s % AL == 0) begin pw[q][k] = 0; dm[q][k] = 0; end
          pw[q][k] += longint'(re) * re + longint'(im) * im;
          dm[q][k] += (s[0] ? -1 : 1) * (longint'(re) * re + longint'(im) * im);
          epw[s][q][k] = pw[q][k]; edm[s][q][k] = dm[q][k];
        end
        @(posedge clk);
        if (k == 4) begin in_valid <= 0; @(posedge clk); end
      end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (ndump != 2 * M) begin failures++; $display("dumps %0d", ndump); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (dump_valid && !rst) begin
    int s;
    s = (ndump / M) * AL + (AL - 1);
    checks++;
    if (dump_k1 != 3'(ndump % M) || dump_sof != (ndump % M == 0)) failures++;
    for (int q = 0; q < NOUT; q++) begin
      checks += 2;
      if (dump_pwr[q] != 64'(epw[s][q][dump_k1])) begin
        failures++; $display("pwr s%0d q%0d k%0d", s, q, dump_k1);
      end
      if ($signed(dump_demod[q]) != edm[s][q][dump_k1]) begin
        failures++; $display("dem s%0d q%0d k%0d", s, q, dump_k1);
      end
    end
    ndump++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
