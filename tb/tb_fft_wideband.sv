// tb_fft_wideband: checks the streaming wideband FFT against a direct DFT
// computed in real arithmetic.  A reduced 64-point, 4-lane instance is fed
// four random real frames back to back (plus one flush frame); every one of
// the 32 channels of every frame must match X[k]/NFFT (shift schedule all
// ones) within a small rounding tolerance.  Also checks the latency from the
// first input to the first output and that out_k1 visits every k1 once per
// spectrum.
module tb_fft_wideband;
  import ami_pkg::*;
  localparam int NFFT = 64, PAR = 4, M = NFFT / PAR, NOUT = PAR / 2, NF = 4;
  localparam int S = $clog2(M);
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  dsample_t [PAR-1:0] in_data;
  logic out_valid, out_sof, ovf;
  logic [$clog2(M)-1:0] out_k1;
  dsample_t [NOUT-1:0] out_re, out_im;

  fft_wideband #(.NFFT(NFFT), .PAR(PAR)) dut (
    .clk, .rst, .shift_sched('1), .in_valid, .in_data,
    .out_valid, .out_sof, .out_k1, .out_re, .out_im, .ovf);

  int x [NF+1][NFFT];
  real ref_re [NF][NFFT/2], ref_im [NF][NFFT/2];
  int frame = -1, nout = 0, t_in0 = -1, t_out0 = -1, cyc = 0;
  int seen [NF][M];

  always @(posedge clk) cyc++;

  initial begin
    for (int f = 0; f <= NF; f++)
      for (int n = 0; n < NFFT; n++) x[f][n] = int'($urandom_range(0, 120000)) - 60000;
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < NFFT/2; k++) begin
        ref_re[f][k] = 0.0; ref_im[f][k] = 0.0;
        for (int n = 0; n < NFFT; n++) begin
          ref_re[f][k] += real'(x[f][n]) * $cos(2.0*3.14159265358979*k*n/NFFT) / NFFT;
          ref_im[f][k] -= real'(x[f][n]) * $sin(2.0*3.14159265358979*k*n/NFFT) / NFFT;
        end
      end
    foreach (seen[i, j]) seen[i][j] = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f <= NF; f++)
      for (int m = 0; m < M; m++) begin
        in_valid <= 1;
        for (int p = 0; p < PAR; p++) in_data[p] <= DW'(x[f][PAR*m + p]);
        if (f == 0 && m == 0) t_in0 = cyc;
        @(posedge clk);
        // a one-clock gap now and then: the pipeline must hold its state
        if (m == 5) begin in_valid <= 0; @(posedge clk); end
      end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < M; k++) begin
        checks++;
        if (seen[f][k] != 1) begin failures++; $display("k1 %0d seen %0d times in frame %0d", k, seen[f][k], f); end
      end
    checks++;
    if (ovf) begin failures++; $display("unexpected overflow"); end
    // M-1 samples through the SDF chain plus one register per stage, twiddle
    // and DFT; +1 for the input gap in the first frame, +1 for the monitor edge
    checks++;
    if (t_out0 - t_in0 != M - 1 + S + 2 + 1 + 2) begin
      failures++; $display("latency %0d", t_out0 - t_in0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    if (out_sof) frame++;
    if (t_out0 < 0) t_out0 = cyc;
    if (frame >= 0 && frame < NF) begin
      seen[frame][out_k1]++;
      for (int q = 0; q < NOUT; q++) begin
        int k; real er, ei;
        k = int'(out_k1) + M*q;
        er = real'(out_re[q]) - ref_re[frame][k];
        ei = real'(out_im[q]) - ref_im[frame][k];
        checks++;
        if (er > 6.0 || er < -6.0 || ei > 6.0 || ei < -6.0) begin
          failures++;
          if (failures < 10) $display("frame %0d ch %0d got %0d,%0d want %f,%f", frame, k, out_re[q], out_im[q], ref_re[frame][k], ref_im[frame][k]);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
