// tb_pfb_fir: a reduced 64-point, 4-lane, 4-tap filterbank front end is fed
// random 8-bit frames.  The testbench builds its own Hamming-windowed sinc
// coefficients and forms every output sum y_f[b] from the last four frames,
// checking each output sample (after the first three frames) to +-1 LSB,
// the frame marker and the two-clock latency.
module tb_pfb_fir;
  import ami_pkg::*;
  localparam int NFFT = 64, PAR = 4, TAPS = 4, M = NFFT / PAR, NF = 8, L = TAPS * NFFT;
  logic clk = 0, rst = 1, in_valid = 0, out_valid, out_sof;
  logic [PAR-1:0][7:0] in_data;
  dsample_t [PAR-1:0] out_data;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  pfb_fir #(.TAPS(TAPS), .NFFT(NFFT), .PAR(PAR), .IW(8)) dut (
    .clk, .rst, .in_valid, .in_data, .out_valid, .out_sof, .out_data);

  int x [NF][NFFT];
  longint h [L];
  int nout = 0, lat = -1, t0 = -1, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    for (int k = 0; k < L; k++) begin
      real xx, s, w, v;
      xx = (real'(k) - real'(L - 1) / 2.0) / real'(NFFT);
      s  = (xx == 0.0) ? 1.0 : $sin(3.141592653589793 * xx) / (3.141592653589793 * xx);
      w  = 0.54 - 0.46 * $cos(2.0 * 3.141592653589793 * k / (L - 1));
      v  = s * w * 131071.0;
      h[k] = longint'((v >= 0.0) ? v + 0.5 : v - 0.5);
    end
    foreach (x[f, n]) x[f][n] = int'($urandom_range(0, 255)) - 128;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NF; f++)
      for (int m = 0; m < M; m++) begin
        in_valid <= 1;
        for (int p = 0; p < PAR; p++) in_data[p] <= 8'(x[f][PAR*m + p]);
        if (t0 < 0) t0 = cyc;
        @(posedge clk);
        if (m == 3) begin in_valid <= 0; @(posedge clk); end
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NF * M) begin failures++; $display("got %0d output words", nout); end
    checks++;
    // edges from driving the first word to the monitor seeing it: two
    // register stages plus the sampling edges of driver and monitor
    if (lat != 4) begin failures++; $display("latency %0d", lat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && !rst) begin
    int f, m;
    f = nout / M; m = nout % M;
    if (lat < 0) lat = cyc - t0;
    checks++;
    if (out_sof !== (m == 0)) failures++;
    if (f >= TAPS - 1)
      for (int p = 0; p < PAR; p++) begin
        longint acc, r; int b;
        b = PAR * m + p;
        acc = 0;
        for (int a = 0; a < TAPS; a++) acc += longint'(x[f - a][b]) * h[(TAPS - 1 - a) * NFFT + b];
        r = (acc + 64) >>> 7;
        if (r > 131071) r = 131071;
        if (r < -131072) r = -131072;
        checks++;
        if (longint'($signed(out_data[p])) - r > 1 || r - longint'($signed(out_data[p])) > 1) begin
          failures++;
          if (failures < 10) $display("f%0d b%0d got %0d want %0d", f, b, $signed(out_data[p]), r);
        end
      end
    nout++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
