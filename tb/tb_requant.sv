// tb_requant: a reduced 64-channel requantiser is loaded with random 16-bit
// complex gains through the coefficient port, then fed random complex
// samples of several magnitudes.  The testbench forms the complex product,
// rounds by 2^RQ_SHIFT and clamps to [-7, 7] itself and checks every 4-bit
// output, the k1 index, the frame marker and that both the saturated and
// unsaturated paths were exercised.
module tb_requant;
  import ami_pkg::*;
  localparam int NCHAN = 64, NOUT = 8, M = NCHAN / NOUT, SH = 20, NS = 6;
  logic clk = 0, rst = 1, coef_we = 0, in_valid = 0, in_sof = 0;
  logic [5:0] coef_addr = 0;
  logic signed [15:0] coef_re = 0, coef_im = 0;
  logic [2:0] in_k1 = 0, out_k1;
  dsample_t [NOUT-1:0] in_re, in_im;
  logic out_valid, out_sof;
  cplx4_t [NOUT-1:0] out_data;
  int checks = 0, failures = 0, nout = 0, nsat = 0, nmid = 0;
  int cr [NCHAN], ci [NCHAN];
  int exp_re [NS * M][NOUT], exp_im [NS * M][NOUT];
  always #1 clk = ~clk;

  requant #(.NCHAN(NCHAN), .NOUT(NOUT), .RQ_SHIFT(SH)) dut (
    .clk, .rst, .coef_we, .coef_addr, .coef_re, .coef_im, .in_valid, .in_sof, .in_k1,
    .in_re, .in_im, .out_valid, .out_sof, .out_k1, .out_data);

  function automatic int q4(longint x);
    longint r;
    r = (x + (64'sd1 <<< (SH - 1))) >>> SH;
    return (r > 7) ? 7 : (r < -7) ? -7 : int'(r);
  endfunction

  initial begin
    for (int c = 0; c < NCHAN; c++) begin
      cr[c] = int'($urandom_range(0, 65535)) - 32768;
      ci[c] = int'($urandom_range(0, 65535)) - 32768;
      coef_we <= 1; coef_addr <= 6'(c); coef_re <= 16'(cr[c]); coef_im <= 16'(ci[c]);
      @(posedge clk);
    end
    coef_we <= 0;
    rst <= 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < M; k++) begin
        int amp;
        amp = (s < 2) ? 255 : (s < 4) ? 4095 : 131071;
        in_valid <= 1; in_sof <= (k == 0); in_k1 <= 3'(k);
        for (int q = 0; q < NOUT; q++) begin
          int re, im, c;
          c  = k + M * q;
          re = int'($urandom_range(0, 2 * amp)) - amp;
          im = int'($urandom_range(0, 2 * amp)) - amp;
          in_re[q] <= 18'(re); in_im[q] <= 18'(im);
          exp_re[s * M + k][q] = q4(longint'(re) * cr[c] - longint'(im) * ci[c]);
          exp_im[s * M + k][q] = q4(longint'(re) * ci[c] + longint'(im) * cr[c]);
        end
        @(posedge clk);
        if (k == 2) begin in_valid <= 0; @(posedge clk); end
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks += 3;
    if (nout != NS * M) begin failures++; $display("outputs %0d", nout); end
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    if (nmid == 0) begin failures++; $display("in-range values never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && !rst) begin
    checks++;
    if (out_k1 != 3'(nout % M) || out_sof != (nout % M == 0)) failures++;
    for (int q = 0; q < NOUT; q++) begin
      int gr, gi;
      gr = int'($signed(out_data[q].re)); gi = int'($signed(out_data[q].im));
      checks += 2;
      if (gr != exp_re[nout][q]) begin failures++; $display("re w%0d q%0d got %0d want %0d", nout, q, gr, exp_re[nout][q]); end
      if (gi != exp_im[nout][q]) begin failures++; $display("im w%0d q%0d got %0d want %0d", nout, q, gi, exp_im[nout][q]); end
      if (gr == 7 || gr == -7) nsat++;
      if (gr != 0 && gr > -7 && gr < 7) nmid++;
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
