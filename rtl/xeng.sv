// xeng: windowed cross-multiplication engine with packed 4-bit multipliers.
//
// For one channel it integrates, over the T_WIN samples of a window, the
// product a_i * conj(a_j) for every antenna pair i <= j (autos included),
// NBL = N_ANT*(N_ANT+1)/2 baselines.  T_PAR time samples of every antenna
// arrive per clock (the input bandwidth is a parameter, as in the text).
//
// Multiplier packing (after the text): the 4-bit components are offset to
// unsigned u = s + 8, and A = (ur_i << 9) + ui_i, B = (ui_j << 9) + ur_j are
// multiplied in one 18x18 multiply.  The product holds ur_i*ui_j in bits
// 26:18, ur_i*ur_j + ui_i*ui_j in bits 17:9 and ui_i*ur_j in bits 8:0, i.e.
// all four real products of one complex multiply.  The offsets are removed
// once per window using per-antenna sums SR, SI of the signed inputs:
//   re = sum(mid) - 8*(SR_i + SR_j + SI_i + SI_j) - 128*T
//   im = sum(bot - top) - 8*(SI_i + SR_j - SR_i - SI_j)
// The exact field layout of the published implementation is not given; this
// one is derived here.
//
// At in_eof the results are latched and streamed out as 2*NBL signed 32-bit
// words, baseline order (0,0),(0,1)..(0,N-1),(1,1).., re then im, one per
// clock, out_sop on the first and out_eop on the last; out_lc/out_win tag
// the channel.  A new window may start immediately; the stream takes 2*NBL
// clocks, which must not exceed T_WIN/T_PAR.
module xeng
  import ami_pkg::*;
#(
  parameter int N_ANT = 10,
  parameter int T_PAR = 2
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_valid,
  input  logic                          in_sof,
  input  logic                          in_eof,
  input  cplx4_t [N_ANT-1:0][T_PAR-1:0] in_data,
  input  logic [15:0]                   in_lc,
  input  logic [39:0]                   in_win,
  output logic                          out_valid,
  output logic                          out_sop,
  output logic                          out_eop,
  output logic signed [31:0]            out_data,
  output logic [15:0]                   out_lc,
  output logic [39:0]                   out_win
);
  localparam int NBL = N_ANT * (N_ANT + 1) / 2;
  localparam int NW  = 2 * NBL;
  localparam int OW  = $clog2(NW + 1);

  function automatic int bl_i(int b);
    int n = 0;
    for (int i = 0; i < N_ANT; i++)
      for (int j = i; j < N_ANT; j++) begin
        if (n == b) return i;
        n++;
      end
    return 0;
  endfunction
  function automatic int bl_j(int b);
    int n = 0;
    for (int i = 0; i < N_ANT; i++)
      for (int j = i; j < N_ANT; j++) begin
        if (n == b) return j;
        n++;
      end
    return 0;
  endfunction

  // unsigned offset inputs
  logic [N_ANT-1:0][T_PAR-1:0][3:0] ur, ui;
  always_comb
    for (int a = 0; a < N_ANT; a++)
      for (int t = 0; t < T_PAR; t++) begin
        ur[a][t] = in_data[a][t].re ^ 4'b1000;   // s + 8 mod 16
        ui[a][t] = in_data[a][t].im ^ 4'b1000;
      end

  // per-antenna signed sums and sample count
  logic signed [31:0] sr [N_ANT], si [N_ANT];
  logic [31:0]        tcnt;
  logic signed [31:0] acc_mid [NBL], acc_bt [NBL];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      tcnt <= (in_sof ? 32'd0 : tcnt) + 32'(T_PAR);
      for (int a = 0; a < N_ANT; a++) begin
        logic signed [31:0] s1, s2;
        s1 = in_sof ? 32'sd0 : sr[a];
        s2 = in_sof ? 32'sd0 : si[a];
        for (int t = 0; t < T_PAR; t++) begin
          s1 += 32'(in_data[a][t].re);
          s2 += 32'(in_data[a][t].im);
        end
        sr[a] <= s1;
        si[a] <= s2;
      end
    end
  end

  for (genvar b = 0; b < NBL; b++) begin : g_bl
    localparam int I = bl_i(b);
    localparam int J = bl_j(b);
    logic signed [31:0] dm, db;
    always_comb begin
      dm = '0;
      db = '0;
      for (int t = 0; t < T_PAR; t++) begin
        logic [17:0] pa, pb;
        logic [35:0] pp;
        pa = {5'd0, ur[I][t], 5'd0, ui[I][t]};
        pb = {5'd0, ui[J][t], 5'd0, ur[J][t]};
        pp = pa * pb;                               // one 18x18 multiply
        dm += 32'(pp[17:9]);
        db += 32'(pp[8:0]) - 32'(pp[26:18]);
      end
    end
    always_ff @(posedge clk)
      if (in_valid) begin
        acc_mid[b] <= (in_sof ? 32'sd0 : acc_mid[b]) + dm;
        acc_bt[b]  <= (in_sof ? 32'sd0 : acc_bt[b]) + db;
      end
  end

  // latch the finished window (one clock after its last input)
  logic                eof_d;
  logic [15:0]         lc_d;
  logic [39:0]         win_d;
  logic signed [31:0]  res [NW];
  logic                busy;
  logic [OW-1:0]       oi;

  always_ff @(posedge clk) begin
    eof_d <= rst ? 1'b0 : (in_valid && in_eof);
    if (in_valid && in_eof) begin
      lc_d  <= in_lc;
      win_d <= in_win;
    end
    if (eof_d) begin
      for (int b = 0; b < NBL; b++) begin
        res[2*b]   <= acc_mid[b] - 32'sd8 * (sr[bl_i(b)] + sr[bl_j(b)] + si[bl_i(b)] + si[bl_j(b)])
                      - 32'sd128 * signed'(tcnt);
        res[2*b+1] <= acc_bt[b] - 32'sd8 * (si[bl_i(b)] + sr[bl_j(b)] - sr[bl_i(b)] - si[bl_j(b)]);
      end
      out_lc  <= lc_d;
      out_win <= win_d;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; oi <= '0;
    end else if (eof_d) begin
      busy <= 1'b1; oi <= '0;
    end else if (busy) begin
      oi <= oi + OW'(1);
      if (oi == OW'(NW - 1)) busy <= 1'b0;
    end
  end

  always_comb begin
    out_valid = busy;
    out_sop   = busy && oi == '0;
    out_eop   = busy && oi == OW'(NW - 1);
    out_data  = res[busy ? oi : '0];
  end
endmodule
