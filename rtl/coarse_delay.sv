// coarse_delay: programmable whole-sample delay of the 16-wide sample stream.
//
// Each antenna stream can be delayed by 0..MAX_DELAY-1 samples to take out
// geometric and cable delays.  The stream arrives PAR samples per valid
// clock.  A delay D = PAR*q + r is made by writing every input word into a
// circular buffer of MAX_DELAY/PAR words, reading word n-q, keeping the word
// read one valid clock earlier (n-q-1), and taking PAR samples across the
// two words starting at lane PAR-r.  Output sample index s = PAR*n + j equals
// input sample s - D.  Samples from before the first input word are zero.
//
// A new delay on `delay_in` is taken only on `load` (the control software
// strobes it at an integration boundary, so a delay never changes inside an
// integration).  The output word straight after a change mixes the two
// delays.  Timing: two register stages, out_valid is in_valid delayed by two
// clocks.  The buffer organisation and load strobe are this design's own.
module coarse_delay #(
  parameter int PAR       = 16,
  parameter int W         = 8,
  parameter int MAX_DELAY = 16384
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [$clog2(MAX_DELAY)-1:0]  delay_in,
  input  logic                          load,
  input  logic                          in_valid,
  input  logic [PAR-1:0][W-1:0]         in_data,
  output logic                          out_valid,
  output logic [PAR-1:0][W-1:0]         out_data
);
  localparam int DEPTH = MAX_DELAY / PAR;
  localparam int AW    = $clog2(DEPTH);
  localparam int LW    = $clog2(PAR);
  localparam int DLW   = $clog2(MAX_DELAY);

  logic [PAR-1:0][W-1:0] mem [DEPTH];
  logic [DLW-1:0]        cur_delay;
  logic [AW-1:0]         wp;
  logic [AW:0]           cnt;        // words written, saturating at DEPTH
  logic [PAR-1:0][W-1:0] cur_w, prev_w;
  logic                  ok_a, ok_b, v1;
  logic [LW-1:0]         r_r;

  wire [AW-1:0] q = cur_delay[DLW-1:LW];
  wire [LW-1:0] r = cur_delay[LW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_delay <= '0;
      wp        <= '0;
      cnt       <= '0;
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (load) cur_delay <= delay_in;
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        wp <= wp + AW'(1);
        if (cnt != (AW+1)'(DEPTH)) cnt <= cnt + (AW+1)'(1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem[wp] <= in_data;
      cur_w   <= (q == '0) ? in_data : mem[wp - q];
      prev_w  <= cur_w;
      ok_a    <= cnt >= {1'b0, q};
      ok_b    <= cnt >= ({1'b0, q} + (AW+1)'(1));
      r_r     <= r;
    end
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      for (int j = 0; j < PAR; j++) begin
        if (j >= int'(r_r)) out_data[j] <= ok_a ? cur_w[j - int'(r_r)] : '0;
        else                out_data[j] <= ok_b ? prev_w[j - int'(r_r) + PAR] : '0;
      end
    end
  end
endmodule
