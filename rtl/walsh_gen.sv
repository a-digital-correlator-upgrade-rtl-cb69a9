// walsh_gen: Walsh switching-pattern generator.
//
// A runtime-programmable look-up table of LUT_LEN one-bit entries is stepped
// one entry every `step_cycles` clocks while `en` is high, so the switching
// rate is locked to the sample clock and can be chosen to give a whole number
// of switching periods per spectrum and per integration.  `gpio_out` is the
// registered pattern that drives the front-end phase or noise switch.
// `demod_out` is the same pattern delayed by `delay` clocks (0..MAX_DELAY-1),
// to line the internal demodulation up with the cable delays of the control
// and RF paths.  Two of these exist per F-engine (phase switch and noise
// injection), as in the described firmware.
//
// Interface: LUT writes (lut_we/lut_addr/lut_din) may happen at any time.
// Timing: gpio_out changes one clock after the step counter wraps;
// demod_out(n) == gpio_out(n - delay).
// Own choices: the table length, the step counter width, the delay range,
// and the reset state (index 0, output low).
module walsh_gen #(
  parameter int LUT_LEN   = 64,
  parameter int MAX_DELAY = 1024
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          en,
  input  logic [23:0]                   step_cycles,  // clocks per table entry, >= 1
  input  logic                          lut_we,
  input  logic [$clog2(LUT_LEN)-1:0]    lut_addr,
  input  logic                          lut_din,
  input  logic [$clog2(MAX_DELAY)-1:0]  delay,
  output logic                          gpio_out,
  output logic                          demod_out
);
  localparam int AW = $clog2(LUT_LEN);
  localparam int DLW = $clog2(MAX_DELAY);

  logic          lut [LUT_LEN];
  logic [23:0]   cc;
  logic [AW-1:0] idx;
  logic          hist [MAX_DELAY];
  logic [DLW-1:0] wp;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cc       <= '0;
      idx      <= '0;
      gpio_out <= 1'b0;
    end else if (en) begin
      gpio_out <= lut[idx];
      if (cc >= step_cycles - 24'd1) begin
        cc  <= '0;
        idx <= (idx == AW'(LUT_LEN - 1)) ? '0 : idx + AW'(1);
      end else begin
        cc <= cc + 24'd1;
      end
    end
  end

  // history of the output for the programmable delay
  always_ff @(posedge clk) begin
    hist[wp] <= gpio_out;
    wp       <= rst ? '0 : wp + DLW'(1);
  end

  always_comb demod_out = (delay == '0) ? gpio_out : hist[wp - delay];

endmodule
