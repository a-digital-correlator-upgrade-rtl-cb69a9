// tb_walsh_gen: programs a random 8-entry pattern, steps it every 3 clocks
// and checks gpio_out against the table entry expected for each clock, and
// demod_out against gpio_out delayed by the programmed delay (two delays).
module tb_walsh_gen;
  localparam int LEN = 8, MAXD = 16, STEP = 3;
  logic clk = 0, rst = 1, en = 0, lut_we = 0, lut_din = 0;
  logic [2:0] lut_addr = 0;
  logic [3:0] delay = 4'd5;
  logic gpio_out, demod_out;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  walsh_gen #(.LUT_LEN(LEN), .MAX_DELAY(MAXD)) dut (
    .clk, .rst, .en, .step_cycles(24'(STEP)), .lut_we, .lut_addr, .lut_din,
    .delay, .gpio_out, .demod_out);

  logic pat [LEN];
  logic hist [$];
  int   n = -1;

  initial begin
    for (int i = 0; i < LEN; i++) pat[i] = 1'($urandom);
    pat[0] = 1; pat[1] = 0;
    @(posedge clk);
    for (int i = 0; i < LEN; i++) begin
      lut_we <= 1; lut_addr <= 3'(i); lut_din <= pat[i];
      @(posedge clk);
    end
    lut_we <= 0; rst <= 0;
    @(posedge clk);
    en <= 1;
    repeat (200) @(posedge clk);
    delay <= 4'd0;
    repeat (50) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample between edges
  always @(negedge clk) if (en) begin
    n++;
    if (n >= 1) begin
      checks++;
      if (gpio_out !== pat[((n - 1) / STEP) % LEN]) begin
        failures++; $display("n=%0d gpio %b want %b", n, gpio_out, pat[((n-1)/STEP)%LEN]);
      end
    end
    hist.push_front(gpio_out);
    if (hist.size() > 20) void'(hist.pop_back());
    if (n > MAXD + 2) begin
      checks++;
      if (demod_out !== hist[delay]) begin
        failures++; $display("n=%0d demod %b want %b (delay %0d)", n, demod_out, hist[delay], delay);
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
