// tb_phase_demod: random samples (including -128) with a random Walsh bit;
// each output lane must be the input times +1/-1, -128 saturating to +127,
// one clock later.
module tb_phase_demod;
  import ami_pkg::*;
  localparam int PAR = 16;
  logic clk = 0, rst = 1, in_valid = 0, walsh = 0, out_valid;
  adc_t [PAR-1:0] in_data, out_data, exp_d;
  logic exp_v;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  phase_demod #(.PAR(PAR)) dut (.clk, .rst, .in_valid, .in_data, .walsh, .out_valid, .out_data);

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 300; i++) begin
      @(posedge clk);
      in_valid <= 1'($urandom);
      walsh    <= 1'($urandom);
      for (int p = 0; p < PAR; p++) in_data[p] <= (i % 7 == 0 && p == 3) ? -8'sd128 : adc_t'($urandom);
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected value formed at the input edge, compared one clock later
  always @(posedge clk) begin
    if (!rst) begin
      if (exp_v !== out_valid) begin failures++; end
      checks++;
      if (exp_v) begin
        for (int p = 0; p < PAR; p++) begin
          checks++;
          if (out_data[p] !== exp_d[p]) begin
            failures++;
            if (failures < 10) $display("lane %0d got %0d want %0d", p, out_data[p], exp_d[p]);
          end
        end
      end
    end
    exp_v <= in_valid && !rst;
    for (int p = 0; p < PAR; p++) begin
      int v;
      v = walsh ? -int'(in_data[p]) : int'(in_data[p]);
      if (v > 127) v = 127;
      exp_d[p] <= adc_t'(v);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
