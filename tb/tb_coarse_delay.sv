// tb_coarse_delay: streams a counting sample sequence through a reduced
// (MAX_DELAY = 256) instance and checks, for several delays including 0,
// a multiple of 16 and the maximum, that output sample s equals input sample
// s - D (zero before the stream start), with random input gaps.  The delay
// is changed with `load` and checked again after the buffer settles.
module tb_coarse_delay;
  localparam int PAR = 16, MAXD = 256;
  logic clk = 0, rst = 1, load = 0, in_valid = 0, out_valid;
  logic [7:0] delay_in = 0;
  logic [PAR-1:0][7:0] in_data, out_data;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  coarse_delay #(.PAR(PAR), .W(8), .MAX_DELAY(MAXD)) dut (
    .clk, .rst, .delay_in, .load, .in_valid, .in_data, .out_valid, .out_data);

  int nin = 0, nout = 0, cur_d = 0, settle = 0;
  int delays [6] = '{37, 0, 16, 255, 1, 200};

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 6; k++) begin
      delay_in <= 8'(delays[k]); load <= 1; in_valid <= 0;
      @(posedge clk);
      load <= 0;
      for (int i = 0; i < 120; i++) begin
        in_valid <= ($urandom_range(0, 4) != 0);
        for (int p = 0; p < PAR; p++) in_data[p] <= 8'(nin * PAR + p + 1);
        @(posedge clk);
        if (in_valid) nin++;
      end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the new delay takes effect for output words after the load; skip 2 words
  always @(posedge clk) begin
    if (load) begin cur_d = int'(delay_in); settle = 4; end
    if (out_valid) begin
      if (settle > 0) settle--;
      else for (int p = 0; p < PAR; p++) begin
        int s; logic [7:0] e;
        s = nout * PAR + p - cur_d;
        e = (s < 0) ? 8'd0 : 8'(s + 1);
        checks++;
        if (out_data[p] !== e) begin
          failures++;
          if (failures < 3) $display("word %0d lane %0d d=%0d got %0d want %0d", nout, p, cur_d, out_data[p], e);
        end
      end
      nout++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

