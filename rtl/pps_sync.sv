// pps_sync: starts the signal-processing pipeline on a PPS edge.
//
// The GPS pulse-per-second input is synchronised with two flip-flops and its
// rising edge detected.  After software raises `arm`, the next PPS edge sets
// `run`, which then stays high until reset; every F-engine in the array
// started this way begins its first spectrum, window and Walsh period on the
// same PPS second, so window counts serve as common timestamps.  `pps_cnt`
// counts PPS edges seen since `run` rose (for monitoring).  The text says
// only that the PPS synchronises and timestamps the outputs; the arm/run
// scheme is this design's own.  Timing: run rises three clocks after the
// PPS input rises.
module pps_sync (
  input  logic        clk,
  input  logic        rst,
  input  logic        pps,
  input  logic        arm,
  output logic        run,
  output logic [31:0] pps_cnt
);
  logic [2:0] sr;
  wire        edge_det = sr[1] && !sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      sr <= '0; run <= 1'b0; pps_cnt <= '0;
    end else begin
      sr <= {sr[1:0], pps};
      if (edge_det) begin
        if (arm) run <= 1'b1;
        if (run) pps_cnt <= pps_cnt + 32'd1;
      end
    end
  end
endmodule
