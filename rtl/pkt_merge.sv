// pkt_merge: packet-level two-to-one merge with backpressure.
// Combines the internal-route outputs of the two F-engines of a board into
// the X-engine's internal input.  Whole packets are passed: when idle the
// merge takes the input offering a start of packet (alternating priority)
// and holds it until that packet's end.  in_ready tells a source its word
// was taken; the output has no backpressure.  Combinational data path.
module pkt_merge #(
  parameter int W = 64
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [1:0]       in_valid,
  input  logic [1:0][W-1:0] in_data,
  input  logic [1:0]       in_sop,
  input  logic [1:0]       in_eop,
  output logic [1:0]       in_ready,
  output logic             out_valid,
  output logic [W-1:0]     out_data,
  output logic             out_sop,
  output logic             out_eop
);
  logic busy, sel, prio;
  logic cur;

  always_comb begin
    cur = sel;
    if (!busy) begin
      if (in_valid[prio] && in_sop[prio])       cur = prio;
      else if (in_valid[!prio] && in_sop[!prio]) cur = !prio;
    end
    out_valid = in_valid[cur] && (busy || in_sop[cur]);
    out_data  = in_data[cur];
    out_sop   = out_valid && in_sop[cur];
    out_eop   = out_valid && in_eop[cur];
    in_ready  = '0;
    in_ready[cur] = busy || (in_valid[cur] && in_sop[cur]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; sel <= 1'b0; prio <= 1'b0;
    end else if (out_valid) begin
      sel <= cur;
      if (out_eop) begin
        busy <= 1'b0;
        prio <= !cur;
      end else begin
        busy <= 1'b1;
      end
    end
  end
endmodule
