// sync_fifo: single-clock first-in first-out buffer, show-ahead.
// `dout` is the oldest entry whenever `empty` is low; `pop` removes it.
// A push when full is dropped and sets the sticky `overflow` flag.
// DEPTH must be a power of two.  Used as packet buffers.
module sync_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 256
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   push,
  input  logic [W-1:0]           din,
  input  logic                   pop,
  output logic [W-1:0]           dout,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count,
  output logic                   overflow
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      if (do_push) wp <= wp + AW'(1);
      if (do_pop)  rp <= rp + AW'(1);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && full) overflow <= 1'b1;
    end
  end

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
endmodule
