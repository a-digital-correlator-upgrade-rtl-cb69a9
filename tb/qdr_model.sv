// qdr_model: behavioural model of a QDR SRAM for simulation only (not
// synthesizable intent; the real part is an external 72 Mb QDR chip).
// Separate write and read ports, both usable every clock; read data appears
// LAT clocks after the read request.  Contents start random.
module qdr_model #(
  parameter int AW  = 20,
  parameter int DW  = 64,
  parameter int LAT = 4
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];
  logic [DW-1:0] pipe [LAT];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    pipe[0] <= re ? mem[raddr] : '0;
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
  end
  assign rdata = pipe[LAT-1];
endmodule
