// phase_demod: removes the antenna phase-switch modulation.
//
// Every one of the PAR parallel 8-bit ADC samples of a clock is multiplied by
// +1 (walsh = 0) or -1 (walsh = 1), as the described firmware does directly
// after sample capture.  The Walsh bit comes from walsh_gen's delayed output.
// Negating -128 would overflow 8 bits; it saturates to +127 (own choice).
// Timing: one register stage; out_valid follows in_valid by one clock.
module phase_demod
  import ami_pkg::*;
#(
  parameter int PAR = 16,
  parameter int W   = ADC_BITS
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  adc_t [PAR-1:0] in_data,
  input  logic                       walsh,
  output logic                       out_valid,
  output adc_t [PAR-1:0] out_data
);
  localparam adc_t MAXV = {1'b0, {(W-1){1'b1}}};
  localparam adc_t MINV = {1'b1, {(W-1){1'b0}}};

  always_ff @(posedge clk) begin
    out_valid <= rst ? 1'b0 : in_valid;
    for (int p = 0; p < PAR; p++) begin
      if (!walsh)                     out_data[p] <= in_data[p];
      else if (in_data[p] == MINV)    out_data[p] <= MAXV;
      else                            out_data[p] <= -in_data[p];
    end
  end
endmodule
