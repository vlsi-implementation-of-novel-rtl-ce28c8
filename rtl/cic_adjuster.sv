// cic_adjuster -- input stage ("Adjuster") of the CIC decimator.
//
// It registers the 5-bit two's complement word from the sigma-delta
// modulator once per input clock and sign-extends it to the 25-bit format
// of the first integrator, so that every later stage works on the common
// MSB position B_max = 24. The paper only names this block; what it does
// here (register + sign extension, input taken as two's complement) is this
// design's choice. Latency: one clock.
module cic_adjuster #(
  parameter int unsigned IN_W  = 5,
  parameter int unsigned OUT_W = 25
) (
  input  logic                    clk,
  input  logic                    rst_n,  // asynchronous, active low
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else        dout <= OUT_W'(din);  // signed operand: sign extension
  end
endmodule
