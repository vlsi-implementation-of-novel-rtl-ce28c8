// cic_integrator -- one integrator stage 1/(1 - z^-1) with LSB removal.
//
// The stage accumulates its input every input-rate clock in a W-bit
// register (the z^-1 of the diagram sits after the adder, so the register
// output is both the feedback and the stage output, and the register doubles
// as the pipeline register between stages: no extra registers are added).
// The addition is done by the carry look-ahead adder with carry in 0 and
// wraps modulo 2^W, which is harmless in a CIC filter because the final
// combs undo any wrap. The input is IN_W bits wide; when IN_W > W its
// LSBs are dropped before the add (truncation towards minus infinity), so
// the MSB position stays fixed; those input bits are deliberately unread.
// Latency: one clock.
//
// Stage structure and widths follow the paper's pipelined diagram; the
// truncation rule (drop LSBs, no rounding) and the reset are this design's.
module cic_integrator #(
  parameter int unsigned IN_W = 25,
  parameter int unsigned W    = 22
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [IN_W-1:0] din,
  output logic signed [W-1:0]    acc
);
  logic [W-1:0] x_t, nxt;

  // "LSB rmv": keep the W most significant bits of the input.
  if (IN_W > W) begin : g_trunc
    assign x_t = din[IN_W-1 -: W];
  end else begin : g_ext
    assign x_t = W'(din);  // sign extension (not used by the default filter)
  end

  cla_adder #(.WIDTH(W)) u_add (
    .a    (acc),
    .b    (x_t),
    .cin  (1'b0),
    .sum  (nxt),
    .cout ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= nxt;
  end
endmodule
