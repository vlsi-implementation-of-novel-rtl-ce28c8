// cic_comb -- one comb (differentiator) stage 1 - z^-M at the decimated rate.
//
// The stage works only on clocks where din_valid is high, i.e. once per R
// input clocks. On such a clock it forms din - din[n-M] with the carry
// look-ahead adder (a + ~b + 1), stores the result in its output pipeline
// register, and shifts din into its M-word delay line. dout_valid follows
// one clock later, so the five combs form a pipeline with one register per
// stage, as in the paper's pipelined diagram. Latency: one clock.
//
// The subtraction wraps modulo 2^W. Running the comb section on a single
// clock with a valid strobe instead of a separate clock of rate fs/R, and
// reusing the look-ahead adder for the subtraction, are this design's
// choices.
module cic_comb #(
  parameter int unsigned W = 16,
  parameter int unsigned M = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] din,
  input  logic                din_valid,
  output logic signed [W-1:0] dout,
  output logic                dout_valid
);
  logic [W-1:0] dly [M];  // dly[M-1] is din delayed by M valid words
  logic [W-1:0] diff;

  cla_adder #(.WIDTH(W)) u_sub (
    .a    (din),
    .b    (~dly[M-1]),
    .cin  (1'b1),
    .sum  (diff),
    .cout ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) dly[i] <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= din_valid;
      if (din_valid) begin
        dout   <= diff;
        dly[0] <= din;
        for (int i = 1; i < M; i++) dly[i] <= dly[i-1];
      end
    end
  end
endmodule
