// sdm3_model -- behavioural model of a 3rd-order sigma-delta modulator with
// a 5-bit output, used only to give the CIC decimator a realistic input.
//
// Not synthesizable and not a model of any particular circuit: the modulator
// in front of the decimator is outside this design, and only its order and
// word width are known. It is written as an error-feedback loop with noise
// transfer function (1 - z^-1)^3 and signal transfer function 1: on every
// rising clock edge it takes the real-valued input u (in output LSBs),
// subtracts 3e[n-1] - 3e[n-2] + e[n-3] of its past quantisation errors,
// rounds to the nearest integer and clips to the 5-bit range -16..15.
// It is stable for |u| up to about 11 LSB.
module sdm3_model (
  input  logic              clk,
  input  logic              rst_n,
  input  real               u,
  output logic signed [4:0] y
);
  real e1, e2, e3;

  always @(posedge clk or negedge rst_n) begin
    real w, q;
    if (!rst_n) begin
      e1 = 0.0; e2 = 0.0; e3 = 0.0;
      y <= '0;
    end else begin
      w = u - 3.0 * e1 + 3.0 * e2 - e3;
      q = $floor(w + 0.5);
      if (q > 15.0)  q = 15.0;
      if (q < -16.0) q = -16.0;
      e3 = e2; e2 = e1; e1 = q - w;
      y <= 5'($rtoi(q));
    end
  end
endmodule
