// cic_downsampler -- counter-driven rate reduction by R.
//
// A modulo-R counter runs at the input rate. When it reaches R-1 the
// current input word is captured into the output register (the z^-1 after
// the down-arrow in the pipelined diagram) and dout_valid is raised for one
// clock, so one word in every R leaves the block. After reset the first
// word is captured on the R-th clock. Latency: one clock from the selected
// input to dout. The counter, R = 16 and the output register are the
// paper's; the sampling phase (last of every R) and the valid strobe that
// tells the combs when to work are this design's.
module cic_downsampler #(
  parameter int unsigned W = 16,
  parameter int unsigned R = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout,
  output logic                dout_valid
);
  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;
  localparam logic [CW-1:0] LAST = CW'(R - 1);

  logic [CW-1:0] cnt;
  logic          take;

  assign take = (cnt == LAST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      cnt        <= take ? '0 : cnt + 1'b1;
      dout_valid <= take;
      if (take) dout <= din;
    end
  end
endmodule
