// cic_filter -- five-stage truncated, pipelined CIC decimation filter.
//
// H(z) = ((1 - z^-RM) / (1 - z^-1))^N with N = 5, M = 1, R = 16. A 5-bit
// two's complement word from a sigma-delta modulator enters on every clock;
// one 16-bit word leaves every 16 clocks, flagged by cic_out_valid.
//
// Datapath, in order: adjuster (register, sign extension to 25 bits), five
// integrators of 25, 22, 20, 18 and 16 bits with LSB removal between them,
// the counter-driven down-sampler with its output register, and five 16-bit
// combs, each followed by a pipeline register. Every adder is the carry
// look-ahead adder. The integrators need no extra pipeline registers: each
// accumulator register already separates one stage's adder from the next.
//
// DC gain is (RM)^N = 2^20; with 9 LSBs removed overall, a constant input x
// settles to about x * 2^11 at the output. Timing: a word sampled from
// cic_in on rising edge p is in the adjuster after edge p, in integrator k
// after edge p + k, in the down-sampler register after edge p + 6 at the
// earliest and at the output after edge p + 11. The down-sampler takes a
// word on every 16th edge counted from reset release, so the first valid
// output follows edge 21 and later ones come exactly 16 clocks apart.
//
// The register widths cut 3, 5, 7 and 9 LSBs ahead of integrators 2..5 and
// 9 ahead of the combs. The truncation noise this adds is about 60 output
// LSBs rms (see the end-to-end testbenches); the widths are kept as the
// paper gives them. Each stage's word travels on a 25-bit bus under the
// common MSB; the zero-filled low bits of those buses are never read.
//
// The structure, N, M, R and every register width follow the paper; the
// port list, reset, input coding and valid strobe are this design's.
module cic_filter
  import cic_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,          // asynchronous, active low
  input  logic signed [IN_W-1:0]   cic_in,         // modulator word, every clock
  output logic signed [OUT_W-1:0]  cic_out,
  output logic                     cic_out_valid   // one clock in every DECIM
);
  // Integrator chain: s_int[k] is the accumulator of integrator k+1, kept at
  // full width ACC_W with its (ACC_W - width) LSBs unused.
  logic signed [ACC_W-1:0] adj;
  logic signed [ACC_W-1:0] s_int [N_STAGES+1];

  cic_adjuster #(.IN_W(IN_W), .OUT_W(ACC_W)) u_adj (
    .clk, .rst_n, .din(cic_in), .dout(adj)
  );

  assign s_int[0] = adj;

  for (genvar k = 0; k < N_STAGES; k++) begin : g_int
    localparam int unsigned WI = (k == 0) ? ACC_W : int_width(k - 1);
    localparam int unsigned WO = int_width(k);
    logic signed [WO-1:0] acc;

    cic_integrator #(.IN_W(WI), .W(WO)) u_int (
      .clk, .rst_n, .din(s_int[k][ACC_W-1 -: WI]), .acc
    );
    // Place the stage's bits under the common MSB.
    if (WO < ACC_W) begin : g_pad
      assign s_int[k+1] = {acc, {(ACC_W - WO){1'b0}}};
    end else begin : g_full
      assign s_int[k+1] = acc;
    end
  end

  // LSB removal after the last integrator down to the comb width.
  logic signed [COMB_W-1:0] ds_in;
  assign ds_in = s_int[N_STAGES][ACC_W-1 -: COMB_W];

  logic signed [COMB_W-1:0] c_dat [N_STAGES+1];
  logic                     c_vld [N_STAGES+1];

  cic_downsampler #(.W(COMB_W), .R(DECIM)) u_ds (
    .clk, .rst_n, .din(ds_in), .dout(c_dat[0]), .dout_valid(c_vld[0])
  );

  for (genvar k = 0; k < N_STAGES; k++) begin : g_comb
    cic_comb #(.W(COMB_W), .M(DIFF_DLY)) u_comb (
      .clk, .rst_n,
      .din(c_dat[k]), .din_valid(c_vld[k]),
      .dout(c_dat[k+1]), .dout_valid(c_vld[k+1])
    );
  end

  assign cic_out       = c_dat[N_STAGES];
  assign cic_out_valid = c_vld[N_STAGES];

  // The comb section must see exactly one word per DECIM clocks.
  property p_valid_spacing;
    @(posedge clk) disable iff (!rst_n)
      cic_out_valid |=> !cic_out_valid [* DECIM-1];
  endproperty
  a_valid_spacing: assert property (p_valid_spacing)
    else $error("cic_filter: output words closer than DECIM clocks");
endmodule
