// tb_cic_snr -- the decimator on a sigma-delta stream carrying a sine.
//
// A behavioural 3rd-order, 5-bit sigma-delta modulator (sdm3_model) is fed
// a sine of AMP LSBs with a period of 2048 input clocks (128 output words).
// For every output word the testbench also forms the ideal CIC output in
// full precision (the modulator words convolved with the 76 coefficients of
// (1 + z^-1 + ... + z^-15)^5, scaled by 2^-9). Over 16 whole periods it then
// fits a sine of the known frequency to both sequences and reports:
//   * the signal-to-noise-and-distortion ratio (SINAD) of the ideal CIC
//     output: the modulator's shaped noise left after one CIC stage;
//   * the SINAD of the truncated filter's output;
//   * the signal-to-truncation-noise ratio: the fitted sine power over the
//     power of (filter output - ideal output), the noise the register
//     widths alone add.
// Checks: the fitted amplitude equals AMP * 2^11 within 1 %, the truncated
// output is not better than the ideal, the truncation noise rms stays below
// 100 LSB, and the output rate is one word every 16 clocks.
module tb_cic_snr;
  localparam int  R = 16, HL = 76, PER_OUT = 128, N_PER = 16, SKIP = 16;
  localparam real AMP = 8.0;
  localparam real PI  = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  real  u;
  logic signed [4:0]  x;
  logic signed [15:0] cic_out;
  logic               cic_out_valid;

  sdm3_model u_sdm (.clk, .rst_n, .u, .y(x));
  cic_filter dut (.clk, .rst_n, .cic_in(x), .cic_out, .cic_out_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (R * PER_OUT * (N_PER + 2) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint h [HL];
  initial begin
    longint t [HL];
    for (int k = 0; k < HL; k++) h[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < HL; k++) begin
        t[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) t[k] += h[k - j];
      end
      h = t;
    end
  end

  // Input history, sampled on the same edges as the filter's input.
  longint xhist [HL + 16];
  int     n_in = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = HL + 15; k > 0; k--) xhist[k] = xhist[k-1];
      xhist[0] = longint'(x);
      n_in++;
    end
  end

  // Sine source, advanced on the falling edge.
  always @(negedge clk) u = AMP * $sin(2.0 * PI * real'(n_in) / real'(R * PER_OUT));

  real y_dut [N_PER * PER_OUT];
  real y_id  [N_PER * PER_OUT];
  int  n_out = 0, n_seen = 0, last_t = -1, t_edge = 0;

  always @(posedge clk) if (rst_n) t_edge++;

  always @(negedge clk) begin
    if (rst_n && cic_out_valid) begin
      longint acc;
      acc = 0;
      if (last_t >= 0) begin
        checks++;
        if (t_edge - last_t != R) begin failures++; $display("FAIL spacing %0d", t_edge - last_t); end
      end
      last_t = t_edge;
      for (int k = 0; k < HL; k++) acc += h[k] * xhist[k + 11];
      if (n_seen >= SKIP && n_out < N_PER * PER_OUT) begin
        y_dut[n_out] = real'(cic_out);
        y_id[n_out]  = real'(acc) / 512.0;
        n_out++;
      end
      n_seen++;
    end
  end

  // Least-squares fit of a + b sin + c cos at the known frequency over whole
  // periods (the basis is orthogonal there); returns amplitude and residual
  // power.
  task automatic fit(input real y [N_PER * PER_OUT], output real ampl, output real res_pow);
    real a = 0.0, b = 0.0, c = 0.0, r = 0.0;
    int  n = N_PER * PER_OUT;
    for (int i = 0; i < n; i++) begin
      real ph = 2.0 * PI * real'(i) / real'(PER_OUT);
      a += y[i];
      b += y[i] * $sin(ph);
      c += y[i] * $cos(ph);
    end
    a = a / n; b = 2.0 * b / n; c = 2.0 * c / n;
    for (int i = 0; i < n; i++) begin
      real ph = 2.0 * PI * real'(i) / real'(PER_OUT);
      real d  = y[i] - a - b * $sin(ph) - c * $cos(ph);
      r += d * d;
    end
    ampl = $sqrt(b * b + c * c);
    res_pow = r / n;
  endtask

  initial begin
    real amp_d, res_d, amp_i, res_i, tn, sinad_d, sinad_i, snr_t;
    u = 0.0;
    for (int k = 0; k < HL + 16; k++) xhist[k] = 0;
    repeat (3) @(posedge clk);
    @(posedge clk) #1 rst_n = 1;
    wait (n_out == N_PER * PER_OUT);
    fit(y_dut, amp_d, res_d);
    fit(y_id, amp_i, res_i);
    tn = 0.0;
    for (int i = 0; i < N_PER * PER_OUT; i++) tn += (y_dut[i] - y_id[i]) ** 2;
    tn = tn / (N_PER * PER_OUT);
    sinad_d = 10.0 * $log10(amp_d * amp_d / 2.0 / res_d);
    sinad_i = 10.0 * $log10(amp_i * amp_i / 2.0 / res_i);
    snr_t   = 10.0 * $log10(amp_d * amp_d / 2.0 / tn);
    $display("amplitude: filter %0.1f ideal %0.1f expected %0.1f", amp_d, amp_i, AMP * 2048.0);
    $display("SINAD ideal CIC %0.2f dB, truncated filter %0.2f dB", sinad_i, sinad_d);
    $display("truncation noise %0.1f LSB rms, signal to truncation noise %0.2f dB", $sqrt(tn), snr_t);
    checks += 4;
    if (amp_d < 0.99 * AMP * 2048.0 || amp_d > 1.01 * AMP * 2048.0) begin failures++; $display("FAIL amplitude"); end
    if (amp_i < 0.99 * AMP * 2048.0 || amp_i > 1.01 * AMP * 2048.0) begin failures++; $display("FAIL ideal amplitude"); end
    if (sinad_d > sinad_i + 0.01) begin failures++; $display("FAIL truncated output better than ideal"); end
    if ($sqrt(tn) > 100.0) begin failures++; $display("FAIL truncation noise"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
