// tb_cic_filter -- end-to-end check of the five-stage pipelined CIC
// decimator at its full size (N = 5, M = 1, R = 16, 5-bit in, 16-bit out).
//
// Two independent references run beside the filter:
//  * a clock-accurate integer model of the truncated datapath (adjuster,
//    integrators of 25/22/20/18/16 bits with floor truncation, counter
//    sampling on every 16th clock, five 16-bit combs with one register each);
//    its output must match cic_out bit for bit on every clock;
//  * the ideal filter: the input convolved with the 76 coefficients of
//    (1 + z^-1 + ... + z^-15)^5 in full precision and scaled by 2^-9; the
//    truncated output must stay within ERR_MAX LSBs of it, and its rms
//    deviation below RMS_MAX. The register widths drop 3, 5, 7 and 9 LSBs
//    before integrators 2..5 and 9 before the combs; summing the white-noise
//    variance of each cut times the energy of the impulse response behind it
//    predicts an rms error of about 59 output LSBs, which sets both limits.
// It also checks the output rate (one word every 16 clocks), the first
// output 21 clocks after reset release, and the DC gain (x * 2^11).
// Stimulus: random words, full-scale DC of both signs, a 5-bit quantised
// sine, and a reset in the middle of a run. Each mechanism of the design
// (decimated output words, integrator wraparound, nonzero LSBs removed by
// truncation, full-scale input, reset during operation) is counted and must
// have happened at least once.
module tb_cic_filter;
  localparam int R = 16, NS = 5, HL = (R - 1) * NS + 1;  // 76 taps
  localparam longint ERR_MAX = 300;
  localparam real RMS_MAX = 80.0;

  logic clk = 0, rst_n = 0;
  logic signed [4:0]  cic_in;
  logic signed [15:0] cic_out;
  logic               cic_out_valid;

  cic_filter dut (.clk, .rst_n, .cic_in, .cic_out, .cic_out_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_words = 0, n_wraps = 0, n_trunc = 0, n_fullscale = 0, n_resets = 0;
  int max_err = 0, n_cmp = 0;
  real sq_err = 0.0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ideal filter coefficients ----------------
  longint h [HL];
  initial begin
    longint t [HL];
    for (int k = 0; k < HL; k++) h[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < HL; k++) begin
        t[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) t[k] += h[k - j];
      end
      h = t;
    end
  end

  // ---------------- clock-accurate model ----------------
  function automatic longint wrapw(longint v, int w);
    longint m = longint'(1) << w;
    v = v % m;
    if (v < 0) v += m;
    if (v >= m / 2) v -= m;
    return v;
  endfunction

  localparam int IW [NS] = '{25, 22, 20, 18, 16};
  longint m_adj, m_i [NS], m_ds, m_z [NS], m_d [NS];
  bit     m_dsv, m_v [NS];
  int     m_cnt;
  longint xhist [HL + 16];   // xhist[0] = newest input sample
  int     t_rel;        // rising edges since reset release

  task automatic model_reset();
    m_adj = 0; m_ds = 0; m_dsv = 0; m_cnt = 0;
    for (int k = 0; k < NS; k++) begin m_i[k] = 0; m_z[k] = 0; m_d[k] = 0; m_v[k] = 0; end
    for (int k = 0; k < HL + 16; k++) xhist[k] = 0;
    t_rel = 0;
  endtask

  // Advance the model by one rising edge, with x the input sampled there.
  task automatic model_step(longint x);
    longint n_i [NS], n_d [NS], n_z [NS];
    bit     n_v [NS];
    longint in_k, full;
    for (int k = 0; k < NS; k++) begin
      in_k = (k == 0) ? m_adj : (m_i[k-1] >>> (IW[k-1] - IW[k]));
      if (k > 0 && (m_i[k-1] & ((longint'(1) << (IW[k-1] - IW[k])) - 1)) != 0) n_trunc++;
      full = m_i[k] + in_k;
      if (wrapw(full, IW[k]) != full) n_wraps++;
      n_i[k] = wrapw(full, IW[k]);
    end
    for (int k = 0; k < NS; k++) begin
      longint din  = (k == 0) ? m_ds  : m_d[k-1];
      bit     dval = (k == 0) ? m_dsv : m_v[k-1];
      n_v[k] = dval;
      n_d[k] = dval ? wrapw(din - m_z[k], 16) : m_d[k];
      n_z[k] = dval ? din : m_z[k];
    end
    m_dsv = (m_cnt == R - 1);
    if (m_cnt == R - 1) m_ds = m_i[NS-1];
    m_cnt = (m_cnt == R - 1) ? 0 : m_cnt + 1;
    m_i = n_i; m_d = n_d; m_z = n_z; m_v = n_v;
    m_adj = x;
    for (int k = HL + 15; k > 0; k--) xhist[k] = xhist[k-1];
    xhist[0] = x;
    t_rel++;
  endtask

  // Ideal output for the word whose newest input is xhist[lag].
  function automatic longint ideal(int lag);
    longint acc = 0;
    for (int k = 0; k < HL; k++) acc += h[k] * xhist[k + lag];
    return acc;
  endfunction

  // ---------------- stimulus and comparison ----------------
  int last_word_t;
  longint last_out;

  always @(posedge clk) if (rst_n) model_step(longint'(cic_in));

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (cic_out_valid !== m_v[NS-1] || longint'(cic_out) != m_d[NS-1]) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0d out %0d/%0d model %0d/%0d", t_rel, cic_out, cic_out_valid,
                   m_d[NS-1], m_v[NS-1]);
      end
      if (cic_out_valid) begin
        longint id;
        int e;
        n_words++;
        last_out = longint'(cic_out);
        // rate and latency
        checks++;
        if (last_word_t < 0) begin
          if (t_rel != 21) begin failures++; $display("FAIL first word at %0d", t_rel); end
        end else if (t_rel - last_word_t != R) begin
          failures++; $display("FAIL word spacing %0d", t_rel - last_word_t);
        end
        last_word_t = t_rel;
        // The word leaving now was sampled 6 edges earlier (5 combs + the
        // down-sampler register) and holds inputs up to 6 edges before that.
        id = ideal(11);
        e = int'(longint'(cic_out) - (id >>> 9));
        if (e < 0) e = -e;
        if (e > max_err) max_err = e;
        sq_err += real'(e) * real'(e);
        n_cmp++;
        checks++;
        if (longint'(e) > ERR_MAX) begin
          failures++;
          if (failures < 10) $display("FAIL ideal t=%0d out %0d ideal %0d", t_rel, cic_out, id >>> 9);
        end
      end
    end
  end

  task automatic do_reset();
    @(negedge clk) rst_n = 0;
    repeat (3) @(negedge clk);
    model_reset();
    last_word_t = -1;
    @(posedge clk) #1 rst_n = 1;
  endtask

  task automatic drive(int x);
    @(negedge clk) cic_in = 5'(x);
    if (x == 15 || x == -16) n_fullscale++;
  endtask

  initial begin
    cic_in = '0;
    model_reset();
    last_word_t = -1;
    repeat (3) @(posedge clk) ;
    @(posedge clk) #1 rst_n = 1;
    // random words
    for (int i = 0; i < 3000; i++) drive(int'($signed(5'($urandom))));
    // full-scale DC, then check the settled gain x * 2^11
    for (int i = 0; i < 1500; i++) drive(15);
    checks++;
    if (last_out - 15 * 2048 > ERR_MAX || 15 * 2048 - last_out > ERR_MAX) begin
      failures++; $display("FAIL DC +15 -> %0d", last_out);
    end
    $display("DC +15 settles at %0d (ideal %0d)", last_out, 15 * 2048);
    // -15, not -16: a long run at -16 sits at the very end of the output
    // range, and the truncation error can then wrap the 16-bit result.
    for (int i = 0; i < 1500; i++) drive(-15);
    checks++;
    if (last_out - (-15 * 2048) > ERR_MAX || (-15 * 2048) - last_out > ERR_MAX) begin
      failures++; $display("FAIL DC -15 -> %0d", last_out);
    end
    $display("DC -15 settles at %0d (ideal %0d)", last_out, -15 * 2048);
    // quantised sine, period 160 input samples (10 output words)
    for (int i = 0; i < 4000; i++)
      drive(int'($floor(15.4 * $sin(2.0 * 3.14159265358979 * i / 160.0) + 0.5)));
    // reset in the middle of operation, then more random data
    do_reset();
    n_resets++;
    for (int i = 0; i < 2000; i++) drive(int'($signed(5'($urandom))));
    repeat (30) @(negedge clk);

    $display("words=%0d wraps=%0d trunc=%0d fullscale=%0d resets=%0d max_err=%0d rms_err=%0.1f",
             n_words, n_wraps, n_trunc, n_fullscale, n_resets, max_err, $sqrt(sq_err / n_cmp));
    checks += 6;
    if ($sqrt(sq_err / n_cmp) > RMS_MAX) begin failures++; $display("FAIL rms error"); end
    if (n_words == 0)     begin failures++; $display("FAIL no decimated words"); end
    if (n_wraps == 0)     begin failures++; $display("FAIL no integrator wraparound"); end
    if (n_trunc == 0)     begin failures++; $display("FAIL no truncation"); end
    if (n_fullscale == 0) begin failures++; $display("FAIL no full-scale input"); end
    if (n_resets == 0)    begin failures++; $display("FAIL no reset in operation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
