// tb_cic_integrator -- check of one integrator stage with LSB removal.
// A 25-bit to 22-bit stage (integrator 2 of the filter) is driven with
// random words and with long runs of large values so that the accumulator
// wraps. The expected accumulator is kept as a 64-bit integer:
// acc += floor(din / 8), reduced modulo 2^22, and compared every clock.
module tb_cic_integrator;
  localparam int IN_W = 25, W = 22;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] din;
  logic signed [W-1:0]    acc;
  int checks = 0, failures = 0, wraps = 0;
  longint model;

  cic_integrator #(.IN_W(IN_W), .W(W)) dut (.clk, .rst_n, .din, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap(longint v, int w);
    longint m = longint'(1) << w;
    v = v % m;
    if (v < 0) v += m;
    if (v >= m / 2) v -= m;
    return v;
  endfunction

  initial begin
    din = '0;
    model = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      longint x, full;
      @(negedge clk);
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d acc %0d exp %0d", i, acc, model);
      end
      if (i < 2000) din = IN_W'($urandom);
      else          din = (i % 700 < 350) ? 25'sh0FFFFF0 : -25'sh0FFFFF0;
      x = longint'(din) >>> (IN_W - W);
      full = model + x;
      if (wrap(full, W) != full) wraps++;
      model = wrap(full, W);
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL no wraparound exercised"); end
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
