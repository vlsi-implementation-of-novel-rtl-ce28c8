// tb_cla_adder -- check of the carry look-ahead adder.
// The 8-bit adder of the paper's diagram is checked exhaustively (all a, b
// and both carry-in values) against integer addition, sum and carry out.
// A 25-bit instance, the width of the first integrator, is checked with
// random operands and with operands that make the carry travel through all
// seven groups.
module tb_cla_adder;
  logic [7:0]  a8, b8, s8;
  logic        ci8, co8;
  logic [24:0] a25, b25, s25;
  logic        ci25, co25;
  int checks = 0, failures = 0;

  cla_adder #(.WIDTH(8))  dut8  (.a(a8),  .b(b8),  .cin(ci8),  .sum(s8),  .cout(co8));
  cla_adder #(.WIDTH(25)) dut25 (.a(a25), .b(b25), .cin(ci25), .sum(s25), .cout(co25));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check25(logic [24:0] x, logic [24:0] y, logic ci);
    logic [25:0] ref_sum;
    a25 = x; b25 = y; ci25 = ci;
    #1;
    ref_sum = 26'(x) + 26'(y) + 26'(ci);
    checks++;
    if ({co25, s25} !== ref_sum) begin
      failures++;
      $display("FAIL 25b %h + %h + %0d = %h, got %h", x, y, ci, ref_sum, {co25, s25});
    end
  endtask

  initial begin
    for (int v = 0; v < 1 << 17; v++) begin
      logic [8:0] ref_sum;
      {a8, b8, ci8} = 17'(v);
      #1;
      ref_sum = 9'(a8) + 9'(b8) + 9'(ci8);
      checks++;
      if ({co8, s8} !== ref_sum) begin
        failures++;
        if (failures < 10) $display("FAIL 8b %h + %h + %0d = %h, got %h", a8, b8, ci8, ref_sum, {co8, s8});
      end
    end
    check25(25'h1FFFFFF, 25'h0000001, 1'b0);
    check25(25'h1FFFFFF, 25'h0000000, 1'b1);
    check25(25'h0FFFFFF, 25'h0000001, 1'b0);
    check25(25'h1555555, 25'h0AAAAAA, 1'b1);
    for (int i = 0; i < 20000; i++)
      check25(25'($urandom), 25'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
