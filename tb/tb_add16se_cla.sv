// tb_add16se_cla -- self-checking test of the 16-bit sign-extended
// carry-lookahead adder.
//
// Drives every corner combination of a set of edge values (0, +-1, the
// extremes, alternating patterns, values that make long carry chains) and
// 200 000 random operand pairs, and compares the 17-bit result with the
// integer sum of the two sign-extended operands.  Then checks the subtract
// identity of addsub16 on random operands the same way.  A clock runs only to
// pace the test and to drive the watchdog.
`timescale 1ns/1ps
module tb_add16se_cla;
  import music_lite_pkg::*;

  logic  clk = 1'b0;
  always #1 clk = ~clk;

  data_t a, b;
  sum_t  s;
  logic  sub;
  sum_t  ds;
  int    checks = 0, failures = 0;

  add16se_cla dut (.a(a), .b(b), .s(s));
  addsub16    u_as (.a(a), .b(b), .sub(sub), .s(ds));

  task automatic check_sum();
    int exp_v;
    exp_v = int'(a) + int'(b);
    checks++;
    if (int'(s) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL add: %0d + %0d = %0d, expected %0d", a, b, s, exp_v);
    end
  endtask

  task automatic check_addsub();
    int exp_v;
    exp_v = sub ? int'(a) - int'(b) : int'(a) + int'(b);
    checks++;
    if (int'(ds) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL addsub: %0d %s %0d = %0d, expected %0d", a, sub ? "-" : "+", b, ds, exp_v);
    end
  endtask

  data_t edges [12] = '{16'sh0000, 16'sh0001, 16'shffff, 16'sh7fff, 16'sh8000,
                        16'sh5555, 16'shaaaa, 16'sh00ff, 16'shff00, 16'sh0f0f,
                        16'shf0f1, 16'sh7ffe};

  initial begin
    repeat (2) @(posedge clk);
    sub = 1'b0;
    foreach (edges[i]) foreach (edges[j]) begin
      a = edges[i]; b = edges[j];
      #0.5 check_sum();
    end
    for (int n = 0; n < 200000; n++) begin
      a = data_t'($urandom); b = data_t'($urandom);
      #0.5 check_sum();
    end
    for (int n = 0; n < 20000; n++) begin
      a = data_t'($urandom); b = data_t'($urandom); sub = $urandom_range(0, 1) == 1;
      #0.5 check_addsub();
    end
    foreach (edges[i]) foreach (edges[j]) begin
      a = edges[i]; b = edges[j]; sub = 1'b1;
      #0.5 check_addsub();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
