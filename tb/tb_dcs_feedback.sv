// tb_dcs_feedback -- reset loads the key and clears the TRNG registers; an
// enabled rising edge stores all six words; a disabled edge holds them.
module tb_dcs_feedback;
  import hddcs_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, en = 0;
  word_t k1, k2, k3, o1, o2, o3, p1, p2, p3, i1, i2, i3, q1, q2, q3;
  word_t e [6];

  dcs_feedback dut (.clk, .Reset(rst), .en, .key1(k1), .key2(k2), .key3(k3),
    .out1(o1), .out2(o2), .out3(o3), .out1_prng(p1), .out2_prng(p2), .out3_prng(p3),
    .in1(i1), .in2(i2), .in3(i3), .in1_prng(q1), .in2_prng(q2), .in3_prng(q3));

  always #10 clk = !clk;

  task automatic check(string what);
    checks++;
    if ({i1, i2, i3, q1, q2, q3} != {e[0], e[1], e[2], e[3], e[4], e[5]}) begin
      failures++;
      $display("%s: got %h %h %h %h %h %h", what, i1, i2, i3, q1, q2, q3);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    k1 = 32'h1234_5678; k2 = 32'h9abc_def0; k3 = 32'h0f0f_a5a5;
    {o1, o2, o3, p1, p2, p3} = '1;
    @(negedge clk); @(negedge clk);
    e = '{k1, k2, k3, 0, 0, 0};
    check("reset");
    rst = 0;
    for (int i = 0; i < 500; i++) begin
      o1 = $urandom; o2 = $urandom; o3 = $urandom; p1 = $urandom; p2 = $urandom; p3 = $urandom;
      en = ($urandom % 3) != 0;
      if (en) e = '{o1, o2, o3, p1, p2, p3};
      @(negedge clk);
      check(en ? "load" : "hold");
    end
    rst = 1; @(negedge clk);
    e = '{k1, k2, k3, 0, 0, 0};
    check("reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
