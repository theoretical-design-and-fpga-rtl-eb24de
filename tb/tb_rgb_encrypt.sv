// tb_rgb_encrypt -- random pixels and key-stream words: the output one clock
// later must be the pixel XOR the low 8 bits of out_R / out_G / out_B, with
// out_valid and out_sof following in_valid and in_sof; the pixel holds while
// in_valid is low. Applying the module twice with the same key stream must
// give the original pixel back.
module tb_rgb_encrypt;
  import hddcs_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, iv = 0, isof = 0, ov, osof, ov2, osof2;
  rgb_t ip, op, op2, want, prev;
  word_t kr, kg, kb;

  rgb_encrypt dut  (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_pix(ip),
    .out_R(kr), .out_G(kg), .out_B(kb), .out_valid(ov), .out_sof(osof), .out_pix(op));
  // second copy with the key stream delayed by one clock undoes the first
  word_t kr_d, kg_d, kb_d;
  logic ov_d;
  rgb_encrypt dut2 (.clk, .rst, .in_valid(ov), .in_sof(osof), .in_pix(op),
    .out_R(kr_d), .out_G(kg_d), .out_B(kb_d), .out_valid(ov2), .out_sof(osof2), .out_pix(op2));

  always #10 clk = !clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rgb_t ip_d;
    logic iv_d;
    ip = '0; kr = 0; kg = 0; kb = 0; kr_d = 0; kg_d = 0; kb_d = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    prev = '0;
    iv_d = 0; ip_d = '0;
    for (int i = 0; i < 3000; i++) begin
      kr_d = kr; kg_d = kg; kb_d = kb;
      iv = ($urandom % 4) != 0; isof = ($urandom % 8) == 0;
      ip = rgb_t'($urandom); kr = $urandom; kg = $urandom; kb = $urandom;
      want = iv ? rgb_t'({ip.r ^ kr[7:0], ip.g ^ kg[7:0], ip.b ^ kb[7:0]}) : prev;
      @(negedge clk);
      checks++;
      if (ov != iv || osof != (iv && isof) || op != want) begin
        failures++;
        if (failures < 5) $display("i=%0d got %b %b %h want %b %h", i, ov, osof, op, iv, want);
      end
      if (iv_d) begin
        checks++;
        if (op2 != ip_d) begin failures++; if (failures < 5) $display("round trip failed"); end
      end
      prev = want; iv_d = iv; ip_d = ip;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
