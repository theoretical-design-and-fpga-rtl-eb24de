// tb_osc_ring_trng -- checks the ring-oscillator TRNG model: out follows
// in XOR a noise word (two inputs at one instant differ at the output by
// exactly their XOR), the noise keeps changing, the three ring types differ,
// and over many samples every bit is roughly balanced.
module tb_osc_ring_trng;
  int checks = 0, failures = 0;

  logic [31:0] in1, in2, in3, out1, out2, out3;
  osc_ring_trng #(.RING_ID(1)) r1 (.in(in1), .out(out1));
  osc_ring_trng #(.RING_ID(2)) r2 (.in(in2), .out(out2));
  osc_ring_trng #(.RING_ID(3)) r3 (.in(in3), .out(out3));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones [32];
    int changes, same12;
    logic [31:0] n_prev, n_now, a, b;
    changes = 0; same12 = 0;
    foreach (ones[j]) ones[j] = 0;
    in1 = 0; in2 = 0; in3 = 0;
    #2;
    n_prev = out1;
    for (int i = 0; i < 4000; i++) begin
      #19.8;                                 // even times: noise is stable
      in1 = 0; in2 = 0; #0.1;
      n_now = out1;
      if (n_now != n_prev) changes++;
      if (out1 == out2) same12++;
      for (int j = 0; j < 32; j++) ones[j] += int'(n_now[j]);
      n_prev = n_now;
      a = $urandom;
      in1 = a; #0.1;
      b = out1;
      checks++;
      if ((b ^ n_now) != a) begin
        failures++;
        if (failures < 5) $display("out does not track in: in=%h noise=%h out=%h", a, n_now, b);
      end
    end
    checks++;
    if (changes < 3900) begin failures++; $display("noise changed only %0d times", changes); end
    checks++;
    if (same12 > 10) begin failures++; $display("rings 1 and 2 equal %0d times", same12); end
    for (int j = 0; j < 32; j++) begin
      checks++;
      if (ones[j] < 1700 || ones[j] > 2300) begin
        failures++;
        $display("bit %0d set %0d of 4000 times", j, ones[j]);
      end
    end
    checks++;
    if (out3 == out1 && out3 == out2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
