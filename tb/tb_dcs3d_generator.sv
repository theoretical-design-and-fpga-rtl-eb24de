// tb_dcs3d_generator -- runs a transmitter-style generator (own ring TRNGs)
// next to a receiver-style one (fed with the first one's s, u, v words) from
// the same key. At every rising edge it checks the transmitter's x^n, y^n, z^n
// against the reference model stepped from the key with the observed random
// words, and that the receiver produces the same words. Steps happen only on
// enabled edges, exactly one iteration per enabled edge.
module tb_dcs3d_generator;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, en = 0;
  logic [2:0][31:0] key, prng_t, prng_r;
  word_t tr, tg, tb, rr, rg, rb;
  state_t st, nx;
  int steps = 0, holds = 0;

  dcs3d_generator #(.EXT_PRNG(1'b0)) tx (.clk, .rst, .en, .key, .ext_prng('0),
    .prng(prng_t), .out_R(tr), .out_G(tg), .out_B(tb));
  dcs3d_generator #(.EXT_PRNG(1'b1)) rx (.clk, .rst, .en, .key, .ext_prng(prng_t),
    .prng(prng_r), .out_R(rr), .out_G(rg), .out_B(rb));

  always #10 clk = !clk;

  // sample just before the edge updates the registers
  always @(posedge clk) begin
    if (rst) begin
      st.x = key[0]; st.y = key[1]; st.z = key[2];
    end else begin
      nx = ref_step(st, prng_t[0], prng_t[1], prng_t[2]);
      checks++;
      if ({tr, tg, tb} != {nx.x, nx.y, nx.z}) begin
        failures++;
        if (failures < 5) $display("step %0d: tx %h %h %h want %h %h %h", steps, tr, tg, tb, nx.x, nx.y, nx.z);
      end
      checks++;
      if ({rr, rg, rb} != {tr, tg, tb} || prng_r != prng_t) begin
        failures++;
        if (failures < 5) $display("step %0d: receiver differs", steps);
      end
      if (en) begin st = nx; steps++; end
      else holds++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key = {32'h0000_0003, 32'h0000_0002, 32'h0000_0001};
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      en = (i % 4) != 3;
      @(negedge clk);
    end
    checks++;
    if (steps != 2250 || holds != 750) begin failures++; $display("steps %0d holds %0d", steps, holds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
