// tb_dcs_bit_update -- checks the random-bit update on the 2-D, 2-bit example
// system x' = NOT x, y' = NOT x XOR y: all 256 combinations of (x, y, s, u)
// against the published state transition table (each row below is one (x, y),
// each hex digit the (x', y') = 4x'+y' for (s, u) = (0,0), (0,1), ... (3,3)),
// then random 32-bit vectors against a bit-by-bit reference.
module tb_dcs_bit_update;
  import hddcs_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam logic [63:0] TABLE [16] = '{
    64'h0123456789abcdef, 64'h1032547698badcfe, 64'h23016745ab89efcd, 64'h32107654ba98fedc,
    64'h44660022ccee88aa, 64'h55771133ddff99bb, 64'h66442200eeccaa88, 64'h77553311ffddbb99,
    64'h8989cdcd01014545, 64'h9898dcdc10105454, 64'hababefef23236767, 64'hbabafefe32327676,
    64'hcccc888844440000, 64'hdddd999955551111, 64'heeeeaaaa66662222, 64'hffffbbbb77773333};

  logic [1:0] x, y, s, u, fx, fy, nx, ny;
  logic [31:0] a, f, sel, q;

  dcs_bit_update #(.N(2))  dut_x (.x_prev(x), .f(fx), .sel(s), .x_next(nx));
  dcs_bit_update #(.N(2))  dut_y (.x_prev(y), .f(fy), .sel(u), .x_next(ny));
  dcs_bit_update #(.N(32)) dut_w (.x_prev(a), .f(f), .sel(sel), .x_next(q));

  always_comb begin
    fx = ~x;
    fy = ~x ^ y;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) begin
      for (int c = 0; c < 16; c++) begin
        logic [3:0] want;
        x = 2'(r >> 2); y = 2'(r); s = 2'(c >> 2); u = 2'(c);
        #1;
        want = TABLE[r][(15 - c) * 4 +: 4];
        checks++;
        if ({nx, ny} != want) begin
          failures++;
          $display("table (%0d,%0d) s=%0d u=%0d: got (%0d,%0d) want %h", x, y, s, u, nx, ny, want);
        end
      end
    end
    for (int i = 0; i < 2000; i++) begin
      a = $urandom; f = $urandom; sel = $urandom;
      if (i < 2) sel = (i == 0) ? 32'h0 : 32'hFFFF_FFFF;
      #1;
      checks++;
      if (q != ref_pick(a, f, sel)) begin
        failures++;
        $display("random a=%h f=%h sel=%h got %h", a, f, sel, q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
