// tb_image_rx -- receiver board at a reduced picture size (16 x 8). The
// testbench plays the transmitter: it encrypts the test picture with the
// reference 3D-DCS from a key and random s, u, v words and sends it in VGA
// raster timing (one pixel per two clocks, 160-pixel line blanking, 45-line
// frame blanking). With the right key every decrypted pixel and every pixel
// on monitor 2 must be the plaintext; after a reset with a key that differs
// in one bit, almost every pixel must come out wrong.
module tb_image_rx;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  localparam int unsigned HA = 16, VA = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, dv, dsof, hs, vs, de;
  logic [2:0][31:0] key;
  rgb_t dpix, mon;
  chan_t chan;
  int unsigned ndec = 0, nbad = 0, ndisp = 0, cyc = 0;
  logic mismatch_run = 0, shown = 0;

  image_rx #(.HA(HA), .VA(VA)) dut (.clk, .rst, .key, .chan, .dec_valid(dv), .dec_sof(dsof),
    .dec_pix(dpix), .vga_rgb(mon), .vga_hs(hs), .vga_vs(vs), .vga_de(de));

  always #10 clk = !clk;

  always @(posedge clk) begin
    cyc++;
    if (!rst && dv) begin
      int unsigned p;
      p = ndec % (HA * VA);
      if (dpix != test_pixel(p % HA, p / HA)) nbad++;
      if (!mismatch_run) begin
        checks++;
        if (dpix != test_pixel(p % HA, p / HA) || dsof != (p == 0)) begin
          failures++;
          if (failures < 10) $display("decrypted pixel %0d got %h", ndec, dpix);
        end
      end
      ndec++;
    end
    if (!rst && shown && !mismatch_run && de && dut.u_vga.pix_ce && ndisp < 2 * HA * VA) begin
      int unsigned p;
      p = ndisp % (HA * VA);
      checks++;
      if (mon != test_pixel(p % HA, p / HA)) begin
        failures++;
        if (failures < 10) $display("monitor pixel %0d got %h", ndisp, mon);
      end
      ndisp++;
    end
    if (chan.valid && chan.sof) shown = 1;   // the receiver raster restarts here
  end

  task automatic send_frames(input logic [2:0][31:0] k, input int frames);
    state_t st;
    st.x = k[0]; st.y = k[1]; st.z = k[2];
    chan = '0;
    for (int f = 0; f < frames; f++) begin
      for (int y = 0; y < VA + 45; y++) begin
        for (int x = 0; x < HA + 160; x++) begin
          if (x < HA && y < VA) begin
            logic [2:0][31:0] w;
            state_t nx;
            w = {$urandom, $urandom, $urandom};
            nx = ref_step(st, w[0], w[1], w[2]);
            chan.valid = 1; chan.sof = (x == 0 && y == 0); chan.prng = w;
            chan.pix = ref_xor(test_pixel(x, y), nx);
            st = nx;
          end
          @(negedge clk);
          chan.valid = 0; chan.sof = 0;
          @(negedge clk);
        end
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0][31:0] wrong;
    chan = '0;
    key = {32'h0000_0003, 32'h0000_0002, 32'h0000_0001};
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (7) @(negedge clk);
    send_frames(key, 2);
    checks++;
    if (ndec != 2 * HA * VA || ndisp != 2 * HA * VA) begin
      failures++; $display("decrypted %0d shown %0d", ndec, ndisp);
    end
    // mismatched parameter: receiver key differs in one bit of z^0
    wrong = key;
    wrong[2][0] = !wrong[2][0];
    rst = 1; mismatch_run = 1; ndec = 0; nbad = 0;
    @(negedge clk);
    key = wrong;
    @(negedge clk);
    rst = 0;
    key = {32'h0000_0003, 32'h0000_0002, 32'h0000_0001};
    send_frames(key, 1);
    checks++;
    if (ndec != HA * VA || nbad < (HA * VA * 9) / 10) begin
      failures++; $display("wrong key: %0d of %0d pixels wrong", nbad, ndec);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
