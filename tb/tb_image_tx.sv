// tb_image_tx -- transmitter board at a reduced picture size (16 x 8, full
// VGA porches). Loads the test picture, runs two frames and checks every
// channel transfer: pixels arrive in raster order, one per pixel clock inside
// a line, with start-of-frame on pixel (0, 0); each encrypted pixel equals the
// plaintext XOR the reference 3D-DCS state stepped from the key with the
// transferred s, u, v words (one iteration per pixel, carried across frames);
// monitor 1 shows the plaintext picture.
module tb_image_tx;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  localparam int unsigned HA = 16, VA = 8, AW = $clog2(HA * VA);
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, run = 0, we = 0, hs, vs, de;
  logic [2:0][31:0] key;
  logic [AW-1:0] waddr;
  rgb_t wdata, mon;
  chan_t chan;
  state_t st;
  int unsigned k = 0, ndisp = 0, cyc = 0, last = 0;

  image_tx #(.HA(HA), .VA(VA)) dut (.clk, .rst, .run, .key, .load_we(we), .load_addr(waddr),
    .load_data(wdata), .vga_rgb(mon), .vga_hs(hs), .vga_vs(vs), .vga_de(de), .chan);

  always #10 clk = !clk;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("cycle %0d: %s", cyc, s);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst) begin
      st.x = key[0]; st.y = key[1]; st.z = key[2];
    end else if (chan.valid) begin
      state_t nx;
      int unsigned p;
      p = k % (HA * VA);
      nx = ref_step(st, chan.prng[0], chan.prng[1], chan.prng[2]);
      checks++;
      if (chan.pix != ref_xor(test_pixel(p % HA, p / HA), nx))
        fail($sformatf("pixel %0d: got %h", k, chan.pix));
      checks++;
      if (chan.sof != (p == 0)) fail("sof flag");
      if (p % HA != 0) begin
        checks++;
        if (cyc - last != 2) fail("pixel spacing");
      end
      last = cyc;
      st = nx;
      k++;
    end
    if (de && dut.u_vga.pix_ce) begin
      int unsigned p;
      p = ndisp % (HA * VA);
      checks++;
      if (mon != test_pixel(p % HA, p / HA)) fail($sformatf("monitor pixel %0d got %h", ndisp, mon));
      ndisp++;
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key = {32'hCAFE_0003, 32'hBEEF_0002, 32'hF00D_0001};
    repeat (2) @(negedge clk);
    rst = 0;
    we = 1;
    for (int unsigned a = 0; a < HA * VA; a++) begin
      waddr = AW'(a); wdata = test_pixel(a % HA, a / HA);
      @(negedge clk);
    end
    we = 0;
    run = 1;
    wait (k == 2 * HA * VA);
    repeat (10) @(negedge clk);
    checks++;
    if (k != 2 * HA * VA || ndisp < 2 * HA * VA - 1) fail($sformatf("pixels sent %0d shown %0d", k, ndisp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
