// tb_vga_controller -- full 640 x 480 frame at the default timing. Emulates a
// one-cycle RAM on the request side (pix_in = pattern of the requested
// address) and checks: requests come once per pixel clock (every 2nd system
// clock) in raster order with addr = y*640 + x, one start-of-frame per frame,
// 307200 requests per frame; line period 1600 clocks and frame period
// 840000 clocks; hsync low for 96 pixels and vsync low for 2 lines; the
// displayed pixels during vga_de are the requested ones, in order, and black
// outside. Then a resync pulse must restart the raster at pixel (0, 0).
module tb_vga_controller;
  import hddcs_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, resync = 0;
  logic pix_ce, req, req_sof, hs, vs, de;
  logic [15:0] req_x, req_y;
  logic [18:0] req_addr;
  rgb_t pix_in, rgb;

  vga_controller dut (.clk, .rst, .resync, .pix_ce, .req, .req_x, .req_y, .req_addr, .req_sof,
    .pix_in, .vga_rgb(rgb), .vga_hs(hs), .vga_vs(vs), .vga_de(de));

  always #10 clk = !clk;

  function automatic rgb_t pat(logic [18:0] a);
    return rgb_t'({a[7:0] ^ 8'h5A, a[15:8], {5'b0, a[18:16]}});
  endfunction

  int unsigned cyc = 0, nreq = 0, nsof = 0, ndisp = 0, last_req_cyc = 0;
  int unsigned hs_fall = 0, vs_fall = 0, hs_low = 0, vs_low_lines = 0, nlines = 0, nframes = 0;
  logic hs_d = 1, vs_d = 1, checking = 1;
  logic [18:0] exp_addr = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("cycle %0d: %s", cyc, s);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (!rst && checking) begin
      if (req) begin
        checks++;
        if (req_addr != exp_addr || 32'(req_addr) != 32'(req_y) * 640 + 32'(req_x))
          fail($sformatf("req addr %0d want %0d", req_addr, exp_addr));
        if (nreq > 0 && (cyc - last_req_cyc) != 2 && req_x != 0) fail("request spacing");
        if (req_sof != (req_addr == 0)) fail("sof");
        if (req_sof) nsof++;
        last_req_cyc = cyc;
        nreq++;
        exp_addr = (req_addr == 19'(640 * 480 - 1)) ? '0 : req_addr + 1;
      end
      if (de && pix_ce) begin
        checks++;
        if (rgb != pat(19'(ndisp % (640 * 480)))) fail($sformatf("display %0d got %h", ndisp, rgb));
        ndisp++;
      end
      if (!de && rgb != '0) fail("not black in blanking");
      if (hs_d && !hs) begin
        if (hs_fall != 0) begin
          checks++;
          if (cyc - hs_fall != 1600) fail($sformatf("line period %0d", cyc - hs_fall));
        end
        hs_fall = cyc; nlines++;
      end
      if (!hs_d && hs) begin
        checks++;
        if (cyc - hs_fall != 192) fail($sformatf("hsync width %0d", cyc - hs_fall));
      end
      if (vs_d && !vs) begin
        if (vs_fall != 0) begin
          checks++;
          if (cyc - vs_fall != 840000) fail($sformatf("frame period %0d", cyc - vs_fall));
        end
        vs_fall = cyc; nframes++;
      end
      if (!vs_d && vs) begin
        checks++;
        if (cyc - vs_fall != 2 * 1600) fail($sformatf("vsync width %0d", cyc - vs_fall));
      end
      hs_d = hs; vs_d = vs;
    end
    if (req) pix_in <= pat(req_addr);
  end

  initial begin
    repeat (2_200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pix_in = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (840000 * 2 + 100) @(negedge clk);
    checks++;
    if (nreq < 2 * 307200 || nsof < 2 || nframes < 2) fail($sformatf("reqs %0d sofs %0d frames %0d", nreq, nsof, nframes));
    // resync in the middle of a line
    checking = 0;
    repeat (1001) @(negedge clk);
    resync = 1;
    #1;
    checks++;
    if (!(pix_ce && req && req_sof && req_addr == 0)) fail("resync does not request pixel 0");
    @(negedge clk);
    resync = 0;
    #1;
    checks++;
    if (pix_ce) fail("pixel clock phase after resync");
    @(negedge clk); #1;
    checks++;
    if (!(pix_ce && req && req_addr == 1 && req_x == 1 && req_y == 0)) fail("second pixel after resync");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
