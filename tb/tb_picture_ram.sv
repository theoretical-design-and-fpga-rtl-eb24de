// tb_picture_ram -- fills the full 640 x 480 frame store with the test
// picture, reads every pixel back in raster order and then at random
// addresses, checking the one-cycle read latency and that rdata holds while
// re is low.
module tb_picture_ram;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int unsigned DEPTH = H_ACTIVE * V_ACTIVE;

  logic clk = 0, we = 0, re = 0;
  logic [18:0] waddr, raddr;
  rgb_t wdata, rdata, want;

  picture_ram dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #10 clk = !clk;

  function automatic rgb_t pix(int unsigned a);
    return test_pixel(a % H_ACTIVE, a / H_ACTIVE);
  endfunction

  initial begin
    repeat (DEPTH * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    we = 1;
    for (int a = 0; a < DEPTH; a++) begin
      waddr = 19'(a); wdata = pix(a);
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < DEPTH + 2000; a++) begin
      int unsigned ad;
      ad = (a < DEPTH) ? a : $urandom % DEPTH;
      re = 1; raddr = 19'(ad);
      @(negedge clk);
      checks++;
      if (rdata != pix(ad)) begin
        failures++;
        if (failures < 5) $display("addr %0d: got %h want %h", ad, rdata, pix(ad));
      end
      if (a % 1000 == 7) begin
        want = rdata;
        re = 0; raddr = 19'(ad + 1);
        @(negedge clk);
        checks++;
        if (rdata != want) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
