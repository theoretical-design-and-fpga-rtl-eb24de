// picture_ram -- frame store holding the plaintext picture on the transmitter.
//
// One word per pixel, raster order (address = y * H + x), DEPTH = 640 x 480
// words of three 8-bit colour components. A write port loads the picture
// (the source only says the picture is stored in the board's RAM beforehand;
// how it gets there is this design's choice). The read port is synchronous:
// rdata shows the word addressed while re was high one clock edge later and
// holds it until the next read. Written as an array so a synthesis tool can
// map it to block RAM.
module picture_ram
  import hddcs_pkg::*;
#(
  parameter int unsigned DEPTH = H_ACTIVE * V_ACTIVE,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  rgb_t          wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output rgb_t          rdata
);
  rgb_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
