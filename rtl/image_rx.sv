// image_rx -- receiver board of the chaotic image link.
//
// Its 3D-DCS generator has no random source of its own: it takes the s, u, v
// words that arrive with every pixel on the public channel and steps once per
// received pixel, so with the same initial state (key) it reproduces the
// transmitter's key stream exactly. Each received pixel is decrypted by XOR
// and shown on the local monitor through a VGA display controller whose
// raster is restarted by the start-of-frame flag on the channel. With a
// different key the orbit differs from the first pixel on and the picture
// stays scrambled.
//
// Timing: a pixel present on the channel in cycle t is decrypted into
// dec_pix / dec_valid at t+1; the monitor output lags by two pixel clocks like
// on the transmitter. The receiver assumes the channel delivers pixels in the
// transmitter's raster timing (one per pixel clock during the visible area).
module image_rx
  import hddcs_pkg::*;
#(
  parameter int unsigned HA      = H_ACTIVE,
  parameter int unsigned VA      = V_ACTIVE,
  parameter int unsigned CLK_DIV = 2,
  parameter int unsigned AW      = $clog2(HA * VA)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [2:0][DCS_N-1:0] key,        // x^0, y^0, z^0
  input  chan_t                 chan,       // from the public channel
  output logic                  dec_valid,
  output logic                  dec_sof,
  output rgb_t                  dec_pix,
  output rgb_t                  vga_rgb,    // monitor 2
  output logic                  vga_hs,
  output logic                  vga_vs,
  output logic                  vga_de
);
  logic [2:0][DCS_N-1:0] prng;
  logic [DCS_N-1:0] out_R, out_G, out_B;
  logic          req, req_sof, pix_ce;
  logic [15:0]   req_x, req_y;
  logic [AW-1:0] req_addr;

  dcs3d_generator #(.N(DCS_N), .EXT_PRNG(1'b1)) u_dcs (
    .clk, .rst, .en(chan.valid), .key, .ext_prng(chan.prng),
    .prng, .out_R, .out_G, .out_B
  );

  rgb_decrypt #(.N(DCS_N)) u_dec (
    .clk, .rst, .in_valid(chan.valid), .in_sof(chan.sof), .in_pix(chan.pix),
    .out_R, .out_G, .out_B,
    .out_valid(dec_valid), .out_sof(dec_sof), .out_pix(dec_pix)
  );

  vga_controller #(.HA(HA), .VA(VA), .CLK_DIV(CLK_DIV), .AW(AW)) u_vga (
    .clk, .rst, .resync(chan.valid && chan.sof),
    .pix_ce, .req, .req_x, .req_y, .req_addr, .req_sof,
    .pix_in(dec_pix), .vga_rgb, .vga_hs, .vga_vs, .vga_de
  );
endmodule
