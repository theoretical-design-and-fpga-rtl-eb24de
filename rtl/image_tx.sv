// image_tx -- transmitter board of the chaotic image link.
//
// The VGA display controller scans the picture RAM in raster order, one pixel
// per pixel clock (system clock / 2). Every pixel read is used twice: it is
// shown on the local monitor, and it is encrypted by XOR with the current
// output of the 3D-DCS generator, which advances exactly one iteration per
// encrypted pixel. Each encrypted pixel leaves on the public channel together
// with the three TRNG words (s, u, v) that produced its key stream, so that a
// receiver holding the same initial state can follow the orbit.
//
// Timing, in system clock cycles after the VGA request for a pixel: the RAM
// word is ready at +1, where the generator steps and the encryption register
// loads; the channel shows the pixel at +2 for one cycle (chan.valid high).
// run low holds the raster in reset (use it while loading the picture through
// the load_* port). The load port, run and the key input are this design's
// own choices; the source does not say how the picture and the initial state
// are put on the board.
module image_tx
  import hddcs_pkg::*;
#(
  parameter int unsigned HA      = H_ACTIVE,
  parameter int unsigned VA      = V_ACTIVE,
  parameter int unsigned CLK_DIV = 2,
  parameter int unsigned AW      = $clog2(HA * VA)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  run,
  input  logic [2:0][DCS_N-1:0] key,        // x^0, y^0, z^0
  input  logic                  load_we,
  input  logic [AW-1:0]         load_addr,
  input  rgb_t                  load_data,
  output rgb_t                  vga_rgb,    // monitor 1
  output logic                  vga_hs,
  output logic                  vga_vs,
  output logic                  vga_de,
  output chan_t                 chan        // to the public channel
);
  logic          req, req_sof, pix_ce;
  logic [15:0]   req_x, req_y;
  logic [AW-1:0] req_addr;
  rgb_t          ram_q;
  logic          pix_valid, pix_sof;
  logic [2:0][DCS_N-1:0] prng, prng_q;
  logic [DCS_N-1:0] out_R, out_G, out_B;
  logic          enc_valid, enc_sof;
  rgb_t          enc_pix;

  vga_controller #(.HA(HA), .VA(VA), .CLK_DIV(CLK_DIV), .AW(AW)) u_vga (
    .clk, .rst(rst || !run), .resync(1'b0),
    .pix_ce, .req, .req_x, .req_y, .req_addr, .req_sof,
    .pix_in(ram_q), .vga_rgb, .vga_hs, .vga_vs, .vga_de
  );

  picture_ram #(.DEPTH(HA * VA), .AW(AW)) u_ram (
    .clk, .we(load_we), .waddr(load_addr), .wdata(load_data),
    .re(req), .raddr(req_addr), .rdata(ram_q)
  );

  // the RAM word for a request is ready one cycle later
  always_ff @(posedge clk) begin
    if (rst) begin
      pix_valid <= 1'b0;
      pix_sof   <= 1'b0;
    end else begin
      pix_valid <= req;
      pix_sof   <= req_sof;
    end
  end

  dcs3d_generator #(.N(DCS_N), .EXT_PRNG(1'b0)) u_dcs (
    .clk, .rst, .en(pix_valid), .key, .ext_prng('0),
    .prng, .out_R, .out_G, .out_B
  );

  rgb_encrypt #(.N(DCS_N)) u_enc (
    .clk, .rst, .in_valid(pix_valid), .in_sof(pix_sof), .in_pix(ram_q),
    .out_R, .out_G, .out_B,
    .out_valid(enc_valid), .out_sof(enc_sof), .out_pix(enc_pix)
  );

  // control signal: the TRNG words used for the pixel now being encrypted
  always_ff @(posedge clk) begin
    if (rst)            prng_q <= '0;
    else if (pix_valid) prng_q <= prng;
  end

  always_comb begin
    chan.valid = enc_valid;
    chan.sof   = enc_sof;
    chan.pix   = enc_pix;
    chan.prng  = prng_q;
  end
endmodule
