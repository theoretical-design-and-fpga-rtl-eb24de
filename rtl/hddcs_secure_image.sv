// hddcs_secure_image -- chaotic image link: transmitter and receiver boards.
//
// The transmitter scans a 640 x 480 picture, shows it on monitor 1 and sends
// it encrypted, pixel by pixel, with the XOR key stream of a 3D digital
// chaotic system driven by three ring-oscillator TRNGs. The receiver runs the
// same chaotic system from the TRNG words sent alongside, decrypts and shows
// the picture on monitor 2. Only a receiver whose initial state (rx_key)
// equals the transmitter's (tx_key) recovers the picture.
//
// The public channel is a link between two boards, not logic: the
// transmitter's side leaves on chan_tx and the receiver's side enters on
// chan_rx, so a testbench (or board wiring) closes the loop and may delay it
// by whole clock cycles as long as pixels keep their spacing. Both boards run
// from the one clock here (50 MHz, pixel clock 25 MHz).
module hddcs_secure_image
  import hddcs_pkg::*;
#(
  parameter int unsigned HA      = H_ACTIVE,
  parameter int unsigned VA      = V_ACTIVE,
  parameter int unsigned CLK_DIV = 2,
  parameter int unsigned AW      = $clog2(HA * VA)
) (
  input  logic                  clk,
  input  logic                  rst,
  // transmitter board
  input  logic                  tx_run,
  input  logic [2:0][DCS_N-1:0] tx_key,
  input  logic                  load_we,
  input  logic [AW-1:0]         load_addr,
  input  rgb_t                  load_data,
  output rgb_t                  mon1_rgb,
  output logic                  mon1_hs,
  output logic                  mon1_vs,
  output logic                  mon1_de,
  output chan_t                 chan_tx,
  // receiver board
  input  logic [2:0][DCS_N-1:0] rx_key,
  input  chan_t                 chan_rx,
  output logic                  rx_dec_valid,
  output logic                  rx_dec_sof,
  output rgb_t                  rx_dec_pix,
  output rgb_t                  mon2_rgb,
  output logic                  mon2_hs,
  output logic                  mon2_vs,
  output logic                  mon2_de
);
  image_tx #(.HA(HA), .VA(VA), .CLK_DIV(CLK_DIV), .AW(AW)) u_board1 (
    .clk, .rst, .run(tx_run), .key(tx_key),
    .load_we, .load_addr, .load_data,
    .vga_rgb(mon1_rgb), .vga_hs(mon1_hs), .vga_vs(mon1_vs), .vga_de(mon1_de),
    .chan(chan_tx)
  );

  image_rx #(.HA(HA), .VA(VA), .CLK_DIV(CLK_DIV), .AW(AW)) u_board2 (
    .clk, .rst, .key(rx_key), .chan(chan_rx),
    .dec_valid(rx_dec_valid), .dec_sof(rx_dec_sof), .dec_pix(rx_dec_pix),
    .vga_rgb(mon2_rgb), .vga_hs(mon2_hs), .vga_vs(mon2_vs), .vga_de(mon2_de)
  );
endmodule
