// vga_controller -- 640 x 480 VGA display controller.
//
// A horizontal and a vertical counter walk the 800 x 525 raster of the
// standard 640 x 480 / 60 Hz mode (16/96/48 pixel horizontal and 10/2/33 line
// vertical front porch/sync/back porch, both syncs active low). The pixel
// clock is the system clock divided by CLK_DIV (50 MHz / 2 = 25 MHz); pix_ce
// marks the system clock cycles that are pixel-clock cycles.
//
// Request side: in a pix_ce cycle inside the visible area, req is high and
// req_x, req_y, req_addr (= y * H_ACTIVE + x) name the pixel wanted; req_sof
// marks pixel (0, 0). The pixel must be on pix_in by the next pix_ce cycle.
// No requests are made while rst is high.
// Display side: vga_rgb, vga_hs, vga_vs, vga_de are registered and lag the
// counters by two pixel clocks (one for the fetch, one for the output
// register); vga_rgb is black outside the visible area.
//
// resync (receiver only) restarts the raster: a cycle with resync high is
// treated as the pixel-clock cycle of pixel (0, 0), and the pixel of the old
// raster still in the output pipeline is blanked. The receiver uses it to lock
// its raster to the start-of-frame flag on the channel. The timing numbers
// come from the VGA standard, not from the source description, which gives
// only the 640 x 480 picture size.
module vga_controller
  import hddcs_pkg::*;
#(
  parameter int unsigned HA      = H_ACTIVE,
  parameter int unsigned HF      = H_FRONT,
  parameter int unsigned HS      = H_SYNC,
  parameter int unsigned HB      = H_BACK,
  parameter int unsigned VA      = V_ACTIVE,
  parameter int unsigned VF      = V_FRONT,
  parameter int unsigned VS      = V_SYNC,
  parameter int unsigned VB      = V_BACK,
  parameter int unsigned CLK_DIV = 2,
  parameter int unsigned AW      = $clog2(HA * VA)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          resync,
  output logic          pix_ce,
  output logic          req,
  output logic [15:0]   req_x,
  output logic [15:0]   req_y,
  output logic [AW-1:0] req_addr,
  output logic          req_sof,
  input  rgb_t          pix_in,
  output rgb_t          vga_rgb,
  output logic          vga_hs,
  output logic          vga_vs,
  output logic          vga_de
);
  localparam int unsigned HT = HA + HF + HS + HB;
  localparam int unsigned VT = VA + VF + VS + VB;
  localparam int unsigned DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [DW-1:0] div;
  logic [15:0]   h, v;          // registered raster position
  logic [15:0]   he, ve;        // effective position this cycle
  logic          vis;
  logic          de1, hs1, vs1; // stage 1: position of the pixel being fetched
  logic [AW-1:0] line_base;     // y * HA of the current line

  always_comb begin
    he     = resync ? '0 : h;
    ve     = resync ? '0 : v;
    pix_ce = !rst && (resync || (div == '0));
    vis    = (he < 16'(HA)) && (ve < 16'(VA));
    req    = pix_ce && vis;
    req_x  = he;
    req_y  = ve;
    req_addr = (resync ? '0 : line_base) + AW'(he);
    req_sof  = req && (he == '0) && (ve == '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      div <= '0;
      h   <= '0;
      v   <= '0;
      line_base <= '0;
    end else begin
      if (pix_ce) div <= (CLK_DIV > 1) ? DW'(1) : '0;
      else        div <= (32'(div) == CLK_DIV - 1) ? '0 : div + DW'(1);
      if (pix_ce) begin
        if (he == 16'(HT - 1)) begin
          h <= '0;
          if (ve == 16'(VT - 1)) begin
            v <= '0;
            line_base <= '0;
          end else begin
            v <= ve + 16'd1;
            line_base <= (ve < 16'(VA)) ? (resync ? '0 : line_base) + AW'(HA)
                                        : (resync ? '0 : line_base);
          end
        end else begin
          h <= he + 16'd1;
          v <= ve;
          if (resync) line_base <= '0;
        end
      end
    end
  end

  // Display pipeline: stage 1 follows the request, stage 2 takes the pixel.
  always_ff @(posedge clk) begin
    if (rst) begin
      de1 <= 1'b0; hs1 <= 1'b1; vs1 <= 1'b1;
      vga_de <= 1'b0; vga_hs <= 1'b1; vga_vs <= 1'b1; vga_rgb <= '0;
    end else if (pix_ce) begin
      de1 <= vis;
      hs1 <= !((he >= 16'(HA + HF)) && (he < 16'(HA + HF + HS)));
      vs1 <= !((ve >= 16'(VA + VF)) && (ve < 16'(VA + VF + VS)));
      // a resync drops the pixel still in flight from the old raster
      vga_de  <= de1 && !resync;
      vga_hs  <= hs1;
      vga_vs  <= vs1;
      vga_rgb <= (de1 && !resync) ? pix_in : '0;
    end
  end
endmodule
