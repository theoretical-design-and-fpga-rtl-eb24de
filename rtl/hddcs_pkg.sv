// hddcs_pkg -- constants and types shared by the 3D digital chaotic system
// (3D-DCS) and the image-encryption link built around it.
//
// The chaotic state is three N-bit integers (x, y, z) with N = 32 and no
// fractional part (P = 32, Q = 0), as in the FPGA example this design follows.
// A pixel is three colour components; 8 bits per component is this design's
// own choice (the image size, 640 x 480, is the only picture format fixed by
// the source description). The public channel between the two boards carries
// one encrypted pixel per transfer together with the three random words that
// drove the chaotic step for that pixel.
package hddcs_pkg;

  // State width of every dimension: N = P + Q = 32, Q = 0.
  localparam int unsigned DCS_N      = 32;
  // Number of dimensions of the FPGA example (3D-DCS).
  localparam int unsigned DCS_M      = 3;
  // Bits per colour component (own choice).
  localparam int unsigned COLOR_BITS = 8;

  // Picture and VGA raster: 640 x 480 visible, standard 60 Hz timing.
  localparam int unsigned H_ACTIVE = 640;
  localparam int unsigned H_FRONT  = 16;
  localparam int unsigned H_SYNC   = 96;
  localparam int unsigned H_BACK   = 48;
  localparam int unsigned V_ACTIVE = 480;
  localparam int unsigned V_FRONT  = 10;
  localparam int unsigned V_SYNC   = 2;
  localparam int unsigned V_BACK   = 33;

  typedef logic [DCS_N-1:0] word_t;

  // One colour pixel.
  typedef struct packed {
    logic [COLOR_BITS-1:0] r;
    logic [COLOR_BITS-1:0] g;
    logic [COLOR_BITS-1:0] b;
  } rgb_t;

  // One transfer on the public channel: encrypted pixel plus the control
  // signal (the s, u, v words of the transmitter's ring-oscillator TRNGs).
  typedef struct packed {
    logic                  valid;  // a pixel is present
    logic                  sof;    // first pixel of a frame (x = 0, y = 0)
    rgb_t                  pix;    // encrypted pixel
    logic [DCS_M-1:0][DCS_N-1:0] prng; // [0] = s, [1] = u, [2] = v
  } chan_t;

endpackage
