// dcs3d_generator -- the 3D digital chaotic system (3D-DCS) generator.
//
// Three ring-oscillator TRNGs supply the random control words s, u, v; the
// processing block computes one chaotic iteration (x, y, z) from them and the
// previous state; the feedback block registers both the chaotic state and the
// TRNG state on the rising clock edge. This is the wiring of the generator's
// block diagram: the processing block takes the TRNG outputs directly, and the
// stored TRNG words go back to the rings' inputs.
//
// out_R, out_G, out_B are x^n, y^n, z^n: the iteration that the next enabled
// clock edge will store, computed combinationally from the stored state
// x^{n-1}, y^{n-1}, z^{n-1} and the current random words. prng presents those
// random words (the "control signal" that is sent to the receiver).
//
// EXT_PRNG = 1 builds the receiver's generator: no local rings, the random
// words come from ext_prng (received from the transmitter), so both sides run
// the same orbit. This split is this design's reading of how the receiver is
// synchronised. en (one iteration per enabled edge) and the key inputs that
// set x^0, y^0, z^0 at reset are this design's own additions.
module dcs3d_generator
  import hddcs_pkg::*;
#(
  parameter int unsigned N        = DCS_N,
  parameter bit          EXT_PRNG = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,        // advance one iteration
  input  logic [2:0][N-1:0]     key,       // initial state x^0, y^0, z^0
  input  logic [2:0][N-1:0]     ext_prng,  // received s, u, v (EXT_PRNG = 1)
  output logic [2:0][N-1:0]     prng,      // s, u, v used by this iteration
  output logic [N-1:0]          out_R,     // x^n
  output logic [N-1:0]          out_G,     // y^n
  output logic [N-1:0]          out_B      // z^n
);
  logic [N-1:0] in1, in2, in3;
  logic [N-1:0] in1_prng, in2_prng, in3_prng;

  if (EXT_PRNG) begin : g_ext
    always_comb prng = ext_prng;
  end else begin : g_rings
    osc_ring_trng #(.N(N), .RING_ID(1)) inst1 (.in(in1_prng), .out(prng[0]));
    osc_ring_trng #(.N(N), .RING_ID(2)) inst2 (.in(in2_prng), .out(prng[1]));
    osc_ring_trng #(.N(N), .RING_ID(3)) inst3 (.in(in3_prng), .out(prng[2]));
  end

  dcs_feedback #(.N(N)) inst (
    .clk, .Reset(rst), .en,
    .key1(key[0]), .key2(key[1]), .key3(key[2]),
    .out1(out_R), .out2(out_G), .out3(out_B),
    .out1_prng(prng[0]), .out2_prng(prng[1]), .out3_prng(prng[2]),
    .in1, .in2, .in3,
    .in1_prng, .in2_prng, .in3_prng
  );

  dcs3d_processing #(.N(N)) inst4 (
    .in1, .in2, .in3,
    .out1_prng(prng[0]), .out2_prng(prng[1]), .out3_prng(prng[2]),
    .out1(out_R), .out2(out_G), .out3(out_B)
  );
endmodule
