// rgb_encrypt -- RGB encryption module: encrypts a plaintext pixel on the transmitter.
//
// Each colour component is XORed with its own 3D-DCS output: R with x^n
// (out_R), G with y^n (out_G), B with z^n (out_B). Only the low COLOR_BITS
// bits of each 32-bit state word are used; which bits to use is this design's
// choice. The result is registered: a pixel offered with in_valid high
// appears on out_pix with out_valid high after the next clock edge, and the
// output holds until the next valid pixel. in_sof travels along as out_sof.
// XOR is its own inverse, so encryption with the same key stream undoes the
// other side's operation.
module rgb_encrypt
  import hddcs_pkg::*;
#(
  parameter int unsigned N = DCS_N
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         in_sof,
  input  rgb_t         in_pix,     // plaintext pixel
  input  logic [N-1:0] out_R,      // x^n
  input  logic [N-1:0] out_G,      // y^n
  input  logic [N-1:0] out_B,      // z^n
  output logic         out_valid,
  output logic         out_sof,
  output rgb_t         out_pix     // ciphertext pixel
);
  rgb_t ks;   // key stream for this pixel

  always_comb begin
    ks.r = out_R[COLOR_BITS-1:0];
    ks.g = out_G[COLOR_BITS-1:0];
    ks.b = out_B[COLOR_BITS-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid && in_sof;
      if (in_valid) out_pix <= in_pix ^ ks;
    end
  end
endmodule
