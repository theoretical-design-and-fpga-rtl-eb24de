// dcs_feedback -- state registers of the 3D-DCS generator (block "feedback"
// of the generator's block diagram).
//
// On a rising clock edge with en high, the new chaotic states out1..out3 from
// the processing block are stored and presented on in1..in3 as the previous
// states of the next iteration, and the three TRNG words out1_prng..out3_prng
// are stored and presented on in1_prng..in3_prng, which feed the ring
// oscillators back. Reset (synchronous, active high) loads the initial
// condition x^0, y^0, z^0 from the key inputs and clears the TRNG registers.
// The clock enable and the key inputs are this design's own additions: the
// enable lets transmitter and receiver step once per pixel, and the key is the
// shared secret whose mismatch prevents decryption.
module dcs_feedback #(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         Reset,
  input  logic         en,
  input  logic [N-1:0] key1,      // x^0
  input  logic [N-1:0] key2,      // y^0
  input  logic [N-1:0] key3,      // z^0
  input  logic [N-1:0] out1,
  input  logic [N-1:0] out2,
  input  logic [N-1:0] out3,
  input  logic [N-1:0] out1_prng,
  input  logic [N-1:0] out2_prng,
  input  logic [N-1:0] out3_prng,
  output logic [N-1:0] in1,
  output logic [N-1:0] in2,
  output logic [N-1:0] in3,
  output logic [N-1:0] in1_prng,
  output logic [N-1:0] in2_prng,
  output logic [N-1:0] in3_prng
);
  always_ff @(posedge clk) begin
    if (Reset) begin
      in1 <= key1;
      in2 <= key2;
      in3 <= key3;
      in1_prng <= '0;
      in2_prng <= '0;
      in3_prng <= '0;
    end else if (en) begin
      in1 <= out1;
      in2 <= out2;
      in3 <= out3;
      in1_prng <= out1_prng;
      in2_prng <= out2_prng;
      in3_prng <= out3_prng;
    end
  end
endmodule
