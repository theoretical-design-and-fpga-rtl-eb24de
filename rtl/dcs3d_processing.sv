// dcs3d_processing -- one iteration of the 3D digital chaotic system
// (block "3D-DCS_processing" of the generator).
//
// The uncontrolled 3-D map is
//     F1 = NOT x XOR (1 << (z mod N))
//     F2 = NOT y XOR (1 << (x mod N))
//     F3 = NOT z XOR (1 << (y mod N))
// and each dimension is then updated only in the bits selected by its random
// word (s for x, u for y, v for z) through dcs_bit_update. With N = 32 the
// "mod 32" is the low five bits of the driving state word.
// Port names follow the block diagram: in1..in3 are the previous states
// x^{n-1}, y^{n-1}, z^{n-1}; out1_prng..out3_prng are the random words
// s^n, u^n, v^n; out1..out3 are x^n, y^n, z^n. Purely combinational; the
// state is held in the separate feedback register block.
module dcs3d_processing #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] in1,
  input  logic [N-1:0] in2,
  input  logic [N-1:0] in3,
  input  logic [N-1:0] out1_prng,
  input  logic [N-1:0] out2_prng,
  input  logic [N-1:0] out3_prng,
  output logic [N-1:0] out1,
  output logic [N-1:0] out2,
  output logic [N-1:0] out3
);
  logic [N-1:0] f1, f2, f3;

  // one-hot word with bit (a mod N) set
  function automatic logic [N-1:0] bit_at(input logic [N-1:0] a);
    return {{(N-1){1'b0}}, 1'b1} << (a % N);
  endfunction

  always_comb begin
    f1 = ~in1 ^ bit_at(in3);
    f2 = ~in2 ^ bit_at(in1);
    f3 = ~in3 ^ bit_at(in2);
  end

  dcs_bit_update #(.N(N)) u_x (.x_prev(in1), .f(f1), .sel(out1_prng), .x_next(out1));
  dcs_bit_update #(.N(N)) u_y (.x_prev(in2), .f(f2), .sel(out2_prng), .x_next(out2));
  dcs_bit_update #(.N(N)) u_z (.x_prev(in3), .f(f3), .sel(out3_prng), .x_next(out3));
endmodule
