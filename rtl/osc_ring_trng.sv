// osc_ring_trng -- BEHAVIOURAL MODEL (not synthesizable) of one ring-oscillator
// true random number generator (blocks "Oscillator_Rings1/2/3" of the 3D-DCS
// generator).
//
// A real ring-oscillator TRNG samples the phase jitter of free-running
// inverter rings; its randomness is physical and cannot be written as logic.
// This model stands in for it with the same ports as the block diagram:
// in[N-1:0] is the generator's stored TRNG state (fed back from the feedback
// registers) and out[N-1:0] is the next random word. Inside, a noise word is
// redrawn with $urandom every PERIOD time units, free running and unrelated to
// the system clock, and out = in XOR noise. How the real rings use the
// fed-back word is not known; the XOR is this model's own choice.
// RING_ID selects one of three different ring types: here it only changes the
// seed and the redraw period (3, 5 or 7 x 2 + 1 time units). The noise only
// changes at odd time units, so a clock whose edges fall on even time units
// never samples it while it changes.
module osc_ring_trng #(
  parameter int unsigned N       = 32,
  parameter int unsigned RING_ID = 1     // 1, 2 or 3: which of the three rings
) (
  input  logic [N-1:0] in,
  output logic [N-1:0] out
);
  localparam int unsigned PERIOD = 2 * (2 * RING_ID + 1);   // even, so phase stays odd

  logic [N-1:0] noise;

  function automatic logic [N-1:0] draw();
    logic [N-1:0] w;
    for (int i = 0; i < N; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    noise = draw() ^ {(N/8){8'(RING_ID * 37)}};
    #1;
    forever begin
      noise = draw();
      #PERIOD;
    end
  end

  always_comb out = in ^ noise;
endmodule
