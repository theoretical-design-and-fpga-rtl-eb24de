// dcs_bit_update -- the chaos generation strategy of a higher-dimensional
// digital chaotic system (HDDCS), applied to one dimension.
//
// Each bit j of the new state takes the iteration function's bit F_j where the
// random control word has a 1 and keeps the old state bit x_j where it has a 0:
//     x_next = (x_prev AND NOT sel) OR (f AND sel)
// All three operands have the same N-bit precision, so nothing is rounded or
// quantised. The module is purely combinational (no clock, zero latency).
// The formula is the source description's; the module boundary is this
// design's own.
module dcs_bit_update #(
  parameter int unsigned N = 32          // bits per state word (P + Q)
) (
  input  logic [N-1:0] x_prev,           // x^{n-1}
  input  logic [N-1:0] f,                // F(x^{n-1}, ...)
  input  logic [N-1:0] sel,              // random word s^n (1 = take F)
  output logic [N-1:0] x_next            // x^n
);
  always_comb x_next = (x_prev & ~sel) | (f & sel);
endmodule
