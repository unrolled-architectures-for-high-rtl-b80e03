// zeroing -- frozen-position zeroing between the two encoders of the
// systematic scheme.
//
// q_i = 0 where frozen_i = 1, q_i = d_i elsewhere. Purely combinational, one
// AND gate per bit. The published design names this step and places it
// between the two encoders; supplying the frozen set as an N-bit mask input
// is this design's choice.
module zeroing #(
  parameter int unsigned N = 324
) (
  input  logic [N-1:0] d,
  input  logic [N-1:0] frozen,
  output logic [N-1:0] q
);
  always_comb q = d & ~frozen;
endmodule
