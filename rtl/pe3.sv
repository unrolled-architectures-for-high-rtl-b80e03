// pe3 -- ternary (3x3) processing element.
//
// Encodes a length-3 code: x0 = u0 ^ u1, x1 = u0 ^ u2, x2 = u1 ^ (u0 ^ u2).
// The u0 ^ u2 term is shared, so the output x2 sits two XOR levels deep,
// twice the delay of pe2. Purely combinational; bit i of each port is
// u_i / x_i. The function and the shared node follow the published PE
// drawing and node equation for the ternary kernel.
module pe3 (
  input  logic [2:0] u,
  output logic [2:0] x
);
  logic u0_xor_u2;

  always_comb begin
    u0_xor_u2 = u[0] ^ u[2];
    x[0]      = u[0] ^ u[1];
    x[1]      = u0_xor_u2;
    x[2]      = u[1] ^ u0_xor_u2;
  end
endmodule
