// pe2 -- binary (Arikan, 2x2) processing element.
//
// Encodes a length-2 polar code: x0 = u0 ^ u1, x1 = u1, i.e. x = u * T2 with
// T2 = [1 0; 1 1]. One XOR level deep. Purely combinational; bit i of each
// port is u_i / x_i. The gate-level function is the published one; x1 is a
// plain wire from u1, as the kernel passes its second input straight through.
module pe2 (
  input  logic [1:0] u,
  output logic [1:0] x
);
  always_comb begin
    x[0] = u[0] ^ u[1];
    x[1] = u[1];
  end
endmodule
