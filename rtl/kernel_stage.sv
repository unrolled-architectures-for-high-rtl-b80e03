// kernel_stage -- one unrolled kernel stage of a size-N encoder.
//
// The N bits are cut into N/BLK consecutive blocks of BLK bits. Inside a
// block, L sub-codes of BLK/L bits each sit side by side (left, [centre,]
// right). PE number i of the block takes bit i of every sub-code, i.e. the
// bits at offsets i, i + BLK/L (and i + 2*BLK/L), and writes its outputs
// back to the same offsets. For L = 2 this is
//   [b_i, b_{i+BLK/2}] = [l_i ^ r_i, r_i],
// and for L = 3
//   [b_i, b_{i+BLK/3}, b_{i+2BLK/3}] = [l_i ^ c_i, l_i ^ r_i, l_i ^ c_i ^ r_i].
// With BLK = L the stage is the first column of PEs on adjacent input bits.
// Purely combinational: N/L PEs, one (L = 2) or two (L = 3) XOR levels. In a
// binary stage the upper bit of every pair passes through unchanged.
module kernel_stage #(
  parameter int unsigned N   = 324,
  parameter int unsigned L   = 2,    // kernel size, 2 or 3
  parameter int unsigned BLK = 4     // size of the sub-encoder this stage completes
) (
  input  logic [N-1:0] d_in,
  output logic [N-1:0] d_out
);
  localparam int unsigned STRIDE = BLK / L;

  if (!(L == 2 || L == 3)) begin : g_bad_l
    $error("kernel_stage: L must be 2 or 3");
  end
  if (BLK % L != 0 || N % BLK != 0) begin : g_bad_blk
    $error("kernel_stage: BLK must divide N and be a multiple of L");
  end

  for (genvar b = 0; b < int'(N / BLK); b++) begin : g_blk
    for (genvar i = 0; i < int'(STRIDE); i++) begin : g_pe
      localparam int unsigned BASE = b * BLK + i;
      if (L == 2) begin : g_pe2
        logic [1:0] pu, px;
        assign pu = {d_in[BASE + STRIDE], d_in[BASE]};
        pe2 u_pe (.u(pu), .x(px));
        assign d_out[BASE]          = px[0];
        assign d_out[BASE + STRIDE] = px[1];
      end else begin : g_pe3
        logic [2:0] pu, px;
        assign pu = {d_in[BASE + 2*STRIDE], d_in[BASE + STRIDE], d_in[BASE]};
        pe3 u_pe (.u(pu), .x(px));
        assign d_out[BASE]            = px[0];
        assign d_out[BASE + STRIDE]   = px[1];
        assign d_out[BASE + 2*STRIDE] = px[2];
      end
    end
  end
endmodule
