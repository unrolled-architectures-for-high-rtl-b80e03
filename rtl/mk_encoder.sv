// mk_encoder -- unrolled non-systematic multi-kernel polar encoder core.
//
// Computes x = u * (T_KER[0] (x) T_KER[1] (x) ... (x) T_KER[NK-1]) for a code
// of length N = KER[0] * ... * KER[NK-1], where T2 = [1 0; 1 1] and the
// ternary kernel is the one of pe3. The encoder is a chain of NK kernel
// stages. Stage j (j = 0 first) uses kernel KER[NK-1-j] and completes
// sub-encoders of size BLK_j = KER[NK-1-j] * ... * KER[NK-1]; the last stage
// uses KER[0] and spans the whole frame. This is the recursive
// "encoder of size N built from encoders of size N/l" structure, flattened
// into stages.
//
// P (0 <= P < NK) pipeline registers are placed between stages, register m
// after stage floor(m*NK/(P+1)) (see mk_pkg::pipe_after). With P = 0 the core
// is purely combinational and out_valid = in_valid; otherwise the frame
// arrives P clock cycles after it entered, and a new frame may enter every
// cycle. There is no back-pressure. The input and output registers are not
// part of this core (they belong to the top level).
//
// Published: the PEs, the stage order set by the kernel ordering, the
// number of pipeline stages and the latency. This design's own: where the
// P registers sit and the valid flag travelling with the data.
module mk_encoder
  import mk_pkg::*;
#(
  parameter int unsigned NK            = 6,
  parameter int unsigned KER [NK]      = '{2, 2, 3, 3, 3, 3},
  parameter int unsigned N             = 324,
  parameter int unsigned P             = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] u,
  output logic         out_valid,
  output logic [N-1:0] x
);
  // Product of KER[first..NK-1]: size of the sub-code finished by the stage
  // that applies KER[first].
  function automatic int unsigned tail_product(int unsigned first);
    int unsigned prod = 1;
    for (int unsigned k = first; k < NK; k++) prod *= KER[k];
    return prod;
  endfunction

  if (tail_product(0) != N) begin : g_bad_n
    $error("mk_encoder: N must equal the product of the kernel ordering");
  end
  if (NK > MAX_STAGES || (NK > 0 && P >= NK)) begin : g_bad_p
    $error("mk_encoder: need NK <= MAX_STAGES and P < NK");
  end
  for (genvar k = 0; k < int'(NK); k++) begin : g_chk_ker
    if (!(KER[k] == KER_BINARY || KER[k] == KER_TERNARY)) begin : g_bad_ker
      $error("mk_encoder: kernels must be 2 or 3");
    end
  end

  // s_d[j] / s_v[j]: frame and valid flag entering stage j.
  logic [N-1:0] s_d [NK+1];
  logic         s_v [NK+1];

  assign s_d[0] = u;
  assign s_v[0] = in_valid;

  for (genvar j = 0; j < int'(NK); j++) begin : g_stage
    localparam int unsigned KIDX = NK - 1 - j;
    logic [N-1:0] comb_out;

    kernel_stage #(
      .N  (N),
      .L  (KER[KIDX]),
      .BLK(tail_product(KIDX))
    ) u_stage (
      .d_in (s_d[j]),
      .d_out(comb_out)
    );

    if (pipe_after(j + 1, NK, P)) begin : g_reg
      pipe_reg #(.W(N)) u_reg (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (s_v[j]),
        .d        (comb_out),
        .out_valid(s_v[j+1]),
        .q        (s_d[j+1])
      );
    end else begin : g_wire
      assign s_d[j+1] = comb_out;
      assign s_v[j+1] = s_v[j];
    end
  end

  assign x         = s_d[NK];
  assign out_valid = s_v[NK];
endmodule
