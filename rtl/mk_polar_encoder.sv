// mk_polar_encoder -- top level of the unrolled multi-kernel polar encoder.
//
// A frame u of N = KER[0]*...*KER[NK-1] bits (information bits at the
// information positions, zeros at the frozen positions) is captured by the
// N-bit input register, encoded, and captured by the N-bit output register.
//
//   SYSTEMATIC = 0 : input reg -> mk_encoder -> output reg
//                    (non-systematic, x = u*G)
//   SYSTEMATIC = 1 : input reg -> mk_encoder -> zeroing(frozen)
//                    [-> boundary reg if BOUNDARY_REG] -> mk_encoder
//                    -> output reg
//                    (x = (u*G with frozen positions cleared)*G)
//
// Each mk_encoder holds P internal pipeline registers. Timing: a frame
// presented with in_valid in clock cycle c (captured by the rising edge that
// ends cycle c) is on x, with out_valid high, in cycle c + LATENCY, where
// LATENCY = P+2 (non-systematic) or 2P+2+BOUNDARY_REG (systematic). The
// published latencies in cycles (P+1 non-systematic, 2P+1 systematic, 2P+2
// with the boundary register) count from the input register to the output
// register, i.e. they are LATENCY-1. A new frame may be presented every
// cycle; the output register holds the last
// codeword while no new frame arrives. frozen is a quasi-static
// configuration input read by the zeroing step; it must not change while
// frames are in flight.
//
// Published: the register/encoder/zeroing/boundary-register arrangement and
// register counts ((P+2)N non-systematic, (2P+2+BOUNDARY_REG)N systematic).
// This design's own:
// the valid flag, the reset, and the frozen mask as a port.
module mk_polar_encoder
  import mk_pkg::*;
#(
  parameter int unsigned NK            = 6,
  parameter int unsigned KER [NK]      = '{2, 2, 3, 3, 3, 3},
  parameter int unsigned N             = 324,
  parameter int unsigned P             = 4,
  parameter bit          SYSTEMATIC    = 1'b1,
  parameter bit          BOUNDARY_REG  = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] u,
  input  logic [N-1:0] frozen,
  output logic         out_valid,
  output logic [N-1:0] x
);
  logic [N-1:0] in_q,  enc_x;
  logic         in_qv, enc_v;

  pipe_reg #(.W(N)) u_in_reg (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .d(u),
    .out_valid(in_qv), .q(in_q)
  );

  logic [N-1:0] e1_x;
  logic         e1_v;

  mk_encoder #(.NK(NK), .KER(KER), .N(N), .P(P)) u_enc1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_qv), .u(in_q),
    .out_valid(e1_v), .x(e1_x)
  );

  if (SYSTEMATIC) begin : g_sys
    logic [N-1:0] z_d, b_d, e2_x;
    logic         b_v, e2_v;

    zeroing #(.N(N)) u_zero (.d(e1_x), .frozen(frozen), .q(z_d));

    if (BOUNDARY_REG) begin : g_bnd
      pipe_reg #(.W(N)) u_bnd_reg (
        .clk(clk), .rst_n(rst_n), .in_valid(e1_v), .d(z_d),
        .out_valid(b_v), .q(b_d)
      );
    end else begin : g_nobnd
      assign b_d = z_d;
      assign b_v = e1_v;
    end

    mk_encoder #(.NK(NK), .KER(KER), .N(N), .P(P)) u_enc2 (
      .clk(clk), .rst_n(rst_n), .in_valid(b_v), .u(b_d),
      .out_valid(e2_v), .x(e2_x)
    );

    assign enc_x = e2_x;
    assign enc_v = e2_v;
  end else begin : g_nonsys
    assign enc_x = e1_x;
    assign enc_v = e1_v;
  end

  pipe_reg #(.W(N)) u_out_reg (
    .clk(clk), .rst_n(rst_n), .in_valid(enc_v), .d(enc_x),
    .out_valid(out_valid), .q(x)
  );

  // Every accepted frame leaves exactly LATENCY cycles later (no stalls).
  localparam int unsigned LATENCY = SYSTEMATIC ? 2*P + 2 + BOUNDARY_REG : P + 2;
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid |-> ##LATENCY out_valid)
    else $error("mk_polar_encoder: codeword did not appear %0d cycles after its frame", LATENCY);
endmodule
