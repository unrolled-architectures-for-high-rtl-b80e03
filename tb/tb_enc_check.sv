// tb_enc_check -- reusable stimulus/checker for one encoder configuration.
//
// Instantiates either the encoder core (TOP = 0, mk_encoder) or the full
// encoder (TOP = 1, mk_polar_encoder) with the given kernel ordering, and
// after 'start' sends FRAMES random frames, each on a random cycle (so both
// back-to-back frames and idle gaps occur). Every frame's expected codeword
// is worked out by the golden model of tb_ref_pkg and queued with the cycle
// it was sent; each out_valid must match the oldest queued frame, bit for
// bit, and arrive exactly LAT cycles after it was sent, where
//   core:                 LAT = P
//   top, non-systematic:  LAT = P + 2
//   top, systematic:      LAT = 2P + 2 + BOUNDARY_REG
// The systematic frozen set is either random (FROZEN_RM = 0) or, for pure
// binary orderings, all indices of binary weight below FROZEN_RM; in the
// latter case the information bits must reappear unchanged in the codeword.
// Counts of the mechanisms seen are returned for the caller to judge.
module tb_enc_check
  import tb_ref_pkg::*;
#(
  parameter int unsigned NK           = 6,
  parameter int unsigned KER [NK]     = '{2, 2, 3, 3, 3, 3},
  parameter int unsigned N            = 324,
  parameter int unsigned P            = 4,
  parameter bit          TOP          = 1'b1,
  parameter bit          SYSTEMATIC   = 1'b1,
  parameter bit          BOUNDARY_REG = 1'b1,
  parameter int unsigned FRAMES       = 20,
  parameter int unsigned FROZEN_RM    = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_frames,
  output int   n_back_to_back,
  output int   n_gaps,
  output int   max_in_flight,
  output int   n_zeroed
);
  localparam bit          SYS = TOP && SYSTEMATIC;
  localparam int unsigned LAT = !TOP ? P : (SYSTEMATIC ? 2*P + 2 + BOUNDARY_REG : P + 2);

  logic         in_valid, out_valid;
  logic [N-1:0] u, x, frozen;

  if (TOP) begin : g_top
    mk_polar_encoder #(.NK(NK), .KER(KER), .N(N), .P(P), .SYSTEMATIC(SYSTEMATIC),
                       .BOUNDARY_REG(BOUNDARY_REG)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .u(u), .frozen(frozen),
      .out_valid(out_valid), .x(x));
  end else begin : g_core
    mk_encoder #(.NK(NK), .KER(KER), .N(N), .P(P)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .u(u),
      .out_valid(out_valid), .x(x));
  end

  ker_q_t        ker;
  bits_q_t       frz_q;
  logic [N-1:0]  exp_q [$];
  logic [N-1:0]  uin_q [$];
  int            tag_q [$];
  int            cyc;

  function automatic bits_q_t to_q(logic [N-1:0] v);
    bits_q_t q = {};
    for (int unsigned i = 0; i < N; i++) q.push_back(v[i]);
    return q;
  endfunction

  function automatic logic [N-1:0] from_q(bits_q_t q);
    logic [N-1:0] v;
    for (int unsigned i = 0; i < N; i++) v[i] = q[i];
    return v;
  endfunction

  initial begin
    int sent = 0, last_sent = -10;
    done = 1'b0; checks = 0; failures = 0; n_frames = 0; n_back_to_back = 0;
    n_gaps = 0; max_in_flight = 0; n_zeroed = 0; cyc = 0;
    in_valid = 1'b0; u = '0;
    ker = {};
    for (int unsigned k = 0; k < NK; k++) ker.push_back(KER[k]);
    for (int unsigned i = 0; i < N; i++)
      frozen[i] = (FROZEN_RM != 0) ? ($countones(i) < FROZEN_RM) : ($urandom_range(1, 0) == 1);
    frz_q = to_q(frozen);
    wait (start);
    while (sent < int'(FRAMES) || exp_q.size() != 0) begin
      @(negedge clk);
      cyc++;
      in_valid = 1'b0;
      if (sent < int'(FRAMES) && $urandom_range(99, 0) < 70) begin
        bits_q_t uq, xq, vq;
        for (int unsigned i = 0; i < N; i++) u[i] = 1'($urandom);
        if (SYS) u &= ~frozen;
        uq = to_q(u);
        if (SYS) begin
          vq = encode(ker, uq);
          foreach (vq[i]) if (vq[i] && frz_q[i]) begin n_zeroed++; break; end
          xq = encode_sys(ker, uq, frz_q);
        end else begin
          xq = encode(ker, uq);
        end
        exp_q.push_back(from_q(xq));
        uin_q.push_back(u);
        tag_q.push_back(cyc);
        in_valid = 1'b1;
        if (last_sent == cyc - 1) n_back_to_back++;
        else if (sent > 0) n_gaps++;
        last_sent = cyc;
        sent++;
      end
      if (exp_q.size() > max_in_flight) max_in_flight = exp_q.size();
      #1;
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL unexpected out_valid at cycle %0d", cyc);
        end else begin
          logic [N-1:0] e, ui;
          int t;
          e = exp_q.pop_front();
          ui = uin_q.pop_front();
          t = tag_q.pop_front();
          checks++;
          if (cyc - t != int'(LAT)) begin
            failures++;
            $display("FAIL latency %0d, expected %0d", cyc - t, LAT);
          end
          if (x !== e) begin
            failures++;
            $display("FAIL codeword mismatch, frame sent at cycle %0d", t);
          end
          if (SYS && FROZEN_RM != 0) begin
            checks++;
            if ((x & ~frozen) !== (ui & ~frozen)) begin
              failures++;
              $display("FAIL information bits not reproduced");
            end
          end
          n_frames++;
        end
      end
    end
    done = 1'b1;
  end
endmodule
