// tb_workloads_comb -- runs the seven codes of the published combinational
// results table (N = 192, 256, 243, 324, 384, 576, 1024; binary, ternary and
// mixed kernel orderings) through the full encoder with no pipeline
// registers, non-systematic and systematic, checking each codeword and its
// latency against the golden model (see tb_enc_check). Pure-binary
// systematic codes use a Reed-Muller-like frozen set, for which the
// information bits must reappear in the codeword; the others use a random
// frozen set.
module tb_workloads_comb;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  localparam int NC = 14;
  logic [NC-1:0] done;
  int ck [NC], fl [NC], fr [NC], bb [NC], gp [NC], mf [NC], zr [NC];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // T1 N=192 non-sys comb: ordering {3,2,2,2,2,2,2}
  localparam int unsigned KER_0 [7] = '{3, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(7), .KER(KER_0), .N(192), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c0 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[0]), .checks(ck[0]), .failures(fl[0]),
    .n_frames(fr[0]), .n_back_to_back(bb[0]), .n_gaps(gp[0]), .max_in_flight(mf[0]), .n_zeroed(zr[0]));
  // T1 N=192 sys comb: ordering {3,2,2,2,2,2,2}
  localparam int unsigned KER_1 [7] = '{3, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(7), .KER(KER_1), .N(192), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c1 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[1]), .checks(ck[1]), .failures(fl[1]),
    .n_frames(fr[1]), .n_back_to_back(bb[1]), .n_gaps(gp[1]), .max_in_flight(mf[1]), .n_zeroed(zr[1]));
  // T1 N=256 non-sys comb: ordering {2,2,2,2,2,2,2,2}
  localparam int unsigned KER_2 [8] = '{2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(8), .KER(KER_2), .N(256), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c2 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[2]), .checks(ck[2]), .failures(fl[2]),
    .n_frames(fr[2]), .n_back_to_back(bb[2]), .n_gaps(gp[2]), .max_in_flight(mf[2]), .n_zeroed(zr[2]));
  // T1 N=256 sys comb: ordering {2,2,2,2,2,2,2,2}
  localparam int unsigned KER_3 [8] = '{2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(8), .KER(KER_3), .N(256), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(4)) c3 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[3]), .checks(ck[3]), .failures(fl[3]),
    .n_frames(fr[3]), .n_back_to_back(bb[3]), .n_gaps(gp[3]), .max_in_flight(mf[3]), .n_zeroed(zr[3]));
  // T1 N=243 non-sys comb: ordering {3,3,3,3,3}
  localparam int unsigned KER_4 [5] = '{3, 3, 3, 3, 3};
  tb_enc_check #(.NK(5), .KER(KER_4), .N(243), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c4 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[4]), .checks(ck[4]), .failures(fl[4]),
    .n_frames(fr[4]), .n_back_to_back(bb[4]), .n_gaps(gp[4]), .max_in_flight(mf[4]), .n_zeroed(zr[4]));
  // T1 N=243 sys comb: ordering {3,3,3,3,3}
  localparam int unsigned KER_5 [5] = '{3, 3, 3, 3, 3};
  tb_enc_check #(.NK(5), .KER(KER_5), .N(243), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c5 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[5]), .checks(ck[5]), .failures(fl[5]),
    .n_frames(fr[5]), .n_back_to_back(bb[5]), .n_gaps(gp[5]), .max_in_flight(mf[5]), .n_zeroed(zr[5]));
  // T1 N=324 non-sys comb: ordering {2,2,3,3,3,3}
  localparam int unsigned KER_6 [6] = '{2, 2, 3, 3, 3, 3};
  tb_enc_check #(.NK(6), .KER(KER_6), .N(324), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c6 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[6]), .checks(ck[6]), .failures(fl[6]),
    .n_frames(fr[6]), .n_back_to_back(bb[6]), .n_gaps(gp[6]), .max_in_flight(mf[6]), .n_zeroed(zr[6]));
  // T1 N=324 sys comb: ordering {2,2,3,3,3,3}
  localparam int unsigned KER_7 [6] = '{2, 2, 3, 3, 3, 3};
  tb_enc_check #(.NK(6), .KER(KER_7), .N(324), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c7 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[7]), .checks(ck[7]), .failures(fl[7]),
    .n_frames(fr[7]), .n_back_to_back(bb[7]), .n_gaps(gp[7]), .max_in_flight(mf[7]), .n_zeroed(zr[7]));
  // T1 N=384 non-sys comb: ordering {3,2,2,2,2,2,2,2}
  localparam int unsigned KER_8 [8] = '{3, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(8), .KER(KER_8), .N(384), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c8 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[8]), .checks(ck[8]), .failures(fl[8]),
    .n_frames(fr[8]), .n_back_to_back(bb[8]), .n_gaps(gp[8]), .max_in_flight(mf[8]), .n_zeroed(zr[8]));
  // T1 N=384 sys comb: ordering {3,2,2,2,2,2,2,2}
  localparam int unsigned KER_9 [8] = '{3, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(8), .KER(KER_9), .N(384), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c9 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[9]), .checks(ck[9]), .failures(fl[9]),
    .n_frames(fr[9]), .n_back_to_back(bb[9]), .n_gaps(gp[9]), .max_in_flight(mf[9]), .n_zeroed(zr[9]));
  // T1 N=576 non-sys comb: ordering {2,2,2,2,2,2,3,3}
  localparam int unsigned KER_10 [8] = '{2, 2, 2, 2, 2, 2, 3, 3};
  tb_enc_check #(.NK(8), .KER(KER_10), .N(576), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c10 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[10]), .checks(ck[10]), .failures(fl[10]),
    .n_frames(fr[10]), .n_back_to_back(bb[10]), .n_gaps(gp[10]), .max_in_flight(mf[10]), .n_zeroed(zr[10]));
  // T1 N=576 sys comb: ordering {2,2,2,2,2,2,3,3}
  localparam int unsigned KER_11 [8] = '{2, 2, 2, 2, 2, 2, 3, 3};
  tb_enc_check #(.NK(8), .KER(KER_11), .N(576), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c11 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[11]), .checks(ck[11]), .failures(fl[11]),
    .n_frames(fr[11]), .n_back_to_back(bb[11]), .n_gaps(gp[11]), .max_in_flight(mf[11]), .n_zeroed(zr[11]));
  // T1 N=1024 non-sys comb: ordering {2,2,2,2,2,2,2,2,2,2}
  localparam int unsigned KER_12 [10] = '{2, 2, 2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(10), .KER(KER_12), .N(1024), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(0)) c12 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[12]), .checks(ck[12]), .failures(fl[12]),
    .n_frames(fr[12]), .n_back_to_back(bb[12]), .n_gaps(gp[12]), .max_in_flight(mf[12]), .n_zeroed(zr[12]));
  // T1 N=1024 sys comb: ordering {2,2,2,2,2,2,2,2,2,2}
  localparam int unsigned KER_13 [10] = '{2, 2, 2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(10), .KER(KER_13), .N(1024), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b1),
                 .BOUNDARY_REG(1'b0), .FRAMES(6), .FROZEN_RM(5)) c13 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[13]), .checks(ck[13]), .failures(fl[13]),
    .n_frames(fr[13]), .n_back_to_back(bb[13]), .n_gaps(gp[13]), .max_in_flight(mf[13]), .n_zeroed(zr[13]));
  localparam string LABEL [NC] = '{"T1 N=192 non-sys comb", "T1 N=192 sys comb", "T1 N=256 non-sys comb", "T1 N=256 sys comb", "T1 N=243 non-sys comb", "T1 N=243 sys comb", "T1 N=324 non-sys comb", "T1 N=324 sys comb", "T1 N=384 non-sys comb", "T1 N=384 sys comb", "T1 N=576 non-sys comb", "T1 N=576 sys comb", "T1 N=1024 non-sys comb", "T1 N=1024 sys comb"};
  localparam int    FRAMES [NC] = '{6, 6, 6, 6, 6, 6, 6, 6, 6, 6, 6, 6, 6, 6};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    wait (&done);
    for (int i = 0; i < NC; i++) begin
      checks   += ck[i] + 1;
      failures += fl[i];
      if (fr[i] != FRAMES[i]) begin
        failures++;
        $display("FAIL %s: %0d of %0d codewords", LABEL[i], fr[i], FRAMES[i]);
      end
      $display("%-30s frames=%0d checks=%0d failures=%0d max_in_flight=%0d", LABEL[i], fr[i], ck[i], fl[i], mf[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
