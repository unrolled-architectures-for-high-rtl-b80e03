// tb_mk_encoder -- checks the encoder core against the golden model in
// three configurations: the default ordering {2,2,3,3,3,3} (N = 324) with
// P = 4 pipeline registers, the purely combinational N = 6 code
// G = T2 (x) T3 (P = 0), and a deeply pipelined {3,2,2,3} code (N = 36,
// P = 3, a register after every stage). Frames arrive on random cycles;
// every codeword and its latency (P cycles) are checked, and the pipelined
// cases must hold several frames in flight at once.
module tb_mk_encoder;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic done_a, done_b, done_c;
  int ck_a, ck_b, ck_c, fl_a, fl_b, fl_c, fr_a, fr_b, fr_c;
  int bb_a, bb_b, bb_c, gp_a, gp_b, gp_c, mf_a, mf_b, mf_c, z_a, z_b, z_c;
  int checks = 0, failures = 0;

  localparam int unsigned KER_A [6] = '{2, 2, 3, 3, 3, 3};
  localparam int unsigned KER_B [2] = '{2, 3};
  localparam int unsigned KER_C [4] = '{3, 2, 2, 3};

  always #5 clk = ~clk;

  tb_enc_check #(.NK(6), .KER(KER_A), .N(324), .P(4), .TOP(1'b0), .FRAMES(40)) c_a (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done_a), .checks(ck_a), .failures(fl_a),
    .n_frames(fr_a), .n_back_to_back(bb_a), .n_gaps(gp_a), .max_in_flight(mf_a), .n_zeroed(z_a));
  tb_enc_check #(.NK(2), .KER(KER_B), .N(6), .P(0), .TOP(1'b0), .FRAMES(100)) c_b (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done_b), .checks(ck_b), .failures(fl_b),
    .n_frames(fr_b), .n_back_to_back(bb_b), .n_gaps(gp_b), .max_in_flight(mf_b), .n_zeroed(z_b));
  tb_enc_check #(.NK(4), .KER(KER_C), .N(36), .P(3), .TOP(1'b0), .FRAMES(100)) c_c (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done_c), .checks(ck_c), .failures(fl_c),
    .n_frames(fr_c), .n_back_to_back(bb_c), .n_gaps(gp_c), .max_in_flight(mf_c), .n_zeroed(z_c));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_at_least(string what, int got, int least);
    checks++;
    if (got < least) begin
      failures++;
      $display("FAIL %s: %0d, expected at least %0d", what, got, least);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    wait (done_a && done_b && done_c);
    checks   += ck_a + ck_b + ck_c;
    failures += fl_a + fl_b + fl_c;
    expect_at_least("frames N=324", fr_a, 40);
    expect_at_least("frames N=6", fr_b, 100);
    expect_at_least("frames N=36", fr_c, 100);
    expect_at_least("frames in flight, P=4", mf_a, 3);
    expect_at_least("frames in flight, P=3", mf_c, 3);
    expect_at_least("back-to-back frames", bb_a + bb_c, 1);
    expect_at_least("idle gaps", gp_a + gp_c, 1);
    $display("N=324 P=4: %0d frames, %0d back-to-back, %0d gaps, up to %0d in flight", fr_a, bb_a, gp_a, mf_a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
