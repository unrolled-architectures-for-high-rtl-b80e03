// tb_workload_4096 -- the N = 4096 pure-binary encoders of the published
// comparison table: combinational (P = 0) and partially pipelined (P = 5),
// both non-systematic. A few random frames each, checked against the golden
// model (see tb_enc_check).
module tb_workload_4096;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  localparam int NC = 2;
  logic [NC-1:0] done;
  int ck [NC], fl [NC], fr [NC], bb [NC], gp [NC], mf [NC], zr [NC];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // T6 N=4096 comb: ordering {2,2,2,2,2,2,2,2,2,2,2,2}
  localparam int unsigned KER_0 [12] = '{2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(12), .KER(KER_0), .N(4096), .P(0), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(2), .FROZEN_RM(0)) c0 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[0]), .checks(ck[0]), .failures(fl[0]),
    .n_frames(fr[0]), .n_back_to_back(bb[0]), .n_gaps(gp[0]), .max_in_flight(mf[0]), .n_zeroed(zr[0]));
  // T6 N=4096 pipelined P=5: ordering {2,2,2,2,2,2,2,2,2,2,2,2}
  localparam int unsigned KER_1 [12] = '{2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2, 2};
  tb_enc_check #(.NK(12), .KER(KER_1), .N(4096), .P(5), .TOP(1'b1), .SYSTEMATIC(1'b0),
                 .BOUNDARY_REG(1'b0), .FRAMES(3), .FROZEN_RM(0)) c1 (
    .clk(clk), .rst_n(rst_n), .start(start), .done(done[1]), .checks(ck[1]), .failures(fl[1]),
    .n_frames(fr[1]), .n_back_to_back(bb[1]), .n_gaps(gp[1]), .max_in_flight(mf[1]), .n_zeroed(zr[1]));
  localparam string LABEL [NC] = '{"T6 N=4096 comb", "T6 N=4096 pipelined P=5"};
  localparam int    FRAMES [NC] = '{2, 3};

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
