// tb_zeroing -- checks that the zeroing step clears exactly the frozen
// positions and passes all others, for random frames and masks.
module tb_zeroing;
  localparam int unsigned N = 36;
  logic [N-1:0] d, frozen, q;
  int checks = 0, failures = 0;

  zeroing #(.N(N)) dut (.d(d), .frozen(frozen), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      d      = {4'($urandom), 32'($urandom)};
      frozen = {4'($urandom), 32'($urandom)};
      #1;
      for (int i = 0; i < int'(N); i++) begin
        checks++;
        if (q[i] !== (frozen[i] ? 1'b0 : d[i])) begin
          failures++;
          $display("FAIL t=%0d bit %0d", t, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
