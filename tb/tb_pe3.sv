// tb_pe3 -- exhaustive check of the ternary processing element against the
// 3x3 ternary kernel taken from the golden model.
module tb_pe3;
  import tb_ref_pkg::*;
  logic [2:0] u, x;
  int checks = 0, failures = 0;

  pe3 dut (.u(u), .x(x));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      bits_q_t uq, xq;
      u  = v[2:0];
      uq = {};
      for (int i = 0; i < 3; i++) uq.push_back(u[i]);
      #1;
      xq = encode(ker_q_t'{3}, uq);
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (x[i] !== xq[i]) begin
          failures++;
          $display("FAIL u=%b x[%0d]=%b expected %b", u, i, x[i], xq[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
