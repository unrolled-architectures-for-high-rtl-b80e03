// tb_pe2 -- exhaustive check of the binary processing element against the
// 2x2 kernel T2 taken from the golden model.
module tb_pe2;
  import tb_ref_pkg::*;
  logic [1:0] u, x;
  int checks = 0, failures = 0;

  pe2 dut (.u(u), .x(x));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      bits_q_t uq, xq;
      u  = v[1:0];
      uq = {};
      for (int i = 0; i < 2; i++) uq.push_back(u[i]);
      #1;
      xq = encode(ker_q_t'{2}, uq);
      for (int i = 0; i < 2; i++) begin
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
