// tb_kernel_stage -- checks single kernel stages against the matrix
// I_{N/BLK} (x) T_L (x) I_{BLK/L}, evaluated entry by entry, for random
// frames: a binary stage (N=12, BLK=4), a ternary stage (N=18, BLK=9) and a
// first-column ternary stage on adjacent bits (N=12, BLK=3).
module tb_kernel_stage;
  import tb_ref_pkg::*;

  logic [11:0] a_in, a_out, c_in, c_out;
  logic [17:0] b_in, b_out;
  int checks = 0, failures = 0;

  kernel_stage #(.N(12), .L(2), .BLK(4)) dut_a (.d_in(a_in), .d_out(a_out));
  kernel_stage #(.N(18), .L(3), .BLK(9)) dut_b (.d_in(b_in), .d_out(b_out));
  kernel_stage #(.N(12), .L(3), .BLK(3)) dut_c (.d_in(c_in), .d_out(c_out));

  // Expected output bit c of a stage for input d (given as a queue).
  function automatic bit expect_bit(int unsigned n, int unsigned l, int unsigned blk,
                                    bits_q_t d, int unsigned c);
    int unsigned stride = blk / l;
    bit acc = 1'b0;
    for (int unsigned r = 0; r < n; r++) begin
      if (d[r] && (r / blk == c / blk) && (r % stride == c % stride) &&
          kernel_entry(l, (r % blk) / stride, (c % blk) / stride))
        acc ^= 1'b1;
    end
    return acc;
  endfunction

  task automatic check(string tag, int unsigned n, int unsigned l, int unsigned blk,
                       logic [31:0] din, logic [31:0] dout);
    bits_q_t d = {};
    for (int unsigned i = 0; i < n; i++) d.push_back(din[i]);
    for (int unsigned c = 0; c < n; c++) begin
      checks++;
      if (dout[c] !== expect_bit(n, l, blk, d, c)) begin
        failures++;
        $display("FAIL %s in=%h bit %0d", tag, din, c);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      a_in = 12'($urandom);
      b_in = 18'($urandom);
      c_in = 12'($urandom);
      #1;
      check("bin", 12, 2, 4, 32'(a_in), 32'(a_out));
      check("ter", 18, 3, 9, 32'(b_in), 32'(b_out));
      check("ter1", 12, 3, 3, 32'(c_in), 32'(c_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
