// tb_pipe_reg -- checks the frame register: reset clears the valid flag,
// a frame with in_valid is captured on the next edge with out_valid set,
// and q holds its value while in_valid is low.
module tb_pipe_reg;
  localparam int unsigned W = 40;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [W-1:0] d, q, model_q;
  logic out_valid, model_v;
  int checks = 0, failures = 0, cyc = 0;

  pipe_reg #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .d(d),
                         .out_valid(out_valid), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    model_v = 1'b0;
    model_q = '0;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL valid after reset"); end
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      in_valid = 1'($urandom);
      d = {8'($urandom), 32'($urandom)};
      if (t == 150) rst_n = 1'b0;
      if (t == 152) rst_n = 1'b1;
      @(posedge clk);
      model_v = rst_n ? in_valid : 1'b0;
      if (in_valid) model_q = d;
      @(negedge clk);
      checks++;
      if (out_valid !== model_v) begin failures++; $display("FAIL valid t=%0d", t); end
      if (model_v || t > 0) begin
        checks++;
        if (q !== model_q) begin failures++; $display("FAIL data t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
