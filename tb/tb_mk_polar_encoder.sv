// tb_mk_polar_encoder -- end-to-end test of the encoder at its default
// configuration: N = 324, kernel ordering {2,2,3,3,3,3}, systematic, P = 4
// pipeline registers in each of the two encoders and a register at the
// boundary between them (latency 2P+2+1 = 11 clock edges from the frame
// being presented to the codeword being visible).
//
// 120 random frames are sent on random cycles with a random frozen set;
// each codeword is compared with the golden model (two-pass encoding,
// tb_ref_pkg) and its arrival cycle with the latency. The test then sends
// frames and pulls rst_n low while they are in flight: no codeword may
// appear afterwards. Each mechanism must be seen at least once: pipelined
// overlap of frames, back-to-back frames, idle gaps, the zeroing step
// actually clearing a bit, and the reset flush.
module tb_mk_polar_encoder;
  import tb_ref_pkg::*;

  localparam int unsigned NK     = 6;
  localparam int unsigned N      = 324;
  localparam int unsigned P      = 4;
  localparam int unsigned LAT    = 2 * P + 2 + 1;
  localparam int unsigned FRAMES = 120;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [N-1:0] u = '0, frozen, x;
  int checks = 0, failures = 0, cyc = 0;
  int n_frames = 0, n_b2b = 0, n_gaps = 0, max_flight = 0, n_zeroed = 0, n_flush = 0;

  mk_polar_encoder dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .u(u), .frozen(frozen),
    .out_valid(out_valid), .x(x));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ker_q_t       ker;
  bits_q_t      frz_q;
  logic [N-1:0] exp_q [$];
  int           tag_q [$];

  function automatic bits_q_t to_q(logic [N-1:0] v);
    bits_q_t q = {};
    for (int unsigned i = 0; i < N; i++) q.push_back(v[i]);
    return q;
  endfunction

  task automatic expect_seen(string what, int got);
    checks++;
    if (got < 1) begin
      failures++;
      $display("FAIL mechanism never seen: %s", what);
    end
  endtask

  // Check the output after each falling edge (outputs settle on rising edges).
  task automatic check_output();
    if (!out_valid) return;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL unexpected out_valid at cycle %0d", cyc);
    end else begin
      logic [N-1:0] e;
      int t;
      e = exp_q.pop_front();
      t = tag_q.pop_front();
      checks += 2;
      if (cyc - t != int'(LAT)) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", cyc - t, LAT);
      end
      if (x !== e) begin
        failures++;
        $display("FAIL codeword of frame sent at cycle %0d", t);
      end
      n_frames++;
    end
  endtask

  task automatic send_random(ref int last_sent);
    bits_q_t uq, vq, xq;
    logic [N-1:0] e;
    for (int unsigned i = 0; i < N; i++) u[i] = 1'($urandom) & ~frozen[i];
    uq = to_q(u);
    vq = encode(ker, uq);
    foreach (vq[i]) if (vq[i] && frz_q[i]) begin n_zeroed++; break; end
    xq = encode_sys(ker, uq, frz_q);
    for (int unsigned i = 0; i < N; i++) e[i] = xq[i];
    exp_q.push_back(e);
    tag_q.push_back(cyc);
    in_valid = 1'b1;
    if (last_sent == cyc - 1) n_b2b++;
    else if (last_sent >= 0) n_gaps++;
    last_sent = cyc;
  endtask

  initial begin
    int sent = 0, last_sent = -1;
    ker = '{2, 2, 3, 3, 3, 3};
    for (int unsigned i = 0; i < N; i++) frozen[i] = 1'($urandom);
    frz_q = to_q(frozen);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Main run: random traffic.
    while (sent < int'(FRAMES) || exp_q.size() != 0) begin
      @(negedge clk);
      cyc++;
      in_valid = 1'b0;
      if (sent < int'(FRAMES) && $urandom_range(99, 0) < 70) begin
        send_random(last_sent);
        sent++;
      end
      if (exp_q.size() > max_flight) max_flight = exp_q.size();
      #1;
      check_output();
    end

    // Reset flush: three frames in flight, then reset.
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      cyc++;
      send_random(last_sent);
    end
    @(negedge clk);
    cyc++;
    in_valid = 1'b0;
    rst_n = 1'b0;
    exp_q.delete();
    tag_q.delete();
    @(negedge clk);
    cyc++;
    rst_n = 1'b1;
    for (int k = 0; k < int'(2 * LAT); k++) begin
      @(negedge clk);
      cyc++;
      checks++;
      if (out_valid) begin
        failures++;
        $display("FAIL codeword after reset");
      end
    end
    n_flush++;

    checks++;
    if (n_frames != int'(FRAMES)) begin
      failures++;
      $display("FAIL %0d codewords for %0d frames", n_frames, FRAMES);
    end
    expect_seen("frames overlapping in the pipeline", max_flight - 1);
    expect_seen("back-to-back frames", n_b2b);
    expect_seen("idle gaps between frames", n_gaps);
    expect_seen("zeroing clears a frozen bit", n_zeroed);
    expect_seen("reset flush", n_flush);
    $display("frames=%0d back_to_back=%0d gaps=%0d max_in_flight=%0d zeroed=%0d flush=%0d",
             n_frames, n_b2b, n_gaps, max_flight, n_zeroed, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
