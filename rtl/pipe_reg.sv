// pipe_reg -- W-bit frame register with a valid flag.
//
// Serves as input register, output register, stage-boundary register and
// internal pipeline register of the encoders. On a rising clock edge with
// in_valid high the frame d is captured into q; out_valid follows in_valid
// one cycle later. Only the valid flag is reset (active-low rst_n,
// synchronous); the data bits are loaded on demand, so an idle pipeline does
// not toggle them. The published design has N-bit registers at these
// places; the valid flag, enable and reset are this design's choices.
module pipe_reg #(
  parameter int unsigned W = 324
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] d,
  output logic         out_valid,
  output logic [W-1:0] q
);
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) q <= d;
  end
endmodule
