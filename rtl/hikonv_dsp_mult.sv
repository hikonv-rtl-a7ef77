// hikonv_dsp_mult -- the DSP multiplier of the HiKonv convolver.
//
// A signed A_W x B_W multiplier with one output register, the shape of the
// DSP48E2 multiplier the paper targets (27 x 18, product after one clock,
// pipeline depth 1). Both packed operands are two's complement, so the
// multiply is signed. The product register has no reset: a valid bit kept
// beside it (in the caller) says when it holds data. ce gates the register.
//
// Timing: p = a * b one clock after a and b are presented with ce high.
module hikonv_dsp_mult #(
  parameter int unsigned A_W = 27,
  parameter int unsigned B_W = 18
) (
  input  logic                        clk,
  input  logic                        ce,
  input  logic signed [A_W-1:0]       a,
  input  logic signed [B_W-1:0]       b,
  output logic signed [A_W+B_W-1:0]   p
);

  always_ff @(posedge clk) begin
    if (ce) p <= a * b;
  end

endmodule
