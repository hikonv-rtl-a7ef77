// hikonv_splitter -- the "split incrementers" of the HiKonv convolver.
//
// Takes a product (or an accumulated product) that holds NSEG results
// y[m] in S-bit segments, segment m at bit S*m, and recovers each y[m].
// With two's complement results every segment carries the sign extension
// of the segments below it, which adds -1 whenever the value below is
// negative. The correction, from the paper's output-split equation, is
//   y[0] = P[S-1:0]
//   y[m] = P[S(m+1)-1:Sm] + P[Sm-1]      (m > 0)
// i.e. a 1-bit incrementer fed by the MSB of the segment below. Unsigned
// results are the segments as they are. Outputs are OUT_W-bit signed
// values (S+1 bits by default, so an unsigned S-bit result also fits).
//
// Interface: prod in, y out, purely combinational.
module hikonv_splitter #(
  parameter int unsigned NSEG   = 4,
  parameter int unsigned S      = 9,
  parameter int unsigned IN_W   = 45,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned OUT_W  = S + 1
) (
  input  logic signed [IN_W-1:0]  prod,
  output logic signed [OUT_W-1:0] y [NSEG]
);

  initial begin
    assert (NSEG * S <= IN_W) else $error("segments exceed the product width");
    assert (OUT_W > S) else $error("output narrower than a segment plus sign");
  end

  for (genvar m = 0; m < NSEG; m++) begin : g_seg
    logic [S-1:0]         field;
    logic signed [OUT_W-1:0] ext;
    logic                 carry;

    assign field = prod[m*S +: S];
    assign ext   = SIGNED ? OUT_W'($signed(field)) : OUT_W'($unsigned(field));

    if (m == 0) begin : g_lsb
      assign carry = 1'b0;
    end else begin : g_inc
      assign carry = SIGNED ? prod[m*S-1] : 1'b0;
    end

    assign y[m] = ext + {{(OUT_W-1){1'b0}}, carry};
  end

endmodule
