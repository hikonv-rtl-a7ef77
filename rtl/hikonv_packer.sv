// hikonv_packer -- the "packing decrementers" of the HiKonv convolver.
//
// Packs CNT elements of EW bits, given as one compressed sequence (element
// 0 in the low bits, no gaps), into one multiplier operand whose slice n
// starts at bit S*n. For unsigned data each slice is the element with zero
// extension. For signed data the operand must equal the sum of the
// sign-extended elements shifted by S*n, and this is built without an adder
// chain: slice 0 is element 0 sign-extended to S bits, and every higher
// slice is its element minus the MSB of the slice below it, a 1-bit
// decrement. The topmost slice takes all bits up to the port's MSB so the
// operand carries its sign. This is the paper's packing equation and
// Fig. 7; the 1-bit decrement on an EW+1-bit value is this design's reading
// of it.
//
// Interface: seq in, packed_o out, purely combinational.
// Constraint: EW + (CNT-1)*S < OUT_W, so the top slice has room for the
// decremented element (e.g. -8 - 1 for 4-bit data).
module hikonv_packer #(
  parameter int unsigned CNT    = 3,   // elements packed into the operand
  parameter int unsigned EW     = 4,   // element bitwidth
  parameter int unsigned S      = 9,   // slice size in bits
  parameter int unsigned OUT_W  = 27,  // multiplier port width
  parameter bit          SIGNED = 1'b1
) (
  input  logic [CNT*EW-1:0]       seq,
  output logic signed [OUT_W-1:0] packed_o
);

  localparam int unsigned TOP_LSB = (CNT - 1) * S;
  localparam int unsigned TOP_W   = OUT_W - TOP_LSB;

  initial begin
    assert (S >= EW + 1 || !SIGNED) else $error("slice too small for signed packing");
    assert (S >= EW) else $error("slice smaller than element");
    assert (TOP_W >= EW + 1) else $error("operand port too narrow for CNT slices");
  end

  for (genvar n = 0; n < CNT; n++) begin : g_slice
    logic signed [EW:0] ext;  // element extended by one bit
    logic signed [EW:0] val;  // element after the packing decrement
    logic               borrow;

    assign ext = SIGNED ? {seq[n*EW+EW-1], seq[n*EW +: EW]} : {1'b0, seq[n*EW +: EW]};

    if (n == 0) begin : g_first
      assign borrow = 1'b0;
    end else begin : g_next
      // MSB of the slice below: set when the value packed so far is negative.
      assign borrow = SIGNED ? g_slice[n-1].val[EW] : 1'b0;
    end
    assign val = ext - {{EW{1'b0}}, borrow};

    if (n < CNT - 1) begin : g_mid
      assign packed_o[n*S +: S] = S'(val);
    end else begin : g_top
      assign packed_o[OUT_W-1:TOP_LSB] = TOP_W'(val);
    end
  end

endmodule
