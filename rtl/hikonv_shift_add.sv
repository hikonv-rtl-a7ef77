// hikonv_shift_add -- shift-add register of the HiKonv 1-D convolution
// (the paper's Fig. 10).
//
// A long 1-D convolution is computed chunk by chunk: chunk x of NF features
// gives a product whose segments are the partial convolution y_x, and y_x
// belongs NF outputs (NF*S bits) further left than y_{x-1}. The register
// keeps the running sum: on each new product
//   acc <= prod + (acc >> NF*S)          (in_first clears the history)
// so its low NF segments are then final outputs and the upper segments are
// partial sums waiting for the next chunk. This matches Fig. 3 and Fig. 10.
// For signed data the arithmetic right shift rounds down: when the
// dropped NF*S-bit part is negative it takes 1 from the kept part. Adding
// back the dropped part's MSB (a carry-in, the same sign-carry the split
// incrementers use) keeps acc exactly equal to sum y[m] * 2^(S*m). That
// carry-in is this design's choice of where to apply the correction.
//
// Timing: acc and acc_valid one clock after in_valid; one product per
// clock.
module hikonv_shift_add #(
  parameter int unsigned IN_W   = 45,
  parameter int unsigned ACC_W  = IN_W + 1,
  parameter int unsigned SHIFT  = 20,  // NF * S
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned TAG_W  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic signed [IN_W-1:0]   prod,
  output logic                     acc_valid,
  output logic [TAG_W-1:0]         acc_tag,
  output logic signed [ACC_W-1:0]  acc
);

  initial begin
    assert (ACC_W >= IN_W) else $error("accumulator narrower than the product");
    assert (SHIFT > 0 && SHIFT < ACC_W) else $error("bad shift");
  end

  logic signed [ACC_W-1:0] prod_x;
  logic signed [ACC_W-1:0] shifted;
  logic signed [ACC_W-1:0] carried;
  logic                    sign_low;

  assign prod_x   = ACC_W'(prod);
  assign sign_low = SIGNED ? acc[SHIFT-1] : 1'b0;
  // The shift is kept apart from the unsigned carry term so that it stays
  // an arithmetic shift.
  assign shifted  = acc >>> SHIFT;
  assign carried  = shifted + {{(ACC_W-1){1'b0}}, sign_low};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_valid <= 1'b0;
    else        acc_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc     <= in_first ? prod_x : prod_x + carried;
      acc_tag <= in_tag;
    end
  end

endmodule
