// hikonv_conv1d -- arbitrary-length 1-D convolution on one DSP (the
// paper's Fig. 10 behind the Fig. 9 front end).
//
// The feature sequence is fed NF elements per clock (chunk x holds
// f[x*NF .. x*NF+NF-1]) together with the same KW-element kernel w. Each
// chunk's product is a short partial convolution; the shift-add register
// lines consecutive products up (Theorem 2 of the paper:
// y[n] = sum_x y_x[n - x*NF]), and after chunk x the outputs
//   y[x*NF + j] = sum_k w[k] f[x*NF + j - k],   j = 0 .. NF-1
// are complete and leave through the split incrementers and output
// registers. Assert in_first with the first chunk of a sequence. To drain
// the last KW-1 outputs, feed ceil((KW-1)/NF) chunks of zeros.
//
// Guard bits are ceil(log2(KW)) as the paper gives for 1-D convolution,
// so the default slice is S = 4 + 4 + 2 = 10.
//
// Timing: one chunk per clock; y_valid 5 clocks after in_valid (input,
// multiplicand, product, shift-add and output registers). y_first marks
// the outputs of a first chunk.
module hikonv_conv1d #(
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_conv1d(KW)),
  parameter int unsigned A_W    = hikonv_pkg::DSP_A_W,
  parameter int unsigned B_W    = hikonv_pkg::DSP_B_W,
  parameter int unsigned YW     = S + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic [KW*WB-1:0]     w_seq,
  input  logic [NF*FB-1:0]     f_seq,
  output logic                 y_valid,
  output logic                 y_first,
  output logic signed [YW-1:0] y [NF]
);

  localparam int unsigned P_W   = A_W + B_W;
  localparam int unsigned ACC_W = P_W + 1;

  initial begin
    assert (WB + (KW - 1) * S < A_W) else $error("KW slices do not fit port A");
    assert (FB + (NF - 1) * S < B_W) else $error("NF slices do not fit port B");
  end

  logic                    prod_valid;
  logic [0:0]              prod_first;
  logic signed [P_W-1:0]   prod;
  logic                    acc_valid;
  logic [0:0]              acc_first;
  logic signed [ACC_W-1:0] acc;
  logic signed [YW-1:0]    y_split [NF];

  hikonv_front #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .S(S), .A_W(A_W), .B_W(B_W),
    .SIGNED(SIGNED), .TAG_W(1)
  ) u_front (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_first),
    .w_seq(w_seq), .f_seq(f_seq),
    .prod_valid(prod_valid), .prod_tag(prod_first), .prod(prod)
  );

  hikonv_shift_add #(
    .IN_W(P_W), .ACC_W(ACC_W), .SHIFT(NF * S), .SIGNED(SIGNED), .TAG_W(1)
  ) u_shift_add (
    .clk(clk), .rst_n(rst_n), .in_valid(prod_valid), .in_first(prod_first[0]),
    .in_tag(prod_first), .prod(prod),
    .acc_valid(acc_valid), .acc_tag(acc_first), .acc(acc)
  );

  hikonv_splitter #(
    .NSEG(NF), .S(S), .IN_W(ACC_W), .SIGNED(SIGNED), .OUT_W(YW)
  ) u_split (
    .prod(acc), .y(y_split)
  );

  // Output registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= acc_valid;
  end

  always_ff @(posedge clk) begin
    if (acc_valid) begin
      y       <= y_split;
      y_first <= acc_first[0];
    end
  end

endmodule
