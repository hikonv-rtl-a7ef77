// hikonv_conv2d -- DNN-layer HiKonv convolution unit (the paper's Fig. 11).
//
// A DNN output row is a sum of 1-D convolutions (Theorem 3 of the paper):
//   O[co][h][w] = sum_{ci} sum_{kh} y_{ci,co,h,kh}[w + K - 1],
// where y_{ci,co,h,kh} convolves input row I[ci][h+kh][*] with the kernel
// row W[co][ci][kh][*] reversed. This unit runs M such 1-D convolutions
// side by side, one per lane (any M of the (ci, kh) pairs), each lane a
// front end plus its own shift-add register. The intermediate adder sums
// the M lanes' registers while the values are still packed, so only one
// set of split incrementers is needed. The guard bits grow to
// ceil(log2(M * min(KW, NF))) so that each S-bit segment holds the M-way
// sum; with the defaults (M = 4, KW = 3, NF = 2, 4-bit data) S = 11.
//
// Each clock every lane takes one chunk of NF features and its KW
// weights; in_first starts a new row. After chunk x the outputs
//   y[x*NF + j] = sum_lanes sum_k w_lane[k] f_lane[x*NF + j - k]
// (j = 0 .. NF-1) leave through the output registers. Feed
// ceil((KW-1)/NF) zero chunks to drain a row. Summing over more (ci, kh)
// pairs than M lanes is left to whatever consumes the outputs.
//
// Timing: one chunk per lane per clock; y_valid 6 clocks after in_valid
// (input, multiplicand, product, shift-add, intermediate output and output
// registers).
module hikonv_conv2d #(
  parameter int unsigned M      = 4,
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_dnn(M, NF, KW)),
  parameter int unsigned A_W    = hikonv_pkg::DSP_A_W,
  parameter int unsigned B_W    = hikonv_pkg::DSP_B_W,
  parameter int unsigned YW     = S + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic [M-1:0][KW*WB-1:0]   w_seq,
  input  logic [M-1:0][NF*FB-1:0]   f_seq,
  output logic                      y_valid,
  output logic                      y_first,
  output logic signed [YW-1:0]      y [NF]
);

  localparam int unsigned P_W   = A_W + B_W;
  localparam int unsigned ACC_W = P_W + 1;
  localparam int unsigned SUM_W = ACC_W + hikonv_pkg::ceil_log2(M);

  initial begin
    assert (WB + (KW - 1) * S < A_W) else $error("KW slices do not fit port A");
    assert (FB + (NF - 1) * S < B_W) else $error("NF slices do not fit port B");
  end

  logic                    prod_valid [M];
  logic [0:0]              prod_first [M];
  logic signed [P_W-1:0]   prod       [M];
  logic                    acc_valid  [M];
  logic [0:0]              acc_first  [M];
  logic signed [ACC_W-1:0] acc        [M];

  for (genvar l = 0; l < M; l++) begin : g_lane
    hikonv_front #(
      .KW(KW), .NF(NF), .WB(WB), .FB(FB), .S(S), .A_W(A_W), .B_W(B_W),
      .SIGNED(SIGNED), .TAG_W(1)
    ) u_front (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_first),
      .w_seq(w_seq[l]), .f_seq(f_seq[l]),
      .prod_valid(prod_valid[l]), .prod_tag(prod_first[l]), .prod(prod[l])
    );

    hikonv_shift_add #(
      .IN_W(P_W), .ACC_W(ACC_W), .SHIFT(NF * S), .SIGNED(SIGNED), .TAG_W(1)
    ) u_shift_add (
      .clk(clk), .rst_n(rst_n), .in_valid(prod_valid[l]), .in_first(prod_first[l][0]),
      .in_tag(prod_first[l]), .prod(prod[l]),
      .acc_valid(acc_valid[l]), .acc_tag(acc_first[l]), .acc(acc[l])
    );
  end

  // Intermediate adder over the M lanes, then the intermediate output
  // registers.
  logic signed [SUM_W-1:0] sum;
  logic signed [SUM_W-1:0] sum_q;
  logic                    sum_valid;
  logic                    sum_first;

  always_comb begin
    sum = '0;
    for (int l = 0; l < M; l++) sum += SUM_W'(acc[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_valid <= 1'b0;
      y_valid   <= 1'b0;
    end else begin
      sum_valid <= acc_valid[0];
      y_valid   <= sum_valid;
    end
  end

  logic signed [YW-1:0] y_split [NF];

  hikonv_splitter #(
    .NSEG(NF), .S(S), .IN_W(SUM_W), .SIGNED(SIGNED), .OUT_W(YW)
  ) u_split (
    .prod(sum_q), .y(y_split)
  );

  always_ff @(posedge clk) begin
    if (acc_valid[0]) begin
      sum_q     <= sum;
      sum_first <= acc_first[0][0];
    end
    if (sum_valid) begin
      y       <= y_split;
      y_first <= sum_first;
    end
  end

endmodule
