// hikonv_convolver -- single-DSP HiKonv convolver (the paper's Fig. 9).
//
// One multiplication computes a whole F_{N,K} partial convolution: a KW-
// element weight sequence w and an NF-element feature sequence f give the
// NF+KW-1 outputs y[m] = sum_{n+k=m} w[n] f[k]. The front end packs both
// sequences into the DSP operands; the product register doubles as the
// intermediate output register; the split incrementers recover each y[m];
// the output registers hold them.
//
// Default sizing, from the paper's throughput search for a 27 x 18
// multiplier and 4-bit data: KW = 3, NF = 2, guard bits ceil(log2(min(3,2)))
// = 1, S = 4 + 4 + 1 = 9, i.e. 6 multiplications and 2 additions per clock.
//
// Timing: fully pipelined, one input per clock. y_valid rises 4 clocks
// after in_valid (input, multiplicand, product and output registers). The
// paper reports 2 cycles for its HLS build; this RTL keeps every register
// stage the figure prints.
module hikonv_convolver #(
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_single(KW, NF)),
  parameter int unsigned A_W    = hikonv_pkg::DSP_A_W,
  parameter int unsigned B_W    = hikonv_pkg::DSP_B_W,
  parameter int unsigned NSEG   = NF + KW - 1,
  parameter int unsigned YW     = S + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [KW*WB-1:0]     w_seq,
  input  logic [NF*FB-1:0]     f_seq,
  output logic                 y_valid,
  output logic signed [YW-1:0] y [NSEG]
);

  initial begin
    assert (WB + (KW - 1) * S < A_W) else $error("KW slices do not fit port A");
    assert (FB + (NF - 1) * S < B_W) else $error("NF slices do not fit port B");
  end

  logic                       prod_valid;
  logic [0:0]                 prod_tag;  // unused: no tag in single mode
  logic signed [A_W+B_W-1:0]  prod;
  logic signed [YW-1:0]       y_split [NSEG];

  hikonv_front #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .S(S), .A_W(A_W), .B_W(B_W),
    .SIGNED(SIGNED), .TAG_W(1)
  ) u_front (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(1'b0),
    .w_seq(w_seq), .f_seq(f_seq),
    .prod_valid(prod_valid), .prod_tag(prod_tag), .prod(prod)
  );

  hikonv_splitter #(
    .NSEG(NSEG), .S(S), .IN_W(A_W + B_W), .SIGNED(SIGNED), .OUT_W(YW)
  ) u_split (
    .prod(prod), .y(y_split)
  );

  // Output registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= prod_valid;
  end

  always_ff @(posedge clk) begin
    if (prod_valid) y <= y_split;
  end

endmodule
