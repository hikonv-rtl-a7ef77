// hikonv_front -- input registers, packing decrementers, multiplicand
// registers and DSP multiplier of one HiKonv convolver (the upper half of
// the paper's Fig. 9).
//
// Each accepted input is a compressed weight sequence of KW elements (WB
// bits each) and a feature sequence of NF elements (FB bits each). The
// weights go to the 27-bit port and the features to the 18-bit port, as
// the paper's text states. The product then holds NF+KW-1 partial
// convolutions y[m] = sum_{n+k=m} w[n] f[k] in S-bit segments.
//
// Pipeline (one input per clock, no stalls):
//   edge 1: input registers load w_seq, f_seq          (in_valid)
//   edge 2: multiplicand registers load the packed A, B
//   edge 3: DSP product register loads A*B              (prod_valid)
// The register stages are the ones Fig. 9 prints; a tag (e.g. a "first
// chunk" flag) travels with the data. Valid bits reset to 0 on rst_n low;
// data registers are not reset.
module hikonv_front #(
  parameter int unsigned KW     = 3,     // weight elements in port A
  parameter int unsigned NF     = 2,     // feature elements in port B
  parameter int unsigned WB     = 4,     // weight bitwidth
  parameter int unsigned FB     = 4,     // feature bitwidth
  parameter int unsigned S      = 9,     // slice size
  parameter int unsigned A_W    = hikonv_pkg::DSP_A_W,
  parameter int unsigned B_W    = hikonv_pkg::DSP_B_W,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned TAG_W  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic [KW*WB-1:0]         w_seq,
  input  logic [NF*FB-1:0]         f_seq,
  output logic                     prod_valid,
  output logic [TAG_W-1:0]         prod_tag,
  output logic signed [A_W+B_W-1:0] prod
);

  // Input registers
  logic [KW*WB-1:0] w_q;
  logic [NF*FB-1:0] f_q;
  logic             v_in;
  logic [TAG_W-1:0] tag_in;

  // Multiplicand registers
  logic signed [A_W-1:0] a_pack, a_q;
  logic signed [B_W-1:0] b_pack, b_q;
  logic                  v_mul;
  logic [TAG_W-1:0]      tag_mul;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_in       <= 1'b0;
      v_mul      <= 1'b0;
      prod_valid <= 1'b0;
    end else begin
      v_in       <= in_valid;
      v_mul      <= v_in;
      prod_valid <= v_mul;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      w_q    <= w_seq;
      f_q    <= f_seq;
      tag_in <= in_tag;
    end
    if (v_in) begin
      a_q     <= a_pack;
      b_q     <= b_pack;
      tag_mul <= tag_in;
    end
    if (v_mul) prod_tag <= tag_mul;
  end

  hikonv_packer #(.CNT(KW), .EW(WB), .S(S), .OUT_W(A_W), .SIGNED(SIGNED)) u_pack_w (
    .seq(w_q), .packed_o(a_pack)
  );

  hikonv_packer #(.CNT(NF), .EW(FB), .S(S), .OUT_W(B_W), .SIGNED(SIGNED)) u_pack_f (
    .seq(f_q), .packed_o(b_pack)
  );

  hikonv_dsp_mult #(.A_W(A_W), .B_W(B_W)) u_dsp (
    .clk(clk), .ce(v_mul), .a(a_q), .b(b_q), .p(prod)
  );

endmodule
