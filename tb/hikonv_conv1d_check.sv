// hikonv_conv1d_check -- testbench helper: drives one hikonv_conv1d of a
// given configuration with NSEQ random sequences of LEN features (LEN a
// multiple of NF) and a random KW-tap kernel each, followed by enough zero
// chunks to drain, and compares every output with the direct convolution
// y[n] = sum_k w[k] f[n-k]. The first sequence uses the extreme value in
// every element. Raises done when all outputs have been compared.
module hikonv_conv1d_check #(
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = 10,
  parameter int unsigned A_W    = 27,
  parameter int unsigned B_W    = 18,
  parameter int          LEN    = 24,
  parameter int          NSEQ   = 40
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int DRAIN  = (KW - 1 + NF - 1) / NF;
  localparam int CHUNKS = LEN / NF + DRAIN;

  logic              in_valid, in_first, y_valid, y_first;
  logic [KW*WB-1:0]  w_seq;
  logic [NF*FB-1:0]  f_seq;
  logic signed [S:0] y [NF];

  hikonv_conv1d #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S), .A_W(A_W), .B_W(B_W)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .w_seq(w_seq), .f_seq(f_seq), .y_valid(y_valid), .y_first(y_first), .y(y)
  );

  function automatic longint rnd(input int bits, input bit extreme);
    longint lo, hi;
    lo = SIGNED ? -(longint'(1) << (bits - 1)) : 0;
    hi = SIGNED ? (longint'(1) << (bits - 1)) - 1 : (longint'(1) << bits) - 1;
    if (extreme) return SIGNED ? lo : hi;
    return lo + longint'($urandom_range(32'(hi - lo)));
  endfunction

  longint exp_q [$];
  longint f [CHUNKS*NF];
  longint w [KW];

  initial begin
    checks = 0; failures = 0; done = 0;
    in_valid = 0; in_first = 0; w_seq = '0; f_seq = '0;
    @(posedge rst_n);
    for (int s = 0; s < NSEQ; s++) begin
      for (int k = 0; k < KW; k++) w[k] = rnd(WB, s == 0);
      for (int n = 0; n < CHUNKS * NF; n++) f[n] = (n < LEN) ? rnd(FB, s == 0) : 0;
      for (int n = 0; n < CHUNKS * NF; n++) begin
        longint acc;
        acc = 0;
        for (int k = 0; k < KW; k++) if (n - k >= 0) acc += w[k] * f[n-k];
        exp_q.push_back(acc);
      end
      for (int x = 0; x < CHUNKS; x++) begin
        @(negedge clk);
        in_valid = 1;
        in_first = (x == 0);
        for (int k = 0; k < KW; k++) w_seq[k*WB +: WB] = WB'(w[k]);
        for (int j = 0; j < NF; j++) f_seq[j*FB +: FB] = FB'(f[x*NF + j]);
      end
    end
    @(negedge clk) in_valid = 0;
  end

  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      for (int j = 0; j < NF; j++) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(y[j]) != e) begin
          failures++;
          $display("FAIL conv1d KW=%0d NF=%0d WB=%0d SIGNED=%0d y=%0d exp %0d",
                   KW, NF, WB, SIGNED, y[j], e);
        end
      end
      if (exp_q.size() == 0) done = 1;
    end
  end
endmodule
