// hikonv_conv2d_check -- testbench helper: drives one hikonv_conv2d of a
// given configuration with NROW random rows. A row gives each of the M
// lanes its own KW-tap kernel and LEN features (LEN a multiple of NF),
// followed by enough zero chunks to drain, and every output is compared
// with the lane-summed direct convolution
//   y[n] = sum_lanes sum_k w_lane[k] f_lane[n-k].
// The first row uses the extreme value in every element, the worst case
// for the guard bits. Raises done when all outputs have been compared.
module hikonv_conv2d_check #(
  parameter int unsigned M      = 4,
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = 11,
  parameter int unsigned A_W    = 27,
  parameter int unsigned B_W    = 18,
  parameter int          LEN    = 24,
  parameter int          NROW   = 30
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int DRAIN  = (KW - 1 + NF - 1) / NF;
  localparam int CHUNKS = LEN / NF + DRAIN;

  logic                    in_valid, in_first, y_valid, y_first;
  logic [M-1:0][KW*WB-1:0] w_seq;
  logic [M-1:0][NF*FB-1:0] f_seq;
  logic signed [S:0]       y [NF];

  hikonv_conv2d #(
    .M(M), .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S), .A_W(A_W), .B_W(B_W)
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
  longint f [M][CHUNKS*NF];
  longint w [M][KW];

  initial begin
    checks = 0; failures = 0; done = 0;
    in_valid = 0; in_first = 0; w_seq = '0; f_seq = '0;
    @(posedge rst_n);
    for (int r = 0; r < NROW; r++) begin
      for (int l = 0; l < M; l++) begin
        for (int k = 0; k < KW; k++) w[l][k] = rnd(WB, r == 0);
        for (int n = 0; n < CHUNKS * NF; n++) f[l][n] = (n < LEN) ? rnd(FB, r == 0) : 0;
      end
      for (int n = 0; n < CHUNKS * NF; n++) begin
        longint acc;
        acc = 0;
        for (int l = 0; l < M; l++)
          for (int k = 0; k < KW; k++) if (n - k >= 0) acc += w[l][k] * f[l][n-k];
        exp_q.push_back(acc);
      end
      for (int x = 0; x < CHUNKS; x++) begin
        @(negedge clk);
        in_valid = 1;
        in_first = (x == 0);
        for (int l = 0; l < M; l++) begin
          for (int k = 0; k < KW; k++) w_seq[l][k*WB +: WB] = WB'(w[l][k]);
          for (int j = 0; j < NF; j++) f_seq[l][j*FB +: FB] = FB'(f[l][x*NF + j]);
        end
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
          $display("FAIL conv2d M=%0d KW=%0d NF=%0d WB=%0d SIGNED=%0d y=%0d exp %0d",
                   M, KW, NF, WB, SIGNED, y[j], e);
        end
      end
      if (exp_q.size() == 0) done = 1;
    end
  end
endmodule
