// hikonv_conv_check -- testbench helper: drives one hikonv_convolver of a
// given configuration with NUM random inputs (one per clock) and compares
// every output with the direct partial convolution
// y[m] = sum_{n+k=m} w[n] f[k]. Counts its checks and failures and raises
// done when the last output has been compared. The first input is the
// most negative (signed) or largest (unsigned) value in every element.
module hikonv_conv_check #(
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned S      = 9,
  parameter int unsigned A_W    = 27,
  parameter int unsigned B_W    = 18,
  parameter int          NUM    = 500
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int NSEG = NF + KW - 1;

  logic                in_valid, y_valid;
  logic [KW*WB-1:0]    w_seq;
  logic [NF*FB-1:0]    f_seq;
  logic signed [S:0]   y [NSEG];

  hikonv_convolver #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S), .A_W(A_W), .B_W(B_W)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .w_seq(w_seq), .f_seq(f_seq),
    .y_valid(y_valid), .y(y)
  );

  function automatic longint elem(input logic [63:0] v, input int bits);
    logic [63:0] m;
    m = v & ((64'd1 << bits) - 1);
    if (SIGNED && m[bits-1]) return longint'(m) - (longint'(1) << bits);
    return longint'(m);
  endfunction

  typedef struct { longint y [NSEG]; } exp_t;
  exp_t q [$];
  int sent, got;

  initial begin
    checks = 0; failures = 0; done = 0; sent = 0; got = 0;
    in_valid = 0; w_seq = '0; f_seq = '0;
    @(posedge rst_n);
    while (sent < NUM) begin
      exp_t e;
      @(negedge clk);
      in_valid = 1;
      for (int n = 0; n < KW; n++)
        w_seq[n*WB +: WB] = (sent == 0) ? (SIGNED ? WB'(1 << (WB-1)) : '1) : WB'($urandom);
      for (int k = 0; k < NF; k++)
        f_seq[k*FB +: FB] = (sent == 0) ? (SIGNED ? FB'(1 << (FB-1)) : '1) : FB'($urandom);
      for (int m = 0; m < NSEG; m++) e.y[m] = 0;
      for (int n = 0; n < KW; n++)
        for (int k = 0; k < NF; k++)
          e.y[n+k] += elem(64'(w_seq[n*WB +: WB]), WB) * elem(64'(f_seq[k*FB +: FB]), FB);
      q.push_back(e);
      sent++;
    end
    @(negedge clk) in_valid = 0;
  end

  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      exp_t e;
      e = q.pop_front();
      for (int m = 0; m < NSEG; m++) begin
        checks++;
        if (longint'(y[m]) != e.y[m]) begin
          failures++;
          $display("FAIL convolver KW=%0d NF=%0d WB=%0d SIGNED=%0d y[%0d]=%0d exp %0d",
                   KW, NF, WB, SIGNED, m, y[m], e.y[m]);
        end
      end
      got++;
      if (got == NUM) done = 1;
    end
  end
endmodule
