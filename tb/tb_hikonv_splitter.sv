// tb_hikonv_splitter -- self-checking test of the split incrementers.
//
// Builds a product as sum_m y[m] * 2^(S*m) from random results y[m] that
// fit their S-bit segment (signed: |y| < 2^(S-1); unsigned: y < 2^S) and
// checks that every y[m] comes back. Signed and unsigned instances,
// 4 segments of 9 bits in a 45-bit product.
module tb_hikonv_splitter;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [44:0] ps, pu;
  logic signed [9:0]  ys [4];
  logic signed [9:0]  yu [4];

  hikonv_splitter #(.NSEG(4), .S(9), .IN_W(45), .SIGNED(1'b1)) u_s (.prod(ps), .y(ys));
  hikonv_splitter #(.NSEG(4), .S(9), .IN_W(45), .SIGNED(1'b0)) u_u (.prod(pu), .y(yu));

  int ref_s [4], ref_u [4];
  int neg_seen = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint acc_s, acc_u;
      acc_s = 0; acc_u = 0;
      for (int m = 0; m < 4; m++) begin
        case (t % 4)
          0: ref_s[m] = -255;
          1: ref_s[m] = 255;
          default: ref_s[m] = int'($urandom_range(510)) - 255;
        endcase
        ref_u[m] = int'($urandom_range(511));
        if (ref_s[m] < 0) neg_seen++;
        acc_s += longint'(ref_s[m]) * (longint'(1) << (9 * m));
        acc_u += longint'(ref_u[m]) * (longint'(1) << (9 * m));
      end
      ps = 45'(acc_s); pu = 45'(acc_u);
      #1;
      for (int m = 0; m < 4; m++) begin
        checks += 2;
        if (int'(ys[m]) != ref_s[m]) begin
          failures++; $display("FAIL signed t=%0d m=%0d got %0d exp %0d", t, m, ys[m], ref_s[m]);
        end
        if (int'(yu[m]) != ref_u[m]) begin
          failures++; $display("FAIL unsigned t=%0d m=%0d got %0d exp %0d", t, m, yu[m], ref_u[m]);
        end
      end
    end
    checks++;
    if (neg_seen == 0) begin failures++; $display("FAIL no negative results tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
