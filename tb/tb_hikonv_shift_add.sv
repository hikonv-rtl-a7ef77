// tb_hikonv_shift_add -- self-checking test of the shift-add register.
//
// Feeds products built as sum_m p[m] * 2^(S*m) from random signed segment
// values p[m] (S = 10, 4 segments, shift NF*S = 20 bits). A reference
// keeps the running segments r[m] = p[m] + r_prev[m + 2] (restarting on
// in_first) and the register must hold exactly sum_m r[m] * 2^(S*m).
// Negative low segments make the arithmetic shift round down, which the
// register must correct.
module tb_hikonv_shift_add;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int S = 10;
  logic               rst_n, in_valid, in_first, acc_valid;
  logic [0:0]         in_tag, acc_tag;
  logic signed [44:0] prod;
  logic signed [45:0] acc;

  hikonv_shift_add #(.IN_W(45), .ACC_W(46), .SHIFT(2 * S), .SIGNED(1'b1), .TAG_W(1)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first), .in_tag(in_tag),
    .prod(prod), .acc_valid(acc_valid), .acc_tag(acc_tag), .acc(acc)
  );

  int     r [6];
  int     p [4];
  longint expv;
  int     neg_low = 0;

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; in_tag = 0; prod = 0;
    for (int m = 0; m < 6; m++) r[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      longint pv;
      @(negedge clk);
      in_valid = 1;
      in_first = (t % 50 == 0);
      in_tag   = in_first;
      pv = 0;
      for (int m = 0; m < 4; m++) begin
        // keep |segment sums| below 2^(S-1): inputs within +/-255
        p[m] = int'($urandom_range(510)) - 255;
        if (m == 3) p[m] = 0;  // top segment only holds carried sums
        pv += longint'(p[m]) * (longint'(1) << (S * m));
      end
      prod = 45'(pv);
      // reference segments
      if (in_first) for (int m = 0; m < 4; m++) r[m] = p[m];
      else begin
        int nr [4];
        for (int m = 0; m < 4; m++) nr[m] = p[m] + ((m + 2 < 4) ? r[m+2] : 0);
        for (int m = 0; m < 4; m++) r[m] = nr[m];
      end
      expv = 0;
      for (int m = 0; m < 4; m++) expv += longint'(r[m]) * (longint'(1) << (S * m));
      if (r[0] + r[1] * 1024 < 0) neg_low++;
      @(posedge clk); #1;
      checks += 3;
      if (!acc_valid) begin failures++; $display("FAIL valid"); end
      if (longint'(acc) != expv) begin failures++; $display("FAIL t=%0d acc %0d exp %0d", t, acc, expv); end
      if (acc_tag[0] != in_first) begin failures++; $display("FAIL tag"); end
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk); #1;
    checks += 2;
    if (acc_valid) begin failures++; $display("FAIL valid stays"); end
    if (neg_low < 100) begin failures++; $display("FAIL too few negative low parts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
