// tb_hikonv_workloads -- the data formats and multiplier sizes evaluated
// for HiKonv, run through the RTL engines with their parameters set to
// each configuration (slice sizes from the guard-bit rules):
//
//  single-DSP convolver, 27 x 18 multiplier, signed data
//    P4Q4: 3 weights x 2 features, S = 9   (8 ops per multiplication)
//    P6Q6: 2 weights x 1 feature,  S = 12  (2 ops)
//    P2Q2: 5 weights x 3 features, S = 6   (23 ops)
//    P1Q1: 9 x 4 binary (0/1) values, S = 3, unsigned (60 ops)
//  single convolver, 32 x 32 multiplier: 4-bit signed, 3 x 3, S = 10 (13 ops)
//  the F_{3,2} numeric example: weights w[2..0] = 11, 9, 7 and features
//    f[1..0] = 3, 2 give y[3..0] = 33, 49, 39, 14 on a 32 x 32 multiplier with 10-bit slices, packed operands 11543559 and
//    3074, product 35484900366
//  1-D convolution on a 32 x 32 multiplier, p = q = 1, 2, 4, 6, 8 bits
//  binary DNN-layer unit on 27 x 18 with M = 2, 4, 8, 16 lanes summed
//    (7x4, 4x4, 5x3 and 4x3 values per multiplication, S = 4, 5, 6, 7):
//    more lanes need more guard bits, so fewer values fit per multiplier
//
// Each configuration is driven by a checker that compares every output
// with a direct convolution; the testbench sums their counts.
module tb_hikonv_workloads;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCHK = 15;
  int   c [NCHK];
  int   f [NCHK];
  logic d [NCHK];

  // single-DSP convolver, Table 1 data widths and the binary case
  hikonv_conv_check #(.KW(3), .NF(2), .WB(4), .FB(4), .SIGNED(1), .S(9))  u_p4q4 (clk, rst_n, c[0], f[0], d[0]);
  hikonv_conv_check #(.KW(2), .NF(1), .WB(6), .FB(6), .SIGNED(1), .S(12)) u_p6q6 (clk, rst_n, c[1], f[1], d[1]);
  hikonv_conv_check #(.KW(5), .NF(3), .WB(2), .FB(2), .SIGNED(1), .S(6))  u_p2q2 (clk, rst_n, c[2], f[2], d[2]);
  hikonv_conv_check #(.KW(9), .NF(4), .WB(1), .FB(1), .SIGNED(0), .S(3))  u_p1q1 (clk, rst_n, c[3], f[3], d[3]);
  // 32-bit multiplier, 4-bit data
  hikonv_conv_check #(.KW(3), .NF(3), .WB(4), .FB(4), .SIGNED(1), .S(10), .A_W(32), .B_W(32))
    u_cpu4 (clk, rst_n, c[4], f[4], d[4]);
  // 1-D convolution on a 32 x 32 multiplier
  hikonv_conv1d_check #(.KW(8), .NF(8), .WB(1), .FB(1), .SIGNED(0), .S(4),  .A_W(32), .B_W(32), .LEN(32))
    u_1d_p1 (clk, rst_n, c[5], f[5], d[5]);
  hikonv_conv1d_check #(.KW(5), .NF(5), .WB(2), .FB(2), .SIGNED(1), .S(7),  .A_W(32), .B_W(32), .LEN(30))
    u_1d_p2 (clk, rst_n, c[6], f[6], d[6]);
  hikonv_conv1d_check #(.KW(3), .NF(3), .WB(4), .FB(4), .SIGNED(1), .S(10), .A_W(32), .B_W(32), .LEN(30))
    u_1d_p4 (clk, rst_n, c[7], f[7], d[7]);
  hikonv_conv1d_check #(.KW(3), .NF(3), .WB(4), .FB(4), .SIGNED(0), .S(10), .A_W(32), .B_W(32), .LEN(30))
    u_1d_p4u (clk, rst_n, c[8], f[8], d[8]);
  hikonv_conv1d_check #(.KW(2), .NF(2), .WB(6), .FB(6), .SIGNED(1), .S(13), .A_W(32), .B_W(32), .LEN(30))
    u_1d_p6 (clk, rst_n, c[9], f[9], d[9]);
  hikonv_conv1d_check #(.KW(2), .NF(2), .WB(8), .FB(8), .SIGNED(1), .S(17), .A_W(32), .B_W(32), .LEN(30))
    u_1d_p8 (clk, rst_n, c[10], f[10], d[10]);

  // binary DNN-layer unit (vertical stacking of M lanes), unsigned 0/1 data,
  // S = 1 + ceil(log2(M * min(KW, NF)))
  hikonv_conv2d_check #(.M(2),  .KW(7), .NF(4), .WB(1), .FB(1), .SIGNED(0), .S(4), .LEN(32))
    u_bnn_m2 (clk, rst_n, c[11], f[11], d[11]);
  hikonv_conv2d_check #(.M(4),  .KW(4), .NF(4), .WB(1), .FB(1), .SIGNED(0), .S(5), .LEN(32))
    u_bnn_m4 (clk, rst_n, c[12], f[12], d[12]);
  hikonv_conv2d_check #(.M(8),  .KW(5), .NF(3), .WB(1), .FB(1), .SIGNED(0), .S(6), .LEN(30))
    u_bnn_m8 (clk, rst_n, c[13], f[13], d[13]);
  hikonv_conv2d_check #(.M(16), .KW(4), .NF(3), .WB(1), .FB(1), .SIGNED(0), .S(7), .LEN(30))
    u_bnn_m16 (clk, rst_n, c[14], f[14], d[14]);

  // The numeric example, on its own instance.
  logic              ex_valid, ex_y_valid;
  logic [11:0]       ex_w;
  logic [7:0]        ex_f;
  logic signed [10:0] ex_y [4];

  hikonv_convolver #(.KW(3), .NF(2), .WB(4), .FB(4), .SIGNED(1'b0), .S(10), .A_W(32), .B_W(32)) u_ex (
    .clk(clk), .rst_n(rst_n), .in_valid(ex_valid), .w_seq(ex_w), .f_seq(ex_f),
    .y_valid(ex_y_valid), .y(ex_y)
  );

  function automatic bit all_done();
    for (int i = 0; i < NCHK; i++) if (!d[i]) return 0;
    return 1;
  endfunction

  initial begin
    int exp_y [4];
    exp_y = '{14, 39, 49, 33};
    ex_valid = 0; ex_w = '0; ex_f = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    ex_valid = 1; ex_w = {4'd11, 4'd9, 4'd7}; ex_f = {4'd3, 4'd2};
    @(negedge clk);
    ex_valid = 0;
    @(negedge clk);
    checks += 2;
    if (u_ex.u_front.a_q != 32'sd11543559) begin failures++; $display("FAIL example A %0d", u_ex.u_front.a_q); end
    if (u_ex.u_front.b_q != 32'sd3074)     begin failures++; $display("FAIL example B %0d", u_ex.u_front.b_q); end
    @(negedge clk);
    checks++;
    if (u_ex.prod != 64'sd35484900366) begin failures++; $display("FAIL example product %0d", u_ex.prod); end
    wait (ex_y_valid);
    @(negedge clk);
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (int'(ex_y[m]) != exp_y[m]) begin failures++; $display("FAIL example y[%0d]=%0d", m, ex_y[m]); end
    end
    while (!all_done()) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int i = 0; i < NCHK; i++) begin
      checks += c[i];
      failures += f[i];
      $display("configuration %0d: %0d checks, %0d failures", i, c[i], f[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    for (int i = 0; i < NCHK; i++) $display("configuration %0d done=%0b", i, d[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
