// tb_hikonv_dsp_mult -- self-checking test of the 27 x 18 DSP multiplier.
//
// Random and extreme signed operands; the product must appear one clock
// later and hold while ce is low.
module tb_hikonv_dsp_mult;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic               ce;
  logic signed [26:0] a;
  logic signed [17:0] b;
  logic signed [44:0] p;

  hikonv_dsp_mult #(.A_W(27), .B_W(18)) dut (.clk(clk), .ce(ce), .a(a), .b(b), .p(p));

  longint expv;

  task automatic apply(input logic signed [26:0] av, input logic signed [17:0] bv);
    @(negedge clk); a = av; b = bv; ce = 1'b1;
    @(negedge clk); ce = 1'b0;
    checks++;
    expv = longint'(av) * longint'(bv);
    if (longint'(p) != expv) begin
      failures++; $display("FAIL %0d * %0d = %0d, got %0d", av, bv, expv, p);
    end
    // hold while ce is low
    a = ~av; b = ~bv;
    @(negedge clk);
    checks++;
    if (longint'(p) != expv) begin failures++; $display("FAIL hold"); end
  endtask

  initial begin
    ce = 0; a = 0; b = 0;
    apply(27'sh3ffffff, 18'sh1ffff);
    apply(-27'sd67108864, -18'sd131072);
    apply(-27'sd67108864, 18'sh1ffff);
    apply(27'sd1, -18'sd1);
    for (int i = 0; i < 500; i++) apply(27'($urandom), 18'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
