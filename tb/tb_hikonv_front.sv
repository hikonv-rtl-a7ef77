// tb_hikonv_front -- self-checking test of the convolver front end.
//
// Streams random signed 4-bit weight (3) and feature (2) sequences, one per
// clock with random gaps, and checks that the product leaving 3 clocks
// later equals (sum_n w[n] 2^(9n)) * (sum_k f[k] 2^(9k)) computed here with
// 64-bit integers, and that the tag travels with it.
module tb_hikonv_front;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n, in_valid, prod_valid;
  logic [0:0]         in_tag, prod_tag;
  logic [11:0]        w_seq;
  logic [7:0]         f_seq;
  logic signed [44:0] prod;

  hikonv_front #(.KW(3), .NF(2), .WB(4), .FB(4), .S(9), .SIGNED(1'b1), .TAG_W(1)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_tag),
    .w_seq(w_seq), .f_seq(f_seq),
    .prod_valid(prod_valid), .prod_tag(prod_tag), .prod(prod)
  );

  function automatic longint val(input logic [11:0] s, input int cnt);
    longint acc = 0;
    for (int n = 0; n < cnt; n++)
      acc += longint'($signed(s[n*4 +: 4])) * (longint'(1) << (9 * n));
    return acc;
  endfunction

  longint exp_q [$];
  bit     tag_q [$];
  int     sent_cycle [$];
  int     cycle = 0;
  int     sent = 0;
  localparam int NUM = 2000;

  always @(posedge clk) cycle <= cycle + 1;

  // driver
  initial begin
    rst_n = 0; in_valid = 0; in_tag = 0; w_seq = 0; f_seq = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < NUM) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (in_valid) begin
        w_seq  = (sent < 4) ? 12'h888 : 12'($urandom);
        f_seq  = (sent < 2) ? 8'h88 : 8'($urandom);
        in_tag = 1'($urandom);
        exp_q.push_back(val(w_seq, 3) * val({4'b0, f_seq}, 2));
        tag_q.push_back(in_tag[0]);
        sent_cycle.push_back(cycle);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
  end

  // monitor
  int got = 0;
  always @(posedge clk) begin
    if (rst_n && prod_valid) begin
      longint e;
      bit     t;
      int     c;
      e = exp_q.pop_front();
      t = tag_q.pop_front();
      c = sent_cycle.pop_front();
      checks += 3;
      if (longint'(prod) != e) begin failures++; $display("FAIL prod %0d exp %0d", prod, e); end
      if (prod_tag[0] != t) begin failures++; $display("FAIL tag"); end
      if (cycle - c != 3) begin failures++; $display("FAIL latency %0d", cycle - c); end
      got++;
      if (got == NUM) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
