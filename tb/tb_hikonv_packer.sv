// tb_hikonv_packer -- self-checking test of the packing decrementers.
//
// Three instances: signed 3 x 4-bit into the 27-bit port (S = 9), signed
// 2 x 4-bit into the 18-bit port, and unsigned 3 x 4-bit. For random and
// corner-case sequences the packed operand must equal, as a two's
// complement number, sum_n e[n] * 2^(S*n) with e[n] the element taken as
// signed (or unsigned) -- the arithmetic meaning of packing, worked out
// here with 64-bit integers.
module tb_hikonv_packer;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [11:0]        seq_a, seq_u;
  logic [7:0]         seq_b;
  logic signed [26:0] pa, pu;
  logic signed [17:0] pb;

  hikonv_packer #(.CNT(3), .EW(4), .S(9), .OUT_W(27), .SIGNED(1'b1)) u_a (.seq(seq_a), .packed_o(pa));
  hikonv_packer #(.CNT(2), .EW(4), .S(9), .OUT_W(18), .SIGNED(1'b1)) u_b (.seq(seq_b), .packed_o(pb));
  hikonv_packer #(.CNT(3), .EW(4), .S(9), .OUT_W(27), .SIGNED(1'b0)) u_u (.seq(seq_u), .packed_o(pu));

  function automatic longint ref_pack(input logic [31:0] s, input int cnt, input bit sgn);
    longint acc = 0;
    for (int n = 0; n < cnt; n++) begin
      logic [3:0] e = s[n*4 +: 4];
      longint v = sgn ? longint'($signed(e)) : longint'(e);
      acc += v * (longint'(1) << (9 * n));
    end
    return acc;
  endfunction

  task automatic check(input logic [11:0] a, input logic [7:0] b);
    seq_a = a; seq_b = b; seq_u = a;
    #1;
    checks += 3;
    if (longint'(pa) != ref_pack(32'(a), 3, 1)) begin
      failures++; $display("FAIL signed A seq=%h got %0d exp %0d", a, pa, ref_pack(32'(a), 3, 1));
    end
    if (longint'(pb) != ref_pack(32'(b), 2, 1)) begin
      failures++; $display("FAIL signed B seq=%h got %0d exp %0d", b, pb, ref_pack(32'(b), 2, 1));
    end
    if (longint'(pu) != ref_pack(32'(a), 3, 0)) begin
      failures++; $display("FAIL unsigned seq=%h got %0d exp %0d", a, pu, ref_pack(32'(a), 3, 0));
    end
  endtask

  initial begin
    // every 12-bit sequence for port A, paired with walking B values
    for (int i = 0; i < 4096; i++) check(12'(i), 8'(i * 37));
    check(12'h888, 8'h88);  // all -8
    check(12'h777, 8'h77);  // all +7
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
