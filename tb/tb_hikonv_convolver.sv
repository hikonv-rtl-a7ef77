// tb_hikonv_convolver -- self-checking test of the single-DSP convolver.
//
// Default configuration (KW = 3 weights, NF = 2 features, 4-bit signed,
// S = 9). Random inputs, back to back, plus the corner cases all -8 and
// mixed +7/-8. Each output set must be the direct convolution
// y[m] = sum_{n+k=m} w[n] f[k] (m = 0..3) and must arrive 4 clocks after
// its input, one set per clock. A second instance checks unsigned 4-bit
// data.
module tb_hikonv_convolver;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic              rst_n, in_valid, y_valid, yu_valid;
  logic [11:0]       w_seq;
  logic [7:0]        f_seq;
  logic signed [9:0] y  [4];
  logic signed [9:0] yu [4];

  hikonv_convolver dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .w_seq(w_seq), .f_seq(f_seq),
    .y_valid(y_valid), .y(y)
  );

  hikonv_convolver #(.SIGNED(1'b0)) dut_u (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .w_seq(w_seq), .f_seq(f_seq),
    .y_valid(yu_valid), .y(yu)
  );

  typedef struct { int ys [4]; int yu [4]; int c; } exp_t;
  exp_t q [$];
  int cycle = 0, sent = 0, got = 0, back_to_back = 0;
  localparam int NUM = 3000;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic push(input logic [11:0] w, input logic [7:0] f);
    exp_t e;
    for (int m = 0; m < 4; m++) begin e.ys[m] = 0; e.yu[m] = 0; end
    for (int n = 0; n < 3; n++)
      for (int k = 0; k < 2; k++) begin
        e.ys[n+k] += int'($signed(w[n*4 +: 4])) * int'($signed(f[k*4 +: 4]));
        e.yu[n+k] += int'(w[n*4 +: 4]) * int'(f[k*4 +: 4]);
      end
    e.c = cycle;
    q.push_back(e);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; w_seq = 0; f_seq = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < NUM) begin
      @(negedge clk);
      in_valid = (sent < 1000) ? 1'b1 : ($urandom_range(2) != 0);
      if (in_valid) begin
        case (sent)
          0: begin w_seq = 12'h888; f_seq = 8'h88; end
          1: begin w_seq = 12'h787; f_seq = 8'h87; end
          2: begin w_seq = 12'h777; f_seq = 8'h77; end
          3: begin w_seq = 12'hfff; f_seq = 8'hff; end
          default: begin w_seq = 12'($urandom); f_seq = 8'($urandom); end
        endcase
        push(w_seq, f_seq);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
  end

  int last_out = -10;
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      exp_t e;
      e = q.pop_front();
      for (int m = 0; m < 4; m++) begin
        checks += 2;
        if (int'(y[m]) != e.ys[m]) begin
          failures++; $display("FAIL signed y[%0d]=%0d exp %0d", m, y[m], e.ys[m]);
        end
        if (int'(yu[m]) != e.yu[m]) begin
          failures++; $display("FAIL unsigned y[%0d]=%0d exp %0d", m, yu[m], e.yu[m]);
        end
      end
      checks += 2;
      if (cycle - e.c != 4) begin failures++; $display("FAIL latency %0d", cycle - e.c); end
      if (yu_valid != y_valid) begin failures++; $display("FAIL unsigned valid"); end
      if (cycle - last_out == 1) back_to_back++;
      last_out = cycle;
      got++;
      if (got == NUM) begin
        checks++;
        if (back_to_back < 900) begin failures++; $display("FAIL throughput %0d", back_to_back); end
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
