// tb_hikonv_conv1d -- self-checking test of the 1-D convolution unit.
//
// Convolves random signed 4-bit feature sequences (lengths 2 to 40, plus
// an all -8 sequence against an all -8 kernel) with random 3-tap kernels.
// Each sequence is fed 2 features per clock with in_first on its first
// chunk, followed by one zero chunk to drain it; sequences follow each
// other back to back or with gaps. Every output must equal the direct
// convolution y[n] = sum_k w[k] f[n-k] worked out here, and must leave 5
// clocks after its chunk.
module tb_hikonv_conv1d;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n, in_valid, in_first, y_valid, y_first;
  logic [11:0]        w_seq;
  logic [7:0]         f_seq;
  logic signed [10:0] y [2];

  hikonv_conv1d dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .w_seq(w_seq), .f_seq(f_seq), .y_valid(y_valid), .y_first(y_first), .y(y)
  );

  int exp_q [$];      // expected outputs, in order
  bit first_q [$];    // expected y_first per output pair
  int cyc_q [$];      // input cycle per output pair
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int f [48];
  int w [3];
  int nseq = 0;

  task automatic run_seq(input int len, input bit extreme);
    int x_chunks, idx;
    for (int k = 0; k < 3; k++) w[k] = extreme ? -8 : int'($urandom_range(15)) - 8;
    for (int n = 0; n < 48; n++) f[n] = 0;
    for (int n = 0; n < len; n++) f[n] = extreme ? -8 : int'($urandom_range(15)) - 8;
    x_chunks = (len + 1) / 2 + 1;  // data chunks plus one zero chunk to drain
    for (int n = 0; n < 2 * x_chunks; n++) begin
      int acc;
      acc = 0;
      for (int k = 0; k < 3; k++) if (n - k >= 0) acc += w[k] * f[n-k];
      exp_q.push_back(acc);
    end
    for (int x = 0; x < x_chunks; x++) begin
      @(negedge clk);
      if (!extreme && $urandom_range(4) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_first = (x == 0);
      w_seq = {4'(w[2]), 4'(w[1]), 4'(w[0])};
      idx = 2 * x;
      f_seq = {4'(f[idx+1]), 4'(f[idx])};
      first_q.push_back(x == 0);
      cyc_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
    nseq++;
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; w_seq = 0; f_seq = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_seq(16, 1'b1);
    for (int i = 0; i < 200; i++) run_seq(2 + 2 * int'($urandom_range(19)), 1'b0);
    repeat (12) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      int e0, e1, c;
      bit fe;
      e0 = exp_q.pop_front(); e1 = exp_q.pop_front();
      fe = first_q.pop_front(); c = cyc_q.pop_front();
      checks += 4;
      if (int'(y[0]) != e0) begin failures++; $display("FAIL y0 %0d exp %0d", y[0], e0); end
      if (int'(y[1]) != e1) begin failures++; $display("FAIL y1 %0d exp %0d", y[1], e1); end
      if (y_first != fe) begin failures++; $display("FAIL first"); end
      if (cycle - c != 5) begin failures++; $display("FAIL latency %0d", cycle - c); end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
