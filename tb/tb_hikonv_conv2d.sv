// tb_hikonv_conv2d -- self-checking test of the DNN-layer convolution unit.
//
// Default configuration: M = 4 lanes, 3-tap kernels, 2 features per chunk,
// 4-bit signed data, S = 11. Each lane gets its own random feature row and
// kernel; the unit must produce y[n] = sum_lanes sum_k w_l[k] f_l[n-k]
// for every n, 6 clocks after the chunk. The first row is all -8 in every
// lane, the largest sum the guard bits must hold (4 * 3 * 64 = 768).
module tb_hikonv_conv2d;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int M = 4;
  logic                   rst_n, in_valid, in_first, y_valid, y_first;
  logic [M-1:0][11:0]     w_seq;
  logic [M-1:0][7:0]      f_seq;
  logic signed [11:0]     y [2];

  hikonv_conv2d dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .w_seq(w_seq), .f_seq(f_seq), .y_valid(y_valid), .y_first(y_first), .y(y)
  );

  int exp_q [$];
  bit first_q [$];
  int cyc_q [$];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int f [M][48];
  int w [M][3];

  task automatic run_row(input int len, input bit extreme);
    int x_chunks;
    for (int l = 0; l < M; l++) begin
      for (int k = 0; k < 3; k++) w[l][k] = extreme ? -8 : int'($urandom_range(15)) - 8;
      for (int n = 0; n < 48; n++) f[l][n] = 0;
      for (int n = 0; n < len; n++) f[l][n] = extreme ? -8 : int'($urandom_range(15)) - 8;
    end
    x_chunks = (len + 1) / 2 + 1;
    for (int n = 0; n < 2 * x_chunks; n++) begin
      int acc;
      acc = 0;
      for (int l = 0; l < M; l++)
        for (int k = 0; k < 3; k++) if (n - k >= 0) acc += w[l][k] * f[l][n-k];
      exp_q.push_back(acc);
    end
    for (int x = 0; x < x_chunks; x++) begin
      @(negedge clk);
      if (!extreme && $urandom_range(5) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_first = (x == 0);
      for (int l = 0; l < M; l++) begin
        w_seq[l] = {4'(w[l][2]), 4'(w[l][1]), 4'(w[l][0])};
        f_seq[l] = {4'(f[l][2*x+1]), 4'(f[l][2*x])};
      end
      first_q.push_back(x == 0);
      cyc_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; w_seq = '0; f_seq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_row(20, 1'b1);
    for (int i = 0; i < 150; i++) run_row(2 + 2 * int'($urandom_range(19)), 1'b0);
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
      if (cycle - c != 6) begin failures++; $display("FAIL latency %0d", cycle - c); end
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
