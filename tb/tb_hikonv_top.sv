// tb_hikonv_top -- end-to-end test of the HiKonv compute unit at its
// default parameters (M = 4 lanes, 3-tap kernels, 2 features per chunk,
// 4-bit signed data).
//
//  1. MODE_SINGLE: random F_{2,3} partial convolutions, back to back.
//  2. MODE_CONV1D: random 1-D convolutions of several lengths.
//  3. MODE_DNN: a complete 3x3 convolution layer, CI input channels,
//     CO output channels, HI x WI input, stride 1, no padding. Following
//     the row decomposition O[co][h][w] = sum_{ci,kh} y[w + 2], where y
//     convolves input row I[ci][h+kh] with kernel row W[co][ci][kh]
//     reversed, the (ci, kh) pairs are handed to the 4 lanes four at a
//     time; the testbench adds the passes together. The result must equal
//     a direct six-loop convolution.
//  4. MODE_SINGLE again, interleaved with MODE_CONV1D, to force mode
//     changes while results are in flight.
// Every output is compared with values worked out here, and its latency
// (4, 5 or 6 clocks for the three modes) is checked. The mechanisms --
// each mode, a mode change, the mode-change hold-off, restart on
// in_first, drain chunks, negative data through the sign correction --
// are counted, and one that never happened is a failure.
module tb_hikonv_top;
  import hikonv_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int M = 4, KW = 3, NF = 2, NSEG = 4;
  localparam int CI = 4, CO = 2, HI = 8, WI = 8, HO = HI - 2, WO = WI - 2;

  logic                   rst_n, in_valid, in_ready, in_first;
  logic [1:0]             mode;
  logic [M-1:0][11:0]     w_seq;
  logic [M-1:0][7:0]      f_seq;
  logic                   out_valid, out_first;
  logic [1:0]             out_mode;
  logic [2:0]             out_count;
  logic signed [11:0]     out_y [NSEG];

  hikonv_top dut (
    .clk(clk), .rst_n(rst_n), .mode(mode), .in_valid(in_valid), .in_ready(in_ready),
    .in_first(in_first), .w_seq(w_seq), .f_seq(f_seq),
    .out_valid(out_valid), .out_mode(out_mode), .out_first(out_first),
    .out_count(out_count), .out_y(out_y)
  );

  // ------------------------------------------------------------------
  // expected results
  // ------------------------------------------------------------------
  typedef struct {
    int mode;
    int cnt;
    int y [NSEG];
    bit first;
    int cyc;
    int tag;     // DNN: index into the layer pass table, else -1
  } exp_t;
  exp_t q [$];

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_single = 0, n_conv1d = 0, n_dnn = 0, n_switch = 0, n_holdoff = 0;
  int n_first = 0, n_drain = 0, n_negative = 0;
  int last_mode = -1;

  // One input; waits for in_ready. Expected result is pushed at acceptance.
  task automatic send(input int md, input bit first, input logic [M-1:0][11:0] w,
                      input logic [M-1:0][7:0] f, input exp_t e);
    @(negedge clk);
    mode = 2'(md); in_valid = 1; in_first = first; w_seq = w; f_seq = f;
    @(posedge clk);
    while (!in_ready) begin
      n_holdoff++;
      @(posedge clk);
    end
    e.cyc = cycle;
    q.push_back(e);
    if (last_mode != -1 && last_mode != md) n_switch++;
    last_mode = md;
    if (first) n_first++;
    for (int l = 0; l < M; l++) for (int i = 0; i < 3; i++) if (w[l][4*i+3]) n_negative++;
    @(negedge clk);
    in_valid = 0;
  endtask

  // ------------------------------------------------------------------
  // 1. single convolver
  // ------------------------------------------------------------------
  task automatic do_single(input int num);
    for (int t = 0; t < num; t++) begin
      logic [M-1:0][11:0] w;
      logic [M-1:0][7:0]  f;
      exp_t e;
      w = '0; f = '0;
      w[0] = (t == 0) ? 12'h888 : 12'($urandom);
      f[0] = (t == 0) ? 8'h88 : 8'($urandom);
      e.mode = MODE_SINGLE; e.cnt = NSEG; e.first = 0; e.tag = -1;
      for (int m = 0; m < NSEG; m++) e.y[m] = 0;
      for (int n = 0; n < KW; n++)
        for (int k = 0; k < NF; k++)
          e.y[n+k] += int'($signed(w[0][4*n +: 4])) * int'($signed(f[0][4*k +: 4]));
      send(MODE_SINGLE, 1'b0, w, f, e);
    end
  endtask

  // ------------------------------------------------------------------
  // 2. 1-D convolution
  // ------------------------------------------------------------------
  task automatic do_conv1d(input int len);
    int f [64];
    int w [3];
    int chunks;
    for (int k = 0; k < 3; k++) w[k] = int'($urandom_range(15)) - 8;
    for (int n = 0; n < 64; n++) f[n] = 0;
    for (int n = 0; n < len; n++) f[n] = int'($urandom_range(15)) - 8;
    chunks = (len + 1) / 2 + 1;
    for (int x = 0; x < chunks; x++) begin
      logic [M-1:0][11:0] ws;
      logic [M-1:0][7:0]  fs;
      exp_t e;
      ws = '0; fs = '0;
      ws[0] = {4'(w[2]), 4'(w[1]), 4'(w[0])};
      fs[0] = {4'(f[2*x+1]), 4'(f[2*x])};
      e.mode = MODE_CONV1D; e.cnt = NF; e.first = (x == 0); e.tag = -1;
      for (int m = 0; m < NSEG; m++) e.y[m] = 0;
      for (int j = 0; j < NF; j++)
        for (int k = 0; k < 3; k++)
          if (2*x + j - k >= 0) e.y[j] += w[k] * f[2*x + j - k];
      if (x == chunks - 1) n_drain++;
      send(MODE_CONV1D, x == 0, ws, fs, e);
    end
  endtask

  // ------------------------------------------------------------------
  // 3. DNN layer
  // ------------------------------------------------------------------
  int I [CI][HI][WI];
  int W [CO][CI][3][3];
  int O_ref [CO][HO][WO];
  int O_hw  [CO][HO][WO];
  // pass table: for DNN outputs, which (co, h) they belong to
  int pass_co [$], pass_h [$];
  int pass_x [$];

  task automatic do_layer();
    int npairs, npass;
    for (int c = 0; c < CI; c++)
      for (int h = 0; h < HI; h++)
        for (int w = 0; w < WI; w++) I[c][h][w] = int'($urandom_range(15)) - 8;
    for (int o = 0; o < CO; o++)
      for (int c = 0; c < CI; c++)
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < 3; b++) W[o][c][a][b] = int'($urandom_range(15)) - 8;
    for (int o = 0; o < CO; o++)
      for (int h = 0; h < HO; h++)
        for (int w = 0; w < WO; w++) begin
          O_ref[o][h][w] = 0;
          O_hw[o][h][w]  = 0;
          for (int c = 0; c < CI; c++)
            for (int a = 0; a < 3; a++)
              for (int b = 0; b < 3; b++) O_ref[o][h][w] += I[c][h+a][w+b] * W[o][c][a][b];
        end
    npairs = CI * 3;
    npass  = (npairs + M - 1) / M;
    for (int o = 0; o < CO; o++)
      for (int h = 0; h < HO; h++)
        for (int p = 0; p < npass; p++) begin
          int chunks;
          chunks = WI / 2 + 1;   // data chunks plus one drain chunk
          for (int x = 0; x < chunks; x++) begin
            logic [M-1:0][11:0] ws;
            logic [M-1:0][7:0]  fs;
            exp_t e;
            ws = '0; fs = '0;
            e.mode = MODE_DNN; e.cnt = NF; e.first = (x == 0);
            for (int m = 0; m < NSEG; m++) e.y[m] = 0;
            for (int l = 0; l < M; l++) begin
              int pr, c, a;
              int g [3];
              int fr [WI + 2];
              pr = p * M + l;
              for (int n = 0; n < WI + 2; n++) fr[n] = 0;
              for (int k = 0; k < 3; k++) g[k] = 0;
              if (pr < npairs) begin
                c = pr / 3; a = pr % 3;
                for (int k = 0; k < 3; k++) g[k] = W[o][c][a][2 - k];  // reversed kernel row
                for (int n = 0; n < WI; n++) fr[n] = I[c][h + a][n];
              end
              ws[l] = {4'(g[2]), 4'(g[1]), 4'(g[0])};
              fs[l] = {4'(fr[2*x+1]), 4'(fr[2*x])};
              for (int j = 0; j < NF; j++)
                for (int k = 0; k < 3; k++)
                  if (2*x + j - k >= 0) e.y[j] += g[k] * fr[2*x + j - k];
            end
            e.tag = pass_co.size();
            pass_co.push_back(o); pass_h.push_back(h); pass_x.push_back(x);
            if (x == chunks - 1) n_drain++;
            send(MODE_DNN, x == 0, ws, fs, e);
          end
        end
  endtask

  // ------------------------------------------------------------------
  // monitor
  // ------------------------------------------------------------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      int lat;
      if (q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = q.pop_front();
        lat = (e.mode == MODE_SINGLE) ? 4 : (e.mode == MODE_CONV1D) ? 5 : 6;
        checks += 4;
        if (int'(out_mode) != e.mode) begin failures++; $display("FAIL mode %0d exp %0d", out_mode, e.mode); end
        if (int'(out_count) != e.cnt) begin failures++; $display("FAIL count"); end
        if (cycle - e.cyc != lat) begin failures++; $display("FAIL latency %0d mode %0d", cycle - e.cyc, e.mode); end
        if (e.mode != MODE_SINGLE && out_first != e.first) begin failures++; $display("FAIL first"); end
        for (int m = 0; m < e.cnt; m++) begin
          checks++;
          if (int'(out_y[m]) != e.y[m]) begin
            failures++; $display("FAIL mode %0d y[%0d]=%0d exp %0d", e.mode, m, out_y[m], e.y[m]);
          end
          if (int'(out_y[m]) < 0) n_negative++;
        end
        case (e.mode)
          MODE_SINGLE: n_single++;
          MODE_CONV1D: n_conv1d++;
          default: begin
            int o, h, x;
            n_dnn++;
            o = pass_co[e.tag]; h = pass_h[e.tag]; x = pass_x[e.tag];
            // output y[n] with n = 2x + j belongs to column w = n - 2
            for (int j = 0; j < NF; j++) begin
              int wcol;
              wcol = 2 * x + j - 2;
              if (wcol >= 0 && wcol < WO) O_hw[o][h][wcol] += int'(out_y[j]);
            end
          end
        endcase
      end
    end
  end

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", name); end
    else $display("mechanism %-28s %0d", name, n);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; mode = MODE_SINGLE; w_seq = '0; f_seq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_single(200);
    do_conv1d(30);
    do_conv1d(7);
    do_layer();
    for (int i = 0; i < 10; i++) begin
      do_single(3);
      do_conv1d(4);
    end
    repeat (15) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    for (int o = 0; o < CO; o++)
      for (int h = 0; h < HO; h++)
        for (int w = 0; w < WO; w++) begin
          checks++;
          if (O_hw[o][h][w] != O_ref[o][h][w]) begin
            failures++; $display("FAIL O[%0d][%0d][%0d]=%0d exp %0d", o, h, w, O_hw[o][h][w], O_ref[o][h][w]);
          end
        end
    mech("single-DSP outputs", n_single);
    mech("1-D outputs", n_conv1d);
    mech("DNN outputs", n_dnn);
    mech("mode change", n_switch);
    mech("mode-change hold-off cycles", n_holdoff);
    mech("restart on in_first", n_first);
    mech("drain chunk", n_drain);
    mech("negative values", n_negative);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
