// hikonv_top -- HiKonv FPGA compute unit with the three convolution
// engines the paper builds around a DSP multiplier:
//   MODE_SINGLE  single-DSP convolver: one F_{N,K} per input, NF+KW-1
//                outputs (guard bits for a single multiplier)
//   MODE_CONV1D  1-D convolution of any length, NF outputs per chunk
//                (guard bits ceil(log2 KW))
//   MODE_DNN     M-lane DNN-layer unit, NF outputs per chunk summed over
//                M input features (guard bits ceil(log2(M*min(KW,NF))))
// Each engine has the slice size its own guard bits require, as in the
// paper, where each is built for its own use. Lane 0 of the input bundle
// feeds the single and 1-D engines; all M lanes feed the DNN engine.
//
// Interface: a valid/ready input stream (mode, in_first, w_seq, f_seq).
// The engines have different latencies (4, 5 and 6 clocks), so a change of
// mode is held off (in_ready low) until the previous mode's results have
// all left; within one mode the unit takes an input every clock. Outputs
// appear on one shared port: out_mode says which engine produced them,
// out_count how many of out_y are valid (NF+KW-1 for MODE_SINGLE, NF
// otherwise), out_first marks results of a first chunk. The shared
// stream, the hold-off rule and the output port are this design's own
// choices; the paper describes the engines separately.
module hikonv_top #(
  parameter int unsigned M      = 4,
  parameter int unsigned KW     = 3,
  parameter int unsigned NF     = 2,
  parameter int unsigned WB     = 4,
  parameter int unsigned FB     = 4,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned NSEG   = NF + KW - 1,
  parameter int unsigned S_SGL  = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_single(KW, NF)),
  parameter int unsigned S_1D   = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_conv1d(KW)),
  parameter int unsigned S_DNN  = hikonv_pkg::slice_bits(FB, WB, hikonv_pkg::gb_dnn(M, NF, KW)),
  parameter int unsigned YW     = ((S_SGL > S_1D) ? ((S_SGL > S_DNN) ? S_SGL : S_DNN)
                                                  : ((S_1D > S_DNN) ? S_1D : S_DNN)) + 1,
  parameter int unsigned CNT_W  = $clog2(NSEG + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [1:0]                mode,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_first,
  input  logic [M-1:0][KW*WB-1:0]   w_seq,
  input  logic [M-1:0][NF*FB-1:0]   f_seq,
  output logic                      out_valid,
  output logic [1:0]                out_mode,
  output logic                      out_first,
  output logic [CNT_W-1:0]          out_count,
  output logic signed [YW-1:0]      out_y [NSEG]
);

  import hikonv_pkg::*;

  localparam int unsigned LAT_SGL = 4;
  localparam int unsigned LAT_1D  = 5;
  localparam int unsigned LAT_DNN = 6;

  // ---------------------------------------------------------------------
  // Mode hold-off
  // ---------------------------------------------------------------------
  hk_mode_e   cur_mode;
  logic [2:0] busy;   // clocks until the last accepted input's result leaves
  logic       accept;

  assign in_ready = (hk_mode_e'(mode) == cur_mode) || (busy == '0);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_mode <= MODE_SINGLE;
      busy     <= '0;
    end else if (accept) begin
      cur_mode <= hk_mode_e'(mode);
      unique case (hk_mode_e'(mode))
        MODE_SINGLE: busy <= 3'(LAT_SGL);
        MODE_CONV1D: busy <= 3'(LAT_1D);
        default:     busy <= 3'(LAT_DNN);
      endcase
    end else if (busy != '0) begin
      busy <= busy - 3'd1;
    end
  end

  logic go_sgl, go_1d, go_dnn;
  assign go_sgl = accept && (hk_mode_e'(mode) == MODE_SINGLE);
  assign go_1d  = accept && (hk_mode_e'(mode) == MODE_CONV1D);
  assign go_dnn = accept && (hk_mode_e'(mode) == MODE_DNN);

  // ---------------------------------------------------------------------
  // Engines
  // ---------------------------------------------------------------------
  logic                     sgl_valid;
  logic signed [S_SGL:0]    sgl_y [NSEG];
  logic                     c1_valid, c1_first;
  logic signed [S_1D:0]     c1_y [NF];
  logic                     dnn_valid, dnn_first;
  logic signed [S_DNN:0]    dnn_y [NF];

  hikonv_convolver #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S_SGL)
  ) u_single (
    .clk(clk), .rst_n(rst_n), .in_valid(go_sgl),
    .w_seq(w_seq[0]), .f_seq(f_seq[0]),
    .y_valid(sgl_valid), .y(sgl_y)
  );

  hikonv_conv1d #(
    .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S_1D)
  ) u_conv1d (
    .clk(clk), .rst_n(rst_n), .in_valid(go_1d), .in_first(in_first),
    .w_seq(w_seq[0]), .f_seq(f_seq[0]),
    .y_valid(c1_valid), .y_first(c1_first), .y(c1_y)
  );

  hikonv_conv2d #(
    .M(M), .KW(KW), .NF(NF), .WB(WB), .FB(FB), .SIGNED(SIGNED), .S(S_DNN)
  ) u_dnn (
    .clk(clk), .rst_n(rst_n), .in_valid(go_dnn), .in_first(in_first),
    .w_seq(w_seq), .f_seq(f_seq),
    .y_valid(dnn_valid), .y_first(dnn_first), .y(dnn_y)
  );

  // ---------------------------------------------------------------------
  // Shared output port
  // ---------------------------------------------------------------------
  always_comb begin
    out_valid = sgl_valid | c1_valid | dnn_valid;
    out_mode  = MODE_SINGLE;
    out_first = 1'b0;
    out_count = CNT_W'(NSEG);
    for (int m = 0; m < NSEG; m++) out_y[m] = YW'(sgl_y[m]);
    if (c1_valid) begin
      out_mode  = MODE_CONV1D;
      out_first = c1_first;
      out_count = CNT_W'(NF);
      for (int m = 0; m < NSEG; m++) out_y[m] = (m < NF) ? YW'(c1_y[m]) : '0;
    end else if (dnn_valid) begin
      out_mode  = MODE_DNN;
      out_first = dnn_first;
      out_count = CNT_W'(NF);
      for (int m = 0; m < NSEG; m++) out_y[m] = (m < NF) ? YW'(dnn_y[m]) : '0;
    end
  end

  // The hold-off rule keeps the engines' results apart.
  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n)
                                 $onehot0({sgl_valid, c1_valid, dnn_valid}));
  a_mode_legal: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid |-> mode != 2'd3);

endmodule
