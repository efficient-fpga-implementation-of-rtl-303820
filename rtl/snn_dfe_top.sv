// snn_dfe_top -- spiking-neural-network decision-feedback equaliser for a
// PAM-4 IM/DD optical link.
//
// A streaming pipeline, one stage per layer, joined by valid/ready vector
// streams:
//   tap_buffer -> FC0 (104->72) -> FC1 (72->72) -> FC2 + LIF cells (72,
//   recurrent) -> FC3 (72->4) -> decision_unit -> output stream
//                 ^---------------- decision feedback ----------------'
// Each received symbol runs through the network for T_STEPS time steps (its
// taps at step 0, zeros after); FC3's outputs are summed over the steps and
// the largest sum decides the symbol, which the tap buffer keeps as an
// estimated symbol for the next 8 symbols. The steps of one symbol overlap in
// the pipeline, but the next symbol waits for the decision of the previous
// one, so throughput is one symbol per latency.
//
// Ports: s_axis_* (AXI-Stream) brings one encoded received symbol per beat,
// eight 4-bit input-neuron values, value k in tdata[4k+3:4k]; m_axis_*
// returns the decided class (0..3) in tdata[1:0], with tlast copied from the
// input beat. cfg_* writes one weight or bias (8 bits) per clock, selected by
// cfg_sel (see snn_pkg::cfg_sel_e) and matrix coordinates; load the network
// while no symbol is in flight. The topology, sizes and 8-bit precision are
// the paper's (SNN_72); stream formats, the loading port and all folding
// factors are this design's choices.
module snn_dfe_top
  import snn_pkg::*;
#(
  parameter int unsigned NH    = N_H,
  parameter int unsigned TS    = T_STEPS,
  parameter int unsigned P0_PE = FC0_PE, parameter int unsigned P0_SIMD = FC0_SIMD,
  parameter int unsigned P1_PE = FC1_PE, parameter int unsigned P1_SIMD = FC1_SIMD,
  parameter int unsigned P2_PE = FC2_PE, parameter int unsigned P2_SIMD = FC2_SIMD,
  parameter int unsigned P3_PE = FC3_PE, parameter int unsigned P3_SIMD = FC3_SIMD
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // encoded received symbols
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  logic [RX_ENC*IN_W-1:0] s_axis_tdata,
  input  logic                  s_axis_tlast,
  // decisions
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic [7:0]            m_axis_tdata,
  output logic                  m_axis_tlast,
  // weight / bias loading
  input  logic                  cfg_we,
  input  logic [2:0]            cfg_sel,
  input  logic [7:0]            cfg_row,
  input  logic [7:0]            cfg_col,
  input  logic [WGT_W-1:0]      cfg_data
);
  localparam int unsigned RWH = $clog2(NH);
  localparam int unsigned RWI = $clog2(N_I);
  localparam int unsigned RWO = $clog2(N_O);

  // ---- stage streams ----
  logic                         tb_v, tb_r, tb_f, tb_l;
  logic [N_I-1:0][IN_W-1:0]     tb_d;
  logic                         f0_v, f0_r, f0_f, f0_l;
  logic [NH-1:0][STATE_W-1:0]   f0_d;
  logic                         f1_v, f1_r, f1_f, f1_l;
  logic [NH-1:0][STATE_W-1:0]   f1_d;
  logic                         lf_v, lf_r, lf_f, lf_l;
  logic [NH-1:0]                lf_d;
  logic                         f3_v, f3_r, f3_f, f3_l;
  logic [N_O-1:0][SCORE_W-1:0]  f3_d;
  logic                         dec_v;
  logic [MOD_M-1:0]             dec_sym;
  logic                         cur_last;

  // ---- parameter write decode ----
  cfg_sel_e sel;
  assign sel = cfg_sel_e'(cfg_sel);
  logic we_fc0_w, we_fc0_b, we_fc1_w, we_fc2_w, we_fc3_w, we_fc3_b;
  assign we_fc0_w = cfg_we && (sel == SEL_FC0_W);
  assign we_fc0_b = cfg_we && (sel == SEL_FC0_B);
  assign we_fc1_w = cfg_we && (sel == SEL_FC1_W);
  assign we_fc2_w = cfg_we && (sel == SEL_FC2_W);
  assign we_fc3_w = cfg_we && (sel == SEL_FC3_W);
  assign we_fc3_b = cfg_we && (sel == SEL_FC3_B);

  tap_buffer #(
    .N_HALF(N_HALF), .RX_ENC(RX_ENC), .EST_ENC(EST_ENC), .IN_W(IN_W), .T_STEPS(TS)
  ) u_taps (
    .clk, .rst_n,
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .s_last(s_axis_tlast),
    .out_valid(tb_v), .out_ready(tb_r), .out_data(tb_d), .out_first(tb_f), .out_last(tb_l),
    .fb_valid(m_axis_tvalid && m_axis_tready), .fb_symbol(dec_sym), .cur_last);

  // FC0: ternary inputs (integers) x weights (W_FRAC) -> activations (S_FRAC)
  linear_layer #(
    .MW(N_I), .MH(NH), .PE(P0_PE), .SIMD(P0_SIMD), .IN_W(IN_W), .IN_SIGNED(1'b1),
    .WGT_W(WGT_W), .HAS_BIAS(1'b1), .ACC_W(ACC_W), .OUT_SHIFT(W_FRAC - S_FRAC),
    .OUT_W(STATE_W)
  ) u_fc0 (
    .clk, .rst_n,
    .w_we(we_fc0_w), .w_row(cfg_row[RWH-1:0]), .w_col(cfg_col[RWI-1:0]), .w_data(cfg_data),
    .b_we(we_fc0_b), .b_row(cfg_row[RWH-1:0]), .b_data(cfg_data),
    .in_valid(tb_v), .in_ready(tb_r), .in_data(tb_d), .in_first(tb_f), .in_last(tb_l),
    .out_valid(f0_v), .out_ready(f0_r), .out_data(f0_d), .out_first(f0_f), .out_last(f0_l));

  // FC1: activations (S_FRAC) x weights (W_FRAC) -> input current (S_FRAC)
  linear_layer #(
    .MW(NH), .MH(NH), .PE(P1_PE), .SIMD(P1_SIMD), .IN_W(STATE_W), .IN_SIGNED(1'b1),
    .WGT_W(WGT_W), .HAS_BIAS(1'b0), .ACC_W(ACC_W), .OUT_SHIFT(W_FRAC),
    .OUT_W(STATE_W)
  ) u_fc1 (
    .clk, .rst_n,
    .w_we(we_fc1_w), .w_row(cfg_row[RWH-1:0]), .w_col(cfg_col[RWH-1:0]), .w_data(cfg_data),
    .b_we(1'b0), .b_row('0), .b_data('0),
    .in_valid(f0_v), .in_ready(f0_r), .in_data(f0_d), .in_first(f0_f), .in_last(f0_l),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d), .out_first(f1_f), .out_last(f1_l));

  // FC2 + LIF cells
  lif_recurrent_layer #(
    .N(NH), .PE(P2_PE), .SIMD(P2_SIMD), .STATE_W(STATE_W), .WGT_W(WGT_W),
    .ACC_W(ACC_W), .REC_SHIFT(W_FRAC - S_FRAC), .TAU_M_SHIFT(TAU_M_SHIFT),
    .TAU_S_SHIFT(TAU_S_SHIFT), .V_TH(V_TH), .V_RESET(V_RESET), .V_LEAK(V_LEAK)
  ) u_lif (
    .clk, .rst_n,
    .w_we(we_fc2_w), .w_row(cfg_row[RWH-1:0]), .w_col(cfg_col[RWH-1:0]), .w_data(cfg_data),
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d), .in_first(f1_f), .in_last(f1_l),
    .out_valid(lf_v), .out_ready(lf_r), .out_spikes(lf_d), .out_first(lf_f), .out_last(lf_l));

  // FC3: spikes x weights (W_FRAC) + bias -> class scores (W_FRAC)
  linear_layer #(
    .MW(NH), .MH(N_O), .PE(P3_PE), .SIMD(P3_SIMD), .IN_W(1), .IN_SIGNED(1'b0),
    .WGT_W(WGT_W), .HAS_BIAS(1'b1), .ACC_W(ACC_W), .OUT_SHIFT(0), .OUT_W(SCORE_W)
  ) u_fc3 (
    .clk, .rst_n,
    .w_we(we_fc3_w), .w_row(cfg_row[RWO-1:0]), .w_col(cfg_col[RWH-1:0]), .w_data(cfg_data),
    .b_we(we_fc3_b), .b_row(cfg_row[RWO-1:0]), .b_data(cfg_data),
    .in_valid(lf_v), .in_ready(lf_r), .in_data(lf_d), .in_first(lf_f), .in_last(lf_l),
    .out_valid(f3_v), .out_ready(f3_r), .out_data(f3_d), .out_first(f3_f), .out_last(f3_l));

  decision_unit #(.N_O(N_O), .SCORE_W(SCORE_W), .DEC_W(DEC_W)) u_dec (
    .clk, .rst_n,
    .in_valid(f3_v), .in_ready(f3_r), .in_scores(f3_d), .in_first(f3_f), .in_last(f3_l),
    .out_valid(dec_v), .out_ready(m_axis_tready), .out_symbol(dec_sym), .out_sums());

  assign m_axis_tvalid = dec_v;
  assign m_axis_tdata  = 8'(dec_sym);
  assign m_axis_tlast  = cur_last;
endmodule
