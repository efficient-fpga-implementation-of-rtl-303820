// snn_pkg -- sizes, number formats and shared types of the SNN decision-feedback
// equaliser (SNN-DFE).
//
// The network is the optimised "SNN_72" topology: 17 equaliser taps, PAM-4
// (modulation order m = 2), 104 inputs, 72 hidden LIF neurons, 4 outputs and 5
// time steps per symbol, with 8-bit weights, voltages and currents. These
// numbers are the paper's. The split of the 8 bits into integer and fraction,
// the accumulator widths and the degree of parallelism of each layer are not
// given by the paper and are this design's choices; they are collected here.
package snn_pkg;

  // ---- topology (paper) ------------------------------------------------
  localparam int unsigned N_TAP     = 17;             // equaliser taps
  localparam int unsigned MOD_M     = 2;              // PAM-4: m = 2
  localparam int unsigned N_HALF    = N_TAP / 2;      // 8 past symbols / decisions
  localparam int unsigned RX_ENC    = 8;              // input neurons per received symbol
  localparam int unsigned EST_ENC   = 1 << MOD_M;     // input neurons per decision (one-hot, 2^m)
  localparam int unsigned N_I       = RX_ENC * (N_HALF + 1) + EST_ENC * N_HALF;  // 104
  localparam int unsigned N_H       = 72;             // hidden LIF neurons
  localparam int unsigned N_O       = EST_ENC;        // output classes (4)
  localparam int unsigned T_STEPS   = 5;              // SNN time steps per symbol

  // ---- number formats --------------------------------------------------
  localparam int unsigned IN_W      = 4;   // input neuron value in {-1,0,1}, 4 bits (paper)
  localparam int unsigned WGT_W     = 8;   // weights and biases, 8-bit QAT (paper)
  localparam int unsigned W_FRAC    = 6;   // weight fraction bits (choice): range [-2,2)
  localparam int unsigned STATE_W   = 8;   // voltage, current and FC0 activations, 8 bits (paper)
  localparam int unsigned S_FRAC    = 4;   // their fraction bits (choice): range [-8,8)
  localparam int unsigned ACC_W     = 24;  // layer accumulators (choice)
  localparam int unsigned SCORE_W   = 16;  // FC3 output per time step (choice)
  localparam int unsigned DEC_W     = 20;  // FC3 output summed over the time steps (choice)

  // ---- LIF constants ---------------------------------------------------
  // tau_m = 125 and tau_s = 250 with the 1 ms step make dt/tau = 1/8 and 1/4:
  // both decays become arithmetic right shifts.
  localparam int unsigned TAU_M_SHIFT = 3;
  localparam int unsigned TAU_S_SHIFT = 2;
  localparam int          V_TH        = 1 << S_FRAC;  // 1.0
  localparam int          V_RESET     = 0;
  localparam int          V_LEAK      = 0;

  // ---- degree of parallelism (choice; the paper leaves it per layer) -----
  localparam int unsigned FC0_PE = 8, FC0_SIMD = 8;
  localparam int unsigned FC1_PE = 8, FC1_SIMD = 8;
  localparam int unsigned FC2_PE = 8, FC2_SIMD = 8;
  localparam int unsigned FC3_PE = 4, FC3_SIMD = 8;

  // ---- parameter loading -----------------------------------------------
  typedef enum logic [2:0] {
    SEL_FC0_W = 3'd0,   // FC0 weights   row < N_H, col < N_I
    SEL_FC0_B = 3'd1,   // FC0 bias      row < N_H
    SEL_FC1_W = 3'd2,   // FC1 weights   row < N_H, col < N_H
    SEL_FC2_W = 3'd3,   // FC2 (recurrent) weights row < N_H, col < N_H
    SEL_FC3_W = 3'd4,   // FC3 weights   row < N_O, col < N_H
    SEL_FC3_B = 3'd5    // FC3 bias      row < N_O
  } cfg_sel_e;

endpackage
