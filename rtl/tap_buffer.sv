// tap_buffer -- the decision-feedback tap line and time-step sequencer.
//
// Holds the encoded current received symbol and the N_HALF previous ones
// (RX_ENC input-neuron values each) and the N_HALF previous decisions, each
// one-hot over EST_ENC = 2^m classes. For every new received symbol it
// builds the network input
//   [ rx(n) | rx(n-1) ... rx(n-N_HALF) | est(n-1) ... est(n-N_HALF) ]
// (element 0 first; 8*9 + 4*8 = 104 values for the default sizes) and sends it
// as time step 0, followed by T_STEPS-1 all-zero vectors, tagged first/last.
// It then waits for the decision of this symbol (fb_valid, fb_symbol), shifts
// it into the decision history and only then accepts the next received
// symbol: the feedback loop is what makes the equaliser a DFE and is why one
// symbol is in flight at a time.
//
// Interface: s_* is the input stream, one encoded received symbol per
// handshake, s_last its end-of-burst flag (held on cur_last while the symbol
// is in flight). out_* is the vector stream to FC0. Reset empties both
// histories (all zeros).
// The three tap sets, their sizes and the zero inputs after the first time
// step are the paper's; the order of the sets in the vector, the one-hot code
// of decisions and the empty history after reset are this design's choices.
module tap_buffer #(
  parameter int unsigned N_HALF  = 8,
  parameter int unsigned RX_ENC  = 8,
  parameter int unsigned EST_ENC = 4,
  parameter int unsigned IN_W    = 4,
  parameter int unsigned T_STEPS = 5,
  localparam int unsigned N_I    = RX_ENC * (N_HALF + 1) + EST_ENC * N_HALF,
  localparam int unsigned SYM_W  = (EST_ENC > 1) ? $clog2(EST_ENC) : 1,
  localparam int unsigned TW     = (T_STEPS > 1) ? $clog2(T_STEPS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // encoded received symbols
  input  logic                          s_valid,
  output logic                          s_ready,
  input  logic [RX_ENC-1:0][IN_W-1:0]   s_data,
  input  logic                          s_last,
  // network input, one vector per time step
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N_I-1:0][IN_W-1:0]      out_data,
  output logic                          out_first,
  output logic                          out_last,
  // decision of the symbol in flight
  input  logic                          fb_valid,
  input  logic [SYM_W-1:0]              fb_symbol,
  output logic                          cur_last
);
  typedef enum logic [1:0] {S_WAIT_IN, S_ISSUE, S_WAIT_FB} state_e;
  state_e state;

  logic [RX_ENC-1:0][IN_W-1:0]  rx  [N_HALF+1];   // rx[0] = current symbol
  logic [EST_ENC-1:0]           est [N_HALF];     // est[0] = last decision
  logic [TW-1:0]                t;
  logic [N_I-1:0][IN_W-1:0]     vec;

  always_comb begin
    for (int k = 0; k <= N_HALF; k++)
      for (int e = 0; e < RX_ENC; e++)
        vec[k * RX_ENC + e] = rx[k][e];
    for (int k = 0; k < N_HALF; k++)
      for (int e = 0; e < EST_ENC; e++)
        vec[RX_ENC * (N_HALF + 1) + k * EST_ENC + e] = IN_W'(est[k][e]);
  end

  assign s_ready   = (state == S_WAIT_IN);
  assign out_valid = (state == S_ISSUE);
  assign out_data  = (t == '0) ? vec : '0;
  assign out_first = (t == '0);
  assign out_last  = (int'(t) == T_STEPS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_WAIT_IN;
      t        <= '0;
      cur_last <= 1'b0;
      for (int k = 0; k <= N_HALF; k++) rx[k] <= '0;
      for (int k = 0; k < N_HALF; k++)  est[k] <= '0;
    end else begin
      case (state)
        S_WAIT_IN: if (s_valid) begin
          for (int k = N_HALF; k > 0; k--) rx[k] <= rx[k-1];
          rx[0]    <= s_data;
          cur_last <= s_last;
          t        <= '0;
          state    <= S_ISSUE;
        end
        S_ISSUE: if (out_ready) begin
          if (int'(t) == T_STEPS - 1) begin
            t     <= '0;
            state <= S_WAIT_FB;
          end else begin
            t <= t + 1'b1;
          end
        end
        S_WAIT_FB: if (fb_valid) begin
          for (int k = N_HALF - 1; k > 0; k--) est[k] <= est[k-1];
          est[0] <= EST_ENC'(1) << fb_symbol;
          state  <= S_WAIT_IN;
        end
        default: state <= S_WAIT_IN;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));
endmodule
