// decision_unit -- output accumulation and hard decision.
//
// Sums the N_O scores that FC3 gives for each time step of a symbol (the
// vector tagged 'first' restarts the sums) and, with the vector tagged
// 'last', picks the class with the largest sum as the decided symbol. Ties go
// to the lowest class index. The decision is offered on out_* until taken and
// is also what the tap line feeds back as the next estimated symbol.
//
// Timing: the decision is valid in the clock after the handshake of the last
// time step; no new score vector is taken while a decision waits.
// Accumulating over the time steps and taking the largest output is the
// paper's; the tie rule, the widths and the exposed sums are this design's.
module decision_unit #(
  parameter int unsigned N_O     = 4,
  parameter int unsigned SCORE_W = 16,
  parameter int unsigned DEC_W   = 20,
  localparam int unsigned SYM_W  = (N_O > 1) ? $clog2(N_O) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [N_O-1:0][SCORE_W-1:0]  in_scores,
  input  logic                         in_first,
  input  logic                         in_last,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [SYM_W-1:0]             out_symbol,
  output logic [N_O-1:0][DEC_W-1:0]    out_sums
);
  logic signed [DEC_W-1:0] sum     [N_O];
  logic signed [DEC_W-1:0] sum_nxt [N_O];
  logic [SYM_W-1:0]        best;

  always_comb begin
    for (int o = 0; o < N_O; o++)
      sum_nxt[o] = (in_first ? '0 : sum[o]) + DEC_W'($signed(in_scores[o]));
    best = '0;
    for (int o = 1; o < N_O; o++)
      if (sum_nxt[o] > sum_nxt[best]) best = SYM_W'(o);
  end

  assign in_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_symbol <= '0;
      out_sums   <= '0;
      for (int o = 0; o < N_O; o++) sum[o] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int o = 0; o < N_O; o++) sum[o] <= sum_nxt[o];
        if (in_last) begin
          out_valid  <= 1'b1;
          out_symbol <= best;
          for (int o = 0; o < N_O; o++) out_sums[o] <= sum_nxt[o];
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_symbol));
endmodule
