// lif_recurrent_layer -- the recurrent layer FC2 together with the N LIF cells.
//
// Per time step it takes the FC1 current vector (one value per neuron) and
// returns the spike vector of the N neurons. For neuron n it forms
//   i_in[n] = fc1[n] + (sum over k with z_prev[k] = 1 of V[n][k]) >>> REC_SHIFT
// where z_prev are the spikes this layer gave in the previous time step (the
// recurrent connection) and V the FC2 weights, then runs lif_neuron on the
// stored voltage and current of n. Because z_prev is binary the recurrent
// "multiplication" is only a gated addition. The layer keeps v, i and z of
// every neuron between time steps and clears them when a vector tagged
// 'first' (time step 0 of a new symbol) arrives, so every symbol starts from
// rest. The new spikes are collected apart from z_prev, which is replaced only
// when the step is complete, since all neurons of a step must see the same
// previous spikes.
//
// Folding: PE neurons per group, SIMD previous spikes per clock, so one time
// step takes (N/PE)*(N/SIMD) clocks from the input handshake to a valid output.
// The structure FC1 -> (FC2 + LIF cells) with the recurrent spike feedback is
// the paper's (its figure of the topology); the folding, the clearing of the
// state per symbol and the weight scale (REC_SHIFT) are this design's choices.
module lif_recurrent_layer #(
  parameter int unsigned N           = 72,
  parameter int unsigned PE          = 8,
  parameter int unsigned SIMD        = 8,
  parameter int unsigned STATE_W     = 8,
  parameter int unsigned WGT_W       = 8,
  parameter int unsigned ACC_W       = 24,
  parameter int unsigned REC_SHIFT   = 2,
  parameter int unsigned TAU_M_SHIFT = 3,
  parameter int unsigned TAU_S_SHIFT = 2,
  parameter int          V_TH        = 16,
  parameter int          V_RESET     = 0,
  parameter int          V_LEAK      = 0,
  localparam int unsigned NF  = N / PE,
  localparam int unsigned SF  = N / SIMD,
  localparam int unsigned RW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // FC2 (recurrent) weight loading
  input  logic                        w_we,
  input  logic [RW-1:0]               w_row,
  input  logic [RW-1:0]               w_col,
  input  logic [WGT_W-1:0]            w_data,
  // FC1 currents, one vector per time step
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [N-1:0][STATE_W-1:0]   in_data,
  input  logic                        in_first,
  input  logic                        in_last,
  // spikes of the time step
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [N-1:0]                out_spikes,
  output logic                        out_first,
  output logic                        out_last
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  logic [N-1:0][STATE_W-1:0]           in_buf;
  logic signed [STATE_W-1:0]           v_st [N];
  logic signed [STATE_W-1:0]           i_st [N];
  logic [N-1:0]                        z_prev, z_new;
  logic [NFW-1:0]                      nf;
  logic [SFW-1:0]                      sf;
  logic signed [ACC_W-1:0]             racc     [PE];
  logic signed [ACC_W-1:0]             racc_nxt [PE];
  logic signed [ACC_W-1:0]             i_in     [PE];
  logic [PE-1:0][SIMD-1:0][WGT_W-1:0]  wblk;
  logic signed [STATE_W-1:0]           v_nxt [PE];
  logic signed [STATE_W-1:0]           i_nxt [PE];
  logic [PE-1:0]                       spk;
  logic                                tag_first, tag_last;

  weight_mem #(.ROWS(N), .COLS(N), .PE(PE), .SIMD(SIMD), .W(WGT_W)) u_wmem (
    .clk, .we(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data),
    .rd_nf(nf), .rd_sf(sf), .rd_data(wblk));

  // recurrent sum: add the weight of every previous spike in this fold
  always_comb begin
    for (int p = 0; p < PE; p++) begin
      racc_nxt[p] = racc[p];
      for (int s = 0; s < SIMD; s++)
        if (z_prev[int'(sf) * SIMD + s])
          racc_nxt[p] = racc_nxt[p] + ACC_W'($signed(wblk[p][s]));
      i_in[p] = ACC_W'($signed(in_buf[int'(nf) * PE + p])) + (racc_nxt[p] >>> REC_SHIFT);
    end
  end

  for (genvar p = 0; p < PE; p++) begin : g_cell
    lif_neuron #(
      .STATE_W(STATE_W), .IN_W(ACC_W), .TAU_M_SHIFT(TAU_M_SHIFT),
      .TAU_S_SHIFT(TAU_S_SHIFT), .V_TH(V_TH), .V_RESET(V_RESET), .V_LEAK(V_LEAK)
    ) u_lif (
      .v(v_st[int'(nf) * PE + p]), .i(i_st[int'(nf) * PE + p]), .i_in(i_in[p]),
      .v_next(v_nxt[p]), .i_next(i_nxt[p]), .spike(spk[p]));
  end

  assign in_ready   = (state == S_IDLE) || (state == S_OUT && out_ready);
  assign out_valid  = (state == S_OUT);
  assign out_spikes = z_new;
  assign out_first  = tag_first;
  assign out_last   = tag_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      nf        <= '0;
      sf        <= '0;
      in_buf    <= '0;
      z_prev    <= '0;
      z_new     <= '0;
      tag_first <= 1'b0;
      tag_last  <= 1'b0;
      for (int n = 0; n < N; n++) begin
        v_st[n] <= '0;
        i_st[n] <= '0;
      end
      for (int p = 0; p < PE; p++) racc[p] <= '0;
    end else begin
      case (state)
        S_RUN: begin
          if (int'(sf) == SF - 1) begin
            for (int p = 0; p < PE; p++) begin
              v_st[int'(nf) * PE + p]  <= v_nxt[p];
              i_st[int'(nf) * PE + p]  <= i_nxt[p];
              z_new[int'(nf) * PE + p] <= spk[p];
              racc[p] <= '0;
            end
            sf <= '0;
            if (int'(nf) == NF - 1) begin
              nf    <= '0;
              state <= S_OUT;
            end else begin
              nf <= nf + 1'b1;
            end
          end else begin
            for (int p = 0; p < PE; p++) racc[p] <= racc_nxt[p];
            sf <= sf + 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          state  <= S_IDLE;
          z_prev <= z_new;
        end
        default: ;
      endcase
      if (in_valid && in_ready) begin
        in_buf    <= in_data;
        tag_first <= in_first;
        tag_last  <= in_last;
        state     <= S_RUN;
        if (in_first) begin
          // a new symbol starts from rest
          z_prev <= '0;
          for (int n = 0; n < N; n++) begin
            v_st[n] <= '0;
            i_st[n] <= '0;
          end
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_spikes));
endmodule
