// linear_layer -- folded fully connected layer (matrix-vector unit), used as
// FC0, FC1 and FC3 of the SNN-DFE.
//
// Computes out[r] = requant( sum_c W[r][c] * in[c] + b[r] ) for r < MH, c < MW.
// The work is folded in the manner of a FINN matrix-vector unit: each clock,
// PE output rows each take SIMD products, so a vector takes
// (MH/PE) * (MW/SIMD) clocks. Requantisation is an arithmetic right shift by
// OUT_SHIFT followed by saturation to OUT_W signed bits. Inputs are signed
// (IN_SIGNED = 1) or unsigned, e.g. 1-bit spikes. Weights and, when HAS_BIAS,
// the biases live in weight_mem instances loaded through the write ports; the
// bias is added at accumulator scale.
//
// Interface: one input vector per valid/ready handshake, one output vector per
// valid/ready handshake. Two tag bits (first/last time step) travel with each
// vector. Timing: the output is valid (MH/PE)*(MW/SIMD) clocks after the input
// handshake; a new input is taken in the clock the output is taken.
// The layer types and the adjustable input/output parallelism follow the
// paper; the folding order, the bias scale and the shift-and-saturate
// requantisation are this design's choices.
module linear_layer #(
  parameter int unsigned MW        = 104,
  parameter int unsigned MH        = 72,
  parameter int unsigned PE        = 8,
  parameter int unsigned SIMD      = 8,
  parameter int unsigned IN_W      = 4,
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned WGT_W     = 8,
  parameter bit          HAS_BIAS  = 1'b1,
  parameter int unsigned ACC_W     = 24,
  parameter int unsigned OUT_SHIFT = 2,
  parameter int unsigned OUT_W     = 8,
  localparam int unsigned NF  = MH / PE,
  localparam int unsigned SF  = MW / SIMD,
  localparam int unsigned RW  = (MH > 1) ? $clog2(MH) : 1,
  localparam int unsigned CW  = (MW > 1) ? $clog2(MW) : 1,
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // parameter loading
  input  logic                         w_we,
  input  logic [RW-1:0]                w_row,
  input  logic [CW-1:0]                w_col,
  input  logic [WGT_W-1:0]             w_data,
  input  logic                         b_we,
  input  logic [RW-1:0]                b_row,
  input  logic [WGT_W-1:0]             b_data,
  // input vector stream
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [MW-1:0][IN_W-1:0]      in_data,
  input  logic                         in_first,
  input  logic                         in_last,
  // output vector stream
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [MH-1:0][OUT_W-1:0]     out_data,
  output logic                         out_first,
  output logic                         out_last
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  localparam logic signed [ACC_W-1:0] OMAX = ACC_W'((1 <<< (OUT_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] OMIN = -ACC_W'(1 <<< (OUT_W-1));

  logic [MW-1:0][IN_W-1:0]           in_buf;
  logic [NFW-1:0]                    nf;
  logic [SFW-1:0]                    sf;
  logic signed [ACC_W-1:0]           acc     [PE];
  logic signed [ACC_W-1:0]           acc_nxt [PE];
  logic [PE-1:0][SIMD-1:0][WGT_W-1:0] wblk;
  logic [PE-1:0][0:0][WGT_W-1:0]     bblk;
  logic                              tag_first, tag_last;

  weight_mem #(.ROWS(MH), .COLS(MW), .PE(PE), .SIMD(SIMD), .W(WGT_W)) u_wmem (
    .clk, .we(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data),
    .rd_nf(nf), .rd_sf(sf), .rd_data(wblk));

  if (HAS_BIAS) begin : g_bias
    weight_mem #(.ROWS(MH), .COLS(1), .PE(PE), .SIMD(1), .W(WGT_W)) u_bmem (
      .clk, .we(b_we), .wr_row(b_row), .wr_col(1'b0), .wr_data(b_data),
      .rd_nf(nf), .rd_sf(1'b0), .rd_data(bblk));
  end else begin : g_nobias
    assign bblk = '0;
  end

  function automatic logic [OUT_W-1:0] requant(input logic signed [ACC_W-1:0] x);
    logic signed [ACC_W-1:0] s;
    s = x >>> OUT_SHIFT;
    if (s > OMAX)      return OMAX[OUT_W-1:0];
    else if (s < OMIN) return OMIN[OUT_W-1:0];
    else               return s[OUT_W-1:0];
  endfunction

  // PE dot products of SIMD lanes for the current fold
  always_comb begin
    for (int p = 0; p < PE; p++) begin
      acc_nxt[p] = acc[p];
      for (int s = 0; s < SIMD; s++) begin
        logic [IN_W-1:0]          xr;
        logic signed [IN_W:0]     xe;
        xr = in_buf[int'(sf) * SIMD + s];
        xe = IN_SIGNED ? $signed({xr[IN_W-1], xr}) : $signed({1'b0, xr});
        acc_nxt[p] = acc_nxt[p] + ACC_W'(xe * $signed(wblk[p][s]));
      end
    end
  end

  assign in_ready  = (state == S_IDLE) || (state == S_OUT && out_ready);
  assign out_valid = (state == S_OUT);
  assign out_first = tag_first;
  assign out_last  = tag_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      nf        <= '0;
      sf        <= '0;
      in_buf    <= '0;
      out_data  <= '0;
      tag_first <= 1'b0;
      tag_last  <= 1'b0;
      for (int p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      case (state)
        S_RUN: begin
          if (int'(sf) == SF - 1) begin
            for (int p = 0; p < PE; p++) begin
              out_data[int'(nf) * PE + p] <=
                requant(acc_nxt[p] + ACC_W'($signed(bblk[p][0])));
              acc[p] <= '0;
            end
            sf <= '0;
            if (int'(nf) == NF - 1) begin
              nf    <= '0;
              state <= S_OUT;
            end else begin
              nf <= nf + 1'b1;
            end
          end else begin
            for (int p = 0; p < PE; p++) acc[p] <= acc_nxt[p];
            sf <= sf + 1'b1;
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: ;
      endcase
      if (in_valid && in_ready) begin
        in_buf    <= in_data;
        tag_first <= in_first;
        tag_last  <= in_last;
        state     <= S_RUN;
      end
    end
  end

  // handshake rule: a held output stays put until it is taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));
endmodule
