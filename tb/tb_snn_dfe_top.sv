// tb_snn_dfe_top -- end-to-end test of the SNN-DFE at its default size
// (17 taps, 104 inputs, 72 LIF neurons, 4 classes, 5 time steps, 8-bit).
//
// Loads a random network through the cfg port, streams NSYM random encoded
// symbols through the AXI-Stream input and checks every decision against an
// integer model of the whole network written here from the layer equations:
//   a0 = sat8((b0 + W0 x) >>> 2), c1 = sat8((W1 a0) >>> 6),
//   LIF with recurrent term (W2 z_prev) >>> 2, score = b3 + W3 z summed over
//   the 5 steps, decision = argmax (lowest index on ties),
// with the model's own tap and decision history (the DFE loop). Output
// backpressure is random. With the output free, the clocks from input
// handshake to output valid must be T*(F0+1) + (F1+1) + (F2+1) + (F3+1) + 1,
// Fk being the fold count of layer k (765 at the defaults).
// Mechanisms counted, each must occur: LIF spikes, recurrent input, FC0
// saturation, LIF current saturation, output stalls, input held back by the
// decision feedback, end-of-burst flags, and every one of the 4 classes.
module tb_snn_dfe_top;
  import snn_pkg::*;
  localparam int NSYM = 96;
  localparam int F0 = (N_H / FC0_PE) * (N_I / FC0_SIMD);
  localparam int F1 = (N_H / FC1_PE) * (N_H / FC1_SIMD);
  localparam int F2 = (N_H / FC2_PE) * (N_H / FC2_SIMD);
  localparam int F3 = (N_O / FC3_PE) * (N_H / FC3_SIMD);
  localparam int LAT = T_STEPS * (F0 + 1) + (F1 + 1) + (F2 + 1) + (F3 + 1) + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_spike = 0, n_rec = 0, n_sat0 = 0, n_isat = 0, n_stall = 0, n_wait = 0, n_last = 0;
  int n_class [N_O];

  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [31:0] s_axis_tdata = '0;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
  logic [7:0] m_axis_tdata;
  logic cfg_we = 0;
  logic [2:0] cfg_sel = '0;
  logic [7:0] cfg_row = '0, cfg_col = '0, cfg_data = '0;

  snn_dfe_top dut (.*);

  int W0 [N_H][N_I]; int B0 [N_H];
  int W1 [N_H][N_H];
  int W2 [N_H][N_H];
  int W3 [N_O][N_H]; int B3 [N_O];
  int rxs [NSYM][RX_ENC];
  bit lasts [NSYM];
  int expd [NSYM];

  function automatic int fdiv(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction
  function automatic int clamp(int x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // integer model of the equaliser over the whole symbol sequence
  task automatic model();
    int rxh [N_HALF+1][RX_ENC];
    int esth [N_HALF];
    int x [N_I], a0 [N_H], c1 [N_H], v [N_H], i [N_H], z [N_H], zn [N_H], sc [N_O];
    for (int k = 0; k <= N_HALF; k++) for (int e = 0; e < RX_ENC; e++) rxh[k][e] = 0;
    for (int k = 0; k < N_HALF; k++) esth[k] = -1;
    for (int n = 0; n < NSYM; n++) begin
      int best;
      for (int k = N_HALF; k > 0; k--) for (int e = 0; e < RX_ENC; e++) rxh[k][e] = rxh[k-1][e];
      for (int e = 0; e < RX_ENC; e++) rxh[0][e] = rxs[n][e];
      for (int k = 0; k <= N_HALF; k++) for (int e = 0; e < RX_ENC; e++) x[k*RX_ENC+e] = rxh[k][e];
      for (int k = 0; k < N_HALF; k++) for (int e = 0; e < EST_ENC; e++)
        x[RX_ENC*(N_HALF+1) + k*EST_ENC + e] = (esth[k] == e) ? 1 : 0;
      for (int h = 0; h < N_H; h++) begin v[h] = 0; i[h] = 0; z[h] = 0; end
      for (int o = 0; o < N_O; o++) sc[o] = 0;
      for (int t = 0; t < T_STEPS; t++) begin
        for (int h = 0; h < N_H; h++) begin
          int acc = B0[h];
          if (t == 0) for (int c = 0; c < N_I; c++) acc += W0[h][c] * x[c];
          a0[h] = clamp(fdiv(acc, 4));
          if (a0[h] != fdiv(acc, 4)) n_sat0++;
        end
        for (int h = 0; h < N_H; h++) begin
          int acc = 0;
          for (int k = 0; k < N_H; k++) acc += W1[h][k] * a0[k];
          c1[h] = clamp(fdiv(acc, 64));
        end
        for (int h = 0; h < N_H; h++) begin
          int rec = 0, vd, id, s, inow;
          for (int k = 0; k < N_H; k++) if (z[k] != 0) rec += W2[h][k];
          if (fdiv(rec, 4) != 0) n_rec++;
          vd = v[h] + fdiv(i[h] - v[h], 8);
          id = i[h] - fdiv(i[h], 4);
          s  = (vd > 16) ? 1 : 0;
          v[h] = s ? 0 : clamp(vd);
          inow = id + c1[h] + fdiv(rec, 4);
          if (clamp(inow) != inow) n_isat++;
          i[h] = clamp(inow);
          zn[h] = s;
          if (s) n_spike++;
        end
        for (int h = 0; h < N_H; h++) z[h] = zn[h];
        for (int o = 0; o < N_O; o++) begin
          sc[o] += B3[o];
          for (int h = 0; h < N_H; h++) sc[o] += W3[o][h] * z[h];
        end
      end
      best = 0;
      for (int o = 1; o < N_O; o++) if (sc[o] > sc[best]) best = o;
      expd[n] = best;
      for (int k = N_HALF - 1; k > 0; k--) esth[k] = esth[k-1];
      esth[0] = best;
    end
  endtask

  task automatic cfg_write(cfg_sel_e s, int r, int c, int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_row = 8'(r); cfg_col = 8'(c); cfg_data = 8'(d);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    for (int h = 0; h < N_H; h++) begin
      B0[h] = rnd(-60, 60);
      for (int c = 0; c < N_I; c++) W0[h][c] = rnd(-40, 40);
      for (int k = 0; k < N_H; k++) begin W1[h][k] = rnd(-30, 40); W2[h][k] = rnd(-40, 30); end
    end
    for (int o = 0; o < N_O; o++) begin
      B3[o] = rnd(-128, 127);
      for (int h = 0; h < N_H; h++) W3[o][h] = rnd(-128, 127);
    end
    for (int n = 0; n < NSYM; n++) begin
      for (int e = 0; e < RX_ENC; e++) rxs[n][e] = rnd(-1, 1);
      lasts[n] = (n % 8 == 7);
    end
    model();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < N_H; h++) begin
      for (int c = 0; c < N_I; c++) cfg_write(SEL_FC0_W, h, c, W0[h][c]);
      cfg_write(SEL_FC0_B, h, 0, B0[h]);
      for (int k = 0; k < N_H; k++) cfg_write(SEL_FC1_W, h, k, W1[h][k]);
      for (int k = 0; k < N_H; k++) cfg_write(SEL_FC2_W, h, k, W2[h][k]);
    end
    for (int o = 0; o < N_O; o++) begin
      for (int h = 0; h < N_H; h++) cfg_write(SEL_FC3_W, o, h, W3[o][h]);
      cfg_write(SEL_FC3_B, o, 0, B3[o]);
    end
    @(negedge clk); cfg_we = 0;
    // the input stream is always offered; the DUT paces it
    for (int n = 0; n < NSYM; n++) begin
      @(negedge clk);
      for (int e = 0; e < RX_ENC; e++) s_axis_tdata[4*e +: 4] = 4'(rxs[n][e]);
      s_axis_tvalid = 1; s_axis_tlast = lasts[n];
      @(posedge clk);
      while (!s_axis_tready) begin n_wait++; @(posedge clk); end
    end
    @(negedge clk); s_axis_tvalid = 0;
  end

  // latency of every symbol whose output was not stalled
  int t_in [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (s_axis_tvalid && s_axis_tready) t_in.push_back(cyc);
  end

  initial begin : sink
    int got = 0, tv;
    bit seen;
    for (int o = 0; o < N_O; o++) n_class[o] = 0;
    while (got < NSYM) begin
      @(negedge clk);
      // first clock of a new decision: check the latency, then maybe stall
      if (m_axis_tvalid && !seen) begin
        seen = 1;
        tv = cyc;
        checks++;
        // t_in holds the count before the accepting edge, tv the count after the valid edge
        if (tv - t_in[got] - 1 != LAT) begin
          failures++; $display("symbol %0d latency %0d, expected %0d", got, tv - t_in[got] - 1, LAT);
        end
        m_axis_tready = ($urandom_range(0, 2) != 0);
      end else if (m_axis_tvalid) m_axis_tready = 1;
      else m_axis_tready = 0;
      if (m_axis_tvalid && !m_axis_tready) n_stall++;
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        checks++;
        if (int'(m_axis_tdata) != expd[got]) begin
          failures++; $display("symbol %0d: decision %0d, expected %0d", got, m_axis_tdata, expd[got]);
        end
        checks++;
        if (m_axis_tlast != lasts[got]) begin failures++; $display("symbol %0d: tlast wrong", got); end
        if (m_axis_tlast) n_last++;
        n_class[expd[got] % N_O]++;
        got++;
        seen = 0;
      end
    end
    repeat (3) @(posedge clk);
    $display("latency %0d clocks per symbol", LAT);
    $display("spikes=%0d recurrent=%0d fc0_sat=%0d current_sat=%0d stalls=%0d feedback_waits=%0d tlast=%0d",
             n_spike, n_rec, n_sat0, n_isat, n_stall, n_wait, n_last);
    $display("classes: %0d %0d %0d %0d", n_class[0], n_class[1], n_class[2], n_class[3]);
    checks++;
    if (n_spike == 0 || n_rec == 0 || n_sat0 == 0 || n_isat == 0 || n_stall == 0 ||
        n_wait == 0 || n_last == 0 || n_class[0] == 0 || n_class[1] == 0 ||
        n_class[2] == 0 || n_class[3] == 0) begin
      failures++; $display("coverage hole");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
