// tb_tap_buffer -- the DFE tap line at its default size (8 past symbols,
// 8 input neurons per received symbol, 4 per decision, 5 time steps).
// Streams 40 random encoded symbols; for each it checks the five vectors
// (time step 0 = taps, then zeros) and their first/last tags against a
// reference history, returns a random decision after a random delay, and
// checks that no new symbol is taken before that decision arrived.
// Output stalls and input waits for feedback are counted and must occur.
module tb_tap_buffer;
  localparam int NH = 8, RX = 8, EST = 4, IW = 4, T = 5, NSYM = 40;
  localparam int NI = RX * (NH + 1) + EST * NH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_stall = 0, n_block = 0;

  logic s_valid = 0, s_ready, s_last = 0;
  logic [RX-1:0][IW-1:0] s_data;
  logic out_valid, out_ready = 0, out_first, out_last;
  logic [NI-1:0][IW-1:0] out_data;
  logic fb_valid = 0;
  logic [1:0] fb_symbol = 0;
  logic cur_last;

  tap_buffer dut (.*);

  int rxh [NH+1][RX];   // reference: rxh[0] current
  int esth [NH];        // reference: decision history, -1 = none

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, dly, sym;
    logic lst;
    s_data = '0;
    for (int k = 0; k <= NH; k++) for (int j = 0; j < RX; j++) rxh[k][j] = 0;
    for (int k = 0; k < NH; k++) esth[k] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NSYM; n++) begin
      // offer a symbol
      @(negedge clk);
      for (int k = NH; k > 0; k--) for (int j = 0; j < RX; j++) rxh[k][j] = rxh[k-1][j];
      for (int j = 0; j < RX; j++) begin
        rxh[0][j] = int'($urandom_range(0, 2)) - 1;
        s_data[j] = IW'(rxh[0][j]);
      end
      lst = ($urandom_range(0, 4) == 0);
      s_valid = 1; s_last = lst;
      @(posedge clk); while (!s_ready) @(posedge clk);
      @(negedge clk); s_valid = 0;
      // collect the time steps
      for (int t = 0; t < T; t++) begin
        do begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
          if (out_valid && !out_ready) n_stall++;
          @(posedge clk);
        end while (!(out_valid && out_ready));
        checks++;
        if (out_first != (t == 0) || out_last != (t == T - 1)) begin
          failures++; $display("sym %0d step %0d: tag mismatch", n, t);
        end
        for (int i = 0; i < NI; i++) begin
          if (t != 0) e = 0;
          else if (i < RX * (NH + 1)) e = rxh[i / RX][i % RX];
          else e = (esth[(i - RX*(NH+1)) / EST] == (i - RX*(NH+1)) % EST) ? 1 : 0;
          checks++;
          if (int'($signed(out_data[i])) != e) begin
            failures++;
            if (failures < 10) $display("sym %0d step %0d elem %0d: got %0d exp %0d", n, t, i, $signed(out_data[i]), e);
          end
        end
      end
      @(negedge clk); out_ready = 0;
      // a next symbol must wait for the decision
      s_valid = 1;
      dly = int'($urandom_range(1, 6));
      repeat (dly) begin
        @(posedge clk);
        checks++;
        if (s_ready) begin failures++; $display("symbol taken before feedback"); end
        else n_block++;
      end
      checks++;
      if (cur_last != lst) begin failures++; $display("cur_last mismatch"); end
      @(negedge clk); s_valid = 0;
      sym = int'($urandom_range(0, 3));
      fb_valid = 1; fb_symbol = 2'(sym);
      @(negedge clk); fb_valid = 0;
      for (int k = NH - 1; k > 0; k--) esth[k] = esth[k-1];
      esth[0] = sym;
    end
    checks++;
    if (n_stall == 0 || n_block == 0) begin failures++; $display("coverage hole"); end
    $display("stalls=%0d feedback_waits=%0d", n_stall, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
