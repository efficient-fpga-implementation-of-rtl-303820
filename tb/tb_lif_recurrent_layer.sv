// tb_lif_recurrent_layer -- the FC2 + LIF layer at its default size (72
// neurons, PE 8, SIMD 8) against an integer reference model.
// Random recurrent weights are loaded, then 12 symbols of 5 time steps each
// are streamed with random FC1 currents. Every spike of every step is
// compared. The output is stalled at random; the clocks from input handshake
// to output valid must be (72/8)*(72/8) = 81. Counts spikes, steps in which
// the recurrent term changed a neuron's input, state clears at a new symbol
// with live state, and stalls; each must occur at least once.
module tb_lif_recurrent_layer;
  localparam int N = 72, PE = 8, SIMD = 8, T = 5, NSYM = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_spike = 0, n_rec = 0, n_clear = 0, n_stall = 0;

  logic       w_we = 0;
  logic [6:0] w_row, w_col;
  logic [7:0] w_data;
  logic       in_valid = 0, in_ready, in_first = 0, in_last = 0;
  logic [N-1:0][7:0] in_data;
  logic       out_valid, out_ready = 0, out_first, out_last;
  logic [N-1:0] out_spikes;

  lif_recurrent_layer dut (.*);

  int V [N][N];
  int cur [NSYM*T][N];
  int rv [N], ri [N], rz [N];
  int exp_z [NSYM*T][N];

  function automatic int fdiv(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction
  function automatic int clamp(int x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model for the whole sequence
  task automatic build_reference();
    int nz [N];
    int live;
    for (int k = 0; k < NSYM*T; k++) begin
      if (k % T == 0) begin
        live = 0;
        for (int n = 0; n < N; n++) begin
          if (rv[n] != 0 || ri[n] != 0 || rz[n] != 0) live = 1;
          rv[n] = 0; ri[n] = 0; rz[n] = 0;
        end
        if (live) n_clear++;
      end
      for (int n = 0; n < N; n++) begin
        int rec, vd, id, s;
        rec = 0;
        for (int j = 0; j < N; j++) if (rz[j] != 0) rec += V[n][j];
        if (fdiv(rec, 4) != 0) n_rec++;
        vd = rv[n] + fdiv(ri[n] - rv[n], 8);
        id = ri[n] - fdiv(ri[n], 4);
        s  = (vd > 16) ? 1 : 0;
        rv[n] = s ? 0 : clamp(vd);
        ri[n] = clamp(id + cur[k][n] + fdiv(rec, 4));
        nz[n] = s;
        if (s) n_spike++;
      end
      for (int n = 0; n < N; n++) begin rz[n] = nz[n]; exp_z[k][n] = nz[n]; end
    end
  endtask

  initial begin : producer
    w_row = 0; w_col = 0; w_data = 0; in_data = '0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) V[r][c] = int'($urandom_range(0, 80)) - 40;
    for (int k = 0; k < NSYM*T; k++)
      for (int n = 0; n < N; n++)
        cur[k][n] = (k % T == 0) ? int'($urandom_range(0, 160)) - 40 : int'($urandom_range(0, 40)) - 20;
    for (int n = 0; n < N; n++) begin rv[n] = 0; ri[n] = 0; rz[n] = 0; end
    build_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk); w_we = 1; w_row = 7'(r); w_col = 7'(c); w_data = 8'(V[r][c]);
      end
    @(negedge clk); w_we = 0;
    for (int k = 0; k < NSYM*T; k++) begin
      @(negedge clk);
      in_valid = 1; in_first = (k % T == 0); in_last = (k % T == T - 1);
      for (int n = 0; n < N; n++) in_data[n] = 8'(cur[k][n]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  end

  initial begin : consumer
    int got = 0;
    while (got < NSYM*T) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && !out_ready) n_stall++;
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if (int'(out_spikes[n]) != exp_z[got][n]) begin
            failures++;
            if (failures < 10) $display("step %0d neuron %0d: got %0d exp %0d", got, n, out_spikes[n], exp_z[got][n]);
          end
        end
        checks++;
        if (out_first != (got % T == 0) || out_last != (got % T == T - 1)) begin
          failures++; $display("tag mismatch at step %0d", got);
        end
        got++;
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (n_spike == 0 || n_rec == 0 || n_clear == 0 || n_stall == 0) begin
      failures++; $display("coverage hole");
    end
    $display("spikes=%0d recurrent_inputs=%0d clears=%0d stalls=%0d", n_spike, n_rec, n_clear, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : latency
    int n;
    wait (rst_n);
    @(posedge clk iff (in_valid && in_ready));
    n = 0;
    do begin @(negedge clk); if (!out_valid) n++; end while (!out_valid);
    checks++;
    if (n != (N / PE) * (N / SIMD)) begin
      failures++; $display("latency %0d, expected %0d", n, (N/PE)*(N/SIMD));
    end else $display("latency %0d clocks", n);
  end
endmodule
