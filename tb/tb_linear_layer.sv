// tb_linear_layer -- checks the folded matrix-vector unit in two of its uses.
//  dut0: FC0 shape at the module defaults (104 -> 72, PE 8, SIMD 8, signed
//        4-bit inputs in {-1,0,1}, bias, >>> 2 and 8-bit saturation).
//  dut3: FC3 shape (72 -> 4, PE 4, SIMD 8, 1-bit spike inputs, bias, no shift).
// Random weights, biases and inputs; every output is compared with an integer
// reference. The output side is stalled at random, and the clocks from input
// handshake to output valid must equal (MH/PE)*(MW/SIMD). Counts stalls and
// saturations, and fails if either never happened.
module tb_linear_layer;
  localparam int MW0 = 104, MH0 = 72, PE0 = 8, SI0 = 8;
  localparam int MW3 = 72,  MH3 = 4,  PE3 = 4, SI3 = 8;
  localparam int NVEC = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_stall = 0, n_sat = 0;

  // ---------------- dut0 ----------------
  logic        w_we0 = 0, b_we0 = 0;
  logic [6:0]  w_row0, w_col0, b_row0;
  logic [7:0]  w_data0, b_data0;
  logic        iv0 = 0, ir0, if0 = 0, il0 = 0, ov0, or0 = 0, of0, ol0;
  logic [MW0-1:0][3:0] id0;
  logic [MH0-1:0][7:0] od0;
  linear_layer dut0 (
    .clk, .rst_n, .w_we(w_we0), .w_row(w_row0), .w_col(w_col0), .w_data(w_data0),
    .b_we(b_we0), .b_row(b_row0), .b_data(b_data0),
    .in_valid(iv0), .in_ready(ir0), .in_data(id0), .in_first(if0), .in_last(il0),
    .out_valid(ov0), .out_ready(or0), .out_data(od0), .out_first(of0), .out_last(ol0));

  // ---------------- dut3 ----------------
  logic        w_we3 = 0, b_we3 = 0;
  logic [1:0]  w_row3, b_row3;
  logic [6:0]  w_col3;
  logic [7:0]  w_data3, b_data3;
  logic        iv3 = 0, ir3, ov3, or3 = 1, of3, ol3;
  logic [MW3-1:0][0:0]  id3;
  logic [MH3-1:0][15:0] od3;
  linear_layer #(.MW(MW3), .MH(MH3), .PE(PE3), .SIMD(SI3), .IN_W(1), .IN_SIGNED(1'b0),
                 .WGT_W(8), .HAS_BIAS(1'b1), .ACC_W(24), .OUT_SHIFT(0), .OUT_W(16)) dut3 (
    .clk, .rst_n, .w_we(w_we3), .w_row(w_row3), .w_col(w_col3), .w_data(w_data3),
    .b_we(b_we3), .b_row(b_row3), .b_data(b_data3),
    .in_valid(iv3), .in_ready(ir3), .in_data(id3), .in_first(1'b0), .in_last(1'b0),
    .out_valid(ov3), .out_ready(or3), .out_data(od3), .out_first(of3), .out_last(ol3));

  int W0 [MH0][MW0]; int B0 [MH0];
  int W3 [MH3][MW3]; int B3 [MH3];
  int x0 [NVEC][MW0];
  logic x0_last [NVEC];

  function automatic int sat8(int x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction
  function automatic int asr(int x, int s);  // floor(x / 2^s)
    return (x >= 0) ? (x >> s) : -((-x + (1 << s) - 1) >> s);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker for dut0, with random stalls and latency measurement
  int t_accept [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : producer
    w_row0 = 0; w_col0 = 0; w_data0 = 0; b_row0 = 0; b_data0 = 0; id0 = '0;
    w_row3 = 0; w_col3 = 0; w_data3 = 0; b_row3 = 0; b_data3 = 0; id3 = '0;
    for (int r = 0; r < MH0; r++) begin
      B0[r] = int'($urandom_range(0, 255)) - 128;
      for (int c = 0; c < MW0; c++) W0[r][c] = int'($urandom_range(0, 255)) - 128;
    end
    for (int r = 0; r < MH3; r++) begin
      B3[r] = int'($urandom_range(0, 255)) - 128;
      for (int c = 0; c < MW3; c++) W3[r][c] = int'($urandom_range(0, 255)) - 128;
    end
    for (int k = 0; k < NVEC; k++) begin
      for (int c = 0; c < MW0; c++) x0[k][c] = int'($urandom_range(0, 2)) - 1;
      x0_last[k] = k[0];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < MH0; r++) begin
      for (int c = 0; c < MW0; c++) begin
        @(negedge clk); w_we0 = 1; w_row0 = 7'(r); w_col0 = 7'(c); w_data0 = 8'(W0[r][c]);
      end
      @(negedge clk); w_we0 = 0; b_we0 = 1; b_row0 = 7'(r); b_data0 = 8'(B0[r]);
      @(negedge clk); b_we0 = 0;
    end
    for (int r = 0; r < MH3; r++) begin
      for (int c = 0; c < MW3; c++) begin
        @(negedge clk); w_we3 = 1; w_row3 = 2'(r); w_col3 = 7'(c); w_data3 = 8'(W3[r][c]);
      end
      @(negedge clk); w_we3 = 0; b_we3 = 1; b_row3 = 2'(r); b_data3 = 8'(B3[r]);
      @(negedge clk); b_we3 = 0;
    end
    // stream of vectors into dut0
    for (int k = 0; k < NVEC; k++) begin
      @(negedge clk);
      iv0 = 1; if0 = (k == 0); il0 = x0_last[k];
      for (int c = 0; c < MW0; c++) id0[c] = 4'(x0[k][c]);
      @(posedge clk);
      while (!ir0) @(posedge clk);
      t_accept.push_back(cyc);
    end
    @(negedge clk); iv0 = 0;
  end

  initial begin : consumer0
    int got = 0, lat, acc, e;
    while (got < NVEC) begin
      @(negedge clk);
      or0 = ($urandom_range(0, 3) != 0);
      if (ov0 && !or0) n_stall++;
      @(posedge clk);
      if (ov0 && or0) begin
        for (int r = 0; r < MH0; r++) begin
          acc = B0[r];
          for (int c = 0; c < MW0; c++) acc += W0[r][c] * x0[got][c];
          e = sat8(asr(acc, 2));
          if (e != asr(acc, 2)) n_sat++;
          checks++;
          if (int'($signed(od0[r])) != e) begin
            failures++;
            if (failures < 10) $display("dut0 vec %0d row %0d: got %0d exp %0d", got, r, $signed(od0[r]), e);
          end
        end
        checks++;
        if (of0 != (got == 0) || ol0 != x0_last[got]) begin
          failures++; $display("dut0 tag mismatch vec %0d", got);
        end
        got++;
      end
    end
  end

  // latency: first valid after an accept with the output free
  initial begin : latency0
    int n;
    wait (rst_n);
    @(posedge clk iff (iv0 && ir0));
    // clocks after the accepting edge until the output is valid
    n = 0;
    do begin @(negedge clk); if (!ov0) n++; end while (!ov0);
    checks++;
    if (n != (MH0 / PE0) * (MW0 / SI0)) begin
      failures++; $display("dut0 latency %0d, expected %0d", n, (MH0/PE0)*(MW0/SI0));
    end else $display("dut0 latency %0d clocks", n);
  end

  initial begin : test3
    int acc, xs [MW3];
    wait (rst_n);
    wait (t_accept.size() > 0);   // weights of dut3 are loaded by then
    for (int k = 0; k < 16; k++) begin
      @(negedge clk);
      for (int c = 0; c < MW3; c++) begin xs[c] = int'($urandom_range(0, 1)); id3[c] = 1'(xs[c]); end
      iv3 = 1;
      @(posedge clk); while (!ir3) @(posedge clk);
      @(negedge clk); iv3 = 0;
      @(posedge clk iff ov3);
      for (int r = 0; r < MH3; r++) begin
        acc = B3[r];
        for (int c = 0; c < MW3; c++) acc += W3[r][c] * xs[c];
        checks++;
        if (int'($signed(od3[r])) != acc) begin
          failures++; $display("dut3 vec %0d row %0d: got %0d exp %0d", k, r, $signed(od3[r]), acc);
        end
      end
    end
  end

  initial begin : finish
    wait (rst_n);
    wait (checks >= NVEC * (MH0 + 1) + 1 + 16 * MH3);
    repeat (5) @(posedge clk);
    $display("stalls=%0d saturations=%0d", n_stall, n_sat);
    if (n_stall == 0 || n_sat == 0) begin failures++; $display("coverage hole"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
