// tb_decision_unit -- accumulation over time steps and argmax.
// Sends 200 symbols of 5 random score vectors (small ranges so ties occur),
// checks the decided class (largest sum, lowest index on a tie), the sums,
// that a waiting decision blocks new scores, and that the decision is valid
// one clock after the last step's handshake. Ties and output stalls must occur.
module tb_decision_unit;
  localparam int NO = 4, SW = 16, DW = 20, T = 5, NSYM = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_tie = 0, n_stall = 0;

  logic in_valid = 0, in_ready, in_first = 0, in_last = 0;
  logic [NO-1:0][SW-1:0] in_scores;
  logic out_valid, out_ready = 0;
  logic [1:0] out_symbol;
  logic [NO-1:0][DW-1:0] out_sums;

  decision_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sums [NO], sc, best, nbest;
    in_scores = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NSYM; n++) begin
      for (int o = 0; o < NO; o++) sums[o] = 0;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        for (int o = 0; o < NO; o++) begin
          sc = (n % 2) ? int'($urandom_range(0, 4)) - 2 : int'($urandom_range(0, 20000)) - 10000;
          in_scores[o] = SW'(sc);
          sums[o] += sc;
        end
        in_valid = 1; in_first = (t == 0); in_last = (t == T - 1);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      best = 0; nbest = 0;
      for (int o = 1; o < NO; o++) if (sums[o] > sums[best]) best = o;
      for (int o = 0; o < NO; o++) if (sums[o] == sums[best]) nbest++;
      if (nbest > 1) n_tie++;
      checks++;
      if (!out_valid) begin failures++; $display("decision not valid one clock after last step"); end
      // hold the decision for a few clocks; new scores must be refused
      in_valid = 1; in_first = 1; in_last = 0;
      repeat (int'($urandom_range(0, 3))) begin
        @(posedge clk);
        n_stall++;
        checks++;
        if (in_ready) begin failures++; $display("scores taken while a decision waits"); end
      end
      @(negedge clk); in_valid = 0;
      checks++;
      if (int'(out_symbol) != best) begin
        failures++; $display("sym %0d: got class %0d exp %0d", n, out_symbol, best);
      end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'($signed(out_sums[o])) != sums[o]) begin failures++; $display("sum mismatch"); end
      end
      out_ready = 1;
      @(negedge clk); out_ready = 0;
      checks++;
      if (out_valid) begin failures++; $display("decision not released"); end
    end
    checks++;
    if (n_tie == 0 || n_stall == 0) begin failures++; $display("coverage hole"); end
    $display("ties=%0d stalls=%0d", n_tie, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
