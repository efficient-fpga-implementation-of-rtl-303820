// tb_weight_mem -- fills a default-sized (72 x 104, PE 8, SIMD 8) weight memory
// with random words by matrix coordinates, then reads every (neuron fold,
// synapse fold) block and checks each lane against the matrix:
// lane [p][s] of fold (nf, sf) must hold W[nf*PE+p][sf*SIMD+s].
// Out-of-range writes must not disturb the contents.
module tb_weight_mem;
  localparam int ROWS = 72, COLS = 104, PE = 8, SIMD = 8, W = 8;
  localparam int NF = ROWS / PE, SF = COLS / SIMD;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [6:0] wr_row, wr_col;
  logic [W-1:0] wr_data;
  logic [3:0] rd_nf, rd_sf;
  logic [PE-1:0][SIMD-1:0][W-1:0] rd_data;
  logic [W-1:0] ref_m [ROWS][COLS];
  int checks = 0, failures = 0;

  weight_mem dut (.*);   // defaults: 72 x 104, PE 8, SIMD 8, 8 bit

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_nf = 0; rd_sf = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        ref_m[r][c] = W'($urandom);
        @(negedge clk);
        we = 1; wr_row = 7'(r); wr_col = 7'(c); wr_data = ref_m[r][c];
      end
    // writes outside the matrix are ignored
    @(negedge clk); wr_row = 7'(ROWS); wr_col = 7'd0; wr_data = ~ref_m[0][0];
    @(negedge clk); wr_row = 7'd0; wr_col = 7'(COLS + 3); wr_data = ~ref_m[0][3];
    @(negedge clk); we = 0;
    for (int nf = 0; nf < NF; nf++)
      for (int sf = 0; sf < SF; sf++) begin
        rd_nf = 4'(nf); rd_sf = 4'(sf);
        #1;
        for (int p = 0; p < PE; p++)
          for (int s = 0; s < SIMD; s++) begin
            checks++;
            if (rd_data[p][s] != ref_m[nf*PE+p][sf*SIMD+s]) begin
              failures++;
              if (failures < 10) $display("mismatch nf=%0d sf=%0d p=%0d s=%0d", nf, sf, p, s);
            end
          end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
