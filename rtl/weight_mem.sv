// weight_mem -- banked parameter memory of one folded layer.
//
// Holds a ROWS x COLS matrix of W-bit words (weights, or a bias vector with
// COLS = 1) arranged for a layer that computes PE rows and SIMD columns per
// cycle: row r lives in bank r % PE at neuron fold r / PE, column c at synapse
// fold c / SIMD, lane c % SIMD. One read returns the PE x SIMD block of fold
// (rd_nf, rd_sf) without a clock (distributed/LUT RAM style read). Writes go
// one element per clock, by matrix coordinates, so a host can load a trained
// network after reset. The paper stores weights on chip (its tables show LUT
// RAM and BRAM use) but says nothing of how they are loaded; the write port and
// the asynchronous read are this design's choices.
module weight_mem #(
  parameter int unsigned ROWS = 72,
  parameter int unsigned COLS = 104,
  parameter int unsigned PE   = 8,
  parameter int unsigned SIMD = 8,
  parameter int unsigned W    = 8,
  localparam int unsigned NF  = ROWS / PE,
  localparam int unsigned SF  = COLS / SIMD,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [RW-1:0]                     wr_row,
  input  logic [CW-1:0]                     wr_col,
  input  logic [W-1:0]                      wr_data,
  input  logic [NFW-1:0]                    rd_nf,
  input  logic [SFW-1:0]                    rd_sf,
  output logic [PE-1:0][SIMD-1:0][W-1:0]    rd_data
);
  if (ROWS % PE != 0) begin : g_chk_rows
    $error("weight_mem: ROWS must be a multiple of PE");
  end
  if (COLS % SIMD != 0) begin : g_chk_cols
    $error("weight_mem: COLS must be a multiple of SIMD");
  end

  logic [SIMD-1:0][W-1:0] mem [PE][NF*SF];

  always_ff @(posedge clk) begin
    if (we && (int'(wr_row) < ROWS) && (int'(wr_col) < COLS))
      mem[int'(wr_row) % PE][(int'(wr_row) / PE) * SF + int'(wr_col) / SIMD]
         [int'(wr_col) % SIMD] <= wr_data;
  end

  always_comb begin
    for (int p = 0; p < PE; p++)
      rd_data[p] = mem[p][int'(rd_nf) * SF + int'(rd_sf)];
  end
endmodule
