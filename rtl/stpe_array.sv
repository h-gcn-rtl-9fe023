// stpe_array: sparse systolic tensor array computing A * B for the AI-engine part of A.
//
// ROWS x COLS STPEs. Row r holds output columns r*BCOLS..r*BCOLS+BCOLS-1 (the paper's
// B[:, 0:32] ... B[:, 96:128] rows); column c holds output rows c*TILE..c*TILE+TILE-1
// (A[0:64,:] ... A[3136:3200,:]). The A tile of column c enters at the top PE
// (row ROWS-1, a_valid[c]) and moves down one PE per cycle; the B tile of row r enters
// at the left PE (b_valid[r]) and moves right. Entry data buses are shared, `go`/`first`
// are broadcast, `all_done` is the AND of all done flags, and results are read through
// (rd_r, rd_c, rd_addr). Whether a PE works in sparse, dense or skip mode is set per
// tile by the tile header, so the array holds the paper's mix of STPEs and TPEs.
//
// From the paper: 4 x 50 PEs, 64x64 A tiles, 32-wide B slices, A moving down the
// columns and B along the rows. Own choices: shared entry buses and the read mux.
module stpe_array
  import hgcn_pkg::*;
#(
  parameter int unsigned ROWS  = N_ROWS,
  parameter int unsigned COLS  = N_COLS,
  parameter int unsigned TILE  = TILE_S,
  parameter int unsigned BCOLS = TILE_D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic [COLS-1:0] a_valid,
  input  word_t a_word,
  input  logic [ROWS-1:0] b_valid,
  input  word_t b_word,
  input  logic  go,
  input  logic  first,
  output logic  all_done,
  input  logic [$clog2(ROWS)-1:0] rd_r,
  input  logic [$clog2(COLS)-1:0] rd_c,
  input  logic [$clog2(TILE*BCOLS/LANES)-1:0] rd_addr,
  output word_t rd_data
);
  // index ROWS is the entry point above the top row
  logic  av [ROWS+1][COLS];
  word_t ad [ROWS+1][COLS];
  logic  bv [ROWS][COLS+1];
  word_t bd [ROWS][COLS+1];
  word_t rd [ROWS][COLS];
  logic [ROWS*COLS-1:0] dn;

  for (genvar c = 0; c < COLS; c++) begin : g_ain
    assign av[ROWS][c] = a_valid[c];
    assign ad[ROWS][c] = a_word;
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_bin
    assign bv[r][0] = b_valid[r];
    assign bd[r][0] = b_word;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      stpe #(.TILE(TILE), .BCOLS(BCOLS)) u_pe (
        .clk, .rst_n,
        .a_in_valid (av[r+1][c]), .a_in (ad[r+1][c]),
        .a_out_valid(av[r][c]),   .a_out(ad[r][c]),
        .b_in_valid (bv[r][c]),   .b_in (bd[r][c]),
        .b_out_valid(bv[r][c+1]), .b_out(bd[r][c+1]),
        .go, .first,
        .done   (dn[r*COLS+c]),
        .rd_addr,
        .rd_data(rd[r][c])
      );
    end
  end

  assign all_done = &dn;
  assign rd_data  = rd[rd_r][rd_c];

endmodule
