// tpe_array: dense systolic tensor array computing B = X * W.
//
// ROWS x COLS dense TPEs. Row r holds the output columns r*TILE..r*TILE+TILE-1 of B
// (the paper's W[:, 0:32] ... W[:, 96:128] rows); column c holds output rows
// c*TILE..c*TILE+TILE-1 of the current row pass (X[0:32,:] ... X[1568:1600,:]). A W
// tile enters at the left PE of its row (w_valid[r]) and moves right one PE per cycle;
// an X tile enters at the bottom PE of its column (x_valid[c]) and moves up. The data
// bus of each entry point is shared (w_word, x_word); the valid bit selects the row or
// column. `go`/`first` are broadcast, `all_done` is the AND of the PEs' done flags,
// and any PE's result word is read through (rd_r, rd_c, rd_addr).
//
// From the paper: 4 rows x 50 columns of 32x32 dense PEs and the directions in which
// X and W move. Own choices: shared entry buses, broadcast start, read multiplexer.
module tpe_array
  import hgcn_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned TILE = TILE_D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic [COLS-1:0] x_valid,
  input  word_t x_word,
  input  logic [ROWS-1:0] w_valid,
  input  word_t w_word,
  input  logic  go,
  input  logic  first,
  output logic  all_done,
  input  logic [$clog2(ROWS)-1:0] rd_r,
  input  logic [$clog2(COLS)-1:0] rd_c,
  input  logic [$clog2(TILE*TILE/LANES)-1:0] rd_addr,
  output word_t rd_data
);
  logic  xv [ROWS+1][COLS];
  word_t xd [ROWS+1][COLS];
  logic  wv [ROWS][COLS+1];
  word_t wd [ROWS][COLS+1];
  word_t rd [ROWS][COLS];
  logic [ROWS*COLS-1:0] dn;

  for (genvar c = 0; c < COLS; c++) begin : g_xin
    assign xv[0][c] = x_valid[c];
    assign xd[0][c] = x_word;
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_win
    assign wv[r][0] = w_valid[r];
    assign wd[r][0] = w_word;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      tpe #(.TILE(TILE)) u_pe (
        .clk, .rst_n,
        .x_in_valid (xv[r][c]),   .x_in (xd[r][c]),
        .x_out_valid(xv[r+1][c]), .x_out(xd[r+1][c]),
        .w_in_valid (wv[r][c]),   .w_in (wd[r][c]),
        .w_out_valid(wv[r][c+1]), .w_out(wd[r][c+1]),
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
