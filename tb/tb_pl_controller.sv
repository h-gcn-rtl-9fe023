// tb_pl_controller: test of the layer sequencing (dense and sparse sequencers, shared
// memory channels, pointer tables, B-availability gating, result merge) on a wide,
// shallow array: 2 rows x 4 columns of PEs, 256 vertices, so that four column tiles
// of A are processed and two of them overlap the second X*W pass. The controller's
// own assertions check that the two result drains never collide and that no A*B tile
// starts before its B rows are written; hgcn_env checks the results and counts the
// overlap and the read stalls.
module tb_pl_controller;
  import hgcn_pkg::*;
  localparam int ROWS = 2, COLS = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, dense_active, sparse_active;
  layer_cfg_t cfg;
  logic rd_req_valid, rd_req_id, rd_req_ready, rd_data_valid, rd_data_id, rd_data_ready;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  word_t rd_data, wr_data;
  logic wr_valid, wr_ready;

  hgcn_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  hgcn_env #(.ROWS(ROWS), .COLS(COLS), .KX1(3), .LAYERS(2), .CAP(4), .WATCHDOG(3000000)) env (.*);
endmodule
