// tb_hgcn_full: the accelerator at its full size (4 + 4 rows x 50 columns of PEs,
// 3200 vertices, hidden width 128) running one complete GCN layer with 32 input
// features and ReLU, checked word by word against a reference (see hgcn_env).
module tb_hgcn_full;
  import hgcn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, dense_active, sparse_active;
  layer_cfg_t cfg;
  logic rd_req_valid, rd_req_id, rd_req_ready, rd_data_valid, rd_data_id, rd_data_ready;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  word_t rd_data, wr_data;
  logic wr_valid, wr_ready;

  hgcn_top dut (.*);
  hgcn_env #(.ROWS(N_ROWS), .COLS(N_COLS), .KX1(1), .LAYERS(1), .WATCHDOG(3000000)) env (.*);
endmodule
