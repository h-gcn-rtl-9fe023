// tb_hgcn_top: end-to-end test of the accelerator at a reduced array size
// (2 rows x 2 columns of PEs, 128 vertices, hidden width 64), two GCN layers.
// The workload, memory model and checks are in hgcn_env.
module tb_hgcn_top;
  import hgcn_pkg::*;
  localparam int ROWS = 2, COLS = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, dense_active, sparse_active;
  layer_cfg_t cfg;
  logic rd_req_valid, rd_req_id, rd_req_ready, rd_data_valid, rd_data_id, rd_data_ready;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  word_t rd_data, wr_data;
  logic wr_valid, wr_ready;

  hgcn_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  hgcn_env #(.ROWS(ROWS), .COLS(COLS), .KX1(2), .LAYERS(2), .WATCHDOG(2000000)) env (.*);
endmodule
