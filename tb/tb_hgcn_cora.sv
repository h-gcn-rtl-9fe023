// tb_hgcn_cora: the full-size accelerator running a two-layer GCN on a graph with
// the sizes of the Cora citation graph: 2708 vertices (padded to 3200), 1433 input
// features (padded to 1440 = 45 feature tiles), hidden width 128, and about 0.14%
// of the adjacency matrix non-zero. The edges are random but placed the way graph
// reordering leaves them: mostly in the 64x64 tiles on the block diagonal (3%
// non-zero, sparse STPE tiles), with a thin scatter elsewhere (0.07%, sent to the
// PL). Layer 1 uses ReLU, layer 2 does not; both are checked word by word against a
// reference (see hgcn_env). Values are random, not the real data set. The env's
// watchdog is backed here by an outer limit that ends the run if the env never does.
module tb_hgcn_cora;
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
  hgcn_env #(.ROWS(N_ROWS), .COLS(N_COLS), .KX1(45), .LAYERS(2), .WATCHDOG(6000000),
             .NV_USED(2708), .DIAG_P100K(3000), .OFF_P100K(70)) env (.*);

  initial begin
    repeat (7000000) @(posedge clk);
    $display("outer time limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
