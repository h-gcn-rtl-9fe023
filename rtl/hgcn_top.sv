// hgcn_top: H-GCN layer engine, one GCN layer out = sigma(A * (X * W)) per command.
//
// The graph has been reordered offline so that A splits into denser 64x64 tiles, handed
// to the AI-engine-style systolic arrays, and a very sparse remainder, handed to the PL
// SpMM unit. The layer is computed combination-first: the dense array (tpe_array, 4 x 50
// TPEs of 32x32) produces B = X*W, which is written to memory; the sparse array
// (stpe_array, 4 x 50 STPEs of 64x64, each tile sparse, dense or skipped) and the PL
// SpMM (pl_spmm) then compute A*B tile by tile, starting on the first B rows while the
// dense array still works on the rest. The pl_controller sequences all of it and sums
// the two partial results through the activation unit (act_unit) into memory.
//
// Interface: `start`/`cfg` come from the platform controller (software on the
// processing system), `busy`/`done` go back to it. Memory (NoC and DDR in the paper)
// is reached through a read channel with request id and in-order returns and a write
// channel; see pl_controller for the data layouts. dense_active/sparse_active show
// the two sequencers' activity, so their overlap can be observed.
// One layer covers NPASS*COLS*32 = 3200 vertices at the default size, hidden width
// ROWS*32 = 128, any number of 32-wide input feature tiles.
module hgcn_top
  import hgcn_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  output logic              dense_active,
  output logic              sparse_active,
  output logic              rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_req_id,
  input  logic              rd_req_ready,
  input  logic              rd_data_valid,
  input  word_t             rd_data,
  input  logic              rd_data_id,
  output logic              rd_data_ready,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output word_t             wr_data,
  input  logic              wr_ready
);
  localparam int unsigned NROW = (TILE_S / TILE_D) * COLS * TILE_D;

  logic [COLS-1:0] tpe_x_valid, stpe_a_valid;
  logic [ROWS-1:0] tpe_w_valid, stpe_b_valid;
  word_t tpe_word, stpe_word, pl_word, tpe_rd_data, stpe_rd_data, pl_rd_data, act_in, act_out;
  logic  tpe_go, tpe_first, tpe_all_done, stpe_go, stpe_first, stpe_all_done;
  logic  pl_clr, pl_b_valid, pl_e_valid, pl_e_ready, pl_idle, act_en;
  logic [$clog2(ROWS)-1:0] tpe_rd_r, stpe_rd_r;
  logic [$clog2(COLS)-1:0] tpe_rd_c, stpe_rd_c;
  logic [$clog2(TILE_D*TILE_D/LANES)-1:0] tpe_rd_addr;
  logic [$clog2(TILE_S*TILE_D/LANES)-1:0] stpe_rd_addr;
  logic [$clog2(NROW)-1:0] pl_rd_row;
  logic [$clog2(ROWS*TILE_D/LANES)-1:0] pl_rd_q;

  pl_controller #(.ROWS(ROWS), .COLS(COLS), .TD(TILE_D), .TS(TILE_S)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .dense_active, .sparse_active,
    .rd_req_valid, .rd_req_addr, .rd_req_id, .rd_req_ready,
    .rd_data_valid, .rd_data, .rd_data_id, .rd_data_ready,
    .wr_valid, .wr_addr, .wr_data, .wr_ready,
    .tpe_x_valid, .tpe_w_valid, .tpe_word, .tpe_go, .tpe_first, .tpe_all_done,
    .tpe_rd_r, .tpe_rd_c, .tpe_rd_addr, .tpe_rd_data,
    .stpe_a_valid, .stpe_b_valid, .stpe_word, .stpe_go, .stpe_first, .stpe_all_done,
    .stpe_rd_r, .stpe_rd_c, .stpe_rd_addr, .stpe_rd_data,
    .pl_clr, .pl_b_valid, .pl_e_valid, .pl_word, .pl_e_ready, .pl_idle,
    .pl_rd_row, .pl_rd_q, .pl_rd_data,
    .act_en, .act_in, .act_out
  );

  tpe_array #(.ROWS(ROWS), .COLS(COLS), .TILE(TILE_D)) u_dense (
    .clk, .rst_n,
    .x_valid(tpe_x_valid), .x_word(tpe_word),
    .w_valid(tpe_w_valid), .w_word(tpe_word),
    .go(tpe_go), .first(tpe_first), .all_done(tpe_all_done),
    .rd_r(tpe_rd_r), .rd_c(tpe_rd_c), .rd_addr(tpe_rd_addr), .rd_data(tpe_rd_data)
  );

  stpe_array #(.ROWS(ROWS), .COLS(COLS), .TILE(TILE_S), .BCOLS(TILE_D)) u_sparse (
    .clk, .rst_n,
    .a_valid(stpe_a_valid), .a_word(stpe_word),
    .b_valid(stpe_b_valid), .b_word(stpe_word),
    .go(stpe_go), .first(stpe_first), .all_done(stpe_all_done),
    .rd_r(stpe_rd_r), .rd_c(stpe_rd_c), .rd_addr(stpe_rd_addr), .rd_data(stpe_rd_data)
  );

  pl_spmm #(.NROW(NROW), .BROWS(TILE_S), .HID(ROWS*TILE_D)) u_pl (
    .clk, .rst_n, .clr(pl_clr),
    .b_valid(pl_b_valid), .b_word(pl_word),
    .e_valid(pl_e_valid), .e_ready(pl_e_ready), .e_word(pl_word),
    .idle(pl_idle),
    .rd_row(pl_rd_row), .rd_q(pl_rd_q), .rd_data(pl_rd_data)
  );

  act_unit u_act (.en(act_en), .in_word(act_in), .out_word(act_out));

endmodule
