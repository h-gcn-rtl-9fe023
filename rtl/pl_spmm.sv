// pl_spmm: row-wise-product SpMM engine in the programmable logic.
//
// It handles the non-zeros of A that are not given to the AI-engine arrays: the
// scattered nodes (tiles below 1% density) and the non-zeros an STPE tile row leaves
// over after its padding is chosen. For column tile kt of A it first receives the
// matching TILE x HID tile of B (b_valid/b_word, row-major, HID/LANES words per row),
// then a stream of non-zeros (e_valid/e_ready/e_word). Each entry word carries two
// entries in lanes 4m..4m+3 = {row, col, value, flag}; flag 0 marks padding.
// For every entry it performs C[row][:] += value * B[col][:], one word of LANES
// multiply-adds per cycle, i.e. HID/LANES cycles per non-zero (16 at HID = 128); a
// padding entry costs one cycle. C holds NROW full output rows and is cleared by `clr`
// through per-row valid bits. `idle` is high when no entry word is held. The result is
// read combinationally through rd_row/rd_q.
//
// From the paper: a PL SpMM unit using the row-wise product (in the spirit of
// MatRaptor) for the sparsest part of A. Own choices: one entry engine, the entry
// word format, the on-chip C buffer for the whole layer and integer arithmetic.
module pl_spmm
  import hgcn_pkg::*;
#(
  parameter int unsigned NROW  = 2 * N_COLS * TILE_D,   // output rows of one layer (3200)
  parameter int unsigned BROWS = TILE_S,                // rows of one B tile (64)
  parameter int unsigned HID   = N_ROWS * TILE_D        // hidden width (128)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  b_valid,
  input  word_t b_word,
  input  logic  e_valid,
  output logic  e_ready,
  input  word_t e_word,
  output logic  idle,
  input  logic [$clog2(NROW)-1:0] rd_row,
  input  logic [$clog2(HID/LANES)-1:0] rd_q,
  output word_t rd_data
);
  localparam int unsigned HWPR = HID / LANES;
  localparam int unsigned NBW  = BROWS * HWPR;
  localparam int unsigned BAW  = $clog2(NBW);
  localparam int unsigned QW   = $clog2(HWPR);
  localparam int unsigned ROWW = $clog2(NROW);
  localparam int unsigned COLW = $clog2(BROWS);

  word_t bm [NBW];
  word_t cm [NROW*HWPR];
  logic [NROW-1:0] row_valid;

  logic [BAW-1:0] b_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_cnt <= '0;
    else if (b_valid) begin
      bm[b_cnt] <= b_word;
      b_cnt     <= (b_cnt == BAW'(NBW - 1)) ? '0 : b_cnt + 1'b1;
    end
  end

  logic          have;
  word_t         cur;
  logic          m_c;       // which of the two entries
  logic [QW-1:0] q_c;

  logic [ROWW-1:0] e_row;
  logic [COLW-1:0] e_col;
  elem_t           e_val;
  logic            e_flag;
  logic [$clog2(NROW*HWPR)-1:0] c_a;
  word_t           c_old;
  always_comb begin
    e_row  = ROWW'(cur[4*m_c]);
    e_col  = COLW'(cur[4*m_c+1]);
    e_val  = elem_t'(cur[4*m_c+2]);
    e_flag = cur[4*m_c+3][0];
    c_a    = $bits(c_a)'(e_row * HWPR + q_c);
    c_old  = row_valid[e_row] ? cm[c_a] : '0;
  end

  assign e_ready = !have;
  assign idle    = !have;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have      <= 1'b0;
      cur       <= '0;
      m_c       <= 1'b0;
      q_c       <= '0;
      row_valid <= '0;
    end else begin
      if (clr) row_valid <= '0;
      if (!have) begin
        if (e_valid) begin
          have <= 1'b1;
          cur  <= e_word;
          m_c  <= 1'b0;
          q_c  <= '0;
        end
      end else if (!e_flag) begin
        // padding entry
        q_c <= '0;
        if (m_c) have <= 1'b0;
        m_c <= ~m_c;
      end else begin
        cm[c_a] <= mac_word(c_old, e_val, bm[BAW'(e_col * HWPR) + BAW'(q_c)]);
        if (q_c == QW'(HWPR - 1)) begin
          q_c <= '0;
          row_valid[e_row] <= 1'b1;
          if (m_c) have <= 1'b0;
          m_c <= ~m_c;
        end else begin
          q_c <= q_c + 1'b1;
        end
      end
    end
  end

  assign rd_data = row_valid[rd_row] ? cm[$bits(c_a)'(rd_row * HWPR + rd_q)] : '0;

endmodule
