// stpe: sparse/dense tensor processing element of the A*B systolic array.
//
// Each STPE owns one TILE x BCOLS block of the layer output (64 rows of A times a 32-wide
// slice of B) and accumulates it over the column tiles kt of A. Per kt it receives
// one A tile from the PE above (a_in, forwarded to a_out so a whole array column shares
// it) and one TILE x BCOLS tile of B from the left (b_in, forwarded to b_out so a whole
// array row shares it).
//
// A tile format, one word per cycle:
//   word 0      header: lane0 = mode (tile_mode_e), lane1 = number of groups G,
//               lane2 = number of words that follow the header
//   SPARSE:     G group words (lane0 = rows in group, lane1 = non-zeros per row), then
//               the padded entries row after row, LANES/2 (col, val) pairs per word
//               (lane 2m = column, lane 2m+1 = value)
//   DENSE:      TILE*TILE/LANES words of row-major values
//   SKIP:       nothing; the PE does no work for this tile
// Every row of a group has the same number of entries, so the compute loops have fixed
// trip counts per group (the paper's grouping); padding entries carry value 0.
//
// After `go` the PE runs the row-wise product: for each group, each row i, each entry
// (k, v) and each word q of the output row: acc[i][q] += v * B[k][q]. One word (LANES
// multiply-adds) per cycle, so a sparse tile costs sum(rows*nnz)*BCOLS/LANES cycles plus
// one per empty group and one to finish; a dense tile costs TILE*TILE*BCOLS/LANES.
// `first` clears the accumulator (by a per-row valid bit, no clearing pass). `done`
// rises at the end and holds until the next `go`; the result is read through rd_addr.
//
// From the paper: 64x64 A tiles, 64x32 B slices, row-wise product, grouping into rows
// with a fixed padded non-zero count, sparse or dense PE chosen per tile row, A moving
// down the columns and B along the rows. Own choices: the tile word format, integer
// arithmetic, the skip mode for tiles left to the PL, and the go/done handshake.
module stpe
  import hgcn_pkg::*;
#(
  parameter int unsigned TILE  = TILE_S,
  parameter int unsigned BCOLS = TILE_D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  a_in_valid,
  input  word_t a_in,
  output logic  a_out_valid,
  output word_t a_out,
  input  logic  b_in_valid,
  input  word_t b_in,
  output logic  b_out_valid,
  output word_t b_out,
  input  logic  go,
  input  logic  first,
  output logic  done,
  input  logic [$clog2(TILE*BCOLS/LANES)-1:0] rd_addr,
  output word_t rd_data
);
  localparam int unsigned WPR  = BCOLS / LANES;        // words per output/B row
  localparam int unsigned NBW  = TILE * WPR;           // words of B tile / accumulator
  localparam int unsigned NENT = TILE * TILE;          // max entries
  localparam int unsigned PAIRS = LANES / 2;
  localparam int unsigned BAW  = $clog2(NBW);
  localparam int unsigned EW   = $clog2(NENT) + 1;
  localparam int unsigned EIW  = $clog2(NENT);        // entry index
  localparam int unsigned RW   = $clog2(TILE) + 1;     // row / group / nnz counters
  localparam int unsigned QW   = (WPR > 1) ? $clog2(WPR) : 1;
  localparam int unsigned LW   = 16;                   // tile word counter

  // tile storage
  logic [RW-2:0] ent_col [NENT];
  elem_t         ent_val [NENT];
  logic [RW-1:0] grp_rows[TILE];
  logic [RW-1:0] grp_nnz [TILE];
  word_t         bm  [NBW];
  word_t         acc [NBW];
  logic [TILE-1:0] row_valid;
  tile_mode_e    mode;
  logic [RW-1:0] ngroups;

  // ---------------- systolic forwarding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out_valid <= 1'b0;
      b_out_valid <= 1'b0;
      a_out       <= '0;
      b_out       <= '0;
    end else begin
      a_out_valid <= a_in_valid;
      b_out_valid <= b_in_valid;
      a_out       <= a_in;
      b_out       <= b_in;
    end
  end

  // ---------------- B tile loading
  logic [BAW-1:0] b_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_cnt <= '0;
    else if (b_in_valid) begin
      bm[b_cnt] <= b_in;
      b_cnt     <= (b_cnt == BAW'(NBW - 1)) ? '0 : b_cnt + 1'b1;
    end
  end

  // ---------------- A tile parsing
  logic          in_tile;     // header seen, body words pending
  logic [LW-1:0] a_left;      // body words still to come
  logic [LW-1:0] a_idx;       // body word index
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_tile <= 1'b0;
      a_left  <= '0;
      a_idx   <= '0;
      mode    <= TILE_SKIP;
      ngroups <= '0;
    end else if (a_in_valid) begin
      if (!in_tile) begin
        mode    <= tile_mode_e'(a_in[0][1:0]);
        a_left  <= LW'(a_in[2]);
        a_idx   <= '0;
        in_tile <= (a_in[2] != '0);
        if (tile_mode_e'(a_in[0][1:0]) == TILE_DENSE) begin
          ngroups     <= RW'(1);
          grp_rows[0] <= RW'(TILE);
          grp_nnz[0]  <= RW'(TILE);
        end else begin
          ngroups <= RW'(a_in[1]);
        end
      end else begin
        a_idx   <= a_idx + 1'b1;
        a_left  <= a_left - 1'b1;
        in_tile <= (a_left != LW'(1));
        if (mode == TILE_DENSE) begin
          for (int l = 0; l < LANES; l++)
            ent_val[EIW'(int'(a_idx) * LANES + l)] <= elem_t'(a_in[l]);
        end else if (a_idx < LW'(ngroups)) begin
          grp_rows[a_idx[RW-2:0]] <= RW'(a_in[0]);
          grp_nnz[a_idx[RW-2:0]]  <= RW'(a_in[1]);
        end else begin
          for (int m = 0; m < PAIRS; m++) begin
            ent_col[EIW'((int'(a_idx) - int'(ngroups)) * PAIRS + m)] <= a_in[2*m][RW-2:0];
            ent_val[EIW'((int'(a_idx) - int'(ngroups)) * PAIRS + m)] <= elem_t'(a_in[2*m+1]);
          end
        end
      end
    end
  end

  // ---------------- row-wise product
  logic          busy;
  logic [RW-1:0] g_c, ri_c, j_c, rbase;
  logic [QW-1:0] q_c;
  logic [EW-1:0] e_c;

  logic [RW-2:0] row, col;
  logic [BAW-1:0] acc_a;
  word_t          acc_old;
  logic           grp_empty, all_done;
  always_comb begin
    row       = (RW-1)'(rbase + ri_c);
    col       = (mode == TILE_DENSE) ? j_c[RW-2:0] : ent_col[e_c[EW-2:0]];
    acc_a     = BAW'(row * WPR + q_c);
    acc_old   = row_valid[row] ? acc[acc_a] : '0;
    all_done  = (mode == TILE_SKIP) || (g_c >= ngroups);
    grp_empty = (grp_rows[g_c[RW-2:0]] == '0) || (grp_nnz[g_c[RW-2:0]] == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      row_valid <= '0;
      g_c <= '0; ri_c <= '0; j_c <= '0; q_c <= '0; e_c <= '0; rbase <= '0;
    end else if (go) begin
      busy <= 1'b1;
      done <= 1'b0;
      if (first) row_valid <= '0;
      g_c <= '0; ri_c <= '0; j_c <= '0; q_c <= '0; e_c <= '0; rbase <= '0;
    end else if (busy) begin
      if (all_done) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else if (grp_empty) begin
        rbase <= rbase + grp_rows[g_c[RW-2:0]];
        g_c   <= g_c + 1'b1;
      end else begin
        acc[acc_a] <= mac_word(acc_old, ent_val[e_c[EW-2:0]], bm[BAW'(col * WPR) + BAW'(q_c)]);
        if (q_c == QW'(WPR - 1)) begin
          q_c <= '0;
          row_valid[row] <= 1'b1;
          e_c <= e_c + 1'b1;
          if (j_c == grp_nnz[g_c[RW-2:0]] - 1'b1) begin
            j_c <= '0;
            if (ri_c == grp_rows[g_c[RW-2:0]] - 1'b1) begin
              ri_c  <= '0;
              rbase <= rbase + grp_rows[g_c[RW-2:0]];
              g_c   <= g_c + 1'b1;
            end else begin
              ri_c <= ri_c + 1'b1;
            end
          end else begin
            j_c <= j_c + 1'b1;
          end
        end else begin
          q_c <= q_c + 1'b1;
        end
      end
    end
  end

  assign rd_data = row_valid[int'(rd_addr) / WPR] ? acc[rd_addr] : '0;

endmodule
