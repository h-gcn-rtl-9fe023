// tpe: dense tensor processing element of the X*W systolic array.
//
// Each TPE owns one TILE x TILE block of B = X*W. It receives a TILE x TILE tile of X
// from the PE below (x_in) and a TILE x TILE tile of W from the PE on its left (w_in),
// keeps a copy of each and forwards both, one register stage later, to the PE above
// (x_out) and to the right (w_out): the X tile is shared by a column and the W tile by
// a row, as in the paper's mapping figure. Tiles arrive row-major, TILE/LANES words per
// row; the load counters wrap at the end of a tile.
//
// A one-cycle `go` starts the multiply: for every row i, inner index k and word q of
// the output row, acc[i][q] += X[i][k] * W[k][q] (LANES multiply-adds per cycle), so a
// tile takes TILE*TILE*TILE/LANES cycles (4096 at 32x32). With `first` set the
// accumulator restarts from zero (first feature tile), otherwise it accumulates.
// `done` rises when the tile is finished and holds until the next `go`. The result is
// read through rd_addr (word i*TILE/LANES+q) with a combinational rd_data.
//
// From the paper: 32x32 tiles, dense multiply-accumulate, X moving along columns and
// W along rows. Own choices: the integer arithmetic, the loop order, the go/done
// handshake and the read port used to drain results.
module tpe
  import hgcn_pkg::*;
#(
  parameter int unsigned TILE = TILE_D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  x_in_valid,
  input  word_t x_in,
  output logic  x_out_valid,
  output word_t x_out,
  input  logic  w_in_valid,
  input  word_t w_in,
  output logic  w_out_valid,
  output word_t w_out,
  input  logic  go,
  input  logic  first,
  output logic  done,
  input  logic [$clog2(TILE*TILE/LANES)-1:0] rd_addr,
  output word_t rd_data
);
  localparam int unsigned WPR = TILE / LANES;   // words per tile row
  localparam int unsigned NW  = TILE * WPR;     // words per tile
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned IW  = $clog2(TILE);
  localparam int unsigned QW  = (WPR > 1) ? $clog2(WPR) : 1;

  word_t xm [NW];
  word_t wm [NW];
  word_t acc[NW];

  logic [AW-1:0] x_cnt, w_cnt;
  logic          busy, first_r;
  logic [IW-1:0] i_c, k_c;
  logic [QW-1:0] q_c;

  // systolic forwarding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out_valid <= 1'b0;
      w_out_valid <= 1'b0;
      x_out       <= '0;
      w_out       <= '0;
    end else begin
      x_out_valid <= x_in_valid;
      w_out_valid <= w_in_valid;
      x_out       <= x_in;
      w_out       <= w_in;
    end
  end

  // tile loading
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_cnt <= '0;
      w_cnt <= '0;
    end else begin
      if (x_in_valid) begin
        xm[x_cnt] <= x_in;
        x_cnt     <= (x_cnt == AW'(NW - 1)) ? '0 : x_cnt + 1'b1;
      end
      if (w_in_valid) begin
        wm[w_cnt] <= w_in;
        w_cnt     <= (w_cnt == AW'(NW - 1)) ? '0 : w_cnt + 1'b1;
      end
    end
  end

  // multiply-accumulate
  logic [AW-1:0] acc_a, x_a, w_a;
  elem_t         xv;
  word_t         acc_old;
  always_comb begin
    acc_a   = AW'(i_c * WPR + q_c);
    x_a     = AW'(int'(i_c) * WPR + int'(k_c) / LANES);
    w_a     = AW'(k_c * WPR + q_c);
    xv      = elem_t'(xm[x_a][int'(k_c) % LANES]);
    acc_old = (first_r && k_c == '0) ? '0 : acc[acc_a];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      first_r <= 1'b0;
      i_c     <= '0;
      k_c     <= '0;
      q_c     <= '0;
    end else if (go) begin
      busy    <= 1'b1;
      done    <= 1'b0;
      first_r <= first;
      i_c     <= '0;
      k_c     <= '0;
      q_c     <= '0;
    end else if (busy) begin
      acc[acc_a] <= mac_word(acc_old, xv, wm[w_a]);
      if (q_c == QW'(WPR - 1)) begin
        q_c <= '0;
        if (k_c == IW'(TILE - 1)) begin
          k_c <= '0;
          if (i_c == IW'(TILE - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            i_c <= i_c + 1'b1;
          end
        end else begin
          k_c <= k_c + 1'b1;
        end
      end else begin
        q_c <= q_c + 1'b1;
      end
    end
  end

  assign rd_data = acc[rd_addr];

endmodule
