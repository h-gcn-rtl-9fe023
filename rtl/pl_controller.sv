// pl_controller: sequencer and memory engine of the accelerator, in the PL.
//
// It runs one GCN layer, out = sigma(A * (X * W)), on command of the platform
// controller (start + layer_cfg_t), with two sequencers that work at the same time and
// share one read channel and one write channel to memory:
//
//   dense sequencer   For each of the NPASS = TILE_S/TILE_D row passes (the array covers
//                     COLS*32 rows of X at a time) and each 32-wide feature tile kf, it
//                     reads the W tile of every array row and the X tile of every array
//                     column, waits for the tiles to ripple through the array, starts the
//                     TPEs and waits for them. After the last kf it drains the B block
//                     of the pass to memory and raises the count of B rows available.
//   sparse sequencer  For each 64-row tile kt of B it first waits until the dense side
//                     has produced those rows (the intra-layer pipelining: A*B on the
//                     first half of B overlaps X*W on the second half). It then reads,
//                     per array column, a pointer and the A tile, reads the B tile once
//                     and broadcasts it to the STPE rows and to the PL SpMM, starts the
//                     STPEs, streams the PL SpMM its non-zeros for this kt, and waits
//                     for both. After the last kt it drains the layer result: STPE
//                     partial + PL partial, through the activation unit, to memory.
//
// Memory is word addressed (one word = LANES elements). Read requests carry a one-bit
// id (0 dense, 1 sparse) that the memory returns with the data, in request order;
// rd_data_ready is low only while the PL SpMM cannot take an entry word. Requests of
// the two sequencers are granted alternately when both want the channel.
// Pointer tables: a_ptr_base + kt*COLS + c and pl_ptr_base + kt each hold lane0 =
// word address, lane1 = number of words.
//
// From the paper: the PL controller starts the SpMM when the systolic array has
// produced enough data, it fetches and writes memory data for the arrays, and B is
// consumed tile by tile while X*W is still running. Own choices: everything about the
// two state machines, the memory layouts, the pointer tables and the arbitration.
module pl_controller
  import hgcn_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned TD   = TILE_D,
  parameter int unsigned TS   = TILE_S
) (
  input  logic  clk,
  input  logic  rst_n,
  // platform controller
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  output logic       dense_active,
  output logic       sparse_active,
  // memory read channel
  output logic              rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_req_id,
  input  logic              rd_req_ready,
  input  logic              rd_data_valid,
  input  word_t             rd_data,
  input  logic              rd_data_id,
  output logic              rd_data_ready,
  // memory write channel
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output word_t             wr_data,
  input  logic              wr_ready,
  // dense array
  output logic [COLS-1:0] tpe_x_valid,
  output logic [ROWS-1:0] tpe_w_valid,
  output word_t           tpe_word,
  output logic            tpe_go,
  output logic            tpe_first,
  input  logic            tpe_all_done,
  output logic [$clog2(ROWS)-1:0] tpe_rd_r,
  output logic [$clog2(COLS)-1:0] tpe_rd_c,
  output logic [$clog2(TD*TD/LANES)-1:0] tpe_rd_addr,
  input  word_t           tpe_rd_data,
  // sparse array
  output logic [COLS-1:0] stpe_a_valid,
  output logic [ROWS-1:0] stpe_b_valid,
  output word_t           stpe_word,
  output logic            stpe_go,
  output logic            stpe_first,
  input  logic            stpe_all_done,
  output logic [$clog2(ROWS)-1:0] stpe_rd_r,
  output logic [$clog2(COLS)-1:0] stpe_rd_c,
  output logic [$clog2(TS*TD/LANES)-1:0] stpe_rd_addr,
  input  word_t           stpe_rd_data,
  // PL SpMM
  output logic            pl_clr,
  output logic            pl_b_valid,
  output logic            pl_e_valid,
  output word_t           pl_word,
  input  logic            pl_e_ready,
  input  logic            pl_idle,
  output logic [$clog2(2*COLS*TD)-1:0] pl_rd_row,
  output logic [$clog2(ROWS*TD/LANES)-1:0] pl_rd_q,
  input  word_t           pl_rd_data,
  // activation unit
  output logic            act_en,
  output word_t           act_in,
  input  word_t           act_out
);
  localparam int unsigned WPR   = TD / LANES;        // words per 32-wide row slice
  localparam int unsigned HWPR  = ROWS * WPR;        // words per full hidden row
  localparam int unsigned NPASS = TS / TD;           // X row passes per layer
  localparam int unsigned NKT   = NPASS * COLS * TD / TS;  // 64-row tiles of B
  localparam int unsigned NLOAD = (ROWS + COLS) * TD * WPR; // dense words per kf
  localparam int unsigned BTW   = TS * HWPR;         // words of one B tile
  localparam int unsigned SETTLE = ROWS + COLS + 2;
  localparam int unsigned CW    = 32;

  typedef logic [CW-1:0] cnt_t;

  layer_cfg_t cfg_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cfg_r <= '0;
    else if (start && !busy) cfg_r <= cfg;
  end

  // ======================================================= dense sequencer
  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_SETTLE, D_GO, D_WAIT, D_DRAIN, D_DONE} d_state_e;
  d_state_e d_state;
  cnt_t d_p, d_kf, d_settle;
  cnt_t d_iss, d_rsp;                 // words issued / received in this load
  cnt_t d_isel, d_ii, d_iq;           // issue position: sel (W rows then X columns), row, word
  cnt_t d_rsel, d_rw;                 // response position: sel, word in tile
  cnt_t d_dc, d_di, d_dr, d_dq;       // drain position
  cnt_t b_rows_ready;

  logic d_req, d_grant, d_rsp_v, d_wr;
  logic [ADDR_W-1:0] d_addr, d_waddr;

  always_comb begin
    if (d_isel < cnt_t'(ROWS))
      d_addr = cfg_r.w_base + (d_kf * TD + d_ii) * HWPR + d_isel * WPR + d_iq;
    else
      d_addr = cfg_r.x_base + (d_p * COLS * TD + (d_isel - ROWS) * TD + d_ii) * (cfg_r.kx * WPR)
               + d_kf * WPR + d_iq;
    d_waddr = cfg_r.b_base + (d_p * COLS * TD + d_dc * TD + d_di) * HWPR + d_dr * WPR + d_dq;
  end

  assign d_req   = (d_state == D_LOAD) && (d_iss < cnt_t'(NLOAD));
  assign d_rsp_v = rd_data_valid && !rd_data_id;
  assign d_wr    = (d_state == D_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_state <= D_IDLE;
      d_p <= '0; d_kf <= '0; d_settle <= '0; d_iss <= '0; d_rsp <= '0;
      d_isel <= '0; d_ii <= '0; d_iq <= '0; d_rsel <= '0; d_rw <= '0;
      d_dc <= '0; d_di <= '0; d_dr <= '0; d_dq <= '0;
      b_rows_ready <= '0;
    end else begin
      case (d_state)
        D_IDLE, D_DONE: if (start && !busy) begin
          d_state <= D_LOAD;
          d_p <= '0; d_kf <= '0; b_rows_ready <= '0;
          d_iss <= '0; d_rsp <= '0; d_isel <= '0; d_ii <= '0; d_iq <= '0;
          d_rsel <= '0; d_rw <= '0;
        end
        D_LOAD: begin
          if (d_req && d_grant && rd_req_ready) begin
            d_iss <= d_iss + 1;
            if (d_iq == cnt_t'(WPR - 1)) begin
              d_iq <= '0;
              if (d_ii == cnt_t'(TD - 1)) begin d_ii <= '0; d_isel <= d_isel + 1; end
              else d_ii <= d_ii + 1;
            end else d_iq <= d_iq + 1;
          end
          if (d_rsp_v) begin
            d_rsp <= d_rsp + 1;
            if (d_rw == cnt_t'(TD * WPR - 1)) begin d_rw <= '0; d_rsel <= d_rsel + 1; end
            else d_rw <= d_rw + 1;
          end
          if (d_rsp == cnt_t'(NLOAD - 1) && d_rsp_v) begin
            d_state  <= D_SETTLE;
            d_settle <= '0;
          end
        end
        D_SETTLE: begin
          d_settle <= d_settle + 1;
          if (d_settle == cnt_t'(SETTLE)) d_state <= D_GO;
        end
        D_GO: d_state <= D_WAIT;
        D_WAIT: if (tpe_all_done) begin
          if (d_kf + 1 < cnt_t'(cfg_r.kx)) begin
            d_kf <= d_kf + 1;
            d_state <= D_LOAD;
            d_iss <= '0; d_rsp <= '0; d_isel <= '0; d_ii <= '0; d_iq <= '0;
            d_rsel <= '0; d_rw <= '0;
          end else begin
            d_state <= D_DRAIN;
            d_dc <= '0; d_di <= '0; d_dr <= '0; d_dq <= '0;
          end
        end
        D_DRAIN: if (wr_ready) begin
          if (d_dq == cnt_t'(WPR - 1)) begin
            d_dq <= '0;
            if (d_dr == cnt_t'(ROWS - 1)) begin
              d_dr <= '0;
              if (d_di == cnt_t'(TD - 1)) begin
                d_di <= '0;
                if (d_dc == cnt_t'(COLS - 1)) begin
                  d_dc <= '0;
                  b_rows_ready <= (d_p + 1) * COLS * TD;
                  if (d_p == cnt_t'(NPASS - 1)) d_state <= D_DONE;
                  else begin
                    d_p <= d_p + 1; d_kf <= '0; d_state <= D_LOAD;
                    d_iss <= '0; d_rsp <= '0; d_isel <= '0; d_ii <= '0; d_iq <= '0;
                    d_rsel <= '0; d_rw <= '0;
                  end
                end else d_dc <= d_dc + 1;
              end else d_di <= d_di + 1;
            end else d_dr <= d_dr + 1;
          end else d_dq <= d_dq + 1;
        end
        default: d_state <= D_IDLE;
      endcase
    end
  end

  // routing of dense responses
  always_comb begin
    tpe_word    = rd_data;
    tpe_w_valid = '0;
    tpe_x_valid = '0;
    if (d_rsp_v && d_state == D_LOAD) begin
      if (d_rsel < cnt_t'(ROWS)) tpe_w_valid[d_rsel[$clog2(ROWS)-1:0]] = 1'b1;
      else tpe_x_valid[$clog2(COLS)'(d_rsel - ROWS)] = 1'b1;
    end
    tpe_go      = (d_state == D_GO);
    tpe_first   = (d_kf == '0);
    tpe_rd_r    = $clog2(ROWS)'(d_dr);
    tpe_rd_c    = $clog2(COLS)'(d_dc);
    tpe_rd_addr = $bits(tpe_rd_addr)'(d_di * WPR + d_dq);
  end

  // ======================================================= sparse sequencer
  typedef enum logic [3:0] {
    S_IDLE, S_WAITB, S_APTR, S_ATILE, S_BT, S_SETTLE, S_GO, S_PLPTR, S_PLE, S_WAIT,
    S_DRAIN, S_DONE
  } s_state_e;
  s_state_e s_state;
  cnt_t s_kt, s_c, s_settle;
  cnt_t s_iss_left, s_rsp_left, s_bw;
  logic [ADDR_W-1:0] s_addr;
  cnt_t s_dc, s_di, s_dr, s_dq;

  logic s_req, s_grant, s_rsp_v, s_rsp_fire, s_wr, s_job_done;
  logic [ADDR_W-1:0] s_waddr;

  assign s_req      = (s_state inside {S_APTR, S_ATILE, S_BT, S_PLPTR, S_PLE}) && (s_iss_left != '0);
  assign s_rsp_v    = rd_data_valid && rd_data_id;
  assign s_rsp_fire = s_rsp_v && rd_data_ready;
  assign s_job_done = (s_iss_left == '0) && (s_rsp_left == '0 || (s_rsp_left == 1 && s_rsp_fire));
  assign s_wr       = (s_state == S_DRAIN);
  assign s_waddr    = cfg_r.out_base + (s_dc * TS + s_di) * HWPR + s_dr * WPR + s_dq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_state <= S_IDLE;
      s_kt <= '0; s_c <= '0; s_settle <= '0; s_iss_left <= '0; s_rsp_left <= '0; s_bw <= '0;
      s_addr <= '0;
      s_dc <= '0; s_di <= '0; s_dr <= '0; s_dq <= '0;
    end else begin
      if (s_req && s_grant && rd_req_ready) begin
        s_iss_left <= s_iss_left - 1;
        s_addr     <= s_addr + 1;
      end
      if (s_rsp_fire) s_rsp_left <= s_rsp_left - 1;
      if (s_rsp_fire && s_state == S_BT) s_bw <= s_bw + 1;

      case (s_state)
        S_IDLE, S_DONE: if (start && !busy) begin
          s_state <= S_WAITB;
          s_kt <= '0;
        end
        S_WAITB: if (b_rows_ready >= (s_kt + 1) * TS) begin
          s_state <= S_APTR; s_c <= '0;
          s_addr <= cfg_r.a_ptr_base + s_kt * COLS;
          s_iss_left <= 1; s_rsp_left <= 1;
        end
        S_APTR, S_PLPTR: if (s_job_done) begin
          // rd_data holds the pointer word now
          s_addr      <= rd_data[0];
          s_iss_left  <= cnt_t'(rd_data[1]);
          s_rsp_left  <= cnt_t'(rd_data[1]);
              s_state     <= (s_state == S_APTR) ? S_ATILE : S_PLE;
        end
        S_ATILE: if (s_job_done || (s_iss_left == '0 && s_rsp_left == '0)) begin
          if (s_c == cnt_t'(COLS - 1)) begin
            s_state <= S_BT;
            s_addr <= cfg_r.b_base + s_kt * BTW;
            s_iss_left <= BTW; s_rsp_left <= BTW; s_bw <= '0;
          end else begin
            s_c <= s_c + 1;
            s_state <= S_APTR;
            s_addr <= cfg_r.a_ptr_base + s_kt * COLS + s_c + 1;
            s_iss_left <= 1; s_rsp_left <= 1;
          end
        end
        S_BT: if (s_job_done) begin
          s_state <= S_SETTLE; s_settle <= '0;
        end
        S_SETTLE: begin
          s_settle <= s_settle + 1;
          if (s_settle == cnt_t'(SETTLE)) s_state <= S_GO;
        end
        S_GO: begin
          s_state <= S_PLPTR;
          s_addr <= cfg_r.pl_ptr_base + s_kt;
          s_iss_left <= 1; s_rsp_left <= 1;
        end
        S_PLE: if (s_job_done || (s_iss_left == '0 && s_rsp_left == '0)) s_state <= S_WAIT;
        S_WAIT: if (stpe_all_done && pl_idle && !pl_e_valid) begin
          if (s_kt == cnt_t'(NKT - 1)) begin
            s_state <= S_DRAIN;
            s_dc <= '0; s_di <= '0; s_dr <= '0; s_dq <= '0;
          end else begin
            s_kt <= s_kt + 1;
            s_state <= S_WAITB;
          end
        end
        S_DRAIN: if (wr_ready && !d_wr) begin
          if (s_dq == cnt_t'(WPR - 1)) begin
            s_dq <= '0;
            if (s_dr == cnt_t'(ROWS - 1)) begin
              s_dr <= '0;
              if (s_di == cnt_t'(TS - 1)) begin
                s_di <= '0;
                if (s_dc == cnt_t'(COLS - 1)) s_state <= S_DONE;
                else s_dc <= s_dc + 1;
              end else s_di <= s_di + 1;
            end else s_dr <= s_dr + 1;
          end else s_dq <= s_dq + 1;
        end
        default: s_state <= S_IDLE;
      endcase
    end
  end

  // routing of sparse responses
  always_comb begin
    stpe_word    = rd_data;
    pl_word      = rd_data;
    stpe_a_valid = '0;
    stpe_b_valid = '0;
    pl_b_valid   = 1'b0;
    pl_e_valid   = 1'b0;
    if (s_rsp_v) begin
      case (s_state)
        S_ATILE: stpe_a_valid[$clog2(COLS)'(s_c)] = 1'b1;
        S_BT: begin
          stpe_b_valid[$clog2(ROWS)'((s_bw % HWPR) / WPR)] = 1'b1;
          pl_b_valid = 1'b1;
        end
        S_PLE:   pl_e_valid = 1'b1;
        default: ;
      endcase
    end
    stpe_go      = (s_state == S_GO);
    stpe_first   = (s_kt == '0);
    pl_clr       = start && !busy;
    stpe_rd_r    = $clog2(ROWS)'(s_dr);
    stpe_rd_c    = $clog2(COLS)'(s_dc);
    stpe_rd_addr = $bits(stpe_rd_addr)'(s_di * WPR + s_dq);
    pl_rd_row    = $bits(pl_rd_row)'(s_dc * TS + s_di);
    pl_rd_q      = $bits(pl_rd_q)'(s_dr * WPR + s_dq);
    act_en       = cfg_r.act_en;
    for (int l = 0; l < LANES; l++)
      act_in[l]  = DATA_W'(elem_t'(stpe_rd_data[l]) + elem_t'(pl_rd_data[l]));
  end

  // ======================================================= shared channels
  logic rr;   // 1: sparse has priority on the next conflict
  always_comb begin
    d_grant = d_req && (!s_req || !rr);
    s_grant = s_req && !d_grant;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= 1'b0;
    else if (d_req && s_req && rd_req_ready) rr <= ~rr;
  end

  assign rd_req_valid  = d_req || s_req;
  assign rd_req_id     = s_grant;
  assign rd_req_addr   = s_grant ? s_addr : d_addr;
  assign rd_data_ready = !rd_data_id || (s_state != S_PLE) || pl_e_ready;

  assign wr_valid = d_wr || s_wr;
  assign wr_addr  = d_wr ? d_waddr : s_waddr;
  assign wr_data  = d_wr ? tpe_rd_data : act_out;

  assign busy          = !((d_state == D_IDLE || d_state == D_DONE) && (s_state == S_IDLE || s_state == S_DONE));
  assign done          = (d_state == D_DONE) && (s_state == S_DONE);
  assign dense_active  = !(d_state inside {D_IDLE, D_DONE});
  assign sparse_active = !(s_state inside {S_IDLE, S_WAITB, S_DONE});

  // the two drains never overlap: the sparse drain needs every B row written
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(d_wr && s_wr));
  // A*B on tile kt never starts before its B rows exist
  a_b_ready: assert property (@(posedge clk) disable iff (!rst_n)
      (s_state == S_GO) |-> (b_rows_ready >= (s_kt + 1) * TS));

endmodule
