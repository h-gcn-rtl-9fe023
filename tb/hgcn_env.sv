// hgcn_env: memory model, workload, stimulus and checker for whole-accelerator tests.
//
// It plays the platform controller and the memory system around hgcn_top:
//  * a behavioural memory (associative array of words) with a read channel that takes
//    requests when it randomly allows, returns data in order after RD_LAT cycles and
//    holds data while rd_data_ready is low, and a write channel with random ready;
//  * a random graph of NV = 2*COLS*32 vertices whose 64x64 tiles of A fall in three
//    density classes (dense ~60%, sparse ~5%, scattered ~0.5%), mapped as the paper
//    maps them (>= 50% dense PE, >= 1% sparse PE, else PL), with sparse rows capped
//    at CAP non-zeros so that the PL also gets left-over non-zeros of AIE tiles;
//  * LAYERS GCN layers out = sigma(A*(X*W)); every layer but the last uses ReLU (a
//    single layer does too),
//    and each later layer reads the previous layer's output as its X;
//  * optionally a graph shaped like a reordered real one (see NV_USED, DIAG_P100K);
//  * a reference computed here from the non-zero list of A, compared word by word
//    with what the accelerator wrote, and counters of the mechanisms a layer uses.
module hgcn_env
  import hgcn_pkg::*;
  import hgcn_tb_pkg::*;
#(
  parameter int ROWS     = N_ROWS,
  parameter int COLS     = N_COLS,
  parameter int KX1      = 2,        // 32-wide feature tiles of the input features
  parameter int LAYERS   = 2,
  parameter int CAP      = 6,
  parameter int WATCHDOG = 2000000,
  // Graph shape. NV_USED < NV leaves the last vertices as zero padding. DIAG_P100K = 0
  // gives the three random tile classes above; otherwise the graph imitates a reordered
  // one: tiles on the block diagonal are non-zero with probability DIAG_P100K/100000 and
  // all other tiles with OFF_P100K/100000 (no dense tiles are then expected).
  parameter int NV_USED    = 2 * COLS * 32,
  parameter int DIAG_P100K = 0,
  parameter int OFF_P100K  = 0
) (
  input  logic              clk,
  output logic              rst_n,
  output logic              start,
  output layer_cfg_t        cfg,
  input  logic              busy,
  input  logic              done,
  input  logic              dense_active,
  input  logic              sparse_active,
  input  logic              rd_req_valid,
  input  logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_req_id,
  output logic              rd_req_ready,
  output logic              rd_data_valid,
  output word_t             rd_data,
  output logic              rd_data_id,
  input  logic              rd_data_ready,
  input  logic              wr_valid,
  input  logic [ADDR_W-1:0] wr_addr,
  input  word_t             wr_data,
  output logic              wr_ready
);
  localparam int NV   = 2 * COLS * TILE_D;
  localparam int HID  = ROWS * TILE_D;
  localparam int HWPR = HID / LANES;
  localparam int NKT  = NV / TS;
  localparam int RD_LAT = 4;

  localparam int X_BASE   = 32'h0100_0000;
  localparam int W_BASE   = 32'h0200_0000;
  localparam int B_BASE   = 32'h0300_0000;
  localparam int APTR     = 32'h0400_0000;
  localparam int PLPTR    = 32'h0480_0000;
  localparam int A_DATA   = 32'h0500_0000;
  localparam int PL_DATA  = 32'h0600_0000;
  localparam int OUT_BASE = 32'h0700_0000;  // + layer * 0x0100_0000

  word_t mem[int];
  int checks = 0, failures = 0;
  longint cycle = 0;

  // ---------------- memory model
  typedef struct { int addr; logic id; longint ready_at; } rq_t;
  rq_t q[$];
  longint cnt_rd_stall = 0, cnt_overlap = 0, cnt_wr = 0, cnt_rd = 0;

  function automatic word_t rd_mem(input int a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    cycle++;
    if (rd_data_valid && rd_data_ready) void'(q.pop_front());
    if (rd_data_valid && !rd_data_ready) cnt_rd_stall++;
    if (rd_req_valid && rd_req_ready) begin
      q.push_back('{addr: int'(rd_req_addr), id: rd_req_id, ready_at: cycle + RD_LAT});
      cnt_rd++;
    end
    if (wr_valid && wr_ready) begin mem[int'(wr_addr)] = wr_data; cnt_wr++; end
    if (dense_active && sparse_active) cnt_overlap++;
    rd_req_ready  <= (q.size() < 16) && ($urandom_range(0, 7) != 0);
    wr_ready      <= ($urandom_range(0, 7) != 0);
    rd_data_valid <= (q.size() > 0) && (q[0].ready_at <= cycle);
    rd_data       <= (q.size() > 0) ? rd_mem(q[0].addr) : '0;
    rd_data_id    <= (q.size() > 0) ? q[0].id : 1'b0;
  end

  // ---------------- workload
  nz_t   anz[$];               // all non-zeros of A, global coordinates
  int    n_dense = 0, n_sparse = 0, n_skip = 0, n_pl_nz = 0, n_relu = 0;
  elem_t X[][];                // current layer input
  elem_t W[][];
  elem_t Bm[][];
  elem_t Cm[][];

  task automatic build_graph();
    int a_ptr = A_DATA, pl_ptr = PL_DATA;
    tile_t a;
    word_t words[$];
    nz_t   resid[$];
    for (int kt = 0; kt < NKT; kt++) begin
      resid.delete();
      for (int c = 0; c < COLS; c++) begin
        int cls = $urandom_range(0, 9), work, nz = 0;
        tile_mode_e m;
        int nr = NV_USED - c*TS, nc = NV_USED - kt*TS;
        nr = nr < 0 ? 0 : (nr > TS ? TS : nr);
        nc = nc < 0 ? 0 : (nc > TS ? TS : nc);
        if (DIAG_P100K == 0 && nr == TS && nc == TS)
          rand_tile(cls == 0 ? 600 : (cls < 6 ? 50 : 5), a);
        else if (DIAG_P100K == 0)
          rand_tile_fine(cls == 0 ? 60000 : (cls < 6 ? 5000 : 500), nr, nc, a);
        else
          rand_tile_fine(c == kt ? DIAG_P100K : OFF_P100K, nr, nc, a);
        for (int i = 0; i < TS; i++) for (int k = 0; k < TS; k++)
          if (a[i][k] != 0) begin
            nz++;
            anz.push_back('{row: c*TS + i, col: kt*TS + k, val: a[i][k]});
          end
        // the paper's mapping rule on density
        if (nz * 100 >= 50 * TS * TS)      begin m = TILE_DENSE;  n_dense++;  end
        else if (nz * 100 >= 1 * TS * TS)  begin m = TILE_SPARSE; n_sparse++; end
        else                               begin m = TILE_SKIP;   n_skip++;   end
        encode_tile(a, m, CAP, 0.3, c*TS, words, resid, work);
        mem[APTR + kt*COLS + c] = mkword(a_ptr, words.size(), 0);
        foreach (words[n]) mem[a_ptr + n] = words[n];
        a_ptr += words.size();
      end
      n_pl_nz += resid.size();
      pack_pl(resid, words);
      mem[PLPTR + kt] = mkword(pl_ptr, words.size(), 0);
      foreach (words[n]) mem[pl_ptr + n] = words[n];
      pl_ptr += words.size();
    end
  endtask

  task automatic run_layer(input int layer, input int kx, input int x_base, input bit act);
    longint t0;
    int w_base = W_BASE + layer * 32'h0010_0000;
    int b_base = B_BASE + layer * 32'h0010_0000;
    int o_base = OUT_BASE + layer * 32'h0100_0000;
    int F = kx * TILE_D;
    // weights
    W = new[F];
    foreach (W[k]) begin
      W[k] = new[HID];
      foreach (W[k][j]) W[k][j] = elem_t'($urandom_range(0, 8)) - 4;
    end
    for (int k = 0; k < F; k++)
      for (int q2 = 0; q2 < HWPR; q2++) begin
        word_t w;
        for (int l = 0; l < LANES; l++) w[l] = W[k][q2*LANES + l];
        mem[w_base + k*HWPR + q2] = w;
      end
    // reference
    Bm = new[NV];
    Cm = new[NV];
    foreach (Bm[i]) begin
      Bm[i] = new[HID];
      Cm[i] = new[HID];
      foreach (Bm[i][j]) begin
        automatic elem_t s = 0;
        for (int k = 0; k < F; k++) s += X[i][k] * W[k][j];
        Bm[i][j] = s;
        Cm[i][j] = 0;
      end
    end
    foreach (anz[n]) for (int j = 0; j < HID; j++) Cm[anz[n].row][j] += anz[n].val * Bm[anz[n].col][j];
    if (act) foreach (Cm[i, j]) if (Cm[i][j] < 0) begin Cm[i][j] = 0; n_relu++; end
    // command
    @(negedge clk);
    cfg.kx = 16'(kx); cfg.act_en = act;
    cfg.x_base = x_base; cfg.w_base = w_base; cfg.b_base = b_base;
    cfg.a_ptr_base = APTR; cfg.pl_ptr_base = PLPTR; cfg.out_base = o_base;
    start = 1;
    @(negedge clk); start = 0;
    t0 = cycle;
    @(negedge clk);
    while (!done) @(negedge clk);
    $display("layer %0d: kx=%0d finished in %0d cycles", layer, kx, cycle - t0);
    // compare B and the output
    for (int i = 0; i < NV; i++)
      for (int q2 = 0; q2 < HWPR; q2++) begin
        automatic bit okb = 1, oko = 1;
        automatic word_t wb = rd_mem(b_base + i*HWPR + q2);
        automatic word_t wo = rd_mem(o_base + i*HWPR + q2);
        for (int l = 0; l < LANES; l++) begin
          if (elem_t'(wb[l]) != Bm[i][q2*LANES + l]) okb = 0;
          if (elem_t'(wo[l]) != Cm[i][q2*LANES + l]) oko = 0;
        end
        checks += 2;
        if (!okb) begin failures++; if (failures < 10) $display("FAIL: layer %0d B row %0d word %0d", layer, i, q2); end
        if (!oko) begin failures++; if (failures < 10) $display("FAIL: layer %0d out row %0d word %0d", layer, i, q2); end
      end
    // next layer's input is this output
    X = new[NV];
    foreach (X[i]) begin
      X[i] = new[HID];
      foreach (X[i][j]) X[i][j] = Cm[i][j];
    end
  endtask

  task automatic mech(input string name, input longint n);
    $display("mechanism %-28s %0d", name, n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism %s never happened", name); end
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0;
    build_graph();
    // input features
    X = new[NV];
    foreach (X[i]) begin
      X[i] = new[KX1 * TILE_D];
      foreach (X[i][k]) X[i][k] = (i < NV_USED) ? elem_t'($urandom_range(0, 6)) - 3 : 0;
      for (int q2 = 0; q2 < KX1 * 4; q2++) begin
        word_t w;
        for (int l = 0; l < LANES; l++) w[l] = X[i][q2*LANES + l];
        mem[X_BASE + i*KX1*4 + q2] = w;
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int layer = 0; layer < LAYERS; layer++)
      run_layer(layer, layer == 0 ? KX1 : ROWS,
                layer == 0 ? X_BASE : OUT_BASE + (layer - 1) * 32'h0100_0000,
                (LAYERS == 1) || (layer != LAYERS - 1));
    if (DIAG_P100K == 0) mech("dense STPE tiles", n_dense);
    else $display("mechanism %-28s %0d (none expected in this graph)", "dense STPE tiles", n_dense);
    mech("sparse STPE tiles", n_sparse);
    mech("skipped (PL-only) tiles", n_skip);
    mech("non-zeros on the PL SpMM", n_pl_nz);
    mech("dense/sparse overlap cycles", cnt_overlap);
    mech("read stalls from PL SpMM", cnt_rd_stall);
    mech("ReLU clipped values", n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
