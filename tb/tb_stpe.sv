// tb_stpe: self-checking test of one sparse/dense tensor PE.
// Four column tiles are accumulated into one 64x32 output block: a sparse tile
// (first), a dense tile, a skipped tile and a sparse tile whose rows are capped so
// that part of it is left out (those non-zeros belong to the PL). Every result word is
// compared with A_kept * B computed here; the forwarding of A and B and the compute
// time of every tile (sum of rows*nnz*BCOLS/LANES over groups, +1 per empty group) are
// checked as well.
module tb_stpe;
  import hgcn_pkg::*;
  import hgcn_tb_pkg::*;
  localparam int unsigned BCOLS = TILE_D;
  localparam int unsigned WPR   = BCOLS / LANES;
  localparam int unsigned NBW   = TS * WPR;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_in_valid = 0, b_in_valid = 0, go = 0, first = 0;
  word_t a_in = '0, b_in = '0, a_out, b_out, rd_data;
  logic a_out_valid, b_out_valid, done;
  logic [$clog2(NBW)-1:0] rd_addr = '0;

  stpe #(.TILE(TS), .BCOLS(BCOLS)) dut (.*);

  int checks = 0, failures = 0;
  tile_t a;
  elem_t B[TS][BCOLS];
  elem_t ref_acc[TS][BCOLS];
  word_t words[$];
  nz_t   resid[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input bit is_a, input word_t w);
    @(negedge clk);
    if (is_a) begin a_in_valid = 1; a_in = w; end else begin b_in_valid = 1; b_in = w; end
    @(posedge clk); #1;
    if (is_a) check(a_out_valid && a_out == w, "A forwarding");
    else      check(b_out_valid && b_out == w, "B forwarding");
    @(negedge clk); a_in_valid = 0; b_in_valid = 0;
  endtask

  initial begin
    tile_mode_e modes[4] = '{TILE_SPARSE, TILE_DENSE, TILE_SKIP, TILE_SPARSE};
    int caps[4] = '{64, 64, 64, 2};
    int dens[4] = '{80, 300, 50, 120};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < TS; i++) for (int j = 0; j < BCOLS; j++) ref_acc[i][j] = 0;
    for (int t = 0; t < 4; t++) begin
      int work, cyc, nres0;
      rand_tile(dens[t], a);
      for (int k = 0; k < TS; k++)
        for (int j = 0; j < BCOLS; j++) B[k][j] = elem_t'($urandom_range(0, 200)) - 100;
      nres0 = resid.size();
      encode_tile(a, modes[t], caps[t], 0.3, 0, words, resid, work);
      if (modes[t] == TILE_SKIP) work = 0;
      for (int n = nres0; n < resid.size(); n++) a[resid[n].row][resid[n].col] = 0;
      for (int i = 0; i < TS; i++)
        for (int j = 0; j < BCOLS; j++)
          for (int k = 0; k < TS; k++) ref_acc[i][j] += a[i][k] * B[k][j];
      foreach (words[n]) send(1, words[n]);
      for (int n = 0; n < NBW; n++) begin
        word_t w;
        for (int l = 0; l < LANES; l++) w[l] = B[n / WPR][(n % WPR) * LANES + l];
        send(0, w);
      end
      @(negedge clk); go = 1; first = (t == 0);
      @(negedge clk); go = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == work + 2, $sformatf("tile %0d cycles %0d expected %0d", t, cyc, work + 2));
      if (t == 3) check(resid.size() > nres0, "capped tile left non-zeros to the PL");
      for (int n = 0; n < NBW; n++) begin
        automatic bit ok = 1;
        rd_addr = n[$clog2(NBW)-1:0];
        #1;
        for (int l = 0; l < LANES; l++)
          if (elem_t'(rd_data[l]) != ref_acc[n / WPR][(n % WPR) * LANES + l]) ok = 0;
        check(ok, $sformatf("tile %0d word %0d", t, n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
