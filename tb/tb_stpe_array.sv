// tb_stpe_array: self-checking test of the sparse systolic array (2 rows x 3 columns).
// For two column tiles kt, every array column gets its own A tile (columns in sparse,
// dense and skip mode; the sparse column is capped so that some non-zeros are left
// out), entered at the top PE, and every array row gets its 64x32 slice of the B tile,
// entered at the left PE. Every word of every PE is compared with the kept part of A
// times B, and the array must finish when its slowest column does.
module tb_stpe_array;
  import hgcn_pkg::*;
  import hgcn_tb_pkg::*;
  localparam int unsigned ROWS = 2, COLS = 3, BCOLS = TILE_D;
  localparam int unsigned WPR = BCOLS / LANES, NBW = TS * WPR, HID = ROWS * BCOLS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [COLS-1:0] a_valid = '0;
  logic [ROWS-1:0] b_valid = '0;
  word_t a_word = '0, b_word = '0, rd_data;
  logic go = 0, first = 0, all_done;
  logic [$clog2(ROWS)-1:0] rd_r = '0;
  logic [$clog2(COLS)-1:0] rd_c = '0;
  logic [$clog2(NBW)-1:0] rd_addr = '0;

  stpe_array #(.ROWS(ROWS), .COLS(COLS), .TILE(TS), .BCOLS(BCOLS)) dut (.*);

  int checks = 0, failures = 0;
  tile_t a;
  elem_t B[TS][HID];
  elem_t C[COLS*TS][HID];
  word_t words[$];
  nz_t   resid[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    tile_mode_e modes[COLS] = '{TILE_SPARSE, TILE_DENSE, TILE_SKIP};
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (C[i, j]) C[i][j] = 0;
    for (int kt = 0; kt < 2; kt++) begin
      int maxwork = 0, cyc;
      foreach (B[i, j]) B[i][j] = elem_t'($urandom_range(0, 100)) - 50;
      for (int c = 0; c < COLS; c++) begin
        int work, n0;
        rand_tile(c == 1 ? 400 : 100, a);
        n0 = resid.size();
        encode_tile(a, modes[c], 3, 0.3, c * TS, words, resid, work);
        if (work > maxwork) maxwork = work;
        for (int n = n0; n < resid.size(); n++) a[resid[n].row - c*TS][resid[n].col] = 0;
        for (int i = 0; i < TS; i++)
          for (int j = 0; j < HID; j++)
            for (int k = 0; k < TS; k++) C[c*TS + i][j] += a[i][k] * B[k][j];
        foreach (words[n]) begin
          @(negedge clk); a_valid = '0; a_valid[c] = 1; a_word = words[n];
        end
      end
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < NBW; n++) begin
          word_t w;
          for (int l = 0; l < LANES; l++) w[l] = B[n / WPR][r*BCOLS + (n % WPR)*LANES + l];
          @(negedge clk); a_valid = '0; b_valid = '0; b_valid[r] = 1; b_word = w;
        end
      @(negedge clk); a_valid = '0; b_valid = '0;
      repeat (ROWS + COLS + 2) @(negedge clk);
      go = 1; first = (kt == 0);
      @(negedge clk); go = 0;
      cyc = 1;
      while (!all_done) begin @(negedge clk); cyc++; end
      check(cyc == maxwork + 2, $sformatf("kt %0d cycles %0d expected %0d", kt, cyc, maxwork + 2));
    end
    check(resid.size() > 0, "non-zeros left to the PL");
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < NBW; n++) begin
          automatic bit ok = 1;
          rd_r = r[$clog2(ROWS)-1:0]; rd_c = c[$clog2(COLS)-1:0]; rd_addr = n[$clog2(NBW)-1:0];
          #1;
          for (int l = 0; l < LANES; l++)
            if (elem_t'(rd_data[l]) != C[c*TS + n / WPR][r*BCOLS + (n % WPR)*LANES + l]) ok = 0;
          check(ok, $sformatf("PE %0d,%0d word %0d", r, c, n));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
