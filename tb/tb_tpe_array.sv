// tb_tpe_array: self-checking test of the dense systolic array (2 rows x 3 columns).
// W tiles enter at the left of each row and X tiles at the bottom of each column; after
// they have rippled through, one go computes all PEs at once; two feature tiles are
// accumulated. Every word of every PE is compared with X*W computed here, and the
// array must finish in TILE^3/LANES cycles.
module tb_tpe_array;
  import hgcn_pkg::*;
  localparam int unsigned ROWS = 2, COLS = 3, TILE = 32;
  localparam int unsigned WPR = TILE / LANES, NW = TILE * WPR;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [COLS-1:0] x_valid = '0;
  logic [ROWS-1:0] w_valid = '0;
  word_t x_word = '0, w_word = '0, rd_data;
  logic go = 0, first = 0, all_done;
  logic [$clog2(ROWS)-1:0] rd_r = '0;
  logic [$clog2(COLS)-1:0] rd_c = '0;
  logic [$clog2(NW)-1:0] rd_addr = '0;

  tpe_array #(.ROWS(ROWS), .COLS(COLS), .TILE(TILE)) dut (.*);

  int checks = 0, failures = 0;
  elem_t X[COLS*TILE][2*TILE];      // rows of X, two feature tiles
  elem_t W[2*TILE][ROWS*TILE];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (X[i, j]) X[i][j] = elem_t'($urandom_range(0, 60)) - 30;
    foreach (W[i, j]) W[i][j] = elem_t'($urandom_range(0, 60)) - 30;
    for (int kf = 0; kf < 2; kf++) begin
      int cyc;
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < NW; n++) begin
          word_t w;
          for (int l = 0; l < LANES; l++) w[l] = W[kf*TILE + n / WPR][r*TILE + (n % WPR)*LANES + l];
          @(negedge clk); w_valid = '0; w_valid[r] = 1; w_word = w;
        end
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < NW; n++) begin
          word_t w;
          for (int l = 0; l < LANES; l++) w[l] = X[c*TILE + n / WPR][kf*TILE + (n % WPR)*LANES + l];
          @(negedge clk); w_valid = '0; x_valid = '0; x_valid[c] = 1; x_word = w;
        end
      @(negedge clk); x_valid = '0; w_valid = '0;
      repeat (ROWS + COLS + 2) @(negedge clk);
      go = 1; first = (kf == 0);
      @(negedge clk); go = 0;
      cyc = 1;
      while (!all_done) begin @(negedge clk); cyc++; end
      check(cyc == TILE * TILE * WPR + 1, $sformatf("cycles %0d", cyc));
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int n = 0; n < NW; n++) begin
          automatic bit ok = 1;
          rd_r = r[$clog2(ROWS)-1:0]; rd_c = c[$clog2(COLS)-1:0]; rd_addr = n[$clog2(NW)-1:0];
          #1;
          for (int l = 0; l < LANES; l++) begin
            automatic elem_t e = 0;
            for (int k = 0; k < 2*TILE; k++) e += X[c*TILE + n / WPR][k] * W[k][r*TILE + (n % WPR)*LANES + l];
            if (elem_t'(rd_data[l]) != e) ok = 0;
          end
          check(ok, $sformatf("PE %0d,%0d word %0d", r, c, n));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
