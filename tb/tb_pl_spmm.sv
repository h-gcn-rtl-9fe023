// tb_pl_spmm: self-checking test of the PL row-wise-product SpMM.
// Two B tiles are processed in turn, each with a random non-zero list (odd lengths, so
// that padding entries occur); entries are offered with random gaps. The whole C buffer
// is compared with sum(val * B[col]) computed here, and the engine's occupancy is
// checked: HID/LANES cycles per non-zero, one per padding entry. A final clear must
// make every row read as zero.
module tb_pl_spmm;
  import hgcn_pkg::*;
  import hgcn_tb_pkg::*;
  localparam int unsigned NROW = 256;
  localparam int unsigned HID  = 128;
  localparam int unsigned HWPR = HID / LANES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr = 0, b_valid = 0, e_valid = 0, e_ready, idle;
  word_t b_word = '0, e_word = '0, rd_data;
  logic [$clog2(NROW)-1:0] rd_row = '0;
  logic [$clog2(HWPR)-1:0] rd_q = '0;

  pl_spmm #(.NROW(NROW), .BROWS(TS), .HID(HID)) dut (.*);

  int checks = 0, failures = 0;
  elem_t B[TS][HID];
  elem_t C[NROW][HID];
  nz_t   list[$];
  word_t words[$];
  int    busy_cycles;

  always @(posedge clk) if (!idle) busy_cycles++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(input string tag);
    for (int r = 0; r < NROW; r++)
      for (int q = 0; q < HWPR; q++) begin
        automatic bit ok = 1;
        rd_row = r[$clog2(NROW)-1:0]; rd_q = q[$clog2(HWPR)-1:0];
        #1;
        for (int l = 0; l < LANES; l++) if (elem_t'(rd_data[l]) != C[r][q*LANES+l]) ok = 0;
        check(ok, $sformatf("%s row %0d word %0d", tag, r, q));
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int r = 0; r < NROW; r++) for (int j = 0; j < HID; j++) C[r][j] = 0;
    for (int kt = 0; kt < 2; kt++) begin
      automatic int n_nz = 37 + kt * 20;
      int expect_busy;
      for (int k = 0; k < TS; k++)
        for (int j = 0; j < HID; j++) B[k][j] = elem_t'($urandom_range(0, 200)) - 100;
      for (int n = 0; n < TS * HWPR; n++) begin
        word_t w;
        for (int l = 0; l < LANES; l++) w[l] = B[n / HWPR][(n % HWPR) * LANES + l];
        @(negedge clk); b_valid = 1; b_word = w;
      end
      @(negedge clk); b_valid = 0;
      list.delete();
      for (int n = 0; n < n_nz; n++) begin
        automatic int r = (n * 7 + kt) % NROW;   // rows in increasing runs, some repeated
        list.push_back('{row: r, col: $urandom_range(0, TS - 1),
                         val: elem_t'($urandom_range(1, 50)) - 25});
      end
      foreach (list[n]) for (int j = 0; j < HID; j++)
        C[list[n].row][j] += list[n].val * B[list[n].col][j];
      pack_pl(list, words);
      busy_cycles = 0;
      foreach (words[n]) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin e_valid = 0; @(negedge clk); end
        e_valid = 1; e_word = words[n];
        @(posedge clk);
        while (!e_ready) @(posedge clk);
        #1;
        @(negedge clk); e_valid = 0;
      end
      while (!idle) @(negedge clk);
      expect_busy = n_nz * HWPR + ((n_nz % 2) ? 1 : 0);
      check(busy_cycles == expect_busy, $sformatf("busy %0d expected %0d", busy_cycles, expect_busy));
      compare($sformatf("kt %0d", kt));
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int r = 0; r < NROW; r++) for (int j = 0; j < HID; j++) C[r][j] = 0;
    compare("cleared");
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
