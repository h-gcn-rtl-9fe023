// tb_tpe: self-checking test of one dense tensor PE.
// Loads random 32x32 X and W tiles, checks that both are forwarded one cycle later,
// runs a first product and an accumulating second product, compares every result word
// with a reference computed here, and checks the compute time of TILE^3/LANES cycles.
module tb_tpe;
  import hgcn_pkg::*;
  localparam int unsigned TILE = 32;
  localparam int unsigned WPR  = TILE / LANES;
  localparam int unsigned NW   = TILE * WPR;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_in_valid = 0, w_in_valid = 0, go = 0, first = 0;
  word_t x_in = '0, w_in = '0, x_out, w_out, rd_data;
  logic x_out_valid, w_out_valid, done;
  logic [$clog2(NW)-1:0] rd_addr = '0;

  tpe #(.TILE(TILE)) dut (.*);

  int checks = 0, failures = 0;
  elem_t X[TILE][TILE], W[TILE][TILE];
  elem_t ref_acc[TILE][TILE];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_tiles();
    for (int n = 0; n < NW; n++) begin
      word_t xw, ww;
      for (int l = 0; l < LANES; l++) begin
        xw[l] = X[n / WPR][(n % WPR) * LANES + l];
        ww[l] = W[n / WPR][(n % WPR) * LANES + l];
      end
      @(negedge clk);
      x_in_valid = 1; x_in = xw; w_in_valid = 1; w_in = ww;
      @(posedge clk); #1;
      // forwarded copy appears after this edge
      check(x_out_valid && x_out == xw && w_out_valid && w_out == ww, "forwarding");
    end
    @(negedge clk); x_in_valid = 0; w_in_valid = 0;
  endtask

  task automatic run(input bit f, output int cycles);
    @(negedge clk); go = 1; first = f;
    @(negedge clk); go = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < TILE; i++) for (int j = 0; j < TILE; j++) ref_acc[i][j] = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < TILE; i++)
        for (int j = 0; j < TILE; j++) begin
          X[i][j] = elem_t'($urandom_range(0, 400)) - 200;
          W[i][j] = elem_t'($urandom_range(0, 400)) - 200;
        end
      for (int i = 0; i < TILE; i++)
        for (int j = 0; j < TILE; j++)
          for (int k = 0; k < TILE; k++) ref_acc[i][j] += X[i][k] * W[k][j];
      load_tiles();
      run(pass == 0, cyc);
      check(cyc == TILE * TILE * WPR + 1, $sformatf("cycles %0d", cyc));
      for (int n = 0; n < NW; n++) begin
        automatic bit ok = 1;
        rd_addr = n[$clog2(NW)-1:0];
        #1;
        for (int l = 0; l < LANES; l++)
          if (elem_t'(rd_data[l]) != ref_acc[n / WPR][(n % WPR) * LANES + l]) ok = 0;
        check(ok, $sformatf("pass %0d word %0d", pass, n));
      end
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
