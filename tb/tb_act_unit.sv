// tb_act_unit: self-checking test of the activation unit.
// Random words (with forced zero, most-negative and most-positive lanes) are applied
// with the enable on and off; the output is compared with max(0, x) or x.
module tb_act_unit;
  import hgcn_pkg::*;
  logic  en;
  word_t in_word, out_word;
  int checks = 0, failures = 0;

  act_unit dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic bit ok = 1;
      en = n[0];
      for (int l = 0; l < LANES; l++) in_word[l] = $urandom;
      if (n % 7 == 0) begin in_word[0] = '0; in_word[1] = 32'h8000_0000; in_word[2] = 32'h7fff_ffff; end
      #1;
      for (int l = 0; l < LANES; l++) begin
        automatic elem_t x = elem_t'(in_word[l]);
        automatic elem_t e = (en && x < 0) ? 0 : x;
        if (elem_t'(out_word[l]) != e) ok = 0;
      end
      checks++;
      if (!ok) begin failures++; $display("FAIL: word %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
