// act_unit: activation applied to one output word of a GCN layer.
//
// The layer output sigma(A*X*W) passes through here word by word on its way to
// memory. With `en` set every lane is replaced by max(0, x) (ReLU, the usual sigma of
// the two-layer GCN); with `en` clear (e.g. the last layer, whose output feeds a
// softmax outside the accelerator) the word passes unchanged. Purely combinational.
//
// From the paper: an activation unit beside the systolic arrays, and the sigma of the
// GCN layer equation. Own choices: ReLU as the function and the enable. The
// exponential function the paper's block also names is not built here.
module act_unit
  import hgcn_pkg::*;
(
  input  logic  en,
  input  word_t in_word,
  output word_t out_word
);
  always_comb begin
    for (int l = 0; l < LANES; l++)
      out_word[l] = (en && elem_t'(in_word[l]) < 0) ? '0 : in_word[l];
  end
endmodule
