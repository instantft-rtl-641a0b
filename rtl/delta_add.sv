// delta_add: the "Add" block in front of the softmax. It forms the fine-tuned
// logits x5 = x^5 + sum_i delta_i, where x^5 is the frozen network's output and
// delta_i (i = 1..NAD) are the outputs of the skip-LoRA adapters (Eq. 1 of the
// paper). Purely combinational; each output saturates to Q8.16.
//
// The sum itself is the paper's; doing it combinationally in one cycle is this
// design's choice (ten outputs, five adders deep).
module delta_add
  import instantft_pkg::*;
#(
  parameter int NAD  = 5,
  parameter int COUT = 10
) (
  input  act_t xhat  [COUT],
  input  act_t delta [NAD][COUT],
  output act_t x5    [COUT]
);

  always_comb begin
    for (int o = 0; o < COUT; o++) begin
      logic signed [63:0] s;
      s = 64'(xhat[o]);
      for (int a = 0; a < NAD; a++) s += 64'(delta[a][o]);
      x5[o] = sat_act(s);
    end
  end

endmodule
