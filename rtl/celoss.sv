// celoss: output gradient of the mean cross-entropy loss over a mini-batch of
// BATCH samples: dx5[o] = (p[o] - [o == label]) / BATCH, Q8.16 in, Q4.12 out.
//
// The probabilities p come from the softmax; the division by the batch size
// is a multiplication by the constant round(2^16/BATCH). Combinational; the
// core copies dx5 to all five adapters' gradient inputs (the "Duplicate" of
// Fig. 7 of the paper).
//
// That CELoss yields dx5 from p and the true label is the paper's; the mean
// reduction over the batch and the rounding are this design's choices.
module celoss
  import instantft_pkg::*;
#(
  parameter int COUT  = 10,
  parameter int BATCH = 20
) (
  input  act_t                     p     [COUT],
  input  logic [$clog2(COUT)-1:0]  label,
  output prm_t                     dx    [COUT]
);

  localparam logic signed [31:0] INV_B = 32'((65536 + BATCH/2) / BATCH);

  always_comb begin
    for (int o = 0; o < COUT; o++) begin
      logic signed [63:0] d;
      d = 64'(p[o]) - ((o == int'(label)) ? 64'(ACT_ONE) : 64'sd0);  // Q8.16
      // Q8.16 * Q0.16 -> 32 fraction bits -> Q4.12, round half up
      dx[o] = sat_prm((d * 64'(INV_B) + (64'sd1 <<< 19)) >>> 20);
    end
  end

endmodule
