// instantft_pkg: number formats, network shape and NF4 constants shared by the
// InstantFT fine-tuning core.
//
// Number formats (as in the paper): forward activations are Q8.16 (24-bit
// two's complement, 16 fractional bits); frozen weights, LoRA parameters,
// gradients and the learning rate are Q4.12 (16-bit, 12 fractional bits).
// Products are formed at full width and brought back with an arithmetic right
// shift (round toward minus infinity) and saturation; the rounding mode is this
// design's choice, the paper does not state one.
//
// Network shape: the LeNet-5-like backbone of the paper's MNIST configuration,
// 1x28x28 -> Conv5x5(6, pad 2) -> MaxPool2 -> Conv5x5(16) -> MaxPool2 -> FC120
// -> FC84 -> FC10, with five rank-4 adapters that read x0..x4 and add into the
// 10 logits.
//
// NF4 levels are the 16 NormalFloat-4 values of the QLoRA work the paper cites,
// stored scaled by 2^15; NF4_MID holds the 15 midpoints between neighbouring
// levels, used as decision thresholds by the quantizer.
package instantft_pkg;

  localparam int ACT_W  = 24;   // Q8.16
  localparam int ACT_FB = 16;
  localparam int PRM_W  = 16;   // Q4.12
  localparam int PRM_FB = 12;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [PRM_W-1:0] prm_t;

  localparam act_t ACT_ONE = act_t'(1 << ACT_FB);
  localparam prm_t PRM_ONE = prm_t'(1 << PRM_FB);

  // LeNet-5-like network (MNIST configuration, Fig. 5 of the paper)
  localparam int R       = 4;     // LoRA rank
  localparam int NCLS    = 10;    // classes / output logits
  localparam int X0_N    = 1 * 28 * 28;   // 784
  localparam int X1_N    = 6 * 14 * 14;   // 1176
  localparam int X2_N    = 16 * 5 * 5;    // 400
  localparam int X3_N    = 120;
  localparam int X4_N    = 84;
  localparam int CACHE_N = X1_N + X2_N + X3_N + X4_N + NCLS;  // 1790 cached values

  // Memory port of the core (stands in for the 128-bit AXI managers)
  localparam int MEM_DW = 128;
  localparam int MEM_AW = 40;

  // NF4 quantization: one Q8.16 scale (absmax) per block of NF4_BLK values
  localparam int NF4_BLK   = 64;
  localparam int NF4_PER_W = MEM_DW / 4;  // 32 codes per 128-bit word

  localparam logic signed [17:0] NF4_LVL [16] = '{
    -18'sd32768, -18'sd22813, -18'sd17206, -18'sd12941, -18'sd9321, -18'sd6055,
    -18'sd2984, 18'sd0, 18'sd2608, 18'sd5273, 18'sd8065, 18'sd11073, 18'sd14441,
    18'sd18436, 18'sd23690, 18'sd32768};

  localparam logic signed [17:0] NF4_MID [15] = '{
    -18'sd27790, -18'sd20009, -18'sd15073, -18'sd11131, -18'sd7688, -18'sd4519,
    -18'sd1492, 18'sd1304, 18'sd3941, 18'sd6669, 18'sd9569, 18'sd12757, 18'sd16439,
    18'sd21063, 18'sd28229};

  // Saturate a wide signed value to the activation / parameter range.
  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'sd8388607)       return act_t'(24'sh7FFFFF);
    else if (v < -64'sd8388608) return act_t'(24'sh800000);
    else                        return act_t'(v);
  endfunction

  function automatic prm_t sat_prm(input logic signed [63:0] v);
    if (v > 64'sd32767)       return prm_t'(16'sh7FFF);
    else if (v < -64'sd32768) return prm_t'(16'sh8000);
    else                      return prm_t'(v);
  endfunction

  // Q8.16 activation times Q4.12 parameter: full-width product (28 fraction bits)
  function automatic logic signed [63:0] mul_ap(input act_t a, input prm_t p);
    return 64'(a) * 64'(p);
  endfunction

endpackage
