// softmax_lut: class probabilities p = softmax(x5) from precomputed lookup
// tables instead of exponential and division units.
//
// Operation: on `start` the maximum logit m is found combinationally. Over
// the next COUT cycles each logit's distance d = m - x (Q8.16, >= 0) indexes,
// rounded to the nearest step, the exponential table EXP_LUT[d / (1/64)] =
// e^(-d) (Q0.16, 1024 entries, saturating at d = 16) and the values are
// summed. The sum s (between 1 and COUT) indexes the reciprocal table
// INV_LUT[s / (1/256)] = 1/s (Q0.16, 4096 entries, value at the middle of each
// step, so COUT up to 16), and one more cycle multiplies every
// exponential by it. `done` pulses with p valid (Q8.16, held until the next
// start); latency COUT + 1 cycles.
//
// Both tables are computed at elaboration: EXP_LUT by repeated multiplication
// by round(2^16 e^(-1/64)) = 64520, INV_LUT by integer division
// round(2^24 / (j + 1/2)). Subtracting the maximum keeps every exponent <= 0.
//
// The use of precomputed exponential and inverse tables is the paper's (after
// the hls4ml softmax); table sizes, steps and formats are this design's.
module softmax_lut
  import instantft_pkg::*;
#(
  parameter int COUT = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic done,
  input  act_t x [COUT],
  output act_t p [COUT]
);

  typedef logic [16:0] exp_tab_t [1024];
  typedef logic [16:0] inv_tab_t [4096];

  function automatic exp_tab_t mk_exp();
    exp_tab_t t;
    longint v;
    v = 65536;
    for (int j = 0; j < 1024; j++) begin
      t[j] = 17'(v);
      v = (v * 64520 + 32768) >>> 16;
    end
    return t;
  endfunction

  function automatic inv_tab_t mk_inv();
    inv_tab_t t;
    for (int j = 0; j < 4096; j++) begin
      longint v;
      v = ((longint'(1) <<< 26) / longint'(2*j + 1) + 1) >>> 1;  // 2^24/(j+0.5)
      t[j] = (v > 131071) ? 17'h1FFFF : 17'(v);
    end
    return t;
  endfunction

  localparam exp_tab_t EXP_LUT = mk_exp();
  localparam inv_tab_t INV_LUT = mk_inv();

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_NORM} state_e;
  state_e state;

  logic [$clog2(COUT+1)-1:0] o;
  logic [16:0]               e [COUT];
  logic [23:0]               sum;
  act_t                      m;

  always_comb begin
    m = x[0];
    for (int c = 1; c < COUT; c++) if (x[c] > m) m = x[c];
  end

  // exponential of the current element
  logic [16:0] e_cur;
  always_comb begin
    logic signed [31:0] d;
    d = 32'(m) - 32'(x[o]);
    e_cur = (d >= 32'sd65536 * 16 - 512) ? EXP_LUT[1023] : EXP_LUT[10'((d + 512) >>> 10)];
  end

  logic [16:0] inv;
  always_comb begin
    logic [23:0] j;
    j = sum >> 8;
    inv = (j > 24'd4095) ? INV_LUT[4095] : INV_LUT[12'(j)];
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      o     <= '0;
      sum   <= '0;
      for (int c = 0; c < COUT; c++) begin e[c] <= '0; p[c] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_EXP;
          o     <= '0;
          sum   <= '0;
        end
        S_EXP: begin
          e[o] <= e_cur;
          sum  <= sum + 24'(e_cur);
          if (int'(o) == COUT-1) state <= S_NORM;
          else o <= o + 1'b1;
        end
        S_NORM: begin
          for (int c = 0; c < COUT; c++)
            p[c] <= act_t'((34'(e[c]) * 34'(inv)) >> 16);
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
