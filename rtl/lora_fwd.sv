// lora_fwd: forward pass of one skip-LoRA adapter (the paper's LConv / LFC):
// h = A x (rank R), delta = B h (NCLS outputs added to the last-layer logits).
//
// Operation: `start` (one cycle) begins phase H, which streams the flattened
// input x (CIN values; a Conv adapter simply reads its C,H,W feature map in
// flat order) through the combinational port x_addr -> x_data, one element per
// cycle, with R multiply-accumulate lanes reading one column A[:, i] per cycle
// (a_addr -> a_col). Phase D then produces one delta output per cycle from a
// row B[o, :] (b_addr -> b_row) and the R values of h. Latency is CIN + COUT
// cycles plus one; `done` pulses for one cycle when h and delta are final.
// h (Q8.16) is kept for the backward pass; delta is Q8.16.
//
// From the paper: the two chained matrix products (Fig. 7, "LFC": Mul -> h ->
// Mul) and the flattening of Conv inputs. This design's own choices: R lanes,
// one input element per cycle, and the storage order of A and B.
module lora_fwd
  import instantft_pkg::*;
#(
  parameter int CIN  = 400,
  parameter int COUT = 10,
  parameter int RK   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic [$clog2(CIN)-1:0]    x_addr,
  input  act_t                      x_data,
  output logic [$clog2(CIN)-1:0]    a_addr,
  input  prm_t                      a_col [RK],
  output logic [$clog2(COUT)-1:0]   b_addr,
  input  prm_t                      b_row [RK],
  output act_t                      h     [RK],
  output act_t                      delta [COUT]
);

  typedef enum logic [1:0] {S_IDLE, S_H, S_D} state_e;
  state_e state;

  logic [$clog2(CIN+1)-1:0]  i;
  logic [$clog2(COUT+1)-1:0] o;
  logic signed [47:0]        hacc [RK];
  logic                      hlat;   // h latched in this pass

  assign busy   = (state != S_IDLE);
  assign x_addr = $clog2(CIN)'(i);
  assign a_addr = $clog2(CIN)'(i);
  assign b_addr = $clog2(COUT)'(o);

  // one delta output from row B[o, :] and h
  act_t dval;
  always_comb begin
    logic signed [63:0] s;
    s = '0;
    for (int k = 0; k < RK; k++) s += mul_ap(h[k], b_row[k]);
    dval = sat_act(s >>> 12);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      i <= '0; o <= '0; hlat <= 1'b0;
      for (int k = 0; k < RK; k++) begin hacc[k] <= '0; h[k] <= '0; end
      for (int c = 0; c < COUT; c++) delta[c] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_H;
          i <= '0; o <= '0; hlat <= 1'b0;
          for (int k = 0; k < RK; k++) hacc[k] <= '0;
        end
        S_H: begin
          for (int k = 0; k < RK; k++)
            hacc[k] <= hacc[k] + 48'(mul_ap(x_data, a_col[k]));
          if (int'(i) == CIN-1) state <= S_D;
          else i <= i + 1'b1;
        end
        S_D: begin
          // first cycle of S_D: latch h from the accumulators
          if (!hlat) begin
            for (int k = 0; k < RK; k++) h[k] <= sat_act(64'(hacc[k]) >>> 12);
            hlat <= 1'b1;
          end else begin
            delta[o] <= dval;
            if (int'(o) == COUT-1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else o <= o + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
