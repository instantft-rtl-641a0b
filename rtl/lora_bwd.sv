// lora_bwd: backward pass and SGD update of one skip-LoRA adapter (the
// paper's BPLConv / BPLFC).
//
// Two operations, each started by a one-cycle pulse:
//
//  * start_grad (once per sample): with the output gradient dx (COUT values,
//    Q4.12) and the saved h = A x (RK values, Q8.16),
//      phase DH, one cycle per output o:  dh     += B[o,:]^T * dx[o]
//                                         gB[o,:] += dx[o] * h
//      phase DA, one cycle per input i:   gA[:,i] += dh * x[i]
//    i.e. dB = dx h^T, dh = B^T dx, dA = dh x^T, accumulated over the samples
//    of a mini-batch in the gradient buffers gA/gB. dh uses B before it is
//    updated. Latency COUT + CIN + 1 cycles.
//  * start_upd (once per mini-batch): A -= eta*gA and B -= eta*gB, clearing
//    the gradient buffers; CIN + COUT cycles.
//
// The parameter and gradient arrays live outside (lora_unit) and are reached
// through combinational read ports and synchronous write enables, one column
// of A/gA (RK values) or one row of B/gB per cycle. `done` pulses for one
// cycle at the end of either operation.
//
// From the paper: the gradient equations (Eq. 3), the update
// A <- A - eta dA, and Q4.12 for parameters and gradients. This design's own
// choices: gradients summed over the mini-batch before one update per batch,
// products brought to Q4.12 with round-half-up, RK lanes.
module lora_bwd
  import instantft_pkg::*;
#(
  parameter int CIN  = 400,
  parameter int COUT = 10,
  parameter int RK   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start_grad,
  input  logic                      start_upd,
  output logic                      busy,
  output logic                      done,
  input  prm_t                      eta,
  input  prm_t                      dx    [COUT],
  input  act_t                      h     [RK],
  // flattened input activation
  output logic [$clog2(CIN)-1:0]    x_addr,
  input  act_t                      x_data,
  // A and gA: column i
  output logic [$clog2(CIN)-1:0]    a_addr,
  input  prm_t                      a_col  [RK],
  input  prm_t                      ga_col [RK],
  output logic                      a_we,
  output prm_t                      a_wcol [RK],
  output logic                      ga_we,
  output prm_t                      ga_wcol [RK],
  // B and gB: row o
  output logic [$clog2(COUT)-1:0]   b_addr,
  input  prm_t                      b_row  [RK],
  input  prm_t                      gb_row [RK],
  output logic                      b_we,
  output prm_t                      b_wrow [RK],
  output logic                      gb_we,
  output prm_t                      gb_wrow [RK]
);

  typedef enum logic [2:0] {S_IDLE, S_DH, S_DHFIN, S_DA, S_UA, S_UB} state_e;
  state_e state;

  logic [$clog2(CIN+1)-1:0]  i;
  logic [$clog2(COUT+1)-1:0] o;
  logic signed [47:0]        dhacc [RK];
  prm_t                      dh    [RK];

  assign busy   = (state != S_IDLE);
  assign x_addr = $clog2(CIN)'(i);
  assign a_addr = $clog2(CIN)'(i);
  assign b_addr = $clog2(COUT)'(o);

  // round-half-up shift of a full-width product, saturated to Q4.12
  function automatic prm_t rnd_prm(input logic signed [63:0] v, input int sh);
    return sat_prm((v + (64'sd1 <<< (sh - 1))) >>> sh);
  endfunction

  always_comb begin
    a_we  = 1'b0;
    ga_we = 1'b0;
    b_we  = 1'b0;
    gb_we = 1'b0;
    for (int k = 0; k < RK; k++) begin
      a_wcol[k]  = a_col[k];
      ga_wcol[k] = ga_col[k];
      b_wrow[k]  = b_row[k];
      gb_wrow[k] = gb_row[k];
    end
    unique case (state)
      S_DH: begin
        gb_we = 1'b1;
        for (int k = 0; k < RK; k++)   // dB = dx h^T (Q4.12 * Q8.16 -> Q4.12)
          gb_wrow[k] = sat_prm(64'(gb_row[k]) + 64'(rnd_prm(mul_ap(h[k], dx[o]), 16)));
      end
      S_DA: begin
        ga_we = 1'b1;
        for (int k = 0; k < RK; k++)   // dA = dh x^T
          ga_wcol[k] = sat_prm(64'(ga_col[k]) + 64'(rnd_prm(mul_ap(x_data, dh[k]), 16)));
      end
      S_UA: begin
        a_we  = 1'b1;
        ga_we = 1'b1;
        for (int k = 0; k < RK; k++) begin
          a_wcol[k]  = sat_prm(64'(a_col[k]) - 64'(rnd_prm(64'(eta) * 64'(ga_col[k]), 12)));
          ga_wcol[k] = '0;
        end
      end
      S_UB: begin
        b_we  = 1'b1;
        gb_we = 1'b1;
        for (int k = 0; k < RK; k++) begin
          b_wrow[k]  = sat_prm(64'(b_row[k]) - 64'(rnd_prm(64'(eta) * 64'(gb_row[k]), 12)));
          gb_wrow[k] = '0;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      i <= '0; o <= '0;
      for (int k = 0; k < RK; k++) begin dhacc[k] <= '0; dh[k] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          i <= '0; o <= '0;
          if (start_grad) begin
            state <= S_DH;
            for (int k = 0; k < RK; k++) dhacc[k] <= '0;
          end else if (start_upd) begin
            state <= S_UA;
          end
        end
        S_DH: begin   // dh = B^T dx (Q4.12 * Q4.12, 24 fraction bits)
          for (int k = 0; k < RK; k++)
            dhacc[k] <= dhacc[k] + 48'(64'(b_row[k]) * 64'(dx[o]));
          if (int'(o) == COUT-1) state <= S_DHFIN;
          else o <= o + 1'b1;
        end
        S_DHFIN: begin
          for (int k = 0; k < RK; k++) dh[k] <= rnd_prm(64'(dhacc[k]), 12);
          o <= '0;
          state <= S_DA;
        end
        S_DA: begin
          if (int'(i) == CIN-1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else i <= i + 1'b1;
        end
        S_UA: begin
          if (int'(i) == CIN-1) begin
            i <= '0;
            state <= S_UB;
          end else i <= i + 1'b1;
        end
        S_UB: begin
          if (int'(o) == COUT-1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else o <= o + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
