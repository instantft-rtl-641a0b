// fc_layer: frozen fully-connected layer y = W x + b, with optional ReLU (the
// paper's "FC" modules; LeNet-5 has 400->120, 120->84 and 84->10).
//
// Operation: after a one-cycle `start` pulse the module computes the NOUT
// outputs in groups of PO. For a group it spends NIN cycles in which each
// input element (read through the combinational port in_addr -> in_data) is
// multiplied by PO weights at once, one multiply-accumulate lane per output.
// It then writes the group's outputs one per cycle through out_we/out_addr/
// out_data, adding the bias and, if RELU is set, applying the rectifier. A
// layer therefore takes ceil(NOUT/PO)*NIN + NOUT cycles; `done` pulses for one
// cycle after the last write.
//
// Weights (o,i) are loaded at address o*NIN+i, bias o at NOUT*NIN+o, Q4.12.
// Activations are Q8.16.
//
// From the paper: the layer shapes and number formats. This design's own
// choices: the unroll factor PO (the paper unrolls loops and partitions
// buffers but gives no factors; the weight array is read PO words per cycle,
// i.e. partitioned by output) and ReLU on the hidden layers.
module fc_layer
  import instantft_pkg::*;
#(
  parameter int NIN  = 400,
  parameter int NOUT = 120,
  parameter bit RELU = 1'b1,
  parameter int PO   = 8,
  localparam int NPRM = NOUT * NIN + NOUT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic [$clog2(NIN)-1:0]   in_addr,
  input  act_t                     in_data,
  output logic                     out_we,
  output logic [$clog2(NOUT)-1:0]  out_addr,
  output act_t                     out_data,
  input  logic                     ld_we,
  input  logic [$clog2(NPRM)-1:0]  ld_addr,
  input  prm_t                     ld_data
);

  prm_t wmem [NPRM];

  always_ff @(posedge clk) begin
    if (ld_we) wmem[ld_addr] <= ld_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_OUT} state_e;
  state_e state;

  logic [$clog2(NIN+1)-1:0]  i;
  logic [$clog2(NOUT+1)-1:0] g0;     // first output of the current group
  logic [$clog2(PO+1)-1:0]   l;      // lane being written in S_OUT
  logic signed [47:0]        acc [PO];

  assign busy    = (state != S_IDLE);
  assign in_addr = $clog2(NIN)'(i);

  // output being written: g0 + l
  int o;
  assign o = int'(g0) + int'(l);

  always_comb begin
    logic signed [63:0] s;
    s = (64'(acc[$clog2(PO+1)'(l)]) + (64'(wmem[NOUT*NIN + (o < NOUT ? o : 0)]) <<< 16)) >>> 12;
    out_data = sat_act(s);
    if (RELU && out_data < 0) out_data = '0;
    out_we   = (state == S_OUT);
    out_addr = $clog2(NOUT)'(o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      i <= '0; g0 <= '0; l <= '0;
      for (int k = 0; k < PO; k++) acc[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          i <= '0; g0 <= '0; l <= '0;
          for (int k = 0; k < PO; k++) acc[k] <= '0;
        end
        S_MAC: begin
          for (int k = 0; k < PO; k++)
            if (int'(g0) + k < NOUT)
              acc[k] <= acc[k] + 48'(mul_ap(in_data, wmem[(int'(g0) + k)*NIN + int'(i)]));
          if (int'(i) == NIN-1) state <= S_OUT;
          else i <= i + 1'b1;
        end
        S_OUT: begin
          i <= '0;
          if (o == NOUT-1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (int'(l) == PO-1) begin
            l  <= '0;
            g0 <= g0 + ($clog2(NOUT+1))'(PO);
            for (int k = 0; k < PO; k++) acc[k] <= '0;
            state <= S_MAC;
          end else begin
            l <= l + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
