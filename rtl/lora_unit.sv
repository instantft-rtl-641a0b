// lora_unit: one skip-LoRA adapter with its on-chip parameter and gradient
// buffers (A: RKxCIN, B: COUTxRK, gA, gB), its forward module (lora_fwd,
// LConv/LFC) and its backward/update module (lora_bwd, BPLConv/BPLFC).
//
// The three operations are started by one-cycle pulses and never overlap:
// fwd_start (delta = B A x, h kept), grad_start (accumulate gA, gB for one
// sample, using dx_in) and upd_start (SGD step, clears gA, gB). `done` pulses
// once at the end of each. The single activation read port x_addr/x_data is
// shared by the forward and backward modules. All memories have combinational
// reads and synchronous writes.
//
// Host access: ld_we/ld_addr/ld_data writes A(k,i) at k*CIN+i and B(o,k) at
// RK*CIN + o*RK + k (Q4.12); rd_addr -> rd_data reads the same map
// combinationally, used to fetch the trained adapter. Gradient buffers reset
// to zero.
//
// The paper gives A and B as on-chip buffers shared by the LoRA forward and
// backward modules; the address map and port arrangement are this design's.
module lora_unit
  import instantft_pkg::*;
#(
  parameter int CIN  = 400,
  parameter int COUT = 10,
  parameter int RK   = 4,
  localparam int NPRM = RK * CIN + COUT * RK
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     fwd_start,
  input  logic                     grad_start,
  input  logic                     upd_start,
  output logic                     busy,
  output logic                     done,
  input  prm_t                     eta,
  output logic [$clog2(CIN)-1:0]   x_addr,
  input  act_t                     x_data,
  output act_t                     delta [COUT],
  input  prm_t                     dx_in [COUT],
  input  logic                     ld_we,
  input  logic [$clog2(NPRM)-1:0]  ld_addr,
  input  prm_t                     ld_data,
  input  logic [$clog2(NPRM)-1:0]  rd_addr,
  output prm_t                     rd_data
);

  prm_t amem  [CIN][RK];
  prm_t gamem [CIN][RK];
  prm_t bmem  [COUT][RK];
  prm_t gbmem [COUT][RK];

  // forward module
  logic                    f_busy, f_done;
  logic [$clog2(CIN)-1:0]  f_xaddr, f_aaddr;
  logic [$clog2(COUT)-1:0] f_baddr;
  act_t                    h [RK];

  lora_fwd #(.CIN(CIN), .COUT(COUT), .RK(RK)) u_fwd (
    .clk, .rst_n, .start(fwd_start), .busy(f_busy), .done(f_done),
    .x_addr(f_xaddr), .x_data,
    .a_addr(f_aaddr), .a_col(amem[f_aaddr]),
    .b_addr(f_baddr), .b_row(bmem[f_baddr]),
    .h, .delta
  );

  // backward module
  logic                    b_busy, b_done;
  logic [$clog2(CIN)-1:0]  b_xaddr, b_aaddr;
  logic [$clog2(COUT)-1:0] b_baddr;
  logic                    a_we, ga_we, b_we, gb_we;
  prm_t                    a_wcol [RK], ga_wcol [RK], b_wrow [RK], gb_wrow [RK];

  lora_bwd #(.CIN(CIN), .COUT(COUT), .RK(RK)) u_bwd (
    .clk, .rst_n, .start_grad(grad_start), .start_upd(upd_start),
    .busy(b_busy), .done(b_done), .eta, .dx(dx_in), .h,
    .x_addr(b_xaddr), .x_data,
    .a_addr(b_aaddr), .a_col(amem[b_aaddr]), .ga_col(gamem[b_aaddr]),
    .a_we, .a_wcol, .ga_we, .ga_wcol,
    .b_addr(b_baddr), .b_row(bmem[b_baddr]), .gb_row(gbmem[b_baddr]),
    .b_we, .b_wrow, .gb_we, .gb_wrow
  );

  assign busy   = f_busy | b_busy;
  assign done   = f_done | b_done;
  assign x_addr = f_busy ? f_xaddr : b_xaddr;

  // host map decode
  logic                    ld_isb, rd_isb;
  logic [$clog2(CIN)-1:0]  ld_i, rd_i;
  logic [$clog2(COUT)-1:0] ld_o, rd_o;
  logic [$clog2(RK)-1:0]   ld_k, rd_k;
  always_comb begin
    ld_isb = int'(ld_addr) >= RK*CIN;
    rd_isb = int'(rd_addr) >= RK*CIN;
    ld_k = $clog2(RK)'(ld_isb ? (int'(ld_addr) - RK*CIN) % RK : int'(ld_addr) / CIN);
    ld_i = $clog2(CIN)'(int'(ld_addr) % CIN);
    ld_o = $clog2(COUT)'((int'(ld_addr) - RK*CIN) / RK);
    rd_k = $clog2(RK)'(rd_isb ? (int'(rd_addr) - RK*CIN) % RK : int'(rd_addr) / CIN);
    rd_i = $clog2(CIN)'(int'(rd_addr) % CIN);
    rd_o = $clog2(COUT)'((int'(rd_addr) - RK*CIN) / RK);
    rd_data = rd_isb ? bmem[rd_o][rd_k] : amem[rd_i][rd_k];
  end

  always_ff @(posedge clk) begin
    if (ld_we) begin
      if (ld_isb) bmem[ld_o][ld_k] <= ld_data;
      else        amem[ld_i][ld_k] <= ld_data;
    end
    if (a_we)  amem[b_aaddr]  <= a_wcol;
    if (b_we)  bmem[b_baddr]  <= b_wrow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CIN; i++)
        for (int k = 0; k < RK; k++) gamem[i][k] <= '0;
      for (int o = 0; o < COUT; o++)
        for (int k = 0; k < RK; k++) gbmem[o][k] <= '0;
    end else begin
      if (ga_we) gamem[b_aaddr] <= ga_wcol;
      if (gb_we) gbmem[b_baddr] <= gb_wrow;
    end
  end

endmodule
