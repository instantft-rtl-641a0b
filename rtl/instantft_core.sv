// instantft_core: the InstantFT fine-tuning core for the LeNet-5-like CNN.
//
// What it does: one `start` pulse runs one SGD step of skip-LoRA fine-tuning
// over a mini-batch of BATCH samples held in the input buffer. For each
// sample b the core
//   1. looks up the sample's dataset index in the Forward Cache bookkeeping;
//   2a. on a miss, runs the frozen base network (Conv-MP, Conv-MP, FC, FC, FC)
//       to produce x1..x4 and the base logits x^5, then NF4-quantizes these
//       1790 values and writes them to external memory as the sample's cache
//       entry (and marks the index present);
//   2b. on a hit, reads the entry back and dequantizes it into the buffers,
//       skipping the base network;
//   3. runs the five adapters (two LConv on x0, x1; three LFC on x2..x4) in
//       parallel, adds their deltas to x^5, and turns the logits into
//       probabilities with the lookup-table softmax (reported on out_*);
//   4. forms dx5 = (p - onehot(label)) / BATCH (CELoss), copies it to all five
//       adapters and lets them accumulate their gradients in parallel.
// After the last sample the five adapters apply A -= eta*gA, B -= eta*gB in
// parallel, and `done` pulses.
//
// Interfaces (plain ports; the AXI managers and the AXI-Lite register file of
// the original system are left to a wrapper):
//   * host loading: in_we/in_addr/in_data fill the input buffer (sample b,
//     pixel p at b*784+p, Q8.16); smp_we/smp_sel/smp_label/smp_idx set label
//     and dataset index of sample smp_sel; prm_we/prm_sel/prm_addr/prm_data
//     load frozen weights (sel 0..4: conv1, conv2, fc1, fc2, fc3) and adapter
//     parameters (sel 5..9: adapters on x0..x4); lrd_sel/lrd_addr -> lrd_data
//     read adapter parameters back. Loading is allowed while busy is low.
//   * control: start, busy, done, eta (Q4.12), cache_base (byte address of the
//     Forward Cache region), cache_clear (forget all entries).
//   * per-sample result: out_valid pulses with out_sample, out_hit (whether the
//     cache was used) and out_p (probabilities, Q8.16).
//   * memory: one 128-bit request/grant port (mem_req held with mem_we,
//     mem_addr, mem_wdata until mem_gnt; read data returns in order on
//     mem_rvalid/mem_rdata), shared by the quantizer (writes) and dequantizer
//     (reads), which never run at the same time.
//
// Timing (cycles, default sizes): base network about 45k per sample, quantize
// about 3.7k plus memory stalls, dequantize about 1790 plus two memory round trips,
// adapters 1187, softmax 11, backward 1187, update once per batch 1186.
//
// From the paper: the module groups and their order, the parallel adapters,
// the Forward Cache check, the NF4 cache, Q8.16/Q4.12 arithmetic, batch size
// 20 and rank 4. This design's choices: samples processed one after another,
// a single memory port, no overlap of phases, and the port-level interface.
// All flip-flops reset asynchronously on rst_n; the only other use of rst_n
// is to disable the memory-handshake assertion during reset, which lint tools
// may report as a signal used both synchronously and asynchronously.
module instantft_core
  import instantft_pkg::*;
#(
  parameter int BATCH = 20,
  parameter int N_IDX = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  input  prm_t                          eta,
  input  logic [MEM_AW-1:0]             cache_base,
  input  logic                          cache_clear,
  // input buffer and sample metadata
  input  logic                          in_we,
  input  logic [$clog2(BATCH*X0_N)-1:0] in_addr,
  input  act_t                          in_data,
  input  logic                          smp_we,
  input  logic [$clog2(BATCH)-1:0]      smp_sel,
  input  logic [3:0]                    smp_label,
  input  logic [31:0]                   smp_idx,
  // parameter load / adapter readback
  input  logic                          prm_we,
  input  logic [3:0]                    prm_sel,
  input  logic [15:0]                   prm_addr,
  input  prm_t                          prm_data,
  input  logic [2:0]                    lrd_sel,
  input  logic [15:0]                   lrd_addr,
  output prm_t                          lrd_data,
  // per-sample result
  output logic                          out_valid,
  output logic [$clog2(BATCH)-1:0]      out_sample,
  output logic                          out_hit,
  output act_t                          out_p [NCLS],
  // Forward Cache memory port
  output logic                          mem_req,
  output logic                          mem_we,
  output logic [MEM_AW-1:0]             mem_addr,
  output logic [MEM_DW-1:0]             mem_wdata,
  input  logic                          mem_gnt,
  input  logic                          mem_rvalid,
  input  logic [MEM_DW-1:0]             mem_rdata
);

  localparam int NAD = 5;
  localparam int NBLK = (CACHE_N + NF4_BLK - 1) / NF4_BLK;
  localparam int ENTRY_WORDS = (CACHE_N + NF4_PER_W - 1) / NF4_PER_W + (NBLK + 3) / 4;
  // offsets of the buffers in the flat cache-entry order x1, x2, x3, x4, x^5
  localparam int OFF2 = X1_N;
  localparam int OFF3 = OFF2 + X2_N;
  localparam int OFF4 = OFF3 + X3_N;
  localparam int OFF5 = OFF4 + X4_N;
  localparam int CW   = $clog2(CACHE_N);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOK, S_C1, S_C2, S_F1, S_F2, S_F3, S_QNT, S_DEQ,
    S_LFWD, S_SMAX, S_GRAD, S_UPD
  } state_e;
  state_e state;

  logic [$clog2(BATCH+1)-1:0] b;
  logic [3:0]  label [BATCH];
  logic [31:0] sidx  [BATCH];
  logic        hit_q;

  // ------------------------------------------------------------------
  // sample metadata
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < BATCH; s++) begin label[s] <= '0; sidx[s] <= '0; end
    end else if (smp_we) begin
      label[smp_sel] <= smp_label;
      sidx[smp_sel]  <= smp_idx;
    end
  end

  logic [$clog2(BATCH)-1:0] bs;
  assign bs = $clog2(BATCH)'(b);

  // ------------------------------------------------------------------
  // Forward Cache bookkeeping
  logic              fc_hit, fc_inrange, fc_set;
  logic [MEM_AW-1:0] fc_addr;

  fwd_cache_ctrl #(.N_IDX(N_IDX), .IDX_W(32), .ENTRY_BYTES(ENTRY_WORDS * MEM_DW / 8)) u_cache (
    .clk, .rst_n, .clear(cache_clear), .base(cache_base), .idx(sidx[bs]),
    .hit(fc_hit), .in_range(fc_inrange), .entry_addr(fc_addr), .set(fc_set)
  );

  // ------------------------------------------------------------------
  // buffers
  logic                          x0_we;
  logic [$clog2(BATCH*X0_N)-1:0] x0_ra;
  act_t                          x0_rd;
  logic                          x1_we, x2_we, x3_we, x4_we;
  logic [$clog2(X1_N)-1:0]       x1_wa, x1_ra;
  logic [$clog2(X2_N)-1:0]       x2_wa, x2_ra;
  logic [$clog2(X3_N)-1:0]       x3_wa, x3_ra;
  logic [$clog2(X4_N)-1:0]       x4_wa, x4_ra;
  act_t                          x1_wd, x2_wd, x3_wd, x4_wd;
  act_t                          x1_rd, x2_rd, x3_rd, x4_rd;
  act_t                          xhat [NCLS];

  assign x0_we = in_we && (state == S_IDLE);

  act_ram #(.DEPTH(BATCH*X0_N)) u_x0 (.clk, .we(x0_we), .waddr(in_addr), .wdata(in_data), .raddr(x0_ra), .rdata(x0_rd));
  act_ram #(.DEPTH(X1_N)) u_x1 (.clk, .we(x1_we), .waddr(x1_wa), .wdata(x1_wd), .raddr(x1_ra), .rdata(x1_rd));
  act_ram #(.DEPTH(X2_N)) u_x2 (.clk, .we(x2_we), .waddr(x2_wa), .wdata(x2_wd), .raddr(x2_ra), .rdata(x2_rd));
  act_ram #(.DEPTH(X3_N)) u_x3 (.clk, .we(x3_we), .waddr(x3_wa), .wdata(x3_wd), .raddr(x3_ra), .rdata(x3_rd));
  act_ram #(.DEPTH(X4_N)) u_x4 (.clk, .we(x4_we), .waddr(x4_wa), .wdata(x4_wd), .raddr(x4_ra), .rdata(x4_rd));

  // ------------------------------------------------------------------
  // frozen base network
  localparam int C1_NPRM = 6 * 1 * 25 + 6;
  localparam int C2_NPRM = 16 * 6 * 25 + 16;
  localparam int F1_NPRM = X3_N * X2_N + X3_N;
  localparam int F2_NPRM = X4_N * X3_N + X4_N;
  localparam int F3_NPRM = NCLS * X4_N + NCLS;

  logic c1_start, c2_start, f1_start, f2_start, f3_start;
  logic c1_done, c2_done, f1_done, f2_done, f3_done;
  logic c1_busy, c2_busy, f1_busy, f2_busy, f3_busy;
  logic [$clog2(X0_N)-1:0] c1_ra;
  logic [$clog2(X1_N)-1:0] c1_wa, c2_ra;
  logic [$clog2(X2_N)-1:0] c2_wa, f1_ra;
  logic [$clog2(X3_N)-1:0] f1_wa, f2_ra;
  logic [$clog2(X4_N)-1:0] f2_wa, f3_ra;
  logic [$clog2(NCLS)-1:0] f3_wa;
  logic c1_we, c2_we, f1_we, f2_we, f3_we;
  act_t c1_wd, c2_wd, f1_wd, f2_wd, f3_wd;

  conv_mp #(.CIN(1), .COUT(6), .H(28), .W(28), .K(5), .PAD(2)) u_conv1 (
    .clk, .rst_n, .start(c1_start), .busy(c1_busy), .done(c1_done),
    .in_addr(c1_ra), .in_data(x0_rd), .out_we(c1_we), .out_addr(c1_wa), .out_data(c1_wd),
    .ld_we(prm_we && prm_sel == 4'd0), .ld_addr($clog2(C1_NPRM)'(prm_addr)), .ld_data(prm_data));

  conv_mp #(.CIN(6), .COUT(16), .H(14), .W(14), .K(5), .PAD(0)) u_conv2 (
    .clk, .rst_n, .start(c2_start), .busy(c2_busy), .done(c2_done),
    .in_addr(c2_ra), .in_data(x1_rd), .out_we(c2_we), .out_addr(c2_wa), .out_data(c2_wd),
    .ld_we(prm_we && prm_sel == 4'd1), .ld_addr($clog2(C2_NPRM)'(prm_addr)), .ld_data(prm_data));

  fc_layer #(.NIN(X2_N), .NOUT(X3_N), .RELU(1'b1)) u_fc1 (
    .clk, .rst_n, .start(f1_start), .busy(f1_busy), .done(f1_done),
    .in_addr(f1_ra), .in_data(x2_rd), .out_we(f1_we), .out_addr(f1_wa), .out_data(f1_wd),
    .ld_we(prm_we && prm_sel == 4'd2), .ld_addr($clog2(F1_NPRM)'(prm_addr)), .ld_data(prm_data));

  fc_layer #(.NIN(X3_N), .NOUT(X4_N), .RELU(1'b1)) u_fc2 (
    .clk, .rst_n, .start(f2_start), .busy(f2_busy), .done(f2_done),
    .in_addr(f2_ra), .in_data(x3_rd), .out_we(f2_we), .out_addr(f2_wa), .out_data(f2_wd),
    .ld_we(prm_we && prm_sel == 4'd3), .ld_addr($clog2(F2_NPRM)'(prm_addr)), .ld_data(prm_data));

  fc_layer #(.NIN(X4_N), .NOUT(NCLS), .RELU(1'b0)) u_fc3 (
    .clk, .rst_n, .start(f3_start), .busy(f3_busy), .done(f3_done),
    .in_addr(f3_ra), .in_data(x4_rd), .out_we(f3_we), .out_addr(f3_wa), .out_data(f3_wd),
    .ld_we(prm_we && prm_sel == 4'd4), .ld_addr($clog2(F3_NPRM)'(prm_addr)), .ld_data(prm_data));

  // ------------------------------------------------------------------
  // Quant / Dequant
  logic              q_start, q_done, q_busy, q_req;
  logic [CW-1:0]     q_ra;
  act_t              q_rd;
  logic [MEM_AW-1:0] q_addr;
  logic [MEM_DW-1:0] q_wdata;
  logic              d_start, d_done, d_busy, d_req, d_we;
  logic [MEM_AW-1:0] d_addr;
  logic [CW-1:0]     d_wa;
  act_t              d_wd;

  nf4_quant #(.N(CACHE_N), .BLK(NF4_BLK)) u_quant (
    .clk, .rst_n, .start(q_start), .busy(q_busy), .done(q_done), .base_addr(fc_addr),
    .rd_addr(q_ra), .rd_data(q_rd), .mem_req(q_req), .mem_addr(q_addr), .mem_wdata(q_wdata),
    .mem_gnt(mem_gnt && state == S_QNT));

  nf4_dequant #(.N(CACHE_N), .BLK(NF4_BLK)) u_dequant (
    .clk, .rst_n, .start(d_start), .busy(d_busy), .done(d_done), .base_addr(fc_addr),
    .mem_req(d_req), .mem_addr(d_addr), .mem_gnt(mem_gnt && state == S_DEQ),
    .mem_rvalid(mem_rvalid && state == S_DEQ), .mem_rdata,
    .wr_we(d_we), .wr_addr(d_wa), .wr_data(d_wd));

  always_comb begin
    mem_req   = (state == S_QNT) ? q_req : (state == S_DEQ) ? d_req : 1'b0;
    mem_we    = (state == S_QNT);
    mem_addr  = (state == S_QNT) ? q_addr : d_addr;
    mem_wdata = q_wdata;
  end

  // ------------------------------------------------------------------
  // adapters
  logic lf_start, lg_start, lu_start;
  logic [NAD-1:0] l_done, l_busy, l_fin;
  act_t delta [NAD][NCLS];
  prm_t dx5 [NCLS];
  prm_t lrd [NAD];
  logic [$clog2(X0_N)-1:0] l0_xa;
  logic [$clog2(X1_N)-1:0] l1_xa;
  logic [$clog2(X2_N)-1:0] l2_xa;
  logic [$clog2(X3_N)-1:0] l3_xa;
  logic [$clog2(X4_N)-1:0] l4_xa;

  lora_unit #(.CIN(X0_N), .COUT(NCLS), .RK(R)) u_l0 (
    .clk, .rst_n, .fwd_start(lf_start), .grad_start(lg_start), .upd_start(lu_start),
    .busy(l_busy[0]), .done(l_done[0]), .eta, .x_addr(l0_xa), .x_data(x0_rd),
    .delta(delta[0]), .dx_in(dx5),
    .ld_we(prm_we && prm_sel == 4'd5), .ld_addr($clog2(R*X0_N+NCLS*R)'(prm_addr)), .ld_data(prm_data),
    .rd_addr($clog2(R*X0_N+NCLS*R)'(lrd_addr)), .rd_data(lrd[0]));
  lora_unit #(.CIN(X1_N), .COUT(NCLS), .RK(R)) u_l1 (
    .clk, .rst_n, .fwd_start(lf_start), .grad_start(lg_start), .upd_start(lu_start),
    .busy(l_busy[1]), .done(l_done[1]), .eta, .x_addr(l1_xa), .x_data(x1_rd),
    .delta(delta[1]), .dx_in(dx5),
    .ld_we(prm_we && prm_sel == 4'd6), .ld_addr($clog2(R*X1_N+NCLS*R)'(prm_addr)), .ld_data(prm_data),
    .rd_addr($clog2(R*X1_N+NCLS*R)'(lrd_addr)), .rd_data(lrd[1]));
  lora_unit #(.CIN(X2_N), .COUT(NCLS), .RK(R)) u_l2 (
    .clk, .rst_n, .fwd_start(lf_start), .grad_start(lg_start), .upd_start(lu_start),
    .busy(l_busy[2]), .done(l_done[2]), .eta, .x_addr(l2_xa), .x_data(x2_rd),
    .delta(delta[2]), .dx_in(dx5),
    .ld_we(prm_we && prm_sel == 4'd7), .ld_addr($clog2(R*X2_N+NCLS*R)'(prm_addr)), .ld_data(prm_data),
    .rd_addr($clog2(R*X2_N+NCLS*R)'(lrd_addr)), .rd_data(lrd[2]));
  lora_unit #(.CIN(X3_N), .COUT(NCLS), .RK(R)) u_l3 (
    .clk, .rst_n, .fwd_start(lf_start), .grad_start(lg_start), .upd_start(lu_start),
    .busy(l_busy[3]), .done(l_done[3]), .eta, .x_addr(l3_xa), .x_data(x3_rd),
    .delta(delta[3]), .dx_in(dx5),
    .ld_we(prm_we && prm_sel == 4'd8), .ld_addr($clog2(R*X3_N+NCLS*R)'(prm_addr)), .ld_data(prm_data),
    .rd_addr($clog2(R*X3_N+NCLS*R)'(lrd_addr)), .rd_data(lrd[3]));
  lora_unit #(.CIN(X4_N), .COUT(NCLS), .RK(R)) u_l4 (
    .clk, .rst_n, .fwd_start(lf_start), .grad_start(lg_start), .upd_start(lu_start),
    .busy(l_busy[4]), .done(l_done[4]), .eta, .x_addr(l4_xa), .x_data(x4_rd),
    .delta(delta[4]), .dx_in(dx5),
    .ld_we(prm_we && prm_sel == 4'd9), .ld_addr($clog2(R*X4_N+NCLS*R)'(prm_addr)), .ld_data(prm_data),
    .rd_addr($clog2(R*X4_N+NCLS*R)'(lrd_addr)), .rd_data(lrd[4]));

  assign lrd_data = (int'(lrd_sel) < NAD) ? lrd[lrd_sel] : '0;

  // ------------------------------------------------------------------
  // Add, Softmax, CELoss
  act_t x5 [NCLS];
  act_t prob [NCLS];
  logic sm_start, sm_done, sm_busy;

  delta_add #(.NAD(NAD), .COUT(NCLS)) u_add (.xhat, .delta, .x5);

  softmax_lut #(.COUT(NCLS)) u_smax (
    .clk, .rst_n, .start(sm_start), .busy(sm_busy), .done(sm_done), .x(x5), .p(prob));

  celoss #(.COUT(NCLS), .BATCH(BATCH)) u_loss (.p(prob), .label(label[bs]), .dx(dx5));

  // ------------------------------------------------------------------
  // buffer port multiplexing by phase
  always_comb begin
    // read ports: the base network in its own phases, the quantizer while
    // quantizing, the adapters otherwise
    x0_ra = $clog2(BATCH*X0_N)'(int'(bs) * X0_N + int'((state == S_C1) ? c1_ra : l0_xa));
    x1_ra = (state == S_C2) ? c2_ra : (state == S_QNT) ? $clog2(X1_N)'(q_ra) : l1_xa;
    x2_ra = (state == S_F1) ? f1_ra : (state == S_QNT) ? $clog2(X2_N)'(int'(q_ra) - OFF2) : l2_xa;
    x3_ra = (state == S_F2) ? f2_ra : (state == S_QNT) ? $clog2(X3_N)'(int'(q_ra) - OFF3) : l3_xa;
    x4_ra = (state == S_F3) ? f3_ra : (state == S_QNT) ? $clog2(X4_N)'(int'(q_ra) - OFF4) : l4_xa;

    if (int'(q_ra) < OFF2)      q_rd = x1_rd;
    else if (int'(q_ra) < OFF3) q_rd = x2_rd;
    else if (int'(q_ra) < OFF4) q_rd = x3_rd;
    else if (int'(q_ra) < OFF5) q_rd = x4_rd;
    else                        q_rd = xhat[$clog2(NCLS)'(int'(q_ra) - OFF5)];

    // write ports: a layer, or the dequantizer
    x1_we = c1_we || (d_we && int'(d_wa) < OFF2);
    x1_wa = c1_we ? c1_wa : $clog2(X1_N)'(d_wa);
    x1_wd = c1_we ? c1_wd : d_wd;
    x2_we = c2_we || (d_we && int'(d_wa) >= OFF2 && int'(d_wa) < OFF3);
    x2_wa = c2_we ? c2_wa : $clog2(X2_N)'(int'(d_wa) - OFF2);
    x2_wd = c2_we ? c2_wd : d_wd;
    x3_we = f1_we || (d_we && int'(d_wa) >= OFF3 && int'(d_wa) < OFF4);
    x3_wa = f1_we ? f1_wa : $clog2(X3_N)'(int'(d_wa) - OFF3);
    x3_wd = f1_we ? f1_wd : d_wd;
    x4_we = f2_we || (d_we && int'(d_wa) >= OFF4 && int'(d_wa) < OFF5);
    x4_wa = f2_we ? f2_wa : $clog2(X4_N)'(int'(d_wa) - OFF4);
    x4_wd = f2_we ? f2_wd : d_wd;
  end

  // base logits x^5: written by FC3 or the dequantizer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NCLS; o++) xhat[o] <= '0;
    end else begin
      if (f3_we) xhat[f3_wa] <= f3_wd;
      if (d_we && int'(d_wa) >= OFF5) xhat[$clog2(NCLS)'(int'(d_wa) - OFF5)] <= d_wd;
    end
  end

  // ------------------------------------------------------------------
  // sequencer
  assign busy = (state != S_IDLE);
  logic [NAD-1:0] l_fin_q;   // adapters finished with the current operation
  assign l_fin = l_fin_q | l_done;

  always_comb begin
    c1_start = 1'b0; c2_start = 1'b0; f1_start = 1'b0; f2_start = 1'b0; f3_start = 1'b0;
    q_start = 1'b0; d_start = 1'b0; lf_start = 1'b0; lg_start = 1'b0; lu_start = 1'b0;
    sm_start = 1'b0; fc_set = 1'b0;
    unique case (state)
      S_LOOK: begin
        if (fc_hit) d_start = 1'b1;
        else        c1_start = 1'b1;
      end
      S_C1: c2_start = c1_done;
      S_C2: f1_start = c2_done;
      S_F1: f2_start = f1_done;
      S_F2: f3_start = f2_done;
      S_F3: begin
        q_start  = f3_done && fc_inrange;
        lf_start = f3_done && !fc_inrange;
      end
      S_QNT: begin
        fc_set   = q_done;
        lf_start = q_done;
      end
      S_DEQ:  lf_start = d_done;
      S_LFWD: sm_start = &l_fin;
      S_SMAX: lg_start = sm_done;
      S_GRAD: lu_start = (&l_fin) && (int'(b) == BATCH-1);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      b <= '0;
      hit_q <= 1'b0;
      l_fin_q <= '0;
      done <= 1'b0;
      out_valid <= 1'b0;
      out_sample <= '0;
      out_hit <= 1'b0;
      for (int o = 0; o < NCLS; o++) out_p[o] <= '0;
    end else begin
      done <= 1'b0;
      out_valid <= 1'b0;
      if (lf_start || lg_start || lu_start) l_fin_q <= '0;
      else l_fin_q <= l_fin;
      unique case (state)
        S_IDLE: if (start) begin
          b <= '0;
          state <= S_LOOK;
        end
        S_LOOK: begin
          hit_q <= fc_hit;
          state <= fc_hit ? S_DEQ : S_C1;
        end
        S_C1: if (c1_done) state <= S_C2;
        S_C2: if (c2_done) state <= S_F1;
        S_F1: if (f1_done) state <= S_F2;
        S_F2: if (f2_done) state <= S_F3;
        S_F3: if (f3_done) state <= fc_inrange ? S_QNT : S_LFWD;
        S_QNT: if (q_done) state <= S_LFWD;
        S_DEQ: if (d_done) state <= S_LFWD;
        S_LFWD: if (&l_fin) state <= S_SMAX;
        S_SMAX: if (sm_done) begin
          state      <= S_GRAD;
          out_valid  <= 1'b1;
          out_sample <= bs;
          out_hit    <= hit_q;
          for (int o = 0; o < NCLS; o++) out_p[o] <= prob[o];
        end
        S_GRAD: if (&l_fin) begin
          if (int'(b) == BATCH-1) state <= S_UPD;
          else begin
            b <= b + 1'b1;
            state <= S_LOOK;
          end
        end
        S_UPD: if (&l_fin) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // memory request must be held until granted
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
      mem_req && !mem_gnt |=> mem_req && $stable(mem_addr) && $stable(mem_we));

endmodule
