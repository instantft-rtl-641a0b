// tb_lora_bwd: self-checking test of lora_bwd (9 inputs, 3 outputs, rank 4).
// The testbench holds A, B and the gradient buffers gA, gB behind the
// module's ports and applies its write enables. Two gradient passes (two
// samples with different x, h, dx) accumulate into gA/gB; then one update
// pass applies the SGD step. After each pass every buffer is compared with a
// reference model written here (dB = dx h^T, dh = B^T dx, dA = dh x^T,
// A -= eta*gA, gradients cleared), and the latencies are checked:
// CIN + COUT + 2 cycles for a gradient pass, CIN + COUT + 1 for an update.
module tb_lora_bwd;
  import instantft_pkg::*;

  localparam int CIN = 9, COUT = 3, RK = 4;

  logic clk = 0, rst_n = 0, start_grad = 0, start_upd = 0, busy, done;
  prm_t eta;
  prm_t dx [COUT];
  act_t h [RK];
  logic [$clog2(CIN)-1:0] x_addr, a_addr;
  logic [$clog2(COUT)-1:0] b_addr;
  act_t x [CIN];
  prm_t A [CIN][RK], GA [CIN][RK], B [COUT][RK], GB [COUT][RK];
  prm_t rA [CIN][RK], rGA [CIN][RK], rB [COUT][RK], rGB [COUT][RK];
  logic a_we, ga_we, b_we, gb_we;
  prm_t a_wcol [RK], ga_wcol [RK], b_wrow [RK], gb_wrow [RK];
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  lora_bwd #(.CIN(CIN), .COUT(COUT), .RK(RK)) dut (
    .clk, .rst_n, .start_grad, .start_upd, .busy, .done, .eta, .dx, .h,
    .x_addr, .x_data(x[x_addr]),
    .a_addr, .a_col(A[a_addr]), .ga_col(GA[a_addr]), .a_we, .a_wcol, .ga_we, .ga_wcol,
    .b_addr, .b_row(B[b_addr]), .gb_row(GB[b_addr]), .b_we, .b_wrow, .gb_we, .gb_wrow);

  always @(posedge clk) begin
    if (a_we)  A[a_addr]  <= a_wcol;
    if (ga_we) GA[a_addr] <= ga_wcol;
    if (b_we)  B[b_addr]  <= b_wrow;
    if (gb_we) GB[b_addr] <= gb_wrow;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic prm_t rnd(longint v, int sh);
    return sat_prm(64'((v + (longint'(1) <<< (sh-1))) >>> sh));
  endfunction

  task automatic compare(string what);
    for (int i = 0; i < CIN; i++)
      for (int k = 0; k < RK; k++) begin
        checks += 2;
        if (A[i][k] !== rA[i][k])   begin failures++; $display("%s A[%0d][%0d] %0d/%0d", what, i, k, A[i][k], rA[i][k]); end
        if (GA[i][k] !== rGA[i][k]) begin failures++; $display("%s gA[%0d][%0d] %0d/%0d", what, i, k, GA[i][k], rGA[i][k]); end
      end
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < RK; k++) begin
        checks += 2;
        if (B[o][k] !== rB[o][k])   begin failures++; $display("%s B[%0d][%0d] %0d/%0d", what, o, k, B[o][k], rB[o][k]); end
        if (GB[o][k] !== rGB[o][k]) begin failures++; $display("%s gB[%0d][%0d] %0d/%0d", what, o, k, GB[o][k], rGB[o][k]); end
      end
  endtask

  initial begin
    int t0;
    eta = prm_t'(410);   // 0.1
    for (int i = 0; i < CIN; i++)
      for (int k = 0; k < RK; k++) begin
        A[i][k] = prm_t'($signed($urandom_range(0, 8192)) - 4096); GA[i][k] = '0;
        rA[i][k] = A[i][k]; rGA[i][k] = '0;
      end
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < RK; k++) begin
        B[o][k] = prm_t'($signed($urandom_range(0, 8192)) - 4096); GB[o][k] = '0;
        rB[o][k] = B[o][k]; rGB[o][k] = '0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int smp = 0; smp < 2; smp++) begin
      prm_t dh [RK];
      for (int i = 0; i < CIN; i++) x[i] = act_t'($signed($urandom_range(0, 4*65536)) - 2*65536);
      for (int k = 0; k < RK; k++) h[k] = act_t'($signed($urandom_range(0, 4*65536)) - 2*65536);
      for (int o = 0; o < COUT; o++) dx[o] = prm_t'($signed($urandom_range(0, 4096)) - 2048);
      // reference
      for (int k = 0; k < RK; k++) begin
        longint s;
        s = 0;
        for (int o = 0; o < COUT; o++) s += longint'(rB[o][k]) * longint'(dx[o]);
        dh[k] = rnd(s, 12);
      end
      for (int o = 0; o < COUT; o++)
        for (int k = 0; k < RK; k++)
          rGB[o][k] = sat_prm(64'(rGB[o][k]) + 64'(rnd(longint'(h[k]) * longint'(dx[o]), 16)));
      for (int i = 0; i < CIN; i++)
        for (int k = 0; k < RK; k++)
          rGA[i][k] = sat_prm(64'(rGA[i][k]) + 64'(rnd(longint'(x[i]) * longint'(dh[k]), 16)));
      @(negedge clk); start_grad = 1; t0 = cyc;
      @(negedge clk); start_grad = 0;
      wait (done);
      checks++;
      if (cyc - t0 != CIN + COUT + 2) begin failures++; $display("grad latency %0d", cyc - t0); end
      @(negedge clk);
      compare("grad");
    end
    for (int i = 0; i < CIN; i++)
      for (int k = 0; k < RK; k++) begin
        rA[i][k] = sat_prm(64'(rA[i][k]) - 64'(rnd(longint'(eta) * longint'(rGA[i][k]), 12)));
        rGA[i][k] = '0;
      end
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < RK; k++) begin
        rB[o][k] = sat_prm(64'(rB[o][k]) - 64'(rnd(longint'(eta) * longint'(rGB[o][k]), 12)));
        rGB[o][k] = '0;
      end
    @(negedge clk); start_upd = 1; t0 = cyc;
    @(negedge clk); start_upd = 0;
    wait (done);
    checks++;
    if (cyc - t0 != CIN + COUT + 1) begin failures++; $display("update latency %0d", cyc - t0); end
    @(negedge clk);
    compare("update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
