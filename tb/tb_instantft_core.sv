// tb_instantft_core: end-to-end test of the fine-tuning core at its default
// sizes (LeNet-5-like network, five rank-4 adapters, mini-batch of 20).
//
// Set-up: random frozen weights, random 28x28 inputs in [0,1), random labels,
// adapter A random and B zero (the usual LoRA start), learning rate 0.1. The
// Forward Cache memory is the behavioural dram_model with random grant stalls.
//
// Run: EPOCHS mini-batch steps over the same 20 samples. Sample 19 carries a
// dataset index beyond the cache's range, so it is never cached. After the
// epochs the cache is cleared and one more step is run.
//
// Checks:
//  * on a cache miss, the base network's buffers x1..x4 and logits x^5 equal a
//    bit-exact reference of the convolution / pooling / FC arithmetic;
//  * on a hit, the buffers equal the NF4 decode of the entry in memory, which
//    in turn is within the NF4 rounding bound of the reference activations;
//  * the reported probabilities match softmax(x^5 + sum B A x) computed here
//    in real arithmetic from the buffers and the current adapter parameters;
//  * after every step, the adapter parameters read back equal a real-valued
//    reference SGD step (mean cross-entropy gradient) within a few LSBs;
//  * a hit sample takes under a tenth of the cycles of a miss sample;
//  * the mean probability of the true label rises over the epochs.
// Mechanism counters (each must occur): cache miss with quantize-and-write,
// cache hit with read-and-dequantize, never-cacheable sample, memory grant
// stall, SGD update, cache clear.
module tb_instantft_core;
  import instantft_pkg::*;

  localparam int BATCH  = 20;
  localparam int EPOCHS = 3;
  localparam int UNC    = BATCH - 1;   // sample with an uncacheable index
  localparam real ETA   = 0.1;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  prm_t eta;
  logic [MEM_AW-1:0] cache_base = 40'h1000_0000;
  logic cache_clear = 0;
  logic in_we = 0;
  logic [$clog2(BATCH*X0_N)-1:0] in_addr = '0;
  act_t in_data = '0;
  logic smp_we = 0;
  logic [$clog2(BATCH)-1:0] smp_sel = '0;
  logic [3:0] smp_label = '0;
  logic [31:0] smp_idx = '0;
  logic prm_we = 0;
  logic [3:0] prm_sel = '0;
  logic [15:0] prm_addr = '0;
  prm_t prm_data = '0;
  logic [2:0] lrd_sel = '0;
  logic [15:0] lrd_addr = '0;
  prm_t lrd_data;
  logic out_valid, out_hit;
  logic [$clog2(BATCH)-1:0] out_sample;
  act_t out_p [NCLS];
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [MEM_AW-1:0] mem_addr;
  logic [MEM_DW-1:0] mem_wdata, mem_rdata;

  instantft_core dut (.*);

  dram_model #(.STALL_PCT(20), .LAT(10)) dram (
    .clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  int n_miss = 0, n_hit = 0, n_uncached = 0, n_update = 0, n_clear = 0;

  initial begin : watchdog
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- data
  localparam int C1W = 6*25, C2W = 16*6*25;
  act_t x0 [BATCH][X0_N];
  int   lbl [BATCH];
  prm_t c1 [C1W + 6], c2 [C2W + 16];
  prm_t f1 [X3_N*X2_N + X3_N], f2 [X4_N*X3_N + X4_N], f3 [NCLS*X4_N + NCLS];
  localparam int CIN_A [5] = '{X0_N, X1_N, X2_N, X3_N, X4_N};
  real  Ar [5][R][X1_N];   // adapter parameters as read back from the core
  real  Br [5][NCLS][R];

  function automatic prm_t rnd_prm_u(int mag);
    return prm_t'($signed($urandom_range(0, 2*mag)) - mag);
  endfunction

  // ---------------------------------------------------------------- reference base network
  act_t r1 [X1_N], r2 [X2_N], r3 [X3_N], r4 [X4_N], r5 [NCLS];

  function automatic act_t finish_px(longint acc, prm_t b, bit relu);
    longint s;
    act_t v;
    s = (acc + (longint'(b) <<< 16)) >>> 12;
    v = sat_act(64'(s));
    if (relu && v < 0) v = '0;
    return v;
  endfunction

  task automatic ref_base(int s);
    act_t c1o [6][28][28];
    act_t c2o [16][10][10];
    for (int oc = 0; oc < 6; oc++)
      for (int y = 0; y < 28; y++)
        for (int x = 0; x < 28; x++) begin
          longint acc;
          acc = 0;
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++) begin
              int iy, ix;
              iy = y + ky - 2; ix = x + kx - 2;
              if (iy >= 0 && iy < 28 && ix >= 0 && ix < 28)
                acc += longint'(x0[s][iy*28+ix]) * longint'(c1[oc*25 + ky*5 + kx]);
            end
          c1o[oc][y][x] = finish_px(acc, c1[C1W + oc], 1'b1);
        end
    for (int oc = 0; oc < 6; oc++)
      for (int py = 0; py < 14; py++)
        for (int px = 0; px < 14; px++) begin
          act_t m;
          m = c1o[oc][2*py][2*px];
          if (c1o[oc][2*py][2*px+1] > m) m = c1o[oc][2*py][2*px+1];
          if (c1o[oc][2*py+1][2*px] > m) m = c1o[oc][2*py+1][2*px];
          if (c1o[oc][2*py+1][2*px+1] > m) m = c1o[oc][2*py+1][2*px+1];
          r1[(oc*14+py)*14+px] = m;
        end
    for (int oc = 0; oc < 16; oc++)
      for (int y = 0; y < 10; y++)
        for (int x = 0; x < 10; x++) begin
          longint acc;
          acc = 0;
          for (int ci = 0; ci < 6; ci++)
            for (int ky = 0; ky < 5; ky++)
              for (int kx = 0; kx < 5; kx++)
                acc += longint'(r1[(ci*14 + y+ky)*14 + x+kx]) * longint'(c2[((oc*6+ci)*5+ky)*5+kx]);
          c2o[oc][y][x] = finish_px(acc, c2[C2W + oc], 1'b1);
        end
    for (int oc = 0; oc < 16; oc++)
      for (int py = 0; py < 5; py++)
        for (int px = 0; px < 5; px++) begin
          act_t m;
          m = c2o[oc][2*py][2*px];
          if (c2o[oc][2*py][2*px+1] > m) m = c2o[oc][2*py][2*px+1];
          if (c2o[oc][2*py+1][2*px] > m) m = c2o[oc][2*py+1][2*px];
          if (c2o[oc][2*py+1][2*px+1] > m) m = c2o[oc][2*py+1][2*px+1];
          r2[(oc*5+py)*5+px] = m;
        end
    for (int o = 0; o < X3_N; o++) begin
      longint acc; acc = 0;
      for (int i = 0; i < X2_N; i++) acc += longint'(r2[i]) * longint'(f1[o*X2_N+i]);
      r3[o] = finish_px(acc, f1[X3_N*X2_N+o], 1'b1);
    end
    for (int o = 0; o < X4_N; o++) begin
      longint acc; acc = 0;
      for (int i = 0; i < X3_N; i++) acc += longint'(r3[i]) * longint'(f2[o*X3_N+i]);
      r4[o] = finish_px(acc, f2[X4_N*X3_N+o], 1'b1);
    end
    for (int o = 0; o < NCLS; o++) begin
      longint acc; acc = 0;
      for (int i = 0; i < X4_N; i++) acc += longint'(r4[i]) * longint'(f3[o*X4_N+i]);
      r5[o] = finish_px(acc, f3[NCLS*X4_N+o], 1'b0);
    end
  endtask

  function automatic act_t ref_flat(int j);
    if (j < X1_N) return r1[j];
    if (j < X1_N + X2_N) return r2[j - X1_N];
    if (j < X1_N + X2_N + X3_N) return r3[j - X1_N - X2_N];
    if (j < X1_N + X2_N + X3_N + X4_N) return r4[j - X1_N - X2_N - X3_N];
    return r5[j - X1_N - X2_N - X3_N - X4_N];
  endfunction

  function automatic act_t dut_flat(int j);
    if (j < X1_N) return dut.u_x1.mem[j];
    if (j < X1_N + X2_N) return dut.u_x2.mem[j - X1_N];
    if (j < X1_N + X2_N + X3_N) return dut.u_x3.mem[j - X1_N - X2_N];
    if (j < X1_N + X2_N + X3_N + X4_N) return dut.u_x4.mem[j - X1_N - X2_N - X3_N];
    return dut.xhat[j - X1_N - X2_N - X3_N - X4_N];
  endfunction

  // ---------------------------------------------------------------- NF4 decode of a cache entry
  localparam real NF4 [16] = '{-1.0, -0.6961928009986877, -0.5250730514526367,
    -0.39491748809814453, -0.28444138169288635, -0.18477343022823334,
    -0.09105003625154495, 0.0, 0.07958029955625534, 0.16093020141124725,
    0.24611230194568634, 0.33791524171829224, 0.44070982933044434,
    0.5626170039176941, 0.7229568362236023, 1.0};
  localparam int NBLK = (CACHE_N + NF4_BLK - 1) / NF4_BLK;
  localparam int NCW  = (CACHE_N + 31) / 32;
  localparam int ENTRY_WORDS = NCW + (NBLK + 3) / 4;

  function automatic logic [MEM_DW-1:0] dword(longint w);
    return dram.mem.exists(w) ? dram.mem[w] : '0;
  endfunction

  // decoded value of element j of the entry of dataset index idx, and its scale
  function automatic real decode(int idx, int j, output real scale);
    longint w0;
    logic [MEM_DW-1:0] cw, sw;
    int b;
    w0 = longint'(cache_base >> 4) + longint'(idx) * ENTRY_WORDS;
    b  = j / NF4_BLK;
    sw = dword(w0 + NCW + b/4);
    scale = real'(sw[32*(b%4) +: 32]);
    cw = dword(w0 + j/32);
    return NF4[cw[4*(j%32) +: 4]] * scale;
  endfunction

  // ---------------------------------------------------------------- adapter reference
  real xs [BATCH][5][X1_N];   // inputs of the adapters per sample (captured)
  real ps [BATCH][NCLS];      // probabilities reported per sample
  real psum_lbl [EPOCHS+1];

  function automatic real xin(int a, int i);
    case (a)
      0: return real'(dut.u_x0.mem[int'(dut.bs) * X0_N + i]) / 65536.0;
      1: return real'(dut.u_x1.mem[i]) / 65536.0;
      2: return real'(dut.u_x2.mem[i]) / 65536.0;
      3: return real'(dut.u_x3.mem[i]) / 65536.0;
      default: return real'(dut.u_x4.mem[i]) / 65536.0;
    endcase
  endfunction

  task automatic read_params();
    for (int a = 0; a < 5; a++) begin
      @(negedge clk);
      lrd_sel = 3'(a);
      for (int k = 0; k < R; k++)
        for (int i = 0; i < CIN_A[a]; i++) begin
          lrd_addr = 16'(k*CIN_A[a] + i); #1;
          Ar[a][k][i] = real'(lrd_data) / 4096.0;
        end
      for (int o = 0; o < NCLS; o++)
        for (int k = 0; k < R; k++) begin
          lrd_addr = 16'(R*CIN_A[a] + o*R + k); #1;
          Br[a][o][k] = real'(lrd_data) / 4096.0;
        end
    end
  endtask

  // reference probabilities of the sample whose activations are in the buffers
  task automatic check_probs(int s);
    real z [NCLS];
    real m, sum, err;
    for (int o = 0; o < NCLS; o++) z[o] = real'(dut.xhat[o]) / 65536.0;
    for (int a = 0; a < 5; a++) begin
      real h [R];
      for (int k = 0; k < R; k++) begin
        h[k] = 0.0;
        for (int i = 0; i < CIN_A[a]; i++) h[k] += Ar[a][k][i] * xs[s][a][i];
      end
      for (int o = 0; o < NCLS; o++)
        for (int k = 0; k < R; k++) z[o] += Br[a][o][k] * h[k];
    end
    m = z[0];
    for (int o = 1; o < NCLS; o++) if (z[o] > m) m = z[o];
    sum = 0.0;
    for (int o = 0; o < NCLS; o++) sum += $exp(z[o] - m);
    for (int o = 0; o < NCLS; o++) begin
      err = ps[s][o] - $exp(z[o] - m) / sum;
      checks++;
      if (err > 0.02 || err < -0.02) begin
        failures++; $display("sample %0d p[%0d]=%f ref %f", s, o, ps[s][o], $exp(z[o] - m) / sum);
      end
    end
  endtask

  // reference SGD step from the captured per-sample data and the parameters
  // read before the step; compared with the parameters read after it
  real eA [5][R][X1_N];
  real eB [5][NCLS][R];
  task automatic ref_step();
    for (int a = 0; a < 5; a++) begin
      for (int k = 0; k < R; k++) for (int i = 0; i < CIN_A[a]; i++) eA[a][k][i] = Ar[a][k][i];
      for (int o = 0; o < NCLS; o++) for (int k = 0; k < R; k++) eB[a][o][k] = Br[a][o][k];
      for (int s = 0; s < BATCH; s++) begin
        real h [R], dh [R], dx [NCLS];
        for (int o = 0; o < NCLS; o++) dx[o] = (ps[s][o] - ((o == lbl[s]) ? 1.0 : 0.0)) / BATCH;
        for (int k = 0; k < R; k++) begin
          h[k] = 0.0; dh[k] = 0.0;
          for (int i = 0; i < CIN_A[a]; i++) h[k] += Ar[a][k][i] * xs[s][a][i];
          for (int o = 0; o < NCLS; o++) dh[k] += Br[a][o][k] * dx[o];
        end
        for (int o = 0; o < NCLS; o++) for (int k = 0; k < R; k++) eB[a][o][k] -= ETA * dx[o] * h[k];
        for (int k = 0; k < R; k++) for (int i = 0; i < CIN_A[a]; i++) eA[a][k][i] -= ETA * dh[k] * xs[s][a][i];
      end
    end
  endtask

  task automatic cmp_step(int step);
    int bad;
    bad = 0;
    for (int a = 0; a < 5; a++) begin
      for (int k = 0; k < R; k++)
        for (int i = 0; i < CIN_A[a]; i++) begin
          real d;
          d = Ar[a][k][i] - eA[a][k][i];
          checks++;
          if (d > 6.0/4096 || d < -6.0/4096) begin
            failures++; bad++;
            if (bad < 5) $display("step %0d A%0d[%0d][%0d] %f ref %f", step, a, k, i, Ar[a][k][i], eA[a][k][i]);
          end
        end
      for (int o = 0; o < NCLS; o++)
        for (int k = 0; k < R; k++) begin
          real d;
          d = Br[a][o][k] - eB[a][o][k];
          checks++;
          if (d > 6.0/4096 || d < -6.0/4096) begin
            failures++; bad++;
            if (bad < 5) $display("step %0d B%0d[%0d][%0d] %f ref %f", step, a, o, k, Br[a][o][k], eB[a][o][k]);
          end
        end
    end
  endtask

  // ---------------------------------------------------------------- per-sample monitor
  int  t_sample, cyc_miss, cyc_hit, n_cyc_miss, n_cyc_hit;
  int  epoch;
  bit  expect_hit [BATCH];

  always @(posedge clk) if (dut.state == dut.S_LOOK) t_sample <= cyc;

  task automatic on_sample();
    int s;
    s = int'(out_sample);
    for (int o = 0; o < NCLS; o++) ps[s][o] = real'(out_p[o]) / 65536.0;
    psum_lbl[epoch] += ps[s][lbl[s]];
    for (int a = 0; a < 5; a++)
      for (int i = 0; i < CIN_A[a]; i++) xs[s][a][i] = xin(a, i);
    checks++;
    if (out_hit !== expect_hit[s]) begin
      failures++; $display("epoch %0d sample %0d hit=%0d expected %0d", epoch, s, out_hit, expect_hit[s]);
    end
    if (s == UNC) n_uncached++;
    ref_base(s);
    if (!out_hit) begin
      n_miss++;
      cyc_miss += cyc - t_sample; n_cyc_miss++;
      for (int j = 0; j < CACHE_N; j++) begin
        checks++;
        if (dut_flat(j) !== ref_flat(j)) begin
          failures++;
          if (failures < 10) $display("sample %0d base value %0d got %0d ref %0d", s, j, dut_flat(j), ref_flat(j));
        end
      end
    end else begin
      n_hit++;
      cyc_hit += cyc - t_sample; n_cyc_hit++;
      for (int j = 0; j < CACHE_N; j++) begin
        real v, sc;
        v = decode(sidx(s), j, sc);
        checks += 2;
        if (real'(dut_flat(j)) - v > 1.5 + sc/65536.0 || v - real'(dut_flat(j)) > 1.5 + sc/65536.0) begin
          failures++;
          if (failures < 10) $display("sample %0d dequant value %0d got %0d decode %f", s, j, dut_flat(j), v);
        end
        if (real'(ref_flat(j)) - v > 0.17 * sc || v - real'(ref_flat(j)) > 0.17 * sc) begin
          failures++;
          if (failures < 10) $display("sample %0d cached value %0d ref %0d decode %f", s, j, ref_flat(j), v);
        end
      end
    end
    check_probs(s);
  endtask

  function automatic int sidx(int s);
    return (s == UNC) ? 5000 : 100 + s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) on_sample();

  task automatic run_step(int step);
    read_params();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    n_update++;
    ref_step();
    read_params();
    cmp_step(step);
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    eta = prm_t'($rtoi(ETA * 4096.0 + 0.5));
    for (int s = 0; s < BATCH; s++) begin
      lbl[s] = $urandom_range(0, NCLS-1);
      for (int i = 0; i < X0_N; i++) x0[s][i] = act_t'($urandom_range(0, 65535));
    end
    for (int i = 0; i < C1W; i++) c1[i] = rnd_prm_u(900);
    for (int i = 0; i < 6; i++) c1[C1W + i] = rnd_prm_u(200);
    for (int i = 0; i < C2W; i++) c2[i] = rnd_prm_u(250);
    for (int i = 0; i < 16; i++) c2[C2W + i] = rnd_prm_u(200);
    foreach (f1[i]) f1[i] = rnd_prm_u(300);
    foreach (f2[i]) f2[i] = rnd_prm_u(600);
    foreach (f3[i]) f3[i] = rnd_prm_u(700);
    for (int e = 0; e <= EPOCHS; e++) psum_lbl[e] = 0.0;
    cyc_miss = 0; cyc_hit = 0; n_cyc_miss = 0; n_cyc_hit = 0;
    epoch = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load frozen weights and adapters
    @(negedge clk);
    prm_we = 1;
    prm_sel = 0; foreach (c1[i]) begin prm_addr = 16'(i); prm_data = c1[i]; @(negedge clk); end
    prm_sel = 1; foreach (c2[i]) begin prm_addr = 16'(i); prm_data = c2[i]; @(negedge clk); end
    prm_sel = 2; foreach (f1[i]) begin prm_addr = 16'(i); prm_data = f1[i]; @(negedge clk); end
    prm_sel = 3; foreach (f2[i]) begin prm_addr = 16'(i); prm_data = f2[i]; @(negedge clk); end
    prm_sel = 4; foreach (f3[i]) begin prm_addr = 16'(i); prm_data = f3[i]; @(negedge clk); end
    for (int a = 0; a < 5; a++) begin
      prm_sel = 4'(5 + a);
      for (int j = 0; j < R*CIN_A[a] + NCLS*R; j++) begin
        prm_addr = 16'(j);
        prm_data = (j < R*CIN_A[a]) ? rnd_prm_u(60) : prm_t'(0);
        @(negedge clk);
      end
    end
    prm_we = 0;
    // input buffer and sample metadata
    in_we = 1;
    for (int s = 0; s < BATCH; s++)
      for (int i = 0; i < X0_N; i++) begin
        in_addr = $clog2(BATCH*X0_N)'(s*X0_N + i); in_data = x0[s][i]; @(negedge clk);
      end
    in_we = 0;
    smp_we = 1;
    for (int s = 0; s < BATCH; s++) begin
      smp_sel = $clog2(BATCH)'(s); smp_label = 4'(lbl[s]); smp_idx = 32'(sidx(s)); @(negedge clk);
    end
    smp_we = 0;

    for (int s = 0; s < BATCH; s++) expect_hit[s] = 0;
    for (epoch = 0; epoch < EPOCHS; epoch++) begin
      run_step(epoch);
      $display("epoch %0d: mean p(true label) %f, cycles %0d", epoch, psum_lbl[epoch] / BATCH, cyc);
      for (int s = 0; s < BATCH; s++) expect_hit[s] = (s != UNC);
    end
    // clear the cache: the next step must miss everywhere again
    @(negedge clk); cache_clear = 1;
    @(negedge clk); cache_clear = 0;
    n_clear++;
    for (int s = 0; s < BATCH; s++) expect_hit[s] = 0;
    run_step(EPOCHS);
    $display("after clear: mean p(true label) %f", psum_lbl[EPOCHS] / BATCH);

    // timing and learning
    checks++;
    if (n_cyc_hit == 0 || n_cyc_miss == 0 || (cyc_hit / n_cyc_hit) * 10 > cyc_miss / n_cyc_miss) begin
      failures++; $display("hit/miss cycles %0d / %0d", cyc_hit / (n_cyc_hit + 1), cyc_miss / (n_cyc_miss + 1));
    end
    $display("cycles per sample: miss %0d, hit %0d", cyc_miss / n_cyc_miss, cyc_hit / n_cyc_hit);
    checks++;
    if (psum_lbl[EPOCHS] <= psum_lbl[0]) begin
      failures++; $display("no learning: %f -> %f", psum_lbl[0] / BATCH, psum_lbl[EPOCHS] / BATCH);
    end
    // mechanisms
    $display("mechanisms: miss=%0d hit=%0d uncached=%0d cache_writes=%0d cache_reads=%0d stalls=%0d updates=%0d clears=%0d",
             n_miss, n_hit, n_uncached, dram.n_wr, dram.n_rd, dram.n_stall, n_update, n_clear);
    checks += 8;
    if (n_miss == 0) failures++;
    if (n_hit == 0) failures++;
    if (n_uncached == 0) failures++;
    if (dram.n_wr == 0) failures++;
    if (dram.n_rd == 0) failures++;
    if (dram.n_stall == 0) failures++;
    if (n_update == 0) failures++;
    if (n_clear == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
