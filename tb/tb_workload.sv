// tb_workload: a scaled-down fine-tuning run in the shape of the rotated-
// MNIST workload: NB mini-batches of 20 distinct images, each with its own
// dataset index, fine-tuned for EPOCHS epochs on the full-size core. Between
// mini-batches the host reloads the input buffer and the sample metadata, as
// it would when streaming a dataset through the core.
//
// Set-up: random frozen weights and random 28x28 inputs, adapter A random and
// B zero, learning rate 0.1, behavioural memory with random grant stalls.
//
// Checks:
//  * epoch 0 misses on every sample and later epochs hit on every sample;
//  * the first epoch writes exactly one 63-word entry per image, at
//    cache_base + idx*1008, and later epochs write nothing and read 63 words
//    per sample;
//  * the base logits x^5 recovered from the cache for an image are identical
//    in every epoch after the first;
//  * every probability vector sums to one within 0.03;
//  * the adapters' B matrices are no longer zero after training.
// It also measures the core's busy cycles per epoch (start to done, host
// loading excluded) and projects the time of ten epochs over 1024 images at
// 200 MHz; a projection above 0.5 s counts as a failure.
// Mechanism counters (each must occur): miss, hit, entry write, entry read,
// memory stall, SGD update.
module tb_workload;
  import instantft_pkg::*;

  localparam int BATCH  = 20;
  localparam int NB     = 3;
  localparam int NS     = NB * BATCH;
  localparam int EPOCHS = 3;
  localparam int ENTRY_WORDS = 63;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  prm_t eta;
  logic [MEM_AW-1:0] cache_base = 40'h2000_0000;
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
  int n_miss = 0, n_hit = 0, n_update = 0;

  initial begin : watchdog
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic prm_t rnd_prm_u(int mag);
    return prm_t'($signed($urandom_range(0, 2*mag)) - mag);
  endfunction

  function automatic int sidx(int n);   // dataset index of image n
    return 7 * n + 3;
  endfunction

  localparam int CIN_A [5] = '{X0_N, X1_N, X2_N, X3_N, X4_N};
  int   lbl [NS];
  act_t xhat_seen [NS][NCLS];
  int   epoch, batch;

  // ---------------------------------------------------------------- per-sample monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    int n;
    real sum;
    n = batch * BATCH + int'(out_sample);
    checks++;
    if (out_hit !== (epoch > 0)) begin
      failures++;
      $display("epoch %0d image %0d hit=%0d", epoch, n, out_hit);
    end
    if (out_hit) n_hit++; else n_miss++;
    sum = 0.0;
    for (int o = 0; o < NCLS; o++) sum += real'(out_p[o]) / 65536.0;
    checks++;
    if (sum < 0.97 || sum > 1.03) begin failures++; $display("image %0d sum p = %f", n, sum); end
    if (epoch == 1)
      for (int o = 0; o < NCLS; o++) xhat_seen[n][o] = dut.xhat[o];
    else if (epoch > 1)
      for (int o = 0; o < NCLS; o++) begin
        checks++;
        if (dut.xhat[o] !== xhat_seen[n][o]) begin
          failures++;
          $display("image %0d logit %0d from cache changed: %0d vs %0d", n, o, dut.xhat[o], xhat_seen[n][o]);
        end
      end
  end

  // ---------------------------------------------------------------- host side
  // pixel i of image n in [0, 1): a fixed hash, so an image is the same in
  // every epoch
  function automatic act_t pixel(int n, int i);
    logic [31:0] h;
    h = 32'(n) * 32'd2654435761 ^ 32'(i) * 32'd40503;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    return act_t'(h[31:16]);
  endfunction

  task automatic load_batch(int b);
    @(negedge clk);
    in_we = 1;
    for (int s = 0; s < BATCH; s++)
      for (int i = 0; i < X0_N; i++) begin
        in_addr = $clog2(BATCH*X0_N)'(s*X0_N + i);
        in_data = pixel(b*BATCH + s, i);
        @(negedge clk);
      end
    in_we = 0;
    smp_we = 1;
    for (int s = 0; s < BATCH; s++) begin
      smp_sel = $clog2(BATCH)'(s);
      smp_label = 4'(lbl[b*BATCH + s]);
      smp_idx = 32'(sidx(b*BATCH + s));
      @(negedge clk);
    end
    smp_we = 0;
  endtask

  int busy_cyc [EPOCHS];
  int wr0, rd0;

  initial begin
    int t0;
    eta = prm_t'($rtoi(0.1 * 4096.0 + 0.5));
    for (int n = 0; n < NS; n++) lbl[n] = $urandom_range(0, NCLS-1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    prm_we = 1;
    prm_sel = 0; for (int i = 0; i < 6*25 + 6; i++) begin prm_addr = 16'(i); prm_data = rnd_prm_u(i < 150 ? 900 : 200); @(negedge clk); end
    prm_sel = 1; for (int i = 0; i < 16*150 + 16; i++) begin prm_addr = 16'(i); prm_data = rnd_prm_u(250); @(negedge clk); end
    prm_sel = 2; for (int i = 0; i < X3_N*X2_N + X3_N; i++) begin prm_addr = 16'(i); prm_data = rnd_prm_u(300); @(negedge clk); end
    prm_sel = 3; for (int i = 0; i < X4_N*X3_N + X4_N; i++) begin prm_addr = 16'(i); prm_data = rnd_prm_u(600); @(negedge clk); end
    prm_sel = 4; for (int i = 0; i < NCLS*X4_N + NCLS; i++) begin prm_addr = 16'(i); prm_data = rnd_prm_u(700); @(negedge clk); end
    for (int a = 0; a < 5; a++) begin
      prm_sel = 4'(5 + a);
      for (int j = 0; j < R*CIN_A[a] + NCLS*R; j++) begin
        prm_addr = 16'(j);
        prm_data = (j < R*CIN_A[a]) ? rnd_prm_u(60) : prm_t'(0);
        @(negedge clk);
      end
    end
    prm_we = 0;

    for (epoch = 0; epoch < EPOCHS; epoch++) begin
      busy_cyc[epoch] = 0;
      wr0 = dram.n_wr; rd0 = dram.n_rd;
      for (batch = 0; batch < NB; batch++) begin
        load_batch(batch);
        @(negedge clk); start = 1; t0 = cyc;
        @(negedge clk); start = 0;
        wait (done);
        busy_cyc[epoch] += cyc - t0;
        n_update++;
        @(negedge clk);
      end
      $display("epoch %0d: %0d busy cycles, %0d entry words written, %0d read",
               epoch, busy_cyc[epoch], dram.n_wr - wr0, dram.n_rd - rd0);
      checks += 2;
      if (dram.n_wr - wr0 != (epoch == 0 ? NS * ENTRY_WORDS : 0)) begin
        failures++; $display("epoch %0d: %0d words written", epoch, dram.n_wr - wr0);
      end
      if (dram.n_rd - rd0 != (epoch == 0 ? 0 : NS * ENTRY_WORDS)) begin
        failures++; $display("epoch %0d: %0d words read", epoch, dram.n_rd - rd0);
      end
    end

    // entries at cache_base + idx * 1008
    for (int n = 0; n < NS; n++) begin
      longint w0;
      w0 = longint'(cache_base >> 4) + longint'(sidx(n)) * ENTRY_WORDS;
      checks++;
      if (!dram.mem.exists(w0) || !dram.mem.exists(w0 + ENTRY_WORDS - 1)) begin
        failures++; $display("image %0d: entry not at its address", n);
      end
    end

    // training moved B away from zero
    begin
      int nz;
      nz = 0;
      for (int a = 0; a < 5; a++) begin
        lrd_sel = 3'(a);
        for (int k = 0; k < NCLS*R; k++) begin
          lrd_addr = 16'(R*CIN_A[a] + k);
          #1;
          if (lrd_data != 0) nz++;
        end
      end
      checks++;
      if (nz == 0) begin failures++; $display("B still zero after training"); end
    end

    // projected time: one epoch of misses and nine of hits over 1024 images
    begin
      real per_miss, per_hit, t;
      per_miss = real'(busy_cyc[0]) / NS;
      per_hit  = real'(busy_cyc[EPOCHS-1]) / NS;
      t = (1024.0 * per_miss + 9.0 * 1024.0 * per_hit) / 200.0e6;
      $display("busy cycles per image: first epoch %0.0f, later epochs %0.0f", per_miss, per_hit);
      $display("projected 10 epochs over 1024 images at 200 MHz: %0.3f s", t);
      checks++;
      if (t > 0.5) begin failures++; $display("projection too slow"); end
    end

    $display("mechanisms: miss=%0d hit=%0d entry_writes=%0d entry_reads=%0d stalls=%0d updates=%0d",
             n_miss, n_hit, dram.n_wr, dram.n_rd, dram.n_stall, n_update);
    checks += 6;
    if (n_miss == 0)       begin failures++; $display("no miss");   end
    if (n_hit == 0)        begin failures++; $display("no hit");    end
    if (dram.n_wr == 0)    begin failures++; $display("no write");  end
    if (dram.n_rd == 0)    begin failures++; $display("no read");   end
    if (dram.n_stall == 0) begin failures++; $display("no stall");  end
    if (n_update == 0)     begin failures++; $display("no update"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
