// tb_nf4_quant: self-checking test of the NF4 quantizer on a 100-value entry
// (two blocks of 64, the second partial) written through the behavioural
// memory with random grant stalls. The written words are decoded here: each
// block scale must equal max|x| of its block, and each 4-bit code must be the
// NF4 level nearest to x/scale, computed in real arithmetic from the NF4
// table (values lying within 1e-3 of a decision boundary may take either
// neighbour). Also checks the number of memory writes and that the entry
// lands at base_addr.
module tb_nf4_quant;
  import instantft_pkg::*;

  localparam int N = 100, BLK = 64, NBLK = 2, NCW = 4, NSW = 1;
  localparam real NF4 [16] = '{-1.0, -0.6961928009986877, -0.5250730514526367,
    -0.39491748809814453, -0.28444138169288635, -0.18477343022823334,
    -0.09105003625154495, 0.0, 0.07958029955625534, 0.16093020141124725,
    0.24611230194568634, 0.33791524171829224, 0.44070982933044434,
    0.5626170039176941, 0.7229568362236023, 1.0};
  localparam logic [MEM_AW-1:0] BASE = 40'h12_3400;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [$clog2(N)-1:0] rd_addr;
  act_t x [N];
  logic mem_req, mem_gnt, mem_rvalid;
  logic [MEM_AW-1:0] mem_addr;
  logic [MEM_DW-1:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nf4_quant #(.N(N), .BLK(BLK)) dut (
    .clk, .rst_n, .start, .busy, .done, .base_addr(BASE), .rd_addr, .rd_data(x[rd_addr]),
    .mem_req, .mem_addr, .mem_wdata, .mem_gnt);

  dram_model #(.STALL_PCT(30), .LAT(4)) mem (
    .clk, .mem_req, .mem_we(1'b1), .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int amax [NBLK];
    for (int i = 0; i < N; i++) x[i] = act_t'($signed($urandom_range(0, 6*65536)) - 3*65536);
    x[5] = act_t'(-5*65536);   // a negative block maximum
    for (int b = 0; b < NBLK; b++) amax[b] = 0;
    for (int i = 0; i < N; i++) begin
      int a;
      a = (x[i] < 0) ? -int'(x[i]) : int'(x[i]);
      if (a > amax[i / BLK]) amax[i / BLK] = a;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (mem.n_wr != NCW + NSW) begin failures++; $display("writes %0d", mem.n_wr); end
    for (int b = 0; b < NBLK; b++) begin
      logic [MEM_DW-1:0] sw;
      sw = mem.mem.exists(longint'(BASE >> 4) + NCW + b/4) ? mem.mem[longint'(BASE >> 4) + NCW + b/4] : '0;
      checks++;
      if (int'(sw[32*(b%4) +: 32]) != amax[b]) begin
        failures++; $display("scale %0d got %0d exp %0d", b, sw[32*(b%4) +: 32], amax[b]);
      end
    end
    for (int i = 0; i < N; i++) begin
      logic [MEM_DW-1:0] cw;
      int c, best;
      real v, dbest;
      cw = mem.mem.exists(longint'(BASE >> 4) + i/32) ? mem.mem[longint'(BASE >> 4) + i/32] : '0;
      c = int'(cw[4*(i%32) +: 4]);
      v = real'(x[i]) / real'(amax[i / BLK]);
      best = 0; dbest = 10.0;
      for (int q = 0; q < 16; q++)
        if ((v - NF4[q]) * (v - NF4[q]) < dbest) begin dbest = (v - NF4[q]) * (v - NF4[q]); best = q; end
      checks++;
      if (c != best) begin
        real mid;
        mid = (NF4[c] + NF4[best]) / 2.0;
        if ((c - best > 1 || best - c > 1) || (v - mid > 1e-3 || mid - v > 1e-3)) begin
          failures++; $display("code %0d got %0d exp %0d (x/s=%f)", i, c, best, v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
