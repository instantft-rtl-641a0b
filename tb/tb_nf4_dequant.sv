// tb_nf4_dequant: self-checking test of the NF4 dequantizer on a 100-value
// entry (two blocks of 64). A random entry (codes and two scales) is placed in
// the behavioural memory, which stalls grants at random and answers reads
// after 6 cycles. Every value written by the module must equal
// NF4[code] * scale, computed here in real arithmetic from the NF4 table,
// within 1.5 LSB plus the error of the stored levels (rounded to 2^-15, so up
// to scale/2^16); the product is truncated. Every index must be written once.
// Prefetch is checked too: at least one read must be granted while values
// are being written, and no more than DEPTH (2) reads may be in flight.
module tb_nf4_dequant;
  import instantft_pkg::*;

  localparam int N = 100, BLK = 64, NBLK = 2, NCW = 4, NSW = 1;
  localparam real NF4 [16] = '{-1.0, -0.6961928009986877, -0.5250730514526367,
    -0.39491748809814453, -0.28444138169288635, -0.18477343022823334,
    -0.09105003625154495, 0.0, 0.07958029955625534, 0.16093020141124725,
    0.24611230194568634, 0.33791524171829224, 0.44070982933044434,
    0.5626170039176941, 0.7229568362236023, 1.0};
  localparam logic [MEM_AW-1:0] BASE = 40'h4_0000;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic mem_req, mem_gnt, mem_rvalid;
  logic [MEM_AW-1:0] mem_addr;
  logic [MEM_DW-1:0] mem_rdata;
  logic wr_we;
  logic [$clog2(N)-1:0] wr_addr;
  act_t wr_data;
  act_t got [N];
  int nwr [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nf4_dequant #(.N(N), .BLK(BLK)) dut (
    .clk, .rst_n, .start, .busy, .done, .base_addr(BASE), .mem_req, .mem_addr, .mem_gnt,
    .mem_rvalid, .mem_rdata, .wr_we, .wr_addr, .wr_data);

  dram_model #(.STALL_PCT(30), .LAT(6)) mem (
    .clk, .mem_req, .mem_we(1'b0), .mem_addr, .mem_wdata('0), .mem_gnt, .mem_rvalid, .mem_rdata);

  always @(posedge clk) if (wr_we) begin got[wr_addr] <= wr_data; nwr[wr_addr] <= nwr[wr_addr] + 1; end

  // prefetch: a read granted while values are being written, and the most
  // words ever requested but not yet returned
  int overlap = 0, outst = 0, max_outst = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_we && mem_req && mem_gnt) overlap <= overlap + 1;
    outst <= outst + int'(mem_req && mem_gnt) - int'(mem_rvalid);
    if (outst > max_outst) max_outst <= outst;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    int scale [NBLK];
    int code [N];
    logic [MEM_DW-1:0] w;
    scale[0] = 3*65536 + 1234;
    scale[1] = 40000;
    for (int i = 0; i < N; i++) begin code[i] = $urandom_range(0, 15); nwr[i] = 0; end
    for (int cw = 0; cw < NCW; cw++) begin
      w = '0;
      for (int q = 0; q < 32; q++) if (cw*32 + q < N) w[4*q +: 4] = 4'(code[cw*32 + q]);
      mem.mem[longint'(BASE >> 4) + cw] = w;
    end
    w = '0;
    w[31:0] = 32'(scale[0]);
    w[63:32] = 32'(scale[1]);
    mem.mem[longint'(BASE >> 4) + NCW] = w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done);
    t1 = cyc;
    @(negedge clk);
    $display("entry of %0d values dequantized in %0d cycles, %0d prefetches, up to %0d reads in flight",
             N, t1 - t0, overlap, max_outst);
    checks++;
    if (overlap == 0) begin failures++; $display("no read overlapped the output"); end
    checks++;
    if (max_outst > 2) begin failures++; $display("more reads in flight than DEPTH"); end
    checks++;
    if (mem.n_rd != NCW + NSW) begin failures++; $display("reads %0d", mem.n_rd); end
    for (int i = 0; i < N; i++) begin
      real e, tol;
      e = NF4[code[i]] * real'(scale[i / BLK]);
      tol = 1.5 + real'(scale[i / BLK]) / 65536.0;
      checks += 2;
      if (nwr[i] != 1) begin failures++; $display("index %0d written %0d times", i, nwr[i]); end
      if (real'(got[i]) - e > tol || e - real'(got[i]) > tol) begin
        failures++; $display("value %0d got %0d exp %f", i, got[i], e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
