// tb_fc_layer: self-checking test of fc_layer at a reduced size (7 inputs,
// 5 outputs), one instance with ReLU and two lanes (groups of 2, 2 and 1
// outputs) and one without ReLU and eight lanes (a single, partly unused
// group). Random weights, biases
// and inputs; outputs are compared with y = W x + b (Q8.16 x Q4.12 products,
// bias aligned, arithmetic shift by 12, saturation, ReLU) computed here, and
// the latency of each is checked against ceil(NOUT/PO)*NIN + NOUT + 1 cycles.
module tb_fc_layer;
  import instantft_pkg::*;

  localparam int NIN = 7, NOUT = 5, NPRM = NOUT*NIN + NOUT;
  localparam int PO_R = 2, PO_L = 8;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy_r, done_r, busy_l, done_l;
  logic [$clog2(NIN)-1:0] ia_r, ia_l;
  logic we_r, we_l;
  logic [$clog2(NOUT)-1:0] oa_r, oa_l;
  act_t od_r, od_l;
  logic ld_we = 0;
  logic [$clog2(NPRM)-1:0] ld_addr = '0;
  prm_t ld_data = '0;

  act_t xin [NIN];
  prm_t prm [NPRM];
  act_t got_r [NOUT], got_l [NOUT];
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fc_layer #(.NIN(NIN), .NOUT(NOUT), .RELU(1'b1), .PO(PO_R)) dut_r (
    .clk, .rst_n, .start, .busy(busy_r), .done(done_r), .in_addr(ia_r), .in_data(xin[ia_r]),
    .out_we(we_r), .out_addr(oa_r), .out_data(od_r), .ld_we, .ld_addr, .ld_data);
  fc_layer #(.NIN(NIN), .NOUT(NOUT), .RELU(1'b0), .PO(PO_L)) dut_l (
    .clk, .rst_n, .start, .busy(busy_l), .done(done_l), .in_addr(ia_l), .in_data(xin[ia_l]),
    .out_we(we_l), .out_addr(oa_l), .out_data(od_l), .ld_we, .ld_addr, .ld_data);

  always @(posedge clk) begin
    if (we_r) got_r[oa_r] <= od_r;
    if (we_l) got_l[oa_l] <= od_l;
  end

  int t_done_l = -1;
  always @(posedge clk) if (done_l) t_done_l <= cyc;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < NIN; i++) xin[i] = act_t'($signed($urandom_range(0, 8*65536)) - 4*65536);
    for (int i = 0; i < NPRM; i++) prm[i] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
    for (int o = 0; o < NOUT; o++) begin got_r[o] = '0; got_l[o] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NPRM; i++) begin
      @(negedge clk); ld_we = 1; ld_addr = $clog2(NPRM)'(i); ld_data = prm[i];
    end
    @(negedge clk); ld_we = 0;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done_r);
    checks++;
    if (cyc - t0 != ((NOUT + PO_R - 1) / PO_R) * NIN + NOUT + 1) begin
      failures++; $display("latency (2 lanes) %0d", cyc - t0);
    end
    checks++;
    if (t_done_l - t0 != ((NOUT + PO_L - 1) / PO_L) * NIN + NOUT + 1) begin
      failures++; $display("latency (8 lanes) %0d", t_done_l - t0);
    end
    @(negedge clk);
    for (int o = 0; o < NOUT; o++) begin
      longint acc, s;
      act_t e;
      acc = 0;
      for (int i = 0; i < NIN; i++) acc += longint'(xin[i]) * longint'(prm[o*NIN+i]);
      s = (acc + (longint'(prm[NOUT*NIN+o]) <<< 16)) >>> 12;
      e = sat_act(64'(s));
      checks++;
      if (got_l[o] !== e) begin failures++; $display("linear o=%0d got %0d exp %0d", o, got_l[o], e); end
      if (e < 0) e = '0;
      checks++;
      if (got_r[o] !== e) begin failures++; $display("relu o=%0d got %0d exp %0d", o, got_r[o], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
