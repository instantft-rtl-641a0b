// tb_conv_mp: self-checking test of conv_mp at a reduced size (2 input
// channels, 3 output channels, 6x6 input, 3x3 kernel, padding 1). Random
// weights, biases and activations (including negative ones, so ReLU and
// padding matter) are loaded; the pooled outputs are compared with a
// reference convolution / ReLU / 2x2 max-pool computed here with the same
// fixed-point rules, and the start-to-done latency is checked against
// HO*WO*(CIN*K*K+1) + HP*WP*COUT + 1 cycles.
module tb_conv_mp;
  import instantft_pkg::*;

  localparam int CIN = 2, COUT = 3, H = 6, W = 6, K = 3, PAD = 1;
  localparam int HO = H + 2*PAD - K + 1, WO = W + 2*PAD - K + 1;
  localparam int HP = HO/2, WP = WO/2;
  localparam int NIN = CIN*H*W, NOUT = COUT*HP*WP, KK = CIN*K*K, NPRM = COUT*KK + COUT;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [$clog2(NIN)-1:0] in_addr;
  act_t in_data;
  logic out_we;
  logic [$clog2(NOUT)-1:0] out_addr;
  act_t out_data;
  logic ld_we = 0;
  logic [$clog2(NPRM)-1:0] ld_addr = '0;
  prm_t ld_data = '0;

  act_t xin [NIN];
  prm_t prm [NPRM];
  act_t got [NOUT];
  bit   seen [NOUT];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  assign in_data = xin[in_addr];

  conv_mp #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .K(K), .PAD(PAD)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (out_we) begin got[out_addr] <= out_data; seen[out_addr] <= 1'b1; end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic act_t ref_pix(int oc, int y, int x);
    longint acc = 0, s;
    for (int ci = 0; ci < CIN; ci++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          int iy = y + ky - PAD, ix = x + kx - PAD;
          if (iy >= 0 && iy < H && ix >= 0 && ix < W)
            acc += longint'(xin[(ci*H+iy)*W+ix]) * longint'(prm[oc*KK + (ci*K+ky)*K + kx]);
        end
    s = (acc + (longint'(prm[COUT*KK + oc]) <<< 16)) >>> 12;
    if (s > 8388607) s = 8388607;
    if (s < 0) s = 0;
    return act_t'(s);
  endfunction

  initial begin
    int t0, lat;
    for (int i = 0; i < NIN; i++) xin[i] = act_t'($signed($urandom_range(0, 2*65536*4)) - 65536*4);
    for (int i = 0; i < NPRM; i++) prm[i] = prm_t'($signed($urandom_range(0, 4096)) - 2048);
    for (int i = 0; i < NOUT; i++) begin got[i] = '0; seen[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NPRM; i++) begin
      @(negedge clk); ld_we = 1; ld_addr = $clog2(NPRM)'(i); ld_data = prm[i];
    end
    @(negedge clk); ld_we = 0;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done);
    lat = cyc - t0;
    @(negedge clk);
    checks++;
    if (lat != HO*WO*(KK+1) + HP*WP*COUT + 1) begin
      failures++; $display("latency %0d expected %0d", lat, HO*WO*(KK+1) + HP*WP*COUT + 1);
    end
    for (int oc = 0; oc < COUT; oc++)
      for (int py = 0; py < HP; py++)
        for (int px = 0; px < WP; px++) begin
          act_t m, v;
          m = '0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              v = ref_pix(oc, 2*py+dy, 2*px+dx);
              if (v > m) m = v;
            end
          checks++;
          if (!seen[(oc*HP+py)*WP+px] || got[(oc*HP+py)*WP+px] !== m) begin
            failures++;
            $display("mismatch oc=%0d py=%0d px=%0d got=%0d exp=%0d", oc, py, px, got[(oc*HP+py)*WP+px], m);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
