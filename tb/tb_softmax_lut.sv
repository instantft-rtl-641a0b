// tb_softmax_lut: self-checking test of the lookup-table softmax (ten
// logits). Random logit vectors spread over about +-8, plus one with a
// dominant logit and one with equal logits, are compared with a softmax
// computed here in real arithmetic: each probability within 0.01, the sum
// within 0.02 of one, and the largest logit within 0.01 of the largest
// probability. Latency from start to done
// is checked against COUT + 2 cycles.
module tb_softmax_lut;
  import instantft_pkg::*;

  localparam int COUT = 10;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  act_t x [COUT];
  act_t p [COUT];
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  softmax_lut #(.COUT(COUT)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      real ex [COUT];
      real sum, psum;
      int t0, amax, pmax;
      for (int o = 0; o < COUT; o++) begin
        x[o] = act_t'($signed($urandom_range(0, 16*65536)) - 8*65536);
        if (trial == 28) x[o] = (o == 3) ? act_t'(20*65536) : act_t'(-3*65536);
        if (trial == 29) x[o] = act_t'(65536);
      end
      @(negedge clk); start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      wait (done);
      checks++;
      if (cyc - t0 != COUT + 2) begin failures++; $display("latency %0d", cyc - t0); end
      @(negedge clk);
      sum = 0.0;
      for (int o = 0; o < COUT; o++) begin ex[o] = $exp(real'(x[o]) / 65536.0); sum += ex[o]; end
      psum = 0.0; amax = 0; pmax = 0;
      for (int o = 0; o < COUT; o++) begin
        real pr, pe;
        pr = real'(p[o]) / 65536.0;
        pe = ex[o] / sum;
        psum += pr;
        if (x[o] > x[amax]) amax = o;
        if (p[o] > p[pmax]) pmax = o;
        checks++;
        if (pr - pe > 0.01 || pe - pr > 0.01) begin
          failures++; $display("trial %0d o=%0d p=%f exp %f", trial, o, pr, pe);
        end
      end
      checks += 2;
      if (psum > 1.02 || psum < 0.98) begin failures++; $display("trial %0d sum %f", trial, psum); end
      if (int'(p[amax]) < int'(p[pmax]) - 655) begin failures++; $display("trial %0d argmax", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
