// tb_lora_fwd: self-checking test of lora_fwd (9 inputs, 3 outputs, rank 4).
// A, B and x are random and held in testbench arrays behind the module's
// combinational read ports. h = A x and delta = B h are recomputed here with
// the same fixed-point rules and compared; the latency is checked against
// CIN + COUT + 2 cycles from the start pulse to done. Two passes are run with
// different inputs to check that the accumulators restart.
module tb_lora_fwd;
  import instantft_pkg::*;

  localparam int CIN = 9, COUT = 3, RK = 4;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [$clog2(CIN)-1:0] x_addr, a_addr;
  logic [$clog2(COUT)-1:0] b_addr;
  act_t x [CIN];
  prm_t A [CIN][RK];
  prm_t B [COUT][RK];
  act_t h [RK];
  act_t delta [COUT];
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  lora_fwd #(.CIN(CIN), .COUT(COUT), .RK(RK)) dut (
    .clk, .rst_n, .start, .busy, .done, .x_addr, .x_data(x[x_addr]),
    .a_addr, .a_col(A[a_addr]), .b_addr, .b_row(B[b_addr]), .h, .delta);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      act_t eh [RK];
      for (int i = 0; i < CIN; i++) begin
        x[i] = act_t'($signed($urandom_range(0, 4*65536)) - 2*65536);
        for (int k = 0; k < RK; k++) A[i][k] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
      end
      for (int o = 0; o < COUT; o++)
        for (int k = 0; k < RK; k++) B[o][k] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
      @(negedge clk); start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      wait (done);
      checks++;
      if (cyc - t0 != CIN + COUT + 2) begin failures++; $display("latency %0d", cyc - t0); end
      @(negedge clk);
      for (int k = 0; k < RK; k++) begin
        longint s;
        s = 0;
        for (int i = 0; i < CIN; i++) s += longint'(x[i]) * longint'(A[i][k]);
        eh[k] = sat_act(64'(s >>> 12));
        checks++;
        if (h[k] !== eh[k]) begin failures++; $display("h[%0d] got %0d exp %0d", k, h[k], eh[k]); end
      end
      for (int o = 0; o < COUT; o++) begin
        longint s;
        s = 0;
        for (int k = 0; k < RK; k++) s += longint'(eh[k]) * longint'(B[o][k]);
        checks++;
        if (delta[o] !== sat_act(64'(s >>> 12))) begin
          failures++; $display("delta[%0d] got %0d exp %0d", o, delta[o], sat_act(64'(s >>> 12)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
