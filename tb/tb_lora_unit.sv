// tb_lora_unit: self-checking test of a complete adapter (lora_unit: buffers
// plus forward and backward modules), 6 inputs, 3 outputs, rank 4. A and B
// are written through the host load port; a forward pass, a gradient pass and
// an update are run; delta and the parameters read back through the host
// read port are compared with a reference model. A second forward pass after
// the update checks that it uses the updated parameters.
module tb_lora_unit;
  import instantft_pkg::*;

  localparam int CIN = 6, COUT = 3, RK = 4, NPRM = RK*CIN + COUT*RK;

  logic clk = 0, rst_n = 0, fwd_start = 0, grad_start = 0, upd_start = 0, busy, done;
  prm_t eta;
  logic [$clog2(CIN)-1:0] x_addr;
  act_t x [CIN];
  act_t delta [COUT];
  prm_t dx_in [COUT];
  logic ld_we = 0;
  logic [$clog2(NPRM)-1:0] ld_addr = '0, rd_addr = '0;
  prm_t ld_data = '0, rd_data;
  prm_t rA [RK][CIN], rB [COUT][RK];
  act_t rh [RK];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lora_unit #(.CIN(CIN), .COUT(COUT), .RK(RK)) dut (
    .clk, .rst_n, .fwd_start, .grad_start, .upd_start, .busy, .done, .eta,
    .x_addr, .x_data(x[x_addr]), .delta, .dx_in, .ld_we, .ld_addr, .ld_data, .rd_addr, .rd_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic prm_t rnd(longint v, int sh);
    return sat_prm(64'((v + (longint'(1) <<< (sh-1))) >>> sh));
  endfunction

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
    wait (done);
    @(negedge clk);
  endtask

  task automatic check_fwd();
    for (int k = 0; k < RK; k++) begin
      longint s;
      s = 0;
      for (int i = 0; i < CIN; i++) s += longint'(x[i]) * longint'(rA[k][i]);
      rh[k] = sat_act(64'(s >>> 12));
    end
    for (int o = 0; o < COUT; o++) begin
      longint s;
      s = 0;
      for (int k = 0; k < RK; k++) s += longint'(rh[k]) * longint'(rB[o][k]);
      checks++;
      if (delta[o] !== sat_act(64'(s >>> 12))) begin
        failures++; $display("delta[%0d] got %0d exp %0d", o, delta[o], sat_act(64'(s >>> 12)));
      end
    end
  endtask

  initial begin
    prm_t dh [RK];
    prm_t gA [RK][CIN], gB [COUT][RK];
    eta = prm_t'(410);
    for (int k = 0; k < RK; k++) for (int i = 0; i < CIN; i++) rA[k][i] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
    for (int o = 0; o < COUT; o++) for (int k = 0; k < RK; k++) rB[o][k] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
    for (int i = 0; i < CIN; i++) x[i] = act_t'($signed($urandom_range(0, 4*65536)) - 2*65536);
    for (int o = 0; o < COUT; o++) dx_in[o] = prm_t'($signed($urandom_range(0, 4096)) - 2048);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NPRM; a++) begin
      @(negedge clk); ld_we = 1; ld_addr = $clog2(NPRM)'(a);
      ld_data = (a < RK*CIN) ? rA[a / CIN][a % CIN] : rB[(a - RK*CIN) / RK][(a - RK*CIN) % RK];
    end
    @(negedge clk); ld_we = 0;
    pulse(fwd_start);
    check_fwd();
    pulse(grad_start);
    pulse(upd_start);
    // reference backward + update
    for (int k = 0; k < RK; k++) begin
      longint s;
      s = 0;
      for (int o = 0; o < COUT; o++) s += longint'(rB[o][k]) * longint'(dx_in[o]);
      dh[k] = rnd(s, 12);
    end
    for (int o = 0; o < COUT; o++) for (int k = 0; k < RK; k++) begin
      gB[o][k] = rnd(longint'(rh[k]) * longint'(dx_in[o]), 16);
      rB[o][k] = sat_prm(64'(rB[o][k]) - 64'(rnd(longint'(eta) * longint'(gB[o][k]), 12)));
    end
    for (int k = 0; k < RK; k++) for (int i = 0; i < CIN; i++) begin
      gA[k][i] = rnd(longint'(x[i]) * longint'(dh[k]), 16);
      rA[k][i] = sat_prm(64'(rA[k][i]) - 64'(rnd(longint'(eta) * longint'(gA[k][i]), 12)));
    end
    for (int a = 0; a < NPRM; a++) begin
      prm_t e;
      e = (a < RK*CIN) ? rA[a / CIN][a % CIN] : rB[(a - RK*CIN) / RK][(a - RK*CIN) % RK];
      rd_addr = $clog2(NPRM)'(a);
      #1;
      checks++;
      if (rd_data !== e) begin failures++; $display("param %0d got %0d exp %0d", a, rd_data, e); end
    end
    pulse(fwd_start);
    check_fwd();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
