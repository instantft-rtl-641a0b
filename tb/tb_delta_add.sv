// tb_delta_add: self-checking test of delta_add with the core's sizes (five
// adapters, ten logits). Random vectors, plus a case driven to positive and
// negative saturation, are compared with a sum computed here.
module tb_delta_add;
  import instantft_pkg::*;

  localparam int NAD = 5, COUT = 10;
  act_t xhat [COUT];
  act_t delta [NAD][COUT];
  act_t x5 [COUT];
  int checks = 0, failures = 0;

  delta_add #(.NAD(NAD), .COUT(COUT)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 52; trial++) begin
      for (int o = 0; o < COUT; o++) begin
        xhat[o] = act_t'($urandom);
        for (int a = 0; a < NAD; a++) delta[a][o] = act_t'($signed($urandom_range(0, 2*65536*8)) - 65536*8);
        if (trial == 50) begin xhat[o] = act_t'(24'sh7FFF00); for (int a = 0; a < NAD; a++) delta[a][o] = act_t'(24'sh100000); end
        if (trial == 51) begin xhat[o] = act_t'(24'sh800100); for (int a = 0; a < NAD; a++) delta[a][o] = act_t'(-24'sh100000); end
      end
      #1;
      for (int o = 0; o < COUT; o++) begin
        longint s;
        act_t e;
        s = longint'(xhat[o]);
        for (int a = 0; a < NAD; a++) s += longint'(delta[a][o]);
        if (s > 8388607) e = act_t'(24'sh7FFFFF);
        else if (s < -8388608) e = act_t'(24'sh800000);
        else e = act_t'(s);
        checks++;
        if (x5[o] !== e) begin failures++; $display("trial %0d o=%0d got %0d exp %0d", trial, o, x5[o], e); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
