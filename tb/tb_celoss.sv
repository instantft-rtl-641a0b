// tb_celoss: self-checking test of celoss (ten classes, batch 20). For random
// probability vectors and labels, dx5 is compared with (p - onehot)/20
// computed here in real arithmetic and rounded to Q4.12 (at most one LSB
// apart), and its sign pattern is checked: only the true class is negative.
module tb_celoss;
  import instantft_pkg::*;

  localparam int COUT = 10, BATCH = 20;
  act_t p [COUT];
  logic [3:0] label;
  prm_t dx [COUT];
  int checks = 0, failures = 0;

  celoss #(.COUT(COUT), .BATCH(BATCH)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 40; trial++) begin
      label = 4'($urandom_range(0, COUT-1));
      for (int o = 0; o < COUT; o++) p[o] = act_t'($urandom_range(1, 65536));
      #1;
      for (int o = 0; o < COUT; o++) begin
        real e;
        int ei;
        e = ((real'(p[o]) / 65536.0) - ((o == label) ? 1.0 : 0.0)) / BATCH * 4096.0;
        ei = $rtoi(e >= 0 ? e + 0.5 : e - 0.5);
        checks++;
        if (int'(dx[o]) - ei > 1 || ei - int'(dx[o]) > 1) begin
          failures++; $display("trial %0d o=%0d got %0d exp %0d", trial, o, dx[o], ei);
        end
        checks++;
        if ((o == label) != (dx[o] < 0) && p[o] != 65536) begin
          failures++; $display("sign trial %0d o=%0d got %0d", trial, o, dx[o]);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
