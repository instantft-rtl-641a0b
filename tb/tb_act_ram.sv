// tb_act_ram: self-checking test of the activation buffer (depth 50): random
// writes to random addresses, with a model array kept here; after each write
// the combinational read of a random address is compared with the model, and
// a final sweep reads every written word back.
module tb_act_ram;
  import instantft_pkg::*;

  localparam int DEPTH = 50;
  logic clk = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  act_t wdata = '0, rdata;
  act_t model [DEPTH];
  bit   valid [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_ram #(.DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    for (int n = 0; n < 400; n++) begin
      int a, r;
      @(negedge clk);
      a = $urandom_range(0, DEPTH-1);
      we = 1; waddr = $clog2(DEPTH)'(a); wdata = act_t'($urandom);
      model[a] = wdata; valid[a] = 1;
      @(negedge clk);
      we = 0;
      r = $urandom_range(0, DEPTH-1);
      raddr = $clog2(DEPTH)'(r);
      #1;
      if (valid[r]) begin
        checks++;
        if (rdata !== model[r]) begin failures++; $display("addr %0d got %0d exp %0d", r, rdata, model[r]); end
      end
    end
    for (int i = 0; i < DEPTH; i++) if (valid[i]) begin
      raddr = $clog2(DEPTH)'(i);
      #1;
      checks++;
      if (rdata !== model[i]) begin failures++; $display("sweep %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
