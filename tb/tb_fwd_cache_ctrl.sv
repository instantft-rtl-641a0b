// tb_fwd_cache_ctrl: self-checking test of the Forward Cache bookkeeping
// (64 indices, 1008-byte entries). Random indices (some out of range) are set
// and looked up against a model kept here: hit only after set and only in
// range; entry address = base + idx*1008; `clear` forgets everything.
module tb_fwd_cache_ctrl;
  import instantft_pkg::*;

  localparam int N_IDX = 64, ENTRY_BYTES = 1008;
  logic clk = 0, rst_n = 0, clear = 0, set = 0, hit, in_range;
  logic [MEM_AW-1:0] base = 40'h10_0000, entry_addr;
  logic [31:0] idx = '0;
  bit model [N_IDX];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fwd_cache_ctrl #(.N_IDX(N_IDX), .IDX_W(32), .ENTRY_BYTES(ENTRY_BYTES)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic look(int i);
    idx = 32'(i);
    #1;
    checks += 2;
    if (hit !== (i < N_IDX && model[i])) begin failures++; $display("idx %0d hit %0d", i, hit); end
    if (entry_addr !== base + MEM_AW'(i) * ENTRY_BYTES) begin failures++; $display("idx %0d addr", i); end
  endtask

  initial begin
    for (int i = 0; i < N_IDX; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int n = 0; n < 80; n++) begin
        int i;
        @(negedge clk);
        i = $urandom_range(0, N_IDX + 8);
        look(i);
        if ($urandom_range(0, 1)) begin
          set = 1;
          @(negedge clk);
          set = 0;
          if (i < N_IDX) model[i] = 1;
          look(i);
        end
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int i = 0; i < N_IDX; i++) model[i] = 0;
      for (int i = 0; i < N_IDX; i++) look(i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
