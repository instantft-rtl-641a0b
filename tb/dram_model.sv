// dram_model: behavioural model of the external memory that holds the
// Forward Cache, for testbenches only. It serves the core's 128-bit
// request/grant port: a request is granted on a cycle where mem_gnt is high
// (held low at random with probability STALL_PCT percent, to exercise
// back-pressure); a granted write stores mem_wdata at the 16-byte word
// mem_addr/16; a granted read returns the word LAT cycles later on
// mem_rvalid/mem_rdata, in order. Unwritten words read as zero. Counters of
// reads, writes and stall cycles are public for the testbench.
module dram_model
  import instantft_pkg::*;
#(
  parameter int STALL_PCT = 25,
  parameter int LAT       = 8
) (
  input  logic              clk,
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic [MEM_AW-1:0] mem_addr,
  input  logic [MEM_DW-1:0] mem_wdata,
  output logic              mem_gnt,
  output logic              mem_rvalid,
  output logic [MEM_DW-1:0] mem_rdata
);

  logic [MEM_DW-1:0] mem [longint];
  logic [MEM_DW-1:0] rq_data [$];
  int                rq_due  [$];
  int cyc = 0, n_rd = 0, n_wr = 0, n_stall = 0;

  initial begin
    mem_gnt = 1'b1;
    mem_rvalid = 1'b0;
    mem_rdata = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    mem_rvalid <= 1'b0;
    if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
      mem_rvalid <= 1'b1;
      mem_rdata  <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end
    if (mem_req && mem_gnt) begin
      longint wa;
      wa = longint'(mem_addr >> 4);
      if (mem_we) begin
        mem[wa] = mem_wdata;
        n_wr++;
      end else begin
        rq_data.push_back(mem.exists(wa) ? mem[wa] : '0);
        rq_due.push_back(cyc + LAT);
        n_rd++;
      end
    end
    if (mem_req && !mem_gnt) n_stall++;
    mem_gnt <= ($urandom_range(0, 99) >= STALL_PCT);
  end

endmodule
