// act_ram: on-chip activation buffer (x0..x4 in the core): DEPTH words of
// Q8.16, one synchronous write port and one combinational read port. The core
// multiplexes the producers (a layer or the dequantizer) onto the write port
// and the consumers (next layer, quantizer, adapters) onto the read port by
// phase. Contents are not reset; every word is written before it is read.
module act_ram
  import instantft_pkg::*;
#(
  parameter int DEPTH = 1176
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  act_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output act_t                     rdata
);

  act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
