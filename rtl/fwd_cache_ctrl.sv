// fwd_cache_ctrl: bookkeeping of the Forward Cache, whose entries live in
// external memory. It keeps one presence bit per sample index (set when the
// quantized forward results of that sample have been written, cleared all at
// once by `clear`) and computes the byte address of an entry,
// base + idx * ENTRY_BYTES, from the sample index.
//
// Interface: lookup (idx -> hit, entry_addr) is combinational; `set` marks idx
// present at the next clock edge. Indices >= N_IDX are never present and
// `set` ignores them, so such samples always take the full forward pass.
//
// That the core checks whether the entry for index j is cached, and computes
// the entry address from the index, is the paper's; keeping the presence bits
// on chip and their number N_IDX (the 1024 samples of the rotated-MNIST
// datasets) are this design's choices.
module fwd_cache_ctrl
  import instantft_pkg::*;
#(
  parameter int N_IDX       = 1024,
  parameter int IDX_W       = 32,
  parameter int ENTRY_BYTES = 63 * 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [MEM_AW-1:0]  base,
  input  logic [IDX_W-1:0]   idx,
  output logic               hit,
  output logic               in_range,
  output logic [MEM_AW-1:0]  entry_addr,
  input  logic               set
);

  logic [N_IDX-1:0] valid;

  always_comb begin
    in_range   = (idx < IDX_W'(N_IDX));
    hit        = in_range && valid[$clog2(N_IDX)'(idx)];
    entry_addr = base + MEM_AW'(idx) * MEM_AW'(ENTRY_BYTES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                valid <= '0;
    else if (clear)            valid <= '0;
    else if (set && in_range)  valid[$clog2(N_IDX)'(idx)] <= 1'b1;
  end

endmodule
