// nf4_dequant: the paper's "Dequant" block. Reads one NF4-coded Forward Cache
// entry from external memory (format as written by nf4_quant: NCW code words,
// then NSW scale words, at base_addr + 16*w) and writes the N dequantized
// activations x = NF4_LVL[code] * s (Q8.16) into the on-chip buffers.
//
// Operation: after `start` a request side issues reads for the NSW scale
// words and then the NCW code words, in that order, while an output side
// writes the values of the oldest received code word through wr_we/wr_addr/
// wr_data, one per cycle. Requests (mem_req, mem_addr) are held until mem_gnt;
// read data returns in request order on mem_rvalid/mem_rdata after any number
// of cycles. Up to DEPTH words may be requested but not yet written out, so
// the next code word is fetched while the current one is being written and,
// with a memory latency below 32 cycles, the output side never waits after
// the first word: an entry takes about N cycles plus two round trips. `done`
// pulses after the last value has been written.
//
// That Dequant reads 4-bit entries located by the sample index and writes
// them to the buffers after dequantization is the paper's; the entry format
// and the prefetch depth are this design's.
module nf4_dequant
  import instantft_pkg::*;
#(
  parameter int N   = CACHE_N,
  parameter int BLK = NF4_BLK,
  parameter int DEPTH = 2,
  localparam int NBLK = (N + BLK - 1) / BLK,
  localparam int NCW  = (N + NF4_PER_W - 1) / NF4_PER_W,
  localparam int NSW  = (NBLK + 3) / 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic [MEM_AW-1:0]       base_addr,
  output logic                    mem_req,
  output logic [MEM_AW-1:0]       mem_addr,
  input  logic                    mem_gnt,
  input  logic                    mem_rvalid,
  input  logic [MEM_DW-1:0]       mem_rdata,
  output logic                    wr_we,
  output logic [$clog2(N)-1:0]    wr_addr,
  output act_t                    wr_data
);

  localparam int NTOT = NSW + NCW;
  localparam int CW   = $clog2(DEPTH + 1);

  logic                         run;
  logic [$clog2(NTOT+1)-1:0]    ri;    // next word to request (scales first)
  logic [$clog2(NTOT+1)-1:0]    rr;    // next word to be returned
  logic [CW-1:0]                outst; // granted, data not yet returned
  logic [CW-1:0]                fcnt;  // code words held, not yet written out
  logic [$clog2(DEPTH)-1:0]     wp, rp;
  logic [MEM_DW-1:0]            fbuf [DEPTH];
  logic [$clog2(N+1)-1:0]       j;     // element index
  logic [31:0]                  scale [NBLK];
  logic                         pop;

  assign busy    = run;
  assign mem_req = run && (int'(ri) < NTOT) && (int'(outst) + int'(fcnt) < DEPTH);
  always_comb begin
    int wa;
    wa = (int'(ri) < NSW) ? NCW + int'(ri) : int'(ri) - NSW;
    mem_addr = base_addr + MEM_AW'(wa) * MEM_AW'(MEM_DW / 8);
  end

  always_comb begin
    logic [3:0]         c;
    logic signed [63:0] v;
    c = fbuf[rp][4*j[4:0] +: 4];
    v = (64'(NF4_LVL[c]) * 64'($signed({1'b0, scale[int'(j) / BLK]}))) >>> 15;
    wr_we   = run && (fcnt != 0);
    wr_addr = $clog2(N)'(j);
    wr_data = sat_act(v);
    pop     = wr_we && (j[4:0] == 5'd31 || int'(j) == N-1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      done <= 1'b0;
      ri <= '0; rr <= '0; outst <= '0; fcnt <= '0; wp <= '0; rp <= '0; j <= '0;
      for (int q = 0; q < DEPTH; q++) fbuf[q] <= '0;
      for (int q = 0; q < NBLK; q++) scale[q] <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          ri <= '0; rr <= '0; outst <= '0; fcnt <= '0; wp <= '0; rp <= '0; j <= '0;
        end
      end else begin
        if (mem_req && mem_gnt) ri <= ri + 1'b1;
        outst <= outst + CW'(mem_req && mem_gnt) - CW'(mem_rvalid);
        fcnt  <= fcnt + CW'(mem_rvalid && int'(rr) >= NSW) - CW'(pop);
        if (mem_rvalid) begin
          rr <= rr + 1'b1;
          if (int'(rr) < NSW) begin
            for (int q = 0; q < 4; q++)
              if (int'(rr) * 4 + q < NBLK)
                scale[int'(rr) * 4 + q] <= mem_rdata[32*q +: 32];
          end else begin
            fbuf[wp] <= mem_rdata;
            wp <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
          end
        end
        if (wr_we) begin
          j <= j + 1'b1;
          if (pop) rp <= (int'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
          if (int'(j) == N-1) begin
            run  <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
