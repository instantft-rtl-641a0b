// nf4_quant: the paper's "Quant" block. Compresses one Forward Cache entry
// (the N cached activations of a sample, Q8.16) to 4-bit NormalFloat codes and
// writes it to external memory.
//
// Entry format (this design's choice; the paper only says "NF4"): values are
// split into blocks of BLK consecutive elements, each with its own scale
// s = max|x| over the block. A value x is coded as the index of the nearest
// NF4 level to x/s; this is done without division by comparing x with the 15
// level midpoints scaled by s (computed once per block). The entry occupies
// NCW code words (32 codes per 128-bit word, code j in bits 4*(j%32)+:4 of word
// j/32) followed by NSW scale words (four 32-bit scales per word). Word w of the
// entry is at byte address base_addr + 16*w.
//
// Operation: after `start`, for each block: BLK cycles to read the block
// (rd_addr -> rd_data, combinational) and find its scale, one cycle to form
// thresholds, BLK cycles to read it again and code it, with a memory write
// whenever a code word is full. Scales are written last. Writes use a
// request/grant handshake (mem_req held with address and data until mem_gnt);
// a low mem_gnt stalls the module. `done` pulses after the last write is
// granted. BLK must be a multiple of 32 so that a code word never spans two
// blocks; a simulation-time assertion checks it.
module nf4_quant
  import instantft_pkg::*;
#(
  parameter int N   = CACHE_N,
  parameter int BLK = NF4_BLK,
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
  output logic [$clog2(N)-1:0]    rd_addr,
  input  act_t                    rd_data,
  output logic                    mem_req,
  output logic [MEM_AW-1:0]       mem_addr,
  output logic [MEM_DW-1:0]       mem_wdata,
  input  logic                    mem_gnt
);

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_THR, S_CODE, S_WR, S_SCW} state_e;
  state_e state;

  logic [$clog2(N+1)-1:0]    j;        // element index
  logic [$clog2(N+1)-1:0]    blk0;     // first element of the block
  logic [$clog2(NBLK+1)-1:0] b;        // block number
  logic [$clog2(NCW+NSW+1)-1:0] w;     // word number inside the entry
  logic [23:0]               amax;
  logic signed [31:0]        thr  [15];
  logic [31:0]               scale [NBLK];
  logic [MEM_DW-1:0]         wbuf;
  logic                      last_in_blk, word_full, last_elem;

  assign busy    = (state != S_IDLE);
  assign rd_addr = $clog2(N)'(j);

  always_comb begin
    last_elem   = (int'(j) == N-1);
    last_in_blk = last_elem || (int'(j) == int'(blk0) + BLK - 1);
    word_full   = last_elem || (j[4:0] == 5'd31);
  end

  // absolute value and NF4 code of the current element
  logic [23:0] absx;
  logic [3:0]  code;
  always_comb begin
    absx = (rd_data < 0) ? 24'(-rd_data) : 24'(rd_data);
    code = '0;
    for (int k = 0; k < 15; k++)
      if (32'(rd_data) > thr[k]) code = code + 1'b1;
  end

  // scale-word contents
  logic [MEM_DW-1:0] sword;
  always_comb begin
    sword = '0;
    for (int q = 0; q < 4; q++)
      if ((int'(w) - NCW) * 4 + q < NBLK)
        sword[32*q +: 32] = scale[(int'(w) - NCW) * 4 + q];
  end

  always_comb begin
    mem_req   = (state == S_WR) || (state == S_SCW);
    mem_addr  = base_addr + MEM_AW'(w) * MEM_AW'(MEM_DW / 8);
    mem_wdata = (state == S_SCW) ? sword : wbuf;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      j <= '0; blk0 <= '0; b <= '0; w <= '0; amax <= '0; wbuf <= '0;
      for (int k = 0; k < 15; k++) thr[k] <= '0;
      for (int q = 0; q < NBLK; q++) scale[q] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAX;
          j <= '0; blk0 <= '0; b <= '0; w <= '0; amax <= '0; wbuf <= '0;
        end
        S_MAX: begin
          if (absx > amax) amax <= absx;
          if (last_in_blk) state <= S_THR;
          else j <= j + 1'b1;
        end
        S_THR: begin
          for (int k = 0; k < 15; k++)
            thr[k] <= 32'((64'(NF4_MID[k]) * 64'(amax)) >>> 15);
          scale[b] <= 32'(amax);
          j <= blk0;
          state <= S_CODE;
        end
        S_CODE: begin
          wbuf[4*j[4:0] +: 4] <= code;
          if (word_full) state <= S_WR;
          else j <= j + 1'b1;
        end
        S_WR: if (mem_gnt) begin
          w    <= w + 1'b1;
          wbuf <= '0;
          if (last_elem) begin
            state <= S_SCW;
          end else begin
            j <= j + 1'b1;
            if (last_in_blk) begin
              state <= S_MAX;
              blk0  <= j + 1'b1;
              b     <= b + 1'b1;
              amax  <= '0;
            end else state <= S_CODE;
          end
        end
        S_SCW: if (mem_gnt) begin
          w <= w + 1'b1;
          if (int'(w) == NCW + NSW - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (BLK % NF4_PER_W == 0) else $error("nf4_quant: BLK must be a multiple of %0d", NF4_PER_W);

endmodule
