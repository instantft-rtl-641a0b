// conv_mp: frozen KxK convolution + ReLU + 2x2 max-pooling (the paper's
// "Conv-MP" group: Conv -> LineBuf -> Window -> MaxPool2x2).
//
// Operation: after a one-cycle `start` pulse the module walks the convolution
// output in raster order. For each output pixel (oy, ox) it spends CIN*K*K
// cycles accumulating, with COUT multiply-accumulate lanes working in parallel
// (one lane per output channel, as the paper computes several channels per
// cycle). Input pixels are fetched one per cycle through a combinational read
// port (in_addr -> in_data, flat C,H,W order); reads that fall into the zero
// padding are not used. One cycle then adds the bias, applies ReLU and pushes
// the COUT pixels into a line buffer (shift register one output row long) and
// a 2x2 window. When (oy, ox) are both odd the window holds a complete 2x2
// tile; its maximum is written out over COUT cycles through out_we/out_addr/
// out_data (flat C,H,W order of the pooled map). `done` pulses for one cycle
// when the last pooled pixel has been written.
//
// Weights and biases live in an on-chip array written through ld_we/ld_addr/
// ld_data: weight (oc,ci,ky,kx) at address ((oc*CIN+ci)*K+ky)*K+kx, bias oc at
// COUT*CIN*K*K + oc. All Q4.12; activations Q8.16.
//
// From the paper: the Conv / LineBuf / Window / MaxPool pipeline and channel
// parallelism. This design's own choices: one sample at a time (P_B = 1),
// P_c = COUT lanes, ReLU after the convolution, sequential MAC over the
// kernel window, and pooled outputs serialised one channel per cycle.
module conv_mp
  import instantft_pkg::*;
#(
  parameter int CIN  = 1,
  parameter int COUT = 6,
  parameter int H    = 28,
  parameter int W    = 28,
  parameter int K    = 5,
  parameter int PAD  = 2,
  localparam int HO   = H + 2*PAD - K + 1,
  localparam int WO   = W + 2*PAD - K + 1,
  localparam int HP   = HO / 2,
  localparam int WP   = WO / 2,
  localparam int NIN  = CIN * H * W,
  localparam int NOUT = COUT * HP * WP,
  localparam int KK   = CIN * K * K,
  localparam int NPRM = COUT * KK + COUT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // input activation read port (combinational)
  output logic [$clog2(NIN)-1:0]    in_addr,
  input  act_t                      in_data,
  // pooled output write port
  output logic                      out_we,
  output logic [$clog2(NOUT)-1:0]   out_addr,
  output act_t                      out_data,
  // parameter load port
  input  logic                      ld_we,
  input  logic [$clog2(NPRM)-1:0]   ld_addr,
  input  prm_t                      ld_data
);

  prm_t wmem [NPRM];

  always_ff @(posedge clk) begin
    if (ld_we) wmem[ld_addr] <= ld_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_PUSH, S_WB} state_e;
  state_e state;

  logic [$clog2(HO+1)-1:0] oy;
  logic [$clog2(WO+1)-1:0] ox;
  logic [$clog2(CIN+1)-1:0] ci;
  logic [$clog2(K+1)-1:0]   ky, kx;
  logic [$clog2(KK+1)-1:0]  t;
  logic [$clog2(COUT+1)-1:0] wb_c;
  logic signed [47:0] acc [COUT];

  // line buffer: one output row per channel, plus the 2x2 window
  act_t linebuf [COUT][WO];
  act_t win     [COUT][2][2];   // [row: 0 = previous, 1 = current][col: 0 = left, 1 = right]
  act_t pooled  [COUT];

  // input coordinate of the current tap
  logic signed [15:0] iy, ix;
  logic               in_valid;
  always_comb begin
    iy = 16'($signed({1'b0, oy})) + 16'($signed({1'b0, ky})) - 16'(PAD);
    ix = 16'($signed({1'b0, ox})) + 16'($signed({1'b0, kx})) - 16'(PAD);
    in_valid = (iy >= 0) && (iy < H) && (ix >= 0) && (ix < W);
    in_addr = '0;
    if (in_valid)
      in_addr = $clog2(NIN)'((int'(ci) * H + int'(iy)) * W + int'(ix));
  end

  // bias + ReLU of the finished pixel, and 2x2 maximum with the window contents
  act_t pix [COUT];
  act_t pmax [COUT];
  always_comb begin
    for (int c = 0; c < COUT; c++) begin
      logic signed [63:0] s;
      s = (64'(acc[c]) + (64'(wmem[COUT*KK + c]) <<< 16)) >>> 12;
      pix[c] = sat_act(s);
      if (pix[c] < 0) pix[c] = '0;
      pmax[c] = pix[c];
      if (win[c][1][1] > pmax[c]) pmax[c] = win[c][1][1];      // (oy,   ox-1)
      if (linebuf[c][WO-1] > pmax[c]) pmax[c] = linebuf[c][WO-1]; // (oy-1, ox)
      if (win[c][0][1] > pmax[c]) pmax[c] = win[c][0][1];      // (oy-1, ox-1)
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      oy <= '0; ox <= '0; ci <= '0; ky <= '0; kx <= '0; t <= '0; wb_c <= '0;
      for (int c = 0; c < COUT; c++) begin
        acc[c] <= '0;
        pooled[c] <= '0;
        for (int j = 0; j < WO; j++) linebuf[c][j] <= '0;
        for (int r = 0; r < 2; r++)
          for (int q = 0; q < 2; q++) win[c][r][q] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          oy <= '0; ox <= '0; ci <= '0; ky <= '0; kx <= '0; t <= '0;
          for (int c = 0; c < COUT; c++) acc[c] <= '0;
        end
        S_MAC: begin
          if (in_valid)
            for (int c = 0; c < COUT; c++)
              acc[c] <= acc[c] + 48'(mul_ap(in_data, wmem[c*KK + int'(t)]));
          t <= t + 1'b1;
          if (kx == K-1) begin
            kx <= '0;
            if (ky == K-1) begin
              ky <= '0;
              ci <= ci + 1'b1;
            end else ky <= ky + 1'b1;
          end else kx <= kx + 1'b1;
          if (int'(t) == KK-1) state <= S_PUSH;
        end
        S_PUSH: begin
          for (int c = 0; c < COUT; c++) begin
            for (int j = WO-1; j > 0; j--) linebuf[c][j] <= linebuf[c][j-1];
            linebuf[c][0] <= pix[c];
            win[c][0][0] <= win[c][0][1];
            win[c][0][1] <= linebuf[c][WO-1];
            win[c][1][0] <= win[c][1][1];
            win[c][1][1] <= pix[c];
            pooled[c] <= pmax[c];
            acc[c] <= '0;
          end
          t <= '0; ci <= '0; ky <= '0; kx <= '0;
          if (oy[0] && ox[0]) begin
            state <= S_WB;
            wb_c  <= '0;
          end else begin
            state <= S_MAC;
          end
          if (ox == WO-1) begin
            ox <= '0;
            oy <= oy + 1'b1;
          end else ox <= ox + 1'b1;
        end
        S_WB: begin
          wb_c <= wb_c + 1'b1;
          if (int'(wb_c) == COUT-1) begin
            if (int'(oy) == HO) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // pooled pixel (py, px) belongs to the pixel just pushed; ox/oy have
  // already advanced by one when S_WB runs
  logic [$clog2(HO+1)-1:0] py_o;
  logic [$clog2(WO+1)-1:0] px_o;
  always_comb begin
    if (ox == 0) begin
      py_o = (oy - 1'b1) >> 1;
      px_o = (WO - 1) >> 1;
    end else begin
      py_o = oy >> 1;
      px_o = (ox - 1'b1) >> 1;
    end
    out_we   = (state == S_WB);
    out_addr = $clog2(NOUT)'((int'(wb_c) * HP + int'(py_o)) * WP + int'(px_o));
    out_data = pooled[$clog2(COUT)'(wb_c)];
  end

endmodule
