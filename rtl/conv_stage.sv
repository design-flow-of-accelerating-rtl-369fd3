// conv_stage: one stage of the layer pipeline, computing one fused
// CONV + BN + ReLU layer (a fully connected layer is the special case of a
// kernel as large as the input map, K = H = W, PAD = 0).
//
// Structure: reshape_buffer (input feature map, ping-pong frames) ->
// ce_array (N CEs of P inputs) -> output FIFO -> serialiser; weight_buffer
// (ping-pong tiles) between the external-memory port and the CE array.
//
// Loop order (this design's choice, the paper leaves the schedule to its
// generator): for each group og of N output channels the weight tile of that
// group is taken from the weight buffer (waiting if it is not loaded yet);
// then for every output pixel (oy, ox) the stage issues STEPS = K*K*CG steps,
// one per cycle, in the order ky, kx, cg (CG = ceil(C/P)); each step reads
// one P-channel vector of the input map and one weight word. N outputs are
// produced per pixel and sent out one value per cycle, in the order
// (og, oy, ox, n), which is the order the next stage's reshape buffer expects
// with NG = N.
//
// Flow control: a pixel is started only when the output FIFO (FIFO_D
// pixels) has room for it, counting pixels still in the CE pipeline, so the
// CE array stalls instead of overflowing when the consumer is slow
// (stall_out). stall_w marks cycles spent waiting for a weight tile.
//
// Timing: 1 issue cycle per step; a pixel leaves the CE array 3 cycles after
// its last step (memory read, accumulate, BN/activation). Throughput is one
// output pixel per STEPS cycles as long as STEPS >= N (the serialiser sends N
// values per pixel) and the weights arrive in time.
//
// BN parameters (one 16-bit scale and bias per output channel) are written
// through cfg_we/cfg_addr/cfg_scale/cfg_bias before use.
module conv_stage
  import elb_pkg::*;
#(
  parameter int     H        = 8,
  parameter int     W        = 8,
  parameter int     C        = 4,
  parameter int     M        = 8,
  parameter int     K        = 3,
  parameter int     S        = 1,
  parameter int     PAD      = 1,
  parameter int     P        = 4,
  parameter int     N        = 4,
  parameter int     NG_IN    = 4,
  parameter int     IN_W     = 4,
  parameter wmode_t WMODE    = WM_TER,
  parameter int     ACC_W    = 24,
  parameter int     OUT_W    = 4,
  parameter bit     RELU     = 1'b1,
  parameter int     BIAS_LSH = 0,
  parameter int     OUT_RSH  = 0,
  parameter int     MAW      = 32,
  parameter int     WBASE    = 0,
  parameter int     FIFO_D   = 4,
  // derived
  parameter int     WB       = wbits(WMODE),
  parameter int     WW       = N * P * WB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input activation stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [IN_W-1:0]      in_data,
  // output activation stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [OUT_W-1:0]     out_data,
  // external memory (weights)
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic [MAW-1:0]       mem_req_addr,
  input  logic                 mem_rsp_valid,
  input  logic [WW-1:0]        mem_rsp_data,
  // BN parameter write port
  input  logic                 cfg_we,
  input  logic [15:0]          cfg_addr,
  input  logic [BN_W-1:0]      cfg_scale,
  input  logic [BN_W-1:0]      cfg_bias,
  // status
  output logic                 stall_out,
  output logic                 stall_w
);

  localparam int OH    = (H + 2 * PAD - K) / S + 1;
  localparam int OW    = (W + 2 * PAD - K) / S + 1;
  localparam int CG    = (C + P - 1) / P;
  localparam int STEPS = K * K * CG;
  localparam int OG    = M / N;
  localparam int SAW   = $clog2(STEPS) > 0 ? $clog2(STEPS) : 1;
  localparam int FCW   = $clog2(FIFO_D + 1);
  localparam int MIW   = $clog2(M) > 0 ? $clog2(M) : 1;

  // ---------------- buffers ----------------
  logic                   frame_ready, frame_done;
  logic                   rd_en;
  logic signed [15:0]     rd_y, rd_x;
  logic [15:0]            rd_cg;
  logic [P-1:0][IN_W-1:0] act;

  reshape_buffer #(.H(H), .W(W), .C(C), .P(P), .NG(NG_IN), .IN_W(IN_W)) u_rsb (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .frame_ready, .rd_en, .rd_y, .rd_x, .rd_cg,
    .rd_data(act), .frame_done
  );

  logic            tile_ready, tile_done;
  logic [SAW-1:0]  step;
  logic [WW-1:0]   wword;

  weight_buffer #(.WW(WW), .DEPTH(STEPS), .NT(OG), .MAW(MAW), .BASE(WBASE)) u_wbuf (
    .clk, .rst_n,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .tile_ready, .rd_en, .rd_addr(step), .rd_data(wword), .tile_done
  );

  // ---------------- BN parameter table ----------------
  logic [BN_W-1:0] scale_tab [M];
  logic [BN_W-1:0] bias_tab  [M];
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < 16'(M)) begin
      scale_tab[MIW'(cfg_addr)] <= cfg_scale;
      bias_tab[MIW'(cfg_addr)]  <= cfg_bias;
    end
  end

  // ---------------- loop control ----------------
  typedef enum logic [1:0] {S_IDLE, S_TILE, S_PIX, S_STEP} state_t;
  state_t state;

  logic [15:0] og, oy, ox, ky, kx, cg;
  logic [FCW-1:0] credit_used;     // pixels in CE pipeline + in FIFO
  logic pix_start, pop, credit_ok;

  logic last_step, last_pix, last_og;
  assign last_step = (ky == 16'(K - 1)) && (kx == 16'(K - 1)) && (cg == 16'(CG - 1));
  assign last_pix  = (oy == 16'(OH - 1)) && (ox == 16'(OW - 1));
  assign last_og   = (og == 16'(OG - 1));
  assign credit_ok = credit_used < FCW'(FIFO_D);

  assign rd_en  = (state == S_STEP);
  assign rd_y   = 16'(oy * 16'(S) + ky) - 16'(PAD);
  assign rd_x   = 16'(ox * 16'(S) + kx) - 16'(PAD);
  assign rd_cg  = cg;
  assign step   = SAW'((ky * 16'(K) + kx) * 16'(CG) + cg);

  assign pix_start = (state == S_PIX && credit_ok) ||
                     (state == S_STEP && last_step && !last_pix && credit_ok);
  assign tile_done  = (state == S_STEP) && last_step && last_pix;
  assign frame_done = tile_done && last_og;
  assign stall_out  = (state == S_PIX && !credit_ok) ||
                      (state == S_STEP && last_step && !last_pix && !credit_ok);
  assign stall_w    = (state == S_TILE) && !tile_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      og <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0; cg <= '0;
    end else begin
      case (state)
        S_IDLE: if (frame_ready) begin
          og    <= '0;
          state <= S_TILE;
        end
        S_TILE: if (tile_ready) begin
          oy    <= '0;
          ox    <= '0;
          state <= S_PIX;
        end
        S_PIX: if (credit_ok) begin
          ky <= '0; kx <= '0; cg <= '0;
          state <= S_STEP;
        end
        S_STEP: begin
          if (!last_step) begin
            if (cg != 16'(CG - 1)) cg <= cg + 1'b1;
            else begin
              cg <= '0;
              if (kx != 16'(K - 1)) kx <= kx + 1'b1;
              else begin
                kx <= '0;
                ky <= ky + 1'b1;
              end
            end
          end else begin
            ky <= '0; kx <= '0; cg <= '0;
            if (ox != 16'(OW - 1)) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              oy <= (oy == 16'(OH - 1)) ? '0 : oy + 1'b1;
            end
            if (last_pix) begin
              if (last_og) state <= S_IDLE;
              else begin
                og    <= og + 1'b1;
                state <= S_TILE;
              end
            end else if (!credit_ok) begin
              state <= S_PIX;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Step tags, aligned with the registered buffer outputs.
  logic        t_valid, t_first, t_last;
  logic [15:0] t_og;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= 1'b0; t_first <= 1'b0; t_last <= 1'b0; t_og <= '0;
    end else begin
      t_valid <= rd_en;
      t_first <= rd_en && (ky == '0) && (kx == '0) && (cg == '0);
      t_last  <= rd_en && last_step;
      t_og    <= og;
    end
  end

  logic [N-1:0][BN_W-1:0] g_scale, g_bias;
  always_comb begin
    for (int n = 0; n < N; n++) begin
      g_scale[n] = scale_tab[32'(t_og) * N + n];
      g_bias[n]  = bias_tab[32'(t_og) * N + n];
    end
  end

  // ---------------- CE array ----------------
  logic                    res_valid;
  logic [N-1:0][OUT_W-1:0] res;

  ce_array #(
    .N(N), .P(P), .IN_W(IN_W), .WMODE(WMODE), .WB(WB), .ACC_W(ACC_W),
    .OUT_W(OUT_W), .RELU(RELU), .BIAS_LSH(BIAS_LSH), .OUT_RSH(OUT_RSH)
  ) u_cea (
    .clk, .rst_n,
    .in_valid(t_valid), .in_first(t_first), .in_last(t_last),
    .din(act), .wword(wword), .scale(g_scale), .bias(g_bias),
    .out_valid(res_valid), .dout(res)
  );

  // ---------------- output FIFO and serialiser ----------------
  localparam int FAW = $clog2(FIFO_D) > 0 ? $clog2(FIFO_D) : 1;
  logic [N-1:0][OUT_W-1:0] fifo [FIFO_D];
  logic [FAW-1:0] wp, rp;
  logic [FCW-1:0] fcount;
  logic [15:0]    lane;

  assign out_valid = (fcount != '0);
  assign out_data  = fifo[rp][lane];
  assign pop       = out_valid && out_ready && (lane == 16'(N - 1));

  always_ff @(posedge clk) begin
    if (res_valid) fifo[wp] <= res;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; fcount <= '0; lane <= '0; credit_used <= '0;
    end else begin
      if (res_valid) wp <= (wp == FAW'(FIFO_D - 1)) ? '0 : wp + 1'b1;
      if (out_valid && out_ready) lane <= (lane == 16'(N - 1)) ? '0 : lane + 1'b1;
      if (pop) rp <= (rp == FAW'(FIFO_D - 1)) ? '0 : rp + 1'b1;
      fcount      <= fcount + FCW'(res_valid) - FCW'(pop);
      credit_used <= credit_used + FCW'(pix_start) - FCW'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> (fcount < FCW'(FIFO_D) || pop));

  initial begin
    assert (M % N == 0) else $error("conv_stage: M must be a multiple of N");
  end

endmodule
