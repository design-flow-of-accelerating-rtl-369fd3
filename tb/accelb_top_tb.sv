// accelb_top_tb: end-to-end test of the whole accelerator at its default
// size.
//
// Streams NFRAMES (8) random 16x16x3 images through the six-stage pipeline,
// with weights served by four dram_model instances (random request stalls,
// fixed latency) and random BN parameters, and compares every class score
// with a reference model of the network written here from the layer
// definitions (convolution with zero padding, operator table, BN as
// scale*x + bias, saturated truncation, 2x2 max pooling). The score consumer
// stays idle until all frames have entered and is then randomly not ready,
// so back-pressure runs from the last stage back to the image input.
//
// Besides the scores it counts how often each mechanism happened and fails if
// one never did: output-FIFO stalls, waits for a weight tile, both weight
// banks full at once (fetching ahead), input back-pressure (both frame banks
// of the first stage full), pooling stalls, activations clipped by the
// saturated truncation, ReLU clamping, and frame overlap (a frame entering
// while the previous one is still in the pipeline). It also checks the rate
// of the slowest stage, L1: one frame per 4608 issue cycles plus a few
// cycles of tile switching.
module accelb_top_tb;
  import elb_pkg::*;
  import accelb_net_pkg::*;
  import tb_util_pkg::*;

  localparam int NFRAMES = 8;
  localparam int NSCORE  = L4_M;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                       img_valid, img_ready;
  logic [IMG_W-1:0]           img_data;
  logic                       score_valid, score_ready;
  logic [SCORE_W-1:0]         score_data;
  logic [NL-1:0]              mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [NL-1:0][MAW-1:0]     mem_req_addr;
  logic [NL-1:0][MAX_WW-1:0]  mem_rsp_data;
  logic                       cfg_we;
  logic [1:0]                 cfg_layer;
  logic [15:0]                cfg_addr;
  logic [BN_W-1:0]            cfg_scale, cfg_bias;
  logic [NL-1:0]              stall_out, stall_w;
  logic [1:0]                 pool_stall;

  accelb_top dut (.*);

  localparam int WWS [NL] = '{L1_WW, L2_WW, L3_WW, L4_WW};
  for (genvar i = 0; i < NL; i++) begin : g_mem
    logic [WWS[i]-1:0] d;
    dram_model #(.WW(WWS[i]), .MAW(MAW), .PORT(i), .LAT(6 + 3 * i)) u_mem (
      .clk, .rst_n,
      .req_valid(mem_req_valid[i]), .req_ready(mem_req_ready[i]), .req_addr(mem_req_addr[i]),
      .rsp_valid(mem_rsp_valid[i]), .rsp_data(d)
    );
    assign mem_rsp_data[i] = MAX_WW'(d);
  end

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  int bn_scale [NL][64];
  int bn_bias  [NL][64];
  int n_sat = 0, n_relu0 = 0;

  typedef int fmap_t [];

  // Layer shapes are kept in a variable table (filled at run time) rather
  // than passed as constants, so the reference loops stay loops.
  int lc [NL][17];
  int qc [6];

  function automatic fmap_t conv_ref(fmap_t x, int li);
    int H, W, C, M, K, S, PAD, P, N, mode, base, blsh, rsh, out_w;
    bit relu;
    int OH, OW, CG, STEPS, wb;
    fmap_t y;
    H = lc[li][0]; W = lc[li][1]; C = lc[li][2]; M = lc[li][3]; K = lc[li][4]; S = lc[li][5];
    PAD = lc[li][6]; P = lc[li][7]; N = lc[li][8]; mode = lc[li][9]; base = lc[li][10];
    blsh = lc[li][11]; rsh = lc[li][12]; relu = lc[li][13] != 0; out_w = lc[li][14];
    OH = (H + 2 * PAD - K) / S + 1;
    OW = (W + 2 * PAD - K) / S + 1;
    CG = (C + P - 1) / P;
    STEPS = K * K * CG;
    wb = (mode == 0) ? 1 : (mode == 1) ? 2 : 8;
    y = new[OH * OW * M];
    for (int m = 0; m < M; m++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OW; ox++) begin
          longint acc;
          bit sat;
          acc = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int c = 0; c < CG * P; c++) begin
                int iy, ix, addr;
                longint d;
                iy = oy * S + ky - PAD;
                ix = ox * S + kx - PAD;
                d = (iy >= 0 && iy < H && ix >= 0 && ix < W && c < C) ? x[(iy * W + ix) * C + c] : 0;
                addr = base + (m / N) * STEPS + (ky * K + kx) * CG + c / P;
                acc += ref_op(mode, mem_field(li, addr, (m % N) * P + (c % P), wb), d);
              end
          acc = wrap(acc, ACC_W);
          y[(oy * OW + ox) * M + m] = int'(ref_bn(acc, bn_scale[li][m], bn_bias[li][m], blsh, rsh,
                                                  relu, out_w, sat));
          if (sat) n_sat++;
          if (relu && y[(oy * OW + ox) * M + m] == 0) n_relu0++;
        end
    return y;
  endfunction

  function automatic fmap_t pool_ref(fmap_t x, int H, int W, int C);
    fmap_t y;
    y = new[(H / 2) * (W / 2) * C];
    for (int oy = 0; oy < H / 2; oy++)
      for (int ox = 0; ox < W / 2; ox++)
        for (int c = 0; c < C; c++) begin
          int mx;
          mx = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (x[((2 * oy + dy) * W + 2 * ox + dx) * C + c] > mx)
                mx = x[((2 * oy + dy) * W + 2 * ox + dx) * C + c];
          y[(oy * (W / 2) + ox) * C + c] = mx;
        end
    return y;
  endfunction

  fmap_t img [NFRAMES];
  int    nref;
  int    expected [NFRAMES][NSCORE];

  // ---------------- mechanism counters ----------------
  int c_stall_out = 0, c_stall_w = 0, c_wprefetch = 0, c_in_bp = 0, c_pool_stall = 0;
  int c_overlap = 0;
  int frames_in = 0, frames_out = 0;
  longint cyc = 0;
  longint l1_done [$];   // cycles at which stage L1 finished a frame

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (stall_out != '0) c_stall_out++;
    if (stall_w != '0) c_stall_w++;
    if (dut.u_l1.u_wbuf.full == 2'b11 || dut.u_l2.u_wbuf.full == 2'b11 ||
        dut.u_l3.u_wbuf.full == 2'b11) c_wprefetch++;
    if (img_valid && !img_ready) c_in_bp++;
    if (pool_stall != '0) c_pool_stall++;
    if (frames_in > frames_out + 1) c_overlap++;
    if (dut.u_l1.frame_done) l1_done.push_back(cyc);
  end

  // ---------------- stimulus ----------------
  initial begin
    img_valid = 1'b0; img_data = '0; score_ready = 1'b0;
    cfg_we = 1'b0; cfg_layer = '0; cfg_addr = '0; cfg_scale = '0; cfg_bias = '0;

    // random BN parameters, ranges chosen per layer so outputs spread over
    // the 4-bit range and some saturate
    for (int m = 0; m < 64; m++) begin
      bn_scale[0][m] = $urandom_range(1, 5);   bn_bias[0][m] = int'($urandom_range(0, 512)) - 256;
      bn_scale[1][m] = $urandom_range(40, 200); bn_bias[1][m] = int'($urandom_range(0, 512)) - 256;
      bn_scale[2][m] = $urandom_range(60, 300); bn_bias[2][m] = int'($urandom_range(0, 512)) - 128;
      bn_scale[3][m] = int'($urandom_range(0, 128)) - 64; bn_bias[3][m] = int'($urandom_range(0, 2048)) - 1024;
    end
    for (int f = 0; f < NFRAMES; f++) begin
      img[f] = new[L1_H * L1_W * L1_C];
      foreach (img[f][i]) img[f][i] = $urandom_range(0, 255);
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // program BN tables
    for (int l = 0; l < NL; l++) begin
      int ml;
      ml = (l == 0) ? L1_M : (l == 1) ? L2_M : (l == 2) ? L3_M : L4_M;
      for (int m = 0; m < ml; m++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_layer = 2'(l); cfg_addr = 16'(m);
        cfg_scale = BN_W'(bn_scale[l][m]); cfg_bias = BN_W'(bn_bias[l][m]);
      end
    end
    @(negedge clk) cfg_we = 1'b0;

    lc[0] = '{L1_H, L1_W, L1_C, L1_M, L1_K, L1_S, L1_PAD, L1_P, L1_N, 2, L1_BASE, L1_BLSH, L1_RSH, 1, ACT_W, 0, 0};
    lc[1] = '{L2_H, L2_W, L2_C, L2_M, L2_K, L2_S, L2_PAD, L2_P, L2_N, 1, L2_BASE, L2_BLSH, L2_RSH, 1, ACT_W, 0, 0};
    lc[2] = '{L3_H, L3_W, L3_C, L3_M, L3_K, L3_S, L3_PAD, L3_P, L3_N, 0, L3_BASE, L3_BLSH, L3_RSH, 1, ACT_W, 0, 0};
    lc[3] = '{L4_H, L4_W, L4_C, L4_M, L4_K, L4_S, L4_PAD, L4_P, L4_N, 2, L4_BASE, L4_BLSH, L4_RSH, 0, SCORE_W, 0, 0};
    qc = '{Q1_H, Q1_W, Q1_C, Q2_H, Q2_W, Q2_C};
    // reference scores (loop bound held in a variable so the loop stays a loop)
    nref = NFRAMES;
    for (int f = 0; f < nref; f++) begin
      fmap_t a1, p1, a2, p2, a3, a4;
      a1 = conv_ref(img[f], 0);
      p1 = pool_ref(a1, qc[0], qc[1], qc[2]);
      a2 = conv_ref(p1, 1);
      p2 = pool_ref(a2, qc[3], qc[4], qc[5]);
      a3 = conv_ref(p2, 2);
      a4 = conv_ref(a3, 3);
      for (int m = 0; m < NSCORE; m++) expected[f][m] = a4[m];
    end

    // stream the images back to back
    for (int f = 0; f < NFRAMES; f++) begin
      for (int i = 0; i < L1_H * L1_W * L1_C; i++) begin
        @(negedge clk);
        img_valid = 1'b1;
        img_data  = IMG_W'(img[f][i]);
        @(posedge clk);
        while (!img_ready) @(posedge clk);
      end
      frames_in++;
    end
    @(negedge clk) img_valid = 1'b0;
  end

  // score consumer: held off until most frames are in, so the pipeline
  // backs up from the last stage; then randomly not ready
  always @(negedge clk)
    score_ready = (frames_in == NFRAMES) && ($urandom_range(0, 2) != 0);

  int sidx = 0;
  always @(posedge clk) if (rst_n && score_valid && score_ready) begin
    int f, m;
    f = sidx / NSCORE;
    m = sidx % NSCORE;
    checks++;
    if (f >= NFRAMES) begin
      failures++;
      $display("extra score %0d", sidx);
    end else if ($signed(score_data) != 16'(expected[f][m])) begin
      failures++;
      $display("frame %0d score %0d: got %0d expected %0d", f, m, $signed(score_data),
               expected[f][m]);
    end
    sidx++;
    if (m == NSCORE - 1) frames_out++;
  end

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end
  endtask

  initial begin
    wait (frames_out == NFRAMES);
    repeat (50) @(posedge clk);
    $display("frames %0d, cycles %0d", frames_out, cyc);
    need("output FIFO stall", c_stall_out);
    need("weight tile wait", c_stall_w);
    need("weight prefetch (both banks)", c_wprefetch);
    need("input back-pressure", c_in_bp);
    need("pooling stall", c_pool_stall);
    need("frame overlap", c_overlap);
    need("saturated truncation", n_sat);
    need("ReLU clamp to zero", n_relu0);
    // Rate: L1 needs 16*16 pixels * 2 channel groups * 9 steps = 4608 issue
    // cycles per frame, plus a few cycles per tile switch. Frames 0 and 1
    // run back to back, before any back-pressure reaches L1.
    checks++;
    if (l1_done.size() < 2 || l1_done[1] - l1_done[0] < 4608 || l1_done[1] - l1_done[0] > 4608 + 16) begin
      failures++;
      $display("L1 frame interval out of range");
    end
    if (l1_done.size() >= 2) $display("  L1 frame interval %0d cycles (4608 issue cycles)", l1_done[1] - l1_done[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d frames after 400000 cycles", frames_out, NFRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
