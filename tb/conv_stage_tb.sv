// conv_stage_tb: one pipeline stage computing a ternary 3x3 convolution with
// stride 2 and zero padding 1 on a 5x6x6 map (P=4 inputs per CE, so the
// second channel group is half empty; N=4 CEs, 8 output channels, so two
// weight tiles per frame). Three frames are streamed in while the output is
// read with random back-pressure; every output is compared, in the stage's
// (og, oy, ox, n) order, with a reference convolution + BN + truncation.
// The memory model has a long latency (300 cycles) so that the stage has to
// wait for a weight tile. Requires at least one output-FIFO stall and one
// wait for weights.
module conv_stage_tb;
  import elb_pkg::*;
  import tb_util_pkg::*;

  localparam int H = 5, W = 6, C = 6, M = 8, K = 3, S = 2, PAD = 1, P = 4, N = 4;
  localparam int OH = 3, OW = 3, CG = 2, STEPS = K * K * CG, BASE = 40;
  localparam int BLSH = 4, RSH = 6, NF = 3;
  localparam int WW = N * P * 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [3:0] in_data, out_data;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [WW-1:0] mem_rsp_data;
  logic cfg_we;
  logic [15:0] cfg_addr, cfg_scale, cfg_bias;
  logic stall_out, stall_w;

  conv_stage #(.H(H), .W(W), .C(C), .M(M), .K(K), .S(S), .PAD(PAD), .P(P), .N(N),
               .NG_IN(C), .IN_W(4), .WMODE(WM_TER), .ACC_W(24), .OUT_W(4), .RELU(1'b1),
               .BIAS_LSH(BLSH), .OUT_RSH(RSH), .MAW(32), .WBASE(BASE), .FIFO_D(2)) dut (.*);
  dram_model #(.WW(WW), .MAW(32), .PORT(3), .LAT(300)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0, n_stall = 0, n_wait = 0;
  int fm [NF][H][W][C];
  int sc [M], bi [M];
  int exp_q[$];

  always @(posedge clk) begin
    if (stall_out) n_stall++;
    if (stall_w) n_wait++;
  end

  initial begin
    in_valid = 0; in_data = '0; cfg_we = 0; cfg_addr = '0; cfg_scale = '0; cfg_bias = '0;
    foreach (fm[f, y, x, c]) fm[f][y][x][c] = $urandom_range(0, 15);
    foreach (sc[m]) begin sc[m] = $urandom_range(4, 40); bi[m] = int'($urandom_range(0, 200)) - 100; end
    // reference, in output order
    for (int f = 0; f < NF; f++)
      for (int og = 0; og < M / N; og++)
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++)
            for (int n = 0; n < N; n++) begin
              longint acc;
              bit sat;
              int m;
              m = og * N + n;
              acc = 0;
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++)
                  for (int c = 0; c < CG * P; c++) begin
                    int iy, ix, d;
                    iy = oy * S + ky - PAD;
                    ix = ox * S + kx - PAD;
                    d = (iy >= 0 && iy < H && ix >= 0 && ix < W && c < C) ? fm[f][iy][ix][c] : 0;
                    acc += ref_op(1, mem_field(3, BASE + og * STEPS + (ky * K + kx) * CG + c / P,
                                               n * P + c % P, 2), d);
                  end
              exp_q.push_back(int'(ref_bn(acc, sc[m], bi[m], BLSH, RSH, 1'b1, 4, sat)));
            end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(m); cfg_scale = 16'(sc[m]); cfg_bias = 16'(bi[m]);
    end
    @(negedge clk) cfg_we = 0;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) begin
            @(negedge clk);
            in_valid = 1; in_data = 4'(fm[f][y][x][c]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
          end
    @(negedge clk) in_valid = 0;
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 3) == 0);

  int nout = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    checks++;
    e = (exp_q.size() != 0) ? exp_q.pop_front() : -1;
    if (out_data != 4'(e)) begin
      failures++;
      $display("output %0d: got %0d expected %0d", nout, out_data, e);
    end
    nout++;
  end

  initial begin
    wait (nout == NF * OH * OW * M);
    repeat (20) @(posedge clk);
    checks += 2;
    if (n_stall == 0) begin failures++; $display("no output stall"); end
    if (n_wait == 0) begin failures++; $display("no weight wait"); end
    $display("stalls %0d, weight waits %0d", n_stall, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
