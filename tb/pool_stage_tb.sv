// pool_stage_tb: 2x2 stride-2 max pooling of a 6x4 map with C=8 channels
// (P=4 lanes, input written in groups of NG=4 channels). Three frames are
// streamed in, the output is read with random back-pressure and compared in
// (oy, ox, c) order with a reference maximum. Requires at least one stall.
module pool_stage_tb;
  localparam int H = 6, W = 4, C = 8, P = 4, NG = 4, NF = 3;
  localparam int OH = 3, OW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic in_valid, in_ready, out_valid, out_ready, stall_out;
  logic [3:0] in_data, out_data;

  pool_stage #(.H(H), .W(W), .C(C), .P(P), .NG_IN(NG), .IN_W(4), .PK(2), .PS(2), .FIFO_D(2)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0, nout = 0;
  int fm [NF][H][W][C];
  int exp_q[$];

  always @(posedge clk) if (stall_out) n_stall++;

  initial begin
    in_valid = 0; in_data = '0;
    foreach (fm[f, y, x, c]) fm[f][y][x][c] = $urandom_range(0, 15);
    for (int f = 0; f < NF; f++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OW; ox++)
          for (int c = 0; c < C; c++) begin
            int mx;
            mx = 0;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (fm[f][2*oy+dy][2*ox+dx][c] > mx) mx = fm[f][2*oy+dy][2*ox+dx][c];
            exp_q.push_back(mx);
          end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++)
      for (int og = 0; og < C / NG; og++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++)
            for (int n = 0; n < NG; n++) begin
              @(negedge clk);
              in_valid = 1; in_data = 4'(fm[f][y][x][og * NG + n]);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
    @(negedge clk) in_valid = 0;
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 3) == 0);

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
    wait (nout == NF * OH * OW * C);
    repeat (20) @(posedge clk);
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
