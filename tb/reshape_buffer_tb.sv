// reshape_buffer_tb: a 4x5 map with C=6 channels, written in groups of NG=3
// channels, read back as P=4-channel vectors. Three frames are written, so
// the writer must wait for the reader (both banks full); each frame is read
// at every position including a one-pixel border outside the map (zero
// padding) and every channel group (lanes past C read as zero).
module reshape_buffer_tb;
  localparam int H = 4, W = 5, C = 6, P = 4, NG = 3, IN_W = 4, CG = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                   in_valid, in_ready, frame_ready, rd_en, frame_done;
  logic [IN_W-1:0]        in_data;
  logic signed [15:0]     rd_y, rd_x;
  logic [15:0]            rd_cg;
  logic [P-1:0][IN_W-1:0] rd_data;

  reshape_buffer #(.H(H), .W(W), .C(C), .P(P), .NG(NG), .IN_W(IN_W)) dut (.*);

  int checks = 0, failures = 0, bp = 0;
  int fm [3][H][W][C];

  initial begin
    foreach (fm[f, y, x, c]) fm[f][y][x][c] = $urandom_range(0, 15);
  end

  // writer: order og, y, x, n
  initial begin
    in_valid = 0; in_data = '0;
    wait (rst_n);
    for (int f = 0; f < 3; f++)
      for (int og = 0; og < C / NG; og++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++)
            for (int n = 0; n < NG; n++) begin
              @(negedge clk);
              in_valid = 1; in_data = IN_W'(fm[f][y][x][og * NG + n]);
              @(posedge clk);
              while (!in_ready) begin bp++; @(posedge clk); end
            end
    @(negedge clk) in_valid = 0;
  end

  initial begin
    rd_en = 0; rd_y = '0; rd_x = '0; rd_cg = '0; frame_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 3; f++) begin
      @(negedge clk);
      while (!frame_ready) @(negedge clk);
      if (f == 0) repeat (150) @(negedge clk);   // let the writer fill both banks
      for (int y = -1; y <= H; y++)
        for (int x = -1; x <= W; x++)
          for (int g = 0; g < CG; g++) begin
            rd_en = 1; rd_y = 16'(y); rd_x = 16'(x); rd_cg = 16'(g);
            @(negedge clk);
            rd_en = 0;
            for (int l = 0; l < P; l++) begin
              int c, e;
              c = g * P + l;
              e = (y >= 0 && y < H && x >= 0 && x < W && c < C) ? fm[f][y][x][c] : 0;
              checks++;
              if (rd_data[l] != IN_W'(e)) begin
                failures++;
                $display("f%0d y%0d x%0d c%0d: got %0d expected %0d", f, y, x, c, rd_data[l], e);
              end
            end
          end
      frame_done = 1;
      @(negedge clk);
      frame_done = 0;
    end
    checks++;
    if (bp == 0) begin failures++; $display("writer never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
