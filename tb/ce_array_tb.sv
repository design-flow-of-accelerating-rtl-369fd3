// ce_array_tb: an array of N=3 binary CEs with P=4 inputs; every CE gets its
// own weights from its slice of the weight word and its own BN parameters.
// Random runs are compared lane by lane with the reference arithmetic.
module ce_array_tb;
  import elb_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 3, P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                  in_valid, in_first, in_last;
  logic [P-1:0][3:0]     din;
  logic [N*P-1:0]        wword;
  logic [N-1:0][15:0]    scale, bias;
  logic                  out_valid;
  logic [N-1:0][3:0]     dout;

  ce_array #(.N(N), .P(P), .IN_W(4), .WMODE(WM_BIN), .ACC_W(24), .OUT_W(4),
             .RELU(1'b1), .BIAS_LSH(4), .OUT_RSH(5)) dut (.*);

  int checks = 0, failures = 0;
  longint exp_q[$];

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int n = 0; n < N; n++) begin
      longint e;
      checks++;
      e = (exp_q.size() != 0) ? exp_q.pop_front() : -1;
      if (dout[n] != 4'(e)) begin
        failures++;
        $display("CE %0d: got %0d expected %0d", n, dout[n], e);
      end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; din = '0; wword = '0; scale = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 200; r++) begin
      int len;
      longint acc [N];
      bit sat;
      len = $urandom_range(1, 12);
      for (int n = 0; n < N; n++) acc[n] = 0;
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        in_valid = 1; in_first = (s == 0); in_last = (s == len - 1);
        for (int p = 0; p < P; p++) din[p] = 4'($urandom);
        wword = (N*P)'($urandom);
        for (int n = 0; n < N; n++) begin
          scale[n] = 16'($urandom_range(1, 40));
          bias[n]  = 16'(int'($urandom_range(0, 64)) - 32);
          for (int p = 0; p < P; p++) acc[n] += ref_op(0, wword[n*P+p], din[p]);
        end
        if (s == len - 1)
          for (int n = 0; n < N; n++)
            exp_q.push_back(ref_bn(acc[n], $signed(scale[n]), $signed(bias[n]), 4, 5, 1'b1, 4, sat));
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      repeat (2) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
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
