// elb_ce_tb: a ternary CE with P=4 inputs runs random accumulation runs of
// random length (1..20 steps, with idle cycles in between) and its output is
// compared with a reference sum of the operator table followed by BN and
// truncation. Also checks that out_valid comes exactly two cycles after the
// last step.
module elb_ce_tb;
  import elb_pkg::*;
  import tb_util_pkg::*;

  localparam int P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                 in_valid, in_first, in_last;
  logic [P-1:0][3:0]    din;
  logic [P-1:0][1:0]    w;
  logic signed [15:0]   scale, bias;
  logic                 out_valid;
  logic [3:0]           dout;

  elb_ce #(.P(P), .IN_W(4), .WMODE(WM_TER), .ACC_W(24), .OUT_W(4), .RELU(1'b1),
           .BIAS_LSH(4), .OUT_RSH(6)) dut (.*);

  int checks = 0, failures = 0;
  longint exp_q[$];
  longint when_q[$];
  // cyc counts clock edges; it is read before it is incremented, so a step
  // driven after edge e and an output seen at edge e+3 are two cycles apart.
  longint cyc = 0;

  always @(posedge clk) begin
   cyc <= cyc + 1;
   if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      longint e, t;
      e = exp_q.pop_front();
      t = when_q.pop_front();
      if (dout != 4'(e) || cyc != t) begin
        failures++;
        $display("got %0d at %0d, expected %0d at %0d", dout, cyc, e, t);
      end
    end
   end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; din = '0; w = '0; scale = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 300; r++) begin
      int len;
      longint acc;
      bit sat;
      len = $urandom_range(1, 20);
      acc = 0;
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        in_valid = 1; in_first = (s == 0); in_last = (s == len - 1);
        for (int p = 0; p < P; p++) begin
          din[p] = 4'($urandom);
          w[p]   = 2'($urandom);
          acc   += ref_op(1, w[p], din[p]);
        end
        scale = 16'(int'($urandom_range(0, 80)) - 10);
        bias  = 16'(int'($urandom_range(0, 100)) - 50);
        if (s == len - 1) begin
          exp_q.push_back(ref_bn(acc, scale, bias, 4, 6, 1'b1, 4, sat));
          when_q.push_back(cyc + 2);
        end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      scale = 16'($urandom); bias = 16'($urandom);   // changed after the last step
      repeat ($urandom_range(0, 2)) @(negedge clk);
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
