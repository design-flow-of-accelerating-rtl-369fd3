// bn_act_tb: random test of BN (scale*x + bias) and saturated truncation,
// for a 4-bit ReLU output and a 16-bit signed output, including the one-cycle
// latency. Counts clipped results and fails if none were clipped.
module bn_act_tb;
  import elb_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                   in_valid;
  logic signed [23:0]     acc;
  logic signed [15:0]     scale, bias;
  logic                   v_r, v_s;
  logic [3:0]             y_r;
  logic [15:0]            y_s;

  bn_act #(.ACC_W(24), .OUT_W(4), .RELU(1'b1), .BIAS_LSH(6), .OUT_RSH(10)) u_r (
    .clk, .rst_n, .in_valid, .acc, .scale, .bias, .out_valid(v_r), .dout(y_r));
  bn_act #(.ACC_W(24), .OUT_W(16), .RELU(1'b0), .BIAS_LSH(4), .OUT_RSH(8)) u_s (
    .clk, .rst_n, .in_valid, .acc, .scale, .bias, .out_valid(v_s), .dout(y_s));

  int checks = 0, failures = 0, nsat = 0;

  initial begin
    bit sat;
    longint er, es;
    in_valid = 1'b0; acc = '0; scale = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      acc   = 24'(int'($urandom_range(0, 8000)) - 4000);
      scale = 16'(int'($urandom_range(0, 4000)) - 1000);
      bias  = 16'($urandom);
      er = ref_bn(acc, scale, bias, 6, 10, 1'b1, 4, sat);
      if (sat) nsat++;
      es = ref_bn(acc, scale, bias, 4, 8, 1'b0, 16, sat);
      if (sat) nsat++;
      @(negedge clk);
      in_valid = 1'b0;
      checks += 2;
      if (!v_r || !v_s || y_r != 4'(er) || $signed(y_s) != 16'(es)) begin
        failures++;
        $display("acc %0d scale %0d bias %0d: relu %0d/%0d, lin %0d/%0d", acc, scale, bias,
                 y_r, er, $signed(y_s), es);
      end
      @(negedge clk);
      checks++;
      if (v_r || v_s) begin
        failures++;
        $display("out_valid longer than one cycle");
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("no saturation seen"); end
    $display("saturated %0d", nsat);
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
