// elb_op_tb: exhaustive test of the weight operator in its three precisions.
// Every activation value is combined with every weight code and compared with
// the operator table (binary: Din / ~Din, ternary: Din / 0 / ~Din, 8-bit:
// product).
module elb_op_tb;
  import elb_pkg::*;
  import tb_util_pkg::*;

  logic [3:0]         d4;
  logic [7:0]         d8;
  logic [0:0]         wb;
  logic [1:0]         wt;
  logic [7:0]         w8;
  logic signed [4:0]  yb, yt;
  logic signed [15:0] y8;

  elb_op #(.IN_W(4), .WMODE(WM_BIN))  u_bin (.din(d4), .w(wb), .dout(yb));
  elb_op #(.IN_W(4), .WMODE(WM_TER))  u_ter (.din(d4), .w(wt), .dout(yt));
  elb_op #(.IN_W(8), .WMODE(WM_FIX8)) u_fx  (.din(d8), .w(w8), .dout(y8));

  int checks = 0, failures = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int d = 0; d < 16; d++) begin
      for (int w = 0; w < 2; w++) begin
        d4 = 4'(d); wb = 1'(w); #1;
        check("bin", yb, ref_op(0, w, d));
      end
      for (int w = 0; w < 4; w++) begin
        d4 = 4'(d); wt = 2'(w); #1;
        check("ter", yt, ref_op(1, w, d));
      end
    end
    for (int i = 0; i < 2000; i++) begin
      d8 = 8'($urandom); w8 = 8'($urandom); #1;
      check("fix8", y8, ref_op(2, w8, d8));
    end
    d8 = 8'd255; w8 = 8'h80; #1; check("fix8 min", y8, -32640);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
