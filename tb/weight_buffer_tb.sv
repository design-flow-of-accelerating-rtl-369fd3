// weight_buffer_tb: the ping-pong weight buffer fetches tiles of DEPTH=5
// words (NT=3 tiles, base 100) from the memory model while a consumer reads
// each tile in random order with random pauses. Every word read is compared
// with the memory model's content for that tile and offset; tiles must come
// in the order 0,1,2,0,1,... The test also requires that the second bank was
// filled while the first was being read (prefetch) at least once.
module weight_buffer_tb;
  import tb_util_pkg::*;

  localparam int WW = 40, DEPTH = 5, NT = 3, BASE = 100;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic          mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0]   mem_req_addr;
  logic [WW-1:0] mem_rsp_data;
  logic          tile_ready, rd_en, tile_done;
  logic [2:0]    rd_addr;
  logic [WW-1:0] rd_data;

  weight_buffer #(.WW(WW), .DEPTH(DEPTH), .NT(NT), .MAW(32), .BASE(BASE)) dut (.*);
  dram_model #(.WW(WW), .MAW(32), .PORT(7), .LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0, prefetch = 0;
  always @(posedge clk) if (dut.full == 2'b11) prefetch++;

  function automatic logic [WW-1:0] word(int addr);
    logic [63:0] v;
    v = {hash32(7, addr, 1), hash32(7, addr, 0)};
    return v[WW-1:0];
  endfunction

  initial begin
    rd_en = 0; rd_addr = '0; tile_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8; t++) begin
      int tile;
      tile = t % NT;
      @(negedge clk);
      while (!tile_ready) @(negedge clk);
      repeat ($urandom_range(0, 12)) @(negedge clk);   // slow consumer now and then
      for (int i = 0; i < 2 * DEPTH; i++) begin
        int a;
        a = $urandom_range(0, DEPTH - 1);
        rd_en = 1; rd_addr = 3'(a);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data != word(BASE + tile * DEPTH + a)) begin
          failures++;
          $display("tile %0d word %0d wrong", tile, a);
        end
      end
      tile_done = 1;
      @(negedge clk);
      tile_done = 0;
    end
    checks++;
    if (prefetch == 0) begin failures++; $display("no prefetch seen"); end
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
