// weight_buffer: ping-pong weight cache between external memory and the CE
// array.
//
// The weights of a large network do not fit on chip, so they stay in external
// memory and are streamed in one tile at a time. A tile is DEPTH words of WW
// bits: all the weights one CE-array pass needs (one group of N output
// channels, every kernel position and input-channel group). Two banks
// alternate: while the CE array reads the tile in one bank, the loader fills
// the other bank with the next tile from external memory, hiding the memory
// latency. Tiles are fetched in the order 0 .. NT-1 and then again from 0
// (the next frame needs the same weights), tile t starting at word address
// BASE + t*DEPTH.
//
// External memory port (this design's choice, the paper only shows an
// arrow): mem_req_valid/ready/addr issue one-word reads; mem_rsp_valid/data
// return the words in request order, always accepted. Reads are only issued
// into the bank being filled, so any number may be outstanding.
//
// Consumer side: tile_ready says the read bank holds a complete tile. rd_en /
// rd_addr read one word, rd_data is valid the next cycle. tile_done (pulse)
// frees the read bank and moves to the other one.
module weight_buffer #(
  parameter int WW    = 64,
  parameter int DEPTH = 9,
  parameter int NT    = 2,
  parameter int MAW   = 32,
  parameter int BASE  = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // external memory
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [MAW-1:0]           mem_req_addr,
  input  logic                     mem_rsp_valid,
  input  logic [WW-1:0]            mem_rsp_data,
  // CE side
  output logic                     tile_ready,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WW-1:0]            rd_data,
  input  logic                     tile_done
);

  localparam int DAW = $clog2(DEPTH);
  localparam int TW  = (NT > 1) ? $clog2(NT) : 1;

  logic [WW-1:0] mem0 [DEPTH];
  logic [WW-1:0] mem1 [DEPTH];

  logic [1:0]   full;
  logic         fill_bank, rd_bank;
  logic [DAW:0] req_cnt, rsp_cnt;
  logic [TW-1:0] tile;

  // ---------------- loader ----------------
  logic can_req;
  assign can_req       = !full[fill_bank] && (req_cnt < (DAW+1)'(DEPTH));
  assign mem_req_valid = can_req;
  assign mem_req_addr  = MAW'(BASE) + MAW'(tile) * MAW'(DEPTH) + MAW'(req_cnt);

  logic tile_filled;
  assign tile_filled = mem_rsp_valid && (rsp_cnt == (DAW+1)'(DEPTH - 1));

  always_ff @(posedge clk) begin
    if (mem_rsp_valid) begin
      if (fill_bank) mem1[rsp_cnt[DAW-1:0]] <= mem_rsp_data;
      else           mem0[rsp_cnt[DAW-1:0]] <= mem_rsp_data;
    end
    if (rd_en) rd_data <= rd_bank ? mem1[rd_addr] : mem0[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full      <= '0;
      fill_bank <= 1'b0;
      rd_bank   <= 1'b0;
      req_cnt   <= '0;
      rsp_cnt   <= '0;
      tile      <= '0;
    end else begin
      if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 1'b1;
      if (mem_rsp_valid) rsp_cnt <= rsp_cnt + 1'b1;
      if (tile_filled) begin
        full[fill_bank] <= 1'b1;
        fill_bank       <= !fill_bank;
        req_cnt         <= '0;
        rsp_cnt         <= '0;
        tile            <= (tile == TW'(NT - 1)) ? '0 : tile + 1'b1;
      end
      if (tile_done) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
      end
    end
  end

  assign tile_ready = full[rd_bank];

  // A response is only legal for a word that was requested.
  a_rsp_after_req: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> rsp_cnt < req_cnt);
  a_done_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    tile_done |-> tile_ready);

endmodule
