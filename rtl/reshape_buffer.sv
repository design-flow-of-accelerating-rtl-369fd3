// reshape_buffer: on-chip store of one layer's input feature map.
//
// The whole feature map of a frame is kept on chip, so intermediate feature
// maps never travel to external memory. The buffer is written as a stream in
// the producer's order and read back reshaped: one read returns P channels of
// one pixel at once, the vector a CE array consumes per step.
//
// Organisation (this design's choice; the paper gives the function only):
//  * P lanes, lane l holds channels c with c % P == l. Within a lane the word
//    address is (y*W + x)*CG + c/P, CG = ceil(C/P) channel groups.
//  * Two frame banks (ping-pong): the producer fills one frame while the
//    consumer reads the other. in_ready drops while both banks are full.
//  * Write order: the producer sends channel groups of NG channels;
//    for og in 0..C/NG-1, y, x, n in 0..NG-1: channel c = og*NG + n. A
//    producer that sends plain (y, x, c) order uses NG = C.
//  * Read: rd_y/rd_x may lie outside the map (zero padding) and lanes with
//    c >= C read as zero. rd_data is registered (valid one cycle after rd_en).
//
// frame_ready says the read bank holds a complete frame; frame_done (pulse)
// frees it and moves the reader to the other bank.
module reshape_buffer #(
  parameter int H    = 8,
  parameter int W    = 8,
  parameter int C    = 4,
  parameter int P    = 4,
  parameter int NG   = 4,
  parameter int IN_W = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // write stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [IN_W-1:0]           in_data,
  // read side
  output logic                      frame_ready,
  input  logic                      rd_en,
  input  logic signed [15:0]        rd_y,
  input  logic signed [15:0]        rd_x,
  input  logic [15:0]               rd_cg,
  output logic [P-1:0][IN_W-1:0]    rd_data,
  input  logic                      frame_done
);

  localparam int CG    = (C + P - 1) / P;
  localparam int FRAME = H * W * CG;        // words per lane per bank
  localparam int DEPTH = 2 * FRAME;
  localparam int AW    = $clog2(DEPTH);
  localparam int OGN   = C / NG;

  // ---------------- write side ----------------
  logic [1:0]  full;
  logic        wr_bank, rd_bank;
  logic [15:0] w_og, w_y, w_x, w_n;

  assign in_ready = !full[wr_bank];

  logic        wr_fire;
  logic [15:0] w_c;
  logic [AW-1:0] w_addr;
  logic [$clog2(P+1)-1:0] w_lane;
  assign wr_fire = in_valid && in_ready;
  assign w_c     = w_og * 16'(NG) + w_n;
  assign w_lane  = ($clog2(P+1))'(w_c % 16'(P));
  assign w_addr  = AW'(wr_bank) * AW'(FRAME)
                 + (AW'(w_y) * AW'(W) + AW'(w_x)) * AW'(CG) + AW'(w_c / 16'(P));

  logic last_n, last_x, last_y, last_og;
  assign last_n  = (w_n  == 16'(NG - 1));
  assign last_x  = (w_x  == 16'(W - 1));
  assign last_y  = (w_y  == 16'(H - 1));
  assign last_og = (w_og == 16'(OGN - 1));

  // ---------------- read side ----------------
  logic          in_map;
  logic [AW-1:0] r_addr;
  assign in_map = (rd_y >= 0) && (rd_y < 16'(H)) && (rd_x >= 0) && (rd_x < 16'(W));
  assign r_addr = AW'(rd_bank) * AW'(FRAME)
                + (AW'(rd_y) * AW'(W) + AW'(rd_x)) * AW'(CG) + AW'(rd_cg);

  for (genvar l = 0; l < P; l++) begin : g_lane
    logic [IN_W-1:0] mem [DEPTH];
    logic [IN_W-1:0] q;
    logic            keep;
    always_ff @(posedge clk) begin
      if (wr_fire && w_lane == ($clog2(P+1))'(l)) mem[w_addr] <= in_data;
      if (rd_en) q <= mem[r_addr];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     keep <= 1'b0;
      else if (rd_en) keep <= in_map && (32'(rd_cg) * P + l < C);
    end
    assign rd_data[l] = keep ? q : '0;
  end

  // ---------------- bank control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= '0;
      wr_bank <= 1'b0;
      rd_bank <= 1'b0;
      w_og    <= '0;
      w_y     <= '0;
      w_x     <= '0;
      w_n     <= '0;
    end else begin
      if (wr_fire) begin
        w_n <= last_n ? '0 : w_n + 1'b1;
        if (last_n) begin
          w_x <= last_x ? '0 : w_x + 1'b1;
          if (last_x) begin
            w_y <= last_y ? '0 : w_y + 1'b1;
            if (last_y) begin
              w_og <= last_og ? '0 : w_og + 1'b1;
              if (last_og) begin
                full[wr_bank] <= 1'b1;
                wr_bank       <= !wr_bank;
              end
            end
          end
        end
      end
      if (frame_done) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
      end
    end
  end

  assign frame_ready = full[rd_bank];

  a_done_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    frame_done |-> frame_ready);

  initial begin
    assert (C % NG == 0) else $error("reshape_buffer: C must be a multiple of NG");
  end

endmodule
