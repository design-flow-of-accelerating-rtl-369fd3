// pool_stage: max-pooling stage of the layer pipeline.
//
// The paper names pooling as one of the layer types the pipeline is built
// from and uses 2x2 windows with stride 2 (VGG16); its internals are this
// design's own. The stage reuses the reshape_buffer: the input map is stored
// once per frame, and for every output pixel and channel group the stage
// reads the PK*PK window positions (one per cycle, P channels per read),
// keeps the lane-wise maximum and puts the P results into an output FIFO.
// Activations are unsigned, so the maximum is an unsigned compare.
//
// Output order is (oy, ox, c), i.e. the next stage sees NG = C. C must be a
// multiple of P. A window is only started when the FIFO has room, counting
// windows still in flight, so a slow consumer stalls the stage (stall_out).
// Throughput: PK*PK cycles per P output values.
module pool_stage #(
  parameter int H      = 8,
  parameter int W      = 8,
  parameter int C      = 4,
  parameter int P      = 4,
  parameter int NG_IN  = 4,
  parameter int IN_W   = 4,
  parameter int PK     = 2,
  parameter int PS     = 2,
  parameter int FIFO_D = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IN_W-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [IN_W-1:0] out_data,
  output logic            stall_out
);

  localparam int OH  = (H - PK) / PS + 1;
  localparam int OW  = (W - PK) / PS + 1;
  localparam int CG  = C / P;
  localparam int FCW = $clog2(FIFO_D + 1);
  localparam int FAW = $clog2(FIFO_D) > 0 ? $clog2(FIFO_D) : 1;

  logic                   frame_ready, frame_done, rd_en;
  logic signed [15:0]     rd_y, rd_x;
  logic [15:0]            rd_cg;
  logic [P-1:0][IN_W-1:0] act;

  reshape_buffer #(.H(H), .W(W), .C(C), .P(P), .NG(NG_IN), .IN_W(IN_W)) u_rsb (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .frame_ready, .rd_en, .rd_y, .rd_x, .rd_cg,
    .rd_data(act), .frame_done
  );

  typedef enum logic [1:0] {S_IDLE, S_WIN, S_RD} state_t;
  state_t state;

  logic [15:0] oy, ox, cg, ky, kx;
  logic [FCW-1:0] credit_used, fcount;
  logic credit_ok, win_start, pop;
  logic last_k, last_win;

  assign credit_ok = credit_used < FCW'(FIFO_D);
  assign last_k    = (ky == 16'(PK - 1)) && (kx == 16'(PK - 1));
  assign last_win  = (oy == 16'(OH - 1)) && (ox == 16'(OW - 1)) && (cg == 16'(CG - 1));
  assign rd_en     = (state == S_RD);
  assign rd_y      = 16'(oy * 16'(PS) + ky);
  assign rd_x      = 16'(ox * 16'(PS) + kx);
  assign rd_cg     = cg;
  assign win_start = (state == S_WIN) && credit_ok;
  assign frame_done = (state == S_RD) && last_k && last_win;
  assign stall_out = (state == S_WIN) && !credit_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      oy <= '0; ox <= '0; cg <= '0; ky <= '0; kx <= '0;
    end else begin
      case (state)
        S_IDLE: if (frame_ready) begin
          oy <= '0; ox <= '0; cg <= '0;
          state <= S_WIN;
        end
        S_WIN: if (credit_ok) begin
          ky <= '0; kx <= '0;
          state <= S_RD;
        end
        S_RD: begin
          if (!last_k) begin
            if (kx != 16'(PK - 1)) kx <= kx + 1'b1;
            else begin
              kx <= '0;
              ky <= ky + 1'b1;
            end
          end else begin
            state <= last_win ? S_IDLE : S_WIN;
            if (cg != 16'(CG - 1)) cg <= cg + 1'b1;
            else begin
              cg <= '0;
              if (ox != 16'(OW - 1)) ox <= ox + 1'b1;
              else begin
                ox <= '0;
                oy <= oy + 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Lane-wise running maximum over the window.
  logic                   t_valid, t_first, t_last;
  logic [P-1:0][IN_W-1:0] mx;
  logic                   res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= 1'b0; t_first <= 1'b0; t_last <= 1'b0;
      res_valid <= 1'b0; mx <= '0;
    end else begin
      t_valid   <= rd_en;
      t_first   <= rd_en && (ky == '0) && (kx == '0);
      t_last    <= rd_en && last_k;
      res_valid <= t_valid && t_last;
      if (t_valid) begin
        for (int l = 0; l < P; l++)
          mx[l] <= (t_first || act[l] > mx[l]) ? act[l] : mx[l];
      end
    end
  end

  // Output FIFO of P-value vectors and serialiser.
  logic [P-1:0][IN_W-1:0] fifo [FIFO_D];
  logic [FAW-1:0] wp, rp;
  logic [15:0]    lane;

  assign out_valid = (fcount != '0);
  assign out_data  = fifo[rp][lane];
  assign pop       = out_valid && out_ready && (lane == 16'(P - 1));

  always_ff @(posedge clk) begin
    if (res_valid) fifo[wp] <= mx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; fcount <= '0; lane <= '0; credit_used <= '0;
    end else begin
      if (res_valid) wp <= (wp == FAW'(FIFO_D - 1)) ? '0 : wp + 1'b1;
      if (out_valid && out_ready) lane <= (lane == 16'(P - 1)) ? '0 : lane + 1'b1;
      if (pop) rp <= (rp == FAW'(FIFO_D - 1)) ? '0 : rp + 1'b1;
      fcount      <= fcount + FCW'(res_valid) - FCW'(pop);
      credit_used <= credit_used + FCW'(win_start) - FCW'(pop);
    end
  end

  initial begin
    assert (C % P == 0) else $error("pool_stage: C must be a multiple of P");
  end

endmodule
