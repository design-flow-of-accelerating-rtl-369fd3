// accelb_top: layer-pipelined hybrid ELB-NN accelerator.
//
// Every layer of the network has its own pipeline stage with its own compute
// array, sized and given the weight precision of that layer, and the stages
// run concurrently on successive frames: while stage 1 works on frame f+1,
// stage 2 works on frame f, and so on. Intermediate feature maps never leave
// the chip; they flow from stage to stage over valid/ready streams and are
// kept in each stage's reshape buffer. Only the weights live off chip; each
// weighted stage fetches them through its own memory port into its ping-pong
// weight buffer.
//
// Chain (layer sizes in accelb_net_pkg):
//   image -> L1 CONV (8-bit w) -> POOL1 -> L2 CONV (ternary) -> POOL2
//         -> L3 FC (binary) -> L4 FC (8-bit w, 16-bit scores) -> scores
//
// Interface: img_* is the input stream, one 8-bit value per beat in (y, x, c)
// order; score_* carries the 10 signed 16-bit class scores of each frame.
// mem_*[i] is the read port of weighted layer i (L1..L4 = 0..3); words are
// N*P*weight-bits wide, zero-extended to MAX_WW. cfg_* writes the BN scale
// and bias of output channel cfg_addr of layer cfg_layer. stall_out/stall_w
// report, per weighted layer, a stage held by a full output FIFO or waiting
// for weights; pool_stall by pooling stage.
//
// The stage-per-layer pipeline, the on-chip feature maps, the off-chip
// weights with ping-pong weight buffers and the fused CONV/BN/ReLU CEs follow
// the paper; the stream and memory handshakes are this design's choice.
module accelb_top
  import elb_pkg::*;
  import accelb_net_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // image input stream
  input  logic                        img_valid,
  output logic                        img_ready,
  input  logic [IMG_W-1:0]            img_data,
  // class score output stream
  output logic                        score_valid,
  input  logic                        score_ready,
  output logic [SCORE_W-1:0]          score_data,
  // external memory read ports, one per weighted layer
  output logic [NL-1:0]               mem_req_valid,
  input  logic [NL-1:0]               mem_req_ready,
  output logic [NL-1:0][MAW-1:0]      mem_req_addr,
  input  logic [NL-1:0]               mem_rsp_valid,
  input  logic [NL-1:0][MAX_WW-1:0]   mem_rsp_data,
  // BN parameter writes
  input  logic                        cfg_we,
  input  logic [1:0]                  cfg_layer,
  input  logic [15:0]                 cfg_addr,
  input  logic [BN_W-1:0]             cfg_scale,
  input  logic [BN_W-1:0]             cfg_bias,
  // status
  output logic [NL-1:0]               stall_out,
  output logic [NL-1:0]               stall_w,
  output logic [1:0]                  pool_stall
);

  // Streams between stages.
  logic              s1_v, s1_r; logic [ACT_W-1:0] s1_d;   // L1 -> POOL1
  logic              q1_v, q1_r; logic [ACT_W-1:0] q1_d;   // POOL1 -> L2
  logic              s2_v, s2_r; logic [ACT_W-1:0] s2_d;   // L2 -> POOL2
  logic              q2_v, q2_r; logic [ACT_W-1:0] q2_d;   // POOL2 -> L3
  logic              s3_v, s3_r; logic [ACT_W-1:0] s3_d;   // L3 -> L4

  logic [NL-1:0] cfg_we_l;
  always_comb for (int i = 0; i < NL; i++) cfg_we_l[i] = cfg_we && (cfg_layer == 2'(i));

  conv_stage #(
    .H(L1_H), .W(L1_W), .C(L1_C), .M(L1_M), .K(L1_K), .S(L1_S), .PAD(L1_PAD),
    .P(L1_P), .N(L1_N), .NG_IN(L1_NG), .IN_W(IMG_W), .WMODE(L1_WM), .ACC_W(ACC_W),
    .OUT_W(ACT_W), .RELU(1'b1), .BIAS_LSH(L1_BLSH), .OUT_RSH(L1_RSH),
    .MAW(MAW), .WBASE(L1_BASE)
  ) u_l1 (
    .clk, .rst_n,
    .in_valid(img_valid), .in_ready(img_ready), .in_data(img_data),
    .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d),
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]),
    .mem_req_addr(mem_req_addr[0]), .mem_rsp_valid(mem_rsp_valid[0]),
    .mem_rsp_data(mem_rsp_data[0][L1_WW-1:0]),
    .cfg_we(cfg_we_l[0]), .cfg_addr, .cfg_scale, .cfg_bias,
    .stall_out(stall_out[0]), .stall_w(stall_w[0])
  );

  pool_stage #(
    .H(Q1_H), .W(Q1_W), .C(Q1_C), .P(Q1_P), .NG_IN(Q1_NG), .IN_W(ACT_W)
  ) u_q1 (
    .clk, .rst_n,
    .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d),
    .out_valid(q1_v), .out_ready(q1_r), .out_data(q1_d),
    .stall_out(pool_stall[0])
  );

  conv_stage #(
    .H(L2_H), .W(L2_W), .C(L2_C), .M(L2_M), .K(L2_K), .S(L2_S), .PAD(L2_PAD),
    .P(L2_P), .N(L2_N), .NG_IN(L2_NG), .IN_W(ACT_W), .WMODE(L2_WM), .ACC_W(ACC_W),
    .OUT_W(ACT_W), .RELU(1'b1), .BIAS_LSH(L2_BLSH), .OUT_RSH(L2_RSH),
    .MAW(MAW), .WBASE(L2_BASE)
  ) u_l2 (
    .clk, .rst_n,
    .in_valid(q1_v), .in_ready(q1_r), .in_data(q1_d),
    .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d),
    .mem_req_valid(mem_req_valid[1]), .mem_req_ready(mem_req_ready[1]),
    .mem_req_addr(mem_req_addr[1]), .mem_rsp_valid(mem_rsp_valid[1]),
    .mem_rsp_data(mem_rsp_data[1][L2_WW-1:0]),
    .cfg_we(cfg_we_l[1]), .cfg_addr, .cfg_scale, .cfg_bias,
    .stall_out(stall_out[1]), .stall_w(stall_w[1])
  );

  pool_stage #(
    .H(Q2_H), .W(Q2_W), .C(Q2_C), .P(Q2_P), .NG_IN(Q2_NG), .IN_W(ACT_W)
  ) u_q2 (
    .clk, .rst_n,
    .in_valid(s2_v), .in_ready(s2_r), .in_data(s2_d),
    .out_valid(q2_v), .out_ready(q2_r), .out_data(q2_d),
    .stall_out(pool_stall[1])
  );

  conv_stage #(
    .H(L3_H), .W(L3_W), .C(L3_C), .M(L3_M), .K(L3_K), .S(L3_S), .PAD(L3_PAD),
    .P(L3_P), .N(L3_N), .NG_IN(L3_NG), .IN_W(ACT_W), .WMODE(L3_WM), .ACC_W(ACC_W),
    .OUT_W(ACT_W), .RELU(1'b1), .BIAS_LSH(L3_BLSH), .OUT_RSH(L3_RSH),
    .MAW(MAW), .WBASE(L3_BASE)
  ) u_l3 (
    .clk, .rst_n,
    .in_valid(q2_v), .in_ready(q2_r), .in_data(q2_d),
    .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d),
    .mem_req_valid(mem_req_valid[2]), .mem_req_ready(mem_req_ready[2]),
    .mem_req_addr(mem_req_addr[2]), .mem_rsp_valid(mem_rsp_valid[2]),
    .mem_rsp_data(mem_rsp_data[2][L3_WW-1:0]),
    .cfg_we(cfg_we_l[2]), .cfg_addr, .cfg_scale, .cfg_bias,
    .stall_out(stall_out[2]), .stall_w(stall_w[2])
  );

  conv_stage #(
    .H(L4_H), .W(L4_W), .C(L4_C), .M(L4_M), .K(L4_K), .S(L4_S), .PAD(L4_PAD),
    .P(L4_P), .N(L4_N), .NG_IN(L4_NG), .IN_W(ACT_W), .WMODE(L4_WM), .ACC_W(ACC_W),
    .OUT_W(SCORE_W), .RELU(1'b0), .BIAS_LSH(L4_BLSH), .OUT_RSH(L4_RSH),
    .MAW(MAW), .WBASE(L4_BASE)
  ) u_l4 (
    .clk, .rst_n,
    .in_valid(s3_v), .in_ready(s3_r), .in_data(s3_d),
    .out_valid(score_valid), .out_ready(score_ready), .out_data(score_data),
    .mem_req_valid(mem_req_valid[3]), .mem_req_ready(mem_req_ready[3]),
    .mem_req_addr(mem_req_addr[3]), .mem_rsp_valid(mem_rsp_valid[3]),
    .mem_rsp_data(mem_rsp_data[3][L4_WW-1:0]),
    .cfg_we(cfg_we_l[3]), .cfg_addr, .cfg_scale, .cfg_bias,
    .stall_out(stall_out[3]), .stall_w(stall_w[3])
  );

endmodule
