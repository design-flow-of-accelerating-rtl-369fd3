// dram_model: behavioural read-only model of the external weight memory.
//
// Accepts one-word read requests (req_valid/req_ready/req_addr) and returns
// each word LAT cycles later, in request order, on rsp_valid/rsp_data. The
// request port is randomly not ready about one cycle in four when STALLS is
// set. Word contents are hash32(PORT, addr, chunk) per 32-bit chunk, so the
// memory needs no storage. This stands in for the DRAM and its controller,
// which are outside the accelerator.
module dram_model #(
  parameter int WW     = 64,
  parameter int MAW    = 32,
  parameter int PORT   = 0,
  parameter int LAT    = 6,
  parameter bit STALLS = 1'b1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [MAW-1:0] req_addr,
  output logic           rsp_valid,
  output logic [WW-1:0]  rsp_data
);
  import tb_util_pkg::*;

  longint unsigned cycle;
  int unsigned     q_addr[$];
  longint unsigned q_due[$];

  localparam int NCH = (WW + 31) / 32;

  function automatic logic [WW-1:0] word(int unsigned addr);
    logic [NCH*32-1:0] v;
    for (int j = 0; j < NCH; j++) v[j*32 +: 32] = hash32(PORT, addr, j);
    return v[WW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle     <= 0;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      cycle     <= cycle + 1;
      req_ready <= STALLS ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (req_valid && req_ready) begin
        q_addr.push_back(int'(req_addr));
        q_due.push_back(cycle + LAT);
      end
      if (q_addr.size() != 0 && q_due[0] <= cycle) begin
        rsp_valid <= 1'b1;
        rsp_data  <= word(q_addr.pop_front());
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
