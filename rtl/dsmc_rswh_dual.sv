// dsmc_rswh_dual: radix-2 switch of levels 2 to 4 (RSWH1, RSWH2, RSWH3),
// carrying two independent streams of traffic in parallel.
//
// Lane 0 carries beats that entered the shared memory in this building
// block; lane 1 carries the speed-up traffic that the sister block's
// first-level switches sent here. Each lane is a 2x2 switch of its own, so
// the two streams never block each other inside the network; they meet only
// at the banks. That is the paper's second, independent speed-up network
// with all links doubled from level 2 to the banks.
//
// Routing is by destination-tag bits, one bit per level (radix-2 butterfly):
//   requests   LEVEL 1 (RSWH1): bank bit 2, LEVEL 2 (RSWH2): bank bit 3,
//              LEVEL 3 (RSWH3): bank bit 0 (which of its two banks)
//   responses  output = bit LEVEL of the master's index in its block
// The choice of which address bit each level resolves is this design's.
// Every lane and direction adds one cycle when not blocked.
module dsmc_rswh_dual
  import dsmc_pkg::*;
#(
  parameter int unsigned LEVEL = 1    // 1 = RSWH1, 2 = RSWH2, 3 = RSWH3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // requests, [lane][port]
  input  logic [1:0][1:0]      req_in_valid,
  output logic [1:0][1:0]      req_in_ready,
  input  req_t [1:0][1:0]      req_in,
  output logic [1:0][1:0]      req_out_valid,
  input  logic [1:0][1:0]      req_out_ready,
  output req_t [1:0][1:0]      req_out,
  // responses, [lane][port]
  input  logic [1:0][1:0]      rsp_in_valid,
  output logic [1:0][1:0]      rsp_in_ready,
  input  rsp_t [1:0][1:0]      rsp_in,
  output logic [1:0][1:0]      rsp_out_valid,
  input  logic [1:0][1:0]      rsp_out_ready,
  output rsp_t [1:0][1:0]      rsp_out
);
  localparam int unsigned QBIT = (LEVEL == 3) ? 0 : LEVEL + 1;

  for (genvar l = 0; l < 2; l++) begin : g_lane
    logic [1:0]             qsel, psel;
    logic [1:0][REQ_W-1:0]  q_raw;
    logic [1:0][RSP_W-1:0]  p_raw;

    always_comb begin
      for (int i = 0; i < 2; i++) begin
        qsel[i] = req_in[l][i].bank[QBIT];
        psel[i] = rsp_in[l][i].mid[LEVEL];
      end
    end

    dsmc_switch #(.N_IN(2), .N_OUT(2), .W(REQ_W)) u_req (
      .clk, .rst_n,
      .in_valid  (req_in_valid[l]),
      .in_ready  (req_in_ready[l]),
      .in_data   (req_in[l]),
      .in_sel    (qsel),
      .out_valid (req_out_valid[l]),
      .out_ready (req_out_ready[l]),
      .out_data  (q_raw)
    );
    assign req_out[l] = q_raw;

    dsmc_switch #(.N_IN(2), .N_OUT(2), .W(RSP_W)) u_rsp (
      .clk, .rst_n,
      .in_valid  (rsp_in_valid[l]),
      .in_ready  (rsp_in_ready[l]),
      .in_data   (rsp_in[l]),
      .in_sel    (psel),
      .out_valid (rsp_out_valid[l]),
      .out_ready (rsp_out_ready[l]),
      .out_data  (p_raw)
    );
    assign rsp_out[l] = p_raw;
  end
endmodule
