// dsmc_rswh0: first-level radix switch (RSWH0) of a building block.
//
// Two master ports feed it. For every beat it does the whole address
// decoding of the memory (building block, bank, row), so no later switch
// looks at an address, and it steers the beat:
//   * beats whose building-block bit names this block go to one of the two
//     local level-2 switches (outputs 0 and 1, local network, lane 0);
//   * the others leave on the speed-up links to the sister building block
//     (outputs 2 and 3), where they enter that block's level-2 switches
//     directly on lane 1.
// With word-address bit 0 as the block bit, the even and odd beats of a
// linear burst are split between the two blocks: the paper's "directed
// randomization". Within a block, bank bit 1 picks which of the two level-2
// switches is next (radix-2 butterfly stage). The paper shows one speed-up
// link per RSWH0 into the sister block; this design gives each RSWH0 two
// (one to each level-2 switch of the pair), since with one link a radix-2
// path from a fixed level-2 switch could reach only half of the sister's
// banks.
//
// The return side is the mirror: responses from the two local level-2
// switches (inputs 0,1) and from the sister block's level-2 switches
// (inputs 2,3) are merged onto the two master ports by master-id bit 0.
// Each direction adds one cycle when not blocked (see dsmc_switch).
module dsmc_rswh0
  import dsmc_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bb_id,      // this building block
  // from the two master ports
  input  logic [1:0]                   beat_valid,
  output logic [1:0]                   beat_ready,
  input  beat_t [1:0]                  beat,
  // request outputs: 0,1 local level 2, 2,3 speed-up to sister level 2
  output logic [3:0]                   req_valid,
  input  logic [3:0]                   req_ready,
  output req_t [3:0]                   req,
  // response inputs: 0,1 local level 2, 2,3 sister level 2
  input  logic [3:0]                   rsp_in_valid,
  output logic [3:0]                   rsp_in_ready,
  input  rsp_t [3:0]                   rsp_in,
  // responses to the two master ports
  output logic [1:0]                   rsp_valid,
  input  logic [1:0]                   rsp_ready,
  output rsp_t [1:0]                   rsp
);
  req_t [1:0]             dec;
  logic [1:0][1:0]        rsel;
  logic [3:0]             qsel;
  logic [3:0][REQ_W-1:0]  req_raw;
  logic [1:0][RSP_W-1:0]  rsp_raw;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      dec[i].mid   = beat[i].mid;
      dec[i].tag   = beat[i].tag;
      dec[i].wr    = beat[i].wr;
      dec[i].bb    = addr_bb(beat[i].addr);
      dec[i].bank  = addr_bank(beat[i].addr);
      dec[i].row   = addr_row(beat[i].addr);
      dec[i].wdata = beat[i].wdata;
      rsel[i]      = {dec[i].bb != bb_id, dec[i].bank[1]};
    end
    for (int i = 0; i < 4; i++) qsel[i] = rsp_in[i].mid[0];
  end

  dsmc_switch #(.N_IN(2), .N_OUT(4), .W(REQ_W)) u_req (
    .clk, .rst_n,
    .in_valid  (beat_valid),
    .in_ready  (beat_ready),
    .in_data   (dec),
    .in_sel    (rsel),
    .out_valid (req_valid),
    .out_ready (req_ready),
    .out_data  (req_raw)
  );
  assign req = req_raw;

  dsmc_switch #(.N_IN(4), .N_OUT(2), .W(RSP_W)) u_rsp (
    .clk, .rst_n,
    .in_valid  (rsp_in_valid),
    .in_ready  (rsp_in_ready),
    .in_data   (rsp_in),
    .in_sel    (qsel),
    .out_valid (rsp_valid),
    .out_ready (rsp_ready),
    .out_data  (rsp_raw)
  );
  assign rsp = rsp_raw;
endmodule
