// dsmc_top: DSMC-32M32S, the distributed shared memory controller with 32
// master ports and 32 memory banks (4 Mbytes) in two building blocks.
//
// Masters 0-15 attach to building block 0, masters 16-31 to building block 1.
// Every master reaches every bank. A burst is cut into single beats at its
// master port; word-address bit 0 sends alternate beats to the two blocks,
// the beats for the other block crossing over on the speed-up links that
// join each block's first-level switches to the sister block's second-level
// switches; inside a block, consecutive beats hit different banks. The two
// blocks are identical; the top only straps their `bb_id` and crosses the
// speed-up links. Memory word w lives in block w[0], bank w[4:1], row
// w[18:5].
//
// Master interface (index m = 0..31), all valid/ready handshakes:
//   cmd      burst command {wr, word address, beats-1}
//   wdata    write data, one per write beat, in order
//   mrsp     responses, one per beat, in issue order: read data or write
//            acknowledge
// Unloaded read latency is 10 cycles from the command's acceptance to the
// cycle in which the data is taken.
// L3_SLICE adds register slices in front of chosen level-3 switches of both
// blocks, for the paper's timing-closure experiments; the default has none.
module dsmc_top
  import dsmc_pkg::*;
#(
  parameter logic [N_SW-1:0][1:0] L3_SLICE = '0,
  parameter int unsigned          ROWS     = BANK_ROWS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic  [N_MASTERS-1:0]             cmd_valid,
  output logic  [N_MASTERS-1:0]             cmd_ready,
  input  cmd_t  [N_MASTERS-1:0]             cmd,
  input  logic  [N_MASTERS-1:0]             wvalid,
  output logic  [N_MASTERS-1:0]             wready,
  input  logic  [N_MASTERS-1:0][DATA_W-1:0] wdata,
  output logic  [N_MASTERS-1:0]             mrsp_valid,
  input  logic  [N_MASTERS-1:0]             mrsp_ready,
  output mrsp_t [N_MASTERS-1:0]             mrsp
);
  logic [N_BB-1:0][2*N_SW-1:0] suq_v, suq_r, sup_v, sup_r;
  req_t [N_BB-1:0][2*N_SW-1:0] suq_d;
  rsp_t [N_BB-1:0][2*N_SW-1:0] sup_d;

  for (genvar b = 0; b < N_BB; b++) begin : g_bb
    localparam int S = 1 - b;   // sister block
    dsmc_building_block #(.L3_SLICE(L3_SLICE), .ROWS(ROWS)) u_bb (
      .clk, .rst_n,
      .bb_id         (1'(b)),
      .cmd_valid     (cmd_valid [b*BB_MASTERS +: BB_MASTERS]),
      .cmd_ready     (cmd_ready [b*BB_MASTERS +: BB_MASTERS]),
      .cmd           (cmd       [b*BB_MASTERS +: BB_MASTERS]),
      .wvalid        (wvalid    [b*BB_MASTERS +: BB_MASTERS]),
      .wready        (wready    [b*BB_MASTERS +: BB_MASTERS]),
      .wdata         (wdata     [b*BB_MASTERS +: BB_MASTERS]),
      .mrsp_valid    (mrsp_valid[b*BB_MASTERS +: BB_MASTERS]),
      .mrsp_ready    (mrsp_ready[b*BB_MASTERS +: BB_MASTERS]),
      .mrsp          (mrsp      [b*BB_MASTERS +: BB_MASTERS]),
      .suq_out_valid (suq_v[b]),
      .suq_out_ready (suq_r[b]),
      .suq_out       (suq_d[b]),
      .suq_in_valid  (suq_v[S]),
      .suq_in_ready  (suq_r[S]),
      .suq_in        (suq_d[S]),
      .sup_out_valid (sup_v[b]),
      .sup_out_ready (sup_r[b]),
      .sup_out       (sup_d[b]),
      .sup_in_valid  (sup_v[S]),
      .sup_in_ready  (sup_r[S]),
      .sup_in        (sup_d[S])
    );
  end
endmodule
