// dsmc_bank: one single-ported memory bank, shared by the two networks.
//
// The last-level switch of each lane (local traffic on lane 0, speed-up
// traffic from the sister building block on lane 1) has a link to the bank.
// Each cycle the bank serves at most one of the two: a round-robin arbiter
// picks between the lanes when both ask, and the other is back-pressured.
// This is the bank sharing between r = 2 networks that the paper's
// bank-utilization analysis describes. The memory is a plain array of
// ROWS words (synchronous write, synchronous read, one cycle); a write
// returns an acknowledge and a read returns its data, as a response on the
// lane the request came on. A new request is accepted only when the
// response register is free or is being emptied, so the bank never drops a
// response. Read-write latency, the response-on-same-lane rule and the
// acknowledge for writes are this design's choices.
module dsmc_bank
  import dsmc_pkg::*;
#(
  parameter int unsigned ROWS = BANK_ROWS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       req_valid,
  output logic [1:0]       req_ready,
  input  req_t [1:0]       req,
  output logic [1:0]       rsp_valid,
  input  logic [1:0]       rsp_ready,
  output rsp_t [1:0]       rsp
);
  localparam int unsigned RW = $clog2(ROWS);

  logic [DATA_W-1:0] mem [ROWS];

  logic        rv;         // response register holds a beat
  logic        rlane;      // lane it goes back on
  logic [MID_W-1:0] rmid;
  logic [TAG_W-1:0] rtag;
  logic        rwr;
  logic [DATA_W-1:0] rdata;

  logic [1:0]  gnt;
  logic        can_take;
  logic        lane;
  req_t        sel;

  assign can_take = !rv || rsp_ready[rlane];

  dsmc_rr_arb #(.N(2)) u_arb (
    .clk, .rst_n,
    .req     (req_valid),
    .advance (can_take),
    .grant   (gnt)
  );

  assign lane      = gnt[1];
  assign sel       = req[lane];
  assign req_ready = can_take ? gnt : 2'b00;
  wire   take      = can_take && (gnt != 2'b00);

  always_ff @(posedge clk) begin
    if (take) begin
      if (sel.wr) mem[RW'(sel.row)] <= sel.wdata;
      else        rdata <= mem[RW'(sel.row)];
      rmid  <= sel.mid;
      rtag  <= sel.tag;
      rwr   <= sel.wr;
      rlane <= lane;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        rv <= 1'b0;
    else if (can_take) rv <= take;
  end

  always_comb begin
    for (int l = 0; l < 2; l++) begin
      rsp_valid[l]   = rv && (rlane == 1'(l));
      rsp[l].mid     = rmid;
      rsp[l].tag     = rtag;
      rsp[l].wr      = rwr;
      rsp[l].rdata   = rwr ? '0 : rdata;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_ready));
endmodule
