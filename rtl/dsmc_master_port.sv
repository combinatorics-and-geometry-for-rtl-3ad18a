// dsmc_master_port: one master access port of the shared memory.
//
// A master issues bursts: a command (read or write, first word address,
// 1 to 16 beats) and, for a write, one write-data beat per word. The port
// disassembles every burst into single-beat transactions on linear word
// addresses (addr, addr+1, ...), one per cycle, as the paper prescribes at
// the traffic source; the first-level switch then spreads them over the
// building blocks and banks. A single-beat or multi-beat command is accepted
// in the cycle its first beat leaves, so back-to-back bursts leave without a
// gap.
//
// Beats of a burst travel different paths and come back out of order. Each
// beat takes a slot of a reorder buffer (ROB_DEPTH deep, its index is the
// beat's tag) when it leaves; responses are written into their slot and
// handed to the master strictly in issue order, one per cycle ("data return
// in order" in the paper's evaluation). A full buffer stalls the port. The
// reorder buffer always accepts responses, which keeps the response network
// free of deadlock. Buffer depth and the command/data handshake are this
// design's choices.
//
// Timing: command and first beat in the same cycle; a read's data comes back
// after the network round trip (10 cycles from command acceptance when nothing waits).
module dsmc_master_port
  import dsmc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [MID_W-1:0]   mid,          // this port's global master id
  // burst command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  // write data, one per write beat
  input  logic               wvalid,
  output logic               wready,
  input  logic [DATA_W-1:0]  wdata,
  // in-order responses to the master
  output logic               mrsp_valid,
  input  logic               mrsp_ready,
  output mrsp_t              mrsp,
  // beats to the first-level switch
  output logic               beat_valid,
  input  logic               beat_ready,
  output beat_t              beat,
  // responses from the first-level switch
  input  logic               rsp_valid,
  output logic               rsp_ready,
  input  rsp_t               rsp
);
  // ---- burst disassembly --------------------------------------------------
  logic              active;
  logic              wr_q;
  logic [ADDR_W-1:0] addr_q;
  logic [LEN_W-1:0]  left_q;      // beats still to send after the current - 0 means last

  logic              cur_valid, cur_wr;
  logic [ADDR_W-1:0] cur_addr;
  logic [LEN_W-1:0]  cur_left;

  logic [TAG_W:0]    head, tail;
  logic              rob_free;
  logic              fire;

  assign cur_valid = active || cmd_valid;
  assign cur_wr    = active ? wr_q   : cmd.wr;
  assign cur_addr  = active ? addr_q : cmd.addr;
  assign cur_left  = active ? left_q : cmd.len;

  assign rob_free   = (tail - head) != (TAG_W+1)'(ROB_DEPTH);
  assign beat_valid = cur_valid && rob_free && (!cur_wr || wvalid);
  assign fire       = beat_valid && beat_ready;
  assign cmd_ready  = !active && fire;
  assign wready     = fire && cur_wr;

  always_comb begin
    beat.mid   = mid;
    beat.tag   = tail[TAG_W-1:0];
    beat.wr    = cur_wr;
    beat.addr  = cur_addr;
    beat.wdata = cur_wr ? wdata : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      wr_q   <= 1'b0;
      addr_q <= '0;
      left_q <= '0;
    end else if (fire) begin
      active <= (cur_left != '0);
      wr_q   <= cur_wr;
      addr_q <= cur_addr + 1'b1;
      left_q <= cur_left - 1'b1;
    end
  end

  // ---- reorder buffer ----------------------------------------------------
  logic [ROB_DEPTH-1:0] done;
  mrsp_t                rob [ROB_DEPTH];

  assign rsp_ready  = 1'b1;
  assign mrsp_valid = done[head[TAG_W-1:0]];
  assign mrsp       = rob[head[TAG_W-1:0]];
  wire   pop        = mrsp_valid && mrsp_ready;

  always_ff @(posedge clk) begin
    if (rsp_valid) rob[rsp.tag] <= '{wr: rsp.wr, rdata: rsp.rdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
      done <= '0;
    end else begin
      if (fire) tail <= tail + 1'b1;
      if (pop)  head <= head + 1'b1;
      for (int unsigned t = 0; t < ROB_DEPTH; t++) begin
        if (rsp_valid && rsp.tag == TAG_W'(t)) done[t] <= 1'b1;
        else if (pop && head[TAG_W-1:0] == TAG_W'(t)) done[t] <= 1'b0;
      end
    end
  end

  // Responses only come back for beats in flight, and each only once.
  logic [TAG_W-1:0] rsp_dist;
  logic [TAG_W:0]   in_flight;
  assign rsp_dist  = rsp.tag - head[TAG_W-1:0];
  assign in_flight = tail - head;
  assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> !done[rsp.tag] && ({1'b0, rsp_dist} < in_flight));
  assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> rsp.mid == mid);
endmodule
