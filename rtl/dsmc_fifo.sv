// dsmc_fifo: small synchronous FIFO with a valid/ready interface on both
// sides.
//
// Used as the output buffer of every switch port. `in_ready` depends only on
// the FIFO's own fill level, so back-pressure crosses one switch level per
// cycle instead of rippling combinationally through the network. The output
// is read straight from the storage array (first-word fall-through) and a
// word written in one cycle is visible at the output in the next one. Depth
// 2 keeps one beat per cycle flowing through a port that is not blocked. The
// buffering depth is this design's choice; the paper gives none.
module dsmc_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
