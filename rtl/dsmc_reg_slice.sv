// dsmc_reg_slice: timing-closure register slice on a valid/ready link.
//
// STAGES full-throughput pipeline stages in a row; each adds one cycle of
// latency and none of bandwidth (each stage is a two-entry buffer, so a
// blocked output does not create a bubble). The paper inserts such slices in
// front of some level-3 switches when the layout spreads wide, and reports
// how throughput and latency change; the stage structure is this design's.
module dsmc_reg_slice #(
  parameter int unsigned W      = 8,
  parameter int unsigned STAGES = 1
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
  logic [STAGES:0]        v, r;
  logic [STAGES:0][W-1:0] d;

  assign v[0]     = in_valid;
  assign in_ready = r[0];
  assign d[0]     = in_data;

  for (genvar s = 0; s < STAGES; s++) begin : g_st
    dsmc_fifo #(.W(W), .DEPTH(2)) u_st (
      .clk, .rst_n,
      .in_valid  (v[s]),
      .in_ready  (r[s]),
      .in_data   (d[s]),
      .out_valid (v[s+1]),
      .out_ready (r[s+1]),
      .out_data  (d[s+1])
    );
  end

  assign out_valid     = v[STAGES];
  assign r[STAGES]     = out_ready;
  assign out_data      = d[STAGES];
endmodule
