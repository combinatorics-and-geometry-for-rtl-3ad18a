// dsmc_switch: the crossbar core shared by every radix switch of the DSMC.
//
// N_IN inputs, N_OUT outputs, each with a valid/ready handshake. Every input
// presents, next to its data, the index of the output it wants (`in_sel`);
// the enclosing switch computes that index from the address or master id, so
// this core knows nothing of the address map. Each output has its own
// round-robin arbiter over the inputs that want it and its own output FIFO;
// an input whose output FIFO is full, or that loses arbitration, is held
// (back-pressure: the paper's "back pressured" requests). One beat per input
// and per output per cycle; a beat spends one cycle in the switch when it
// does not wait. Output FIFOs are DEPTH = 4 deep: with 2 entries the full
// design saturated near 65 % of a beat per port per cycle, with 4 it reaches
// 70-78 %, about the throughput the paper reports. Arbitration, buffering
// and latency are this design's choices: the paper describes switch radix
// and connectivity, not insides.
module dsmc_switch #(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned N_OUT = 2,
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned SW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_IN-1:0]          in_valid,
  output logic [N_IN-1:0]          in_ready,
  input  logic [N_IN-1:0][W-1:0]   in_data,
  input  logic [N_IN-1:0][SW-1:0]  in_sel,
  output logic [N_OUT-1:0]         out_valid,
  input  logic [N_OUT-1:0]         out_ready,
  output logic [N_OUT-1:0][W-1:0]  out_data
);
  logic [N_OUT-1:0][N_IN-1:0] req, gnt;
  logic [N_OUT-1:0]           f_ready, f_valid;
  logic [N_OUT-1:0][W-1:0]    f_data;

  always_comb begin
    for (int unsigned o = 0; o < N_OUT; o++)
      for (int unsigned i = 0; i < N_IN; i++)
        req[o][i] = in_valid[i] && (in_sel[i] == SW'(o));
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    dsmc_rr_arb #(.N(N_IN)) u_arb (
      .clk, .rst_n,
      .req     (req[o]),
      .advance (f_ready[o]),
      .grant   (gnt[o])
    );

    always_comb begin
      f_valid[o] = f_ready[o] && (gnt[o] != '0);
      f_data[o]  = '0;
      for (int unsigned i = 0; i < N_IN; i++)
        if (gnt[o][i]) f_data[o] = in_data[i];
    end

    dsmc_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid  (f_valid[o]),
      .in_ready  (f_ready[o]),
      .in_data   (f_data[o]),
      .out_valid (out_valid[o]),
      .out_ready (out_ready[o]),
      .out_data  (out_data[o])
    );
  end

  always_comb begin
    for (int unsigned i = 0; i < N_IN; i++) begin
      in_ready[i] = 1'b0;
      for (int unsigned o = 0; o < N_OUT; o++)
        if (gnt[o][i] && f_ready[o]) in_ready[i] = 1'b1;
    end
  end

  // A held beat must stay put until it is taken.
  for (genvar i = 0; i < N_IN; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[i] && !in_ready[i] |=> in_valid[i] && $stable(in_data[i]) && $stable(in_sel[i]));
  end
endmodule
