// dsmc_rr_arb: round-robin arbiter.
//
// Grants one of N requesters per cycle, combinationally from `req`. The
// requester after the last one granted has the highest priority, so every
// requester that keeps asking is served within N grants. The priority pointer
// moves only when `advance` is high (the grant was actually used). The paper
// names no arbitration policy; round robin is this design's choice, the
// fairest simple one.
module dsmc_rr_arb #(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;  // highest-priority requester

  always_comb begin
    grant = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (req[idx] && grant == '0) grant[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && grant != '0) begin
      for (int unsigned k = 0; k < N; k++)
        if (grant[k]) ptr <= IW'((k + 1) % N);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
