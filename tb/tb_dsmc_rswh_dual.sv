// tb_dsmc_rswh_dual: self-checking test of the two-lane radix-2 switch, as
// level-2 switch (RSWH1) and as last-level switch (RSWH3).
//
// Requests and responses carry a unique number (source lane, port and
// sequence) in their data field. Checked for every beat that leaves: it
// stays on its lane, it leaves on the output named by the routing bit of
// its level (requests: bank bit 2 for RSWH1, bank bit 0 for RSWH3;
// responses: master-id bit LEVEL), beats from one input to one output keep
// their order, and nothing is lost or duplicated. A second phase blocks
// every lane-0 output and sends conflict-free traffic on lane 1: lane 1 must
// keep moving one beat per port per cycle (the two lanes are independent).
module tb_dsmc_rswh_dual;
  import dsmc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int mode = 0;     // 0 random, 1 lane 0 blocked, lane 1 straight, 2 idle
  int lane1_moved [2];
  int sent_q [2], got_q [2], sent_p [2], got_p [2];

  for (genvar k = 0; k < 2; k++) begin : g_dut
    localparam int LV   = (k == 0) ? 1 : 3;
    localparam int QBIT = (LV == 3) ? 0 : LV + 1;

    logic [1:0][1:0] qiv, qir, qov, qor, piv, pir, pov, por;
    req_t [1:0][1:0] qi, qo;
    rsp_t [1:0][1:0] pi, po;

    dsmc_rswh_dual #(.LEVEL(LV)) dut (
      .clk, .rst_n,
      .req_in_valid (qiv), .req_in_ready (qir), .req_in (qi),
      .req_out_valid(qov), .req_out_ready(qor), .req_out(qo),
      .rsp_in_valid (piv), .rsp_in_ready (pir), .rsp_in (pi),
      .rsp_out_valid(pov), .rsp_out_ready(por), .rsp_out(po)
    );

    int seqn [2][2];
    int lastq [4][2], lastp [4][2];

    always @(posedge clk) begin
      if (!rst_n) begin
        qiv <= '0; piv <= '0; qor <= '0; por <= '0;
        sent_q[k] = 0; got_q[k] = 0; sent_p[k] = 0; got_p[k] = 0;
        for (int a = 0; a < 4; a++) for (int b = 0; b < 2; b++) begin lastq[a][b] = -1; lastp[a][b] = -1; end
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) seqn[a][b] = 0;
      end else begin
        for (int l = 0; l < 2; l++)
          for (int p = 0; p < 2; p++) begin
            // outputs
            if (qov[l][p] && qor[l][p]) begin
              int src, sq;
              src = int'(qo[l][p].wdata[33:32]);
              sq  = int'(qo[l][p].wdata[31:0]);
              checks++; got_q[k]++;
              if (l == 1 && mode == 1 && k == 0) lane1_moved[p]++;
              if (src / 2 != l || int'(qo[l][p].bank[QBIT]) != p || sq <= lastq[src][p]) begin
                failures++; $display("FAIL L%0d: request lane %0d port %0d src %0d seq %0d", LV, l, p, src, sq);
              end
              lastq[src][p] = sq;
            end
            if (pov[l][p] && por[l][p]) begin
              int src, sq;
              src = int'(po[l][p].rdata[33:32]);
              sq  = int'(po[l][p].rdata[31:0]);
              checks++; got_p[k]++;
              if (src / 2 != l || int'(po[l][p].mid[LV]) != p || sq <= lastp[src][p]) begin
                failures++; $display("FAIL L%0d: response lane %0d port %0d src %0d seq %0d", LV, l, p, src, sq);
              end
              lastp[src][p] = sq;
            end
            // inputs
            if (qiv[l][p] && qir[l][p]) sent_q[k]++;
            if (piv[l][p] && pir[l][p]) sent_p[k]++;
            if (!qiv[l][p] || qir[l][p]) begin
              req_t r;
              r = '0;
              r.bank = BANK_W'($urandom);
              if (mode == 1) r.bank[QBIT] = 1'(p);
              r.mid = MID_W'($urandom);
              r.wdata = {30'd0, 2'(l * 2 + p), 32'(seqn[l][p])};
              seqn[l][p] = seqn[l][p] + 1;
              qi[l][p] <= r;
              qiv[l][p] <= (mode == 2) ? 1'b0 : (mode == 1) ? 1'(l == 1) : 1'($urandom_range(0, 3) != 0);
            end
            if (!piv[l][p] || pir[l][p]) begin
              rsp_t r;
              r = '0;
              r.mid = MID_W'($urandom);
              r.rdata = {30'd0, 2'(l * 2 + p), 32'(seqn[l][p])};
              seqn[l][p] = seqn[l][p] + 1;
              pi[l][p] <= r;
              piv[l][p] <= (mode == 2) ? 1'b0 : (mode == 1) ? 1'b0 : 1'($urandom_range(0, 3) != 0);
            end
            qor[l][p] <= (mode == 2) ? 1'b1 : (mode == 1) ? 1'(l == 1) : 1'($urandom_range(0, 3) != 0);
            por[l][p] <= (mode == 2) ? 1'b1 : (mode == 1) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
          end
      end
    end
  end

  initial begin
    lane1_moved = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    mode = 2;
    repeat (20) @(posedge clk);
    mode = 1;
    repeat (20) @(posedge clk);
    lane1_moved = '{0, 0};
    repeat (500) @(posedge clk);
    checks++;
    if (lane1_moved[0] < 499 || lane1_moved[1] < 499) begin
      failures++; $display("FAIL: lane 1 moved %0d/%0d beats in 500 cycles with lane 0 blocked",
                           lane1_moved[0], lane1_moved[1]);
    end
    mode = 2;
    repeat (50) @(posedge clk);
    checks += 2;
    if (sent_q[0] != got_q[0] || sent_p[0] != got_p[0]) begin
      failures++; $display("FAIL L1: lost beats");
    end
    if (sent_q[1] != got_q[1] || sent_p[1] != got_p[1]) begin
      failures++; $display("FAIL L3: lost beats");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
