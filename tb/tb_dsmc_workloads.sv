// tb_dsmc_workloads: the evaluation workloads run on the full-size
// DSMC-32M32S, in three copies that differ only in their register slices.
//
//   u_base   no register slices (the main configuration)
//   u_numa1  one slice stage in front of 25 % of the level-3 switches
//            (RSWH2 1 and 5) and two stages in front of another 25 %
//            (RSWH2 3 and 7)
//   u_numa2  two stages in front of 50 % of the level-3 switches (RSWH2 1,
//            3, 5, 7)
//
// Workloads:
//   1. injection-rate sweep on u_base: mixed bursts (1/2/4/8/16 beats in
//      equal shares), read-only and write-only, at 30, 50, 60, 65, 70, 75,
//      80, 90 and 100 % injection. Checked: average latency stays under 60
//      cycles at every rate, and grows with the rate (allowing 5 cycles of
//      noise between neighbouring points, as the curve is flat once the
//      network saturates);
//   2. timing-closure set-ups: burst-8 and burst-2 traffic at 100 %
//      injection, reads and writes, on all three copies. Checked: the sliced
//      copies keep at least 90 % of the baseline throughput, and their
//      average latency is not below the baseline's minus 1 cycle;
//   3. isolated single reads on each copy: the shortest latency is the
//      unsliced 10 cycles, and the longest is 10 plus the slice stages met
//      on the way out and on the way back (at most twice the deepest slice).
// The three copies run at the same time on one clock.
module tb_dsmc_workloads;
  import dsmc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam logic [N_SW-1:0][1:0] NUMA1 = {2'd2, 2'd0, 2'd1, 2'd0, 2'd2, 2'd0, 2'd1, 2'd0};
  localparam logic [N_SW-1:0][1:0] NUMA2 = {2'd2, 2'd0, 2'd2, 2'd0, 2'd2, 2'd0, 2'd2, 2'd0};

  tb_dsmc_traffic                    u_base  (.clk);
  tb_dsmc_traffic #(.L3_SLICE(NUMA1)) u_numa1 (.clk);
  tb_dsmc_traffic #(.L3_SLICE(NUMA2)) u_numa2 (.clk);

  int checks = 0, failures = 0;

  localparam int RUN = 600;
  localparam int N_RATES = 9;
  localparam int RATES [N_RATES] = '{30, 50, 60, 65, 70, 75, 80, 90, 100};

  real thr_b [2][2], lat_b [2][2];   // [burst 8 / burst 2][read / write]
  real thr_1 [2][2], lat_1 [2][2];
  real thr_2 [2][2], lat_2 [2][2];
  bit  done_b = 1'b0, done_1 = 1'b0, done_2 = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // 1 and 2 on the baseline copy
  initial begin
    real thr, lat, prev;
    int  lmin, lmax;
    repeat (5) @(posedge clk);
    for (int wr = 0; wr < 2; wr++) begin
      prev = 0.0;
      for (int i = 0; i < N_RATES; i++) begin
        u_base.run(0, wr, RATES[i], RUN, thr, lat);
        $display("sweep %-5s injection %3d %%: throughput %5.1f %%  avg latency %5.1f",
                 wr ? "write" : "read", RATES[i], thr, lat);
        check(lat < 60.0, $sformatf("latency %0.1f not under 60 at %0d %%", lat, RATES[i]));
        check(lat >= prev - 5.0, $sformatf("latency fell from %0.1f to %0.1f at %0d %%", prev, lat, RATES[i]));
        prev = lat;
      end
    end
    for (int p = 0; p < 2; p++)
      for (int wr = 0; wr < 2; wr++)
        u_base.run(p == 0 ? 8 : 2, wr, 100, RUN, thr_b[p][wr], lat_b[p][wr]);
    u_base.latency_probe(100, lmin, lmax);
    check(lmin == 10 && lmax == 10, $sformatf("base unloaded latency %0d..%0d, expected 10", lmin, lmax));
    done_b = 1'b1;
  end

  initial begin
    int lmin, lmax;
    repeat (5) @(posedge clk);
    for (int p = 0; p < 2; p++)
      for (int wr = 0; wr < 2; wr++)
        u_numa1.run(p == 0 ? 8 : 2, wr, 100, RUN, thr_1[p][wr], lat_1[p][wr]);
    u_numa1.latency_probe(200, lmin, lmax);
    check(lmin == 10 && lmax == 14, $sformatf("numa1 unloaded latency %0d..%0d, expected 10..14", lmin, lmax));
    done_1 = 1'b1;
  end

  initial begin
    int lmin, lmax;
    repeat (5) @(posedge clk);
    for (int p = 0; p < 2; p++)
      for (int wr = 0; wr < 2; wr++)
        u_numa2.run(p == 0 ? 8 : 2, wr, 100, RUN, thr_2[p][wr], lat_2[p][wr]);
    u_numa2.latency_probe(200, lmin, lmax);
    check(lmin == 10 && lmax == 14, $sformatf("numa2 unloaded latency %0d..%0d, expected 10..14", lmin, lmax));
    done_2 = 1'b1;
  end

  initial begin
    wait (done_b && done_1 && done_2);
    for (int p = 0; p < 2; p++)
      for (int wr = 0; wr < 2; wr++) begin
        $display("B%0d %-5s  base %5.1f %% %5.1f cyc | numa1 %5.1f %% %5.1f cyc | numa2 %5.1f %% %5.1f cyc",
                 p == 0 ? 8 : 2, wr ? "write" : "read",
                 thr_b[p][wr], lat_b[p][wr], thr_1[p][wr], lat_1[p][wr], thr_2[p][wr], lat_2[p][wr]);
        check(thr_1[p][wr] >= 0.9 * thr_b[p][wr], "numa1 throughput under 90 % of baseline");
        check(thr_2[p][wr] >= 0.9 * thr_b[p][wr], "numa2 throughput under 90 % of baseline");
        check(lat_1[p][wr] >= lat_b[p][wr] - 1.0, "numa1 latency below baseline");
        check(lat_2[p][wr] >= lat_b[p][wr] - 1.0, "numa2 latency below baseline");
      end
    checks  += u_base.checks + u_numa1.checks + u_numa2.checks;
    failures += u_base.failures + u_numa1.failures + u_numa2.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
