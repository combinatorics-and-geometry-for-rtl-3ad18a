// tb_dsmc_top: end-to-end test of the full-size DSMC-32M32S (default
// parameters: 32 masters, 32 banks, 4 Mbytes).
//
// Every master owns a 16K-word slice of the address space (word address
// bits 18:14 = master number), so results are deterministic although all
// masters run at once; inside its slice a master picks random addresses, so
// its beats spread over both building blocks and all banks. A reference
// model of the memory is updated as write beats are taken; every response
// is checked in order against it (read data of written words, the
// read/write kind of every response).
//
// Phases:
//   1. random bursts (1..16 beats, reads and writes) at random load,
//      checked word by word;
//   2. read-only and write-only traffic at 100 % load for each burst
//      pattern 1, 2, 4, 8, 16 and mixed; throughput (beats per master per
//      cycle) and average latency (beat issue to in-order return) are
//      printed; every pattern must carry at least 60 % of a beat per master
//      per cycle, and the mixed pattern must keep its average latency under
//      60 cycles at full load (the paper's bound);
//   3. one read on an idle network, whose latency must equal the pipeline
//      depth computed below.
// It also counts that each mechanism of the design happened: multi-beat
// bursts cut into beats, beats crossing on the speed-up links, beats
// back-pressured at a master port, both lanes asking for one bank in one
// cycle, responses arriving out of order at a reorder buffer, and a master
// port stalled on a full reorder buffer.
module tb_dsmc_top;
  import dsmc_pkg::*;

  localparam int NM = N_MASTERS;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NM-1:0]             cmd_valid, cmd_ready, wvalid, wready, mrsp_valid, mrsp_ready;
  cmd_t  [NM-1:0]             cmd;
  logic  [NM-1:0][DATA_W-1:0] wdata;
  mrsp_t [NM-1:0]             mrsp;

  dsmc_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- traffic control ---------------------------------------------------
  int  mode;        // 0 idle, 1 random mixed, 2 fixed pattern
  int  rate_pct;    // offered load in mode 1
  int  pat_len;     // beats per burst in mode 2, 0 = mixed 1/2/4/8/16
  int  pat_wr;      // mode 2: 0 reads, 1 writes
  bit  measuring;
  bit  shot_done;
  int  last_lat;

  // ---- reference model and per-master state ------------------------------
  logic [DATA_W-1:0] model [logic [ADDR_W-1:0]];

  typedef struct { logic [ADDR_W-1:0] a; logic [DATA_W-1:0] d; } wbeat_t;
  typedef struct { bit wr; bit known; logic [DATA_W-1:0] d; longint t; } exp_t;

  wbeat_t wq   [NM][$];
  exp_t   expq [NM][$];
  int     gap  [NM];
  int     seq  [NM];

  longint beats_issued, beats_done, lat_sum;
  int     n_burst_split, n_speedup, n_bp_stall, n_bank_conflict, n_ooo, n_rob_full;

  function automatic logic [DATA_W-1:0] mkdata(int m, int s);
    return {32'(m) ^ 32'hA5A5_0000, 32'(s) * 32'h9E37_79B9};
  endfunction

  function automatic int pick_len();
    int r;
    if (mode == 2 && pat_len != 0) return pat_len;
    r = $urandom_range(0, 4);
    return 1 << r;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++) begin
        // command handshake
        if (cmd_valid[m] && cmd_ready[m]) begin
          for (int k = 0; k <= int'(cmd[m].len); k++) begin
            exp_t e;
            logic [ADDR_W-1:0] a;
            a = cmd[m].addr + ADDR_W'(k);
            e.wr = cmd[m].wr;
            e.known = !cmd[m].wr && model.exists(a);
            e.d = e.known ? model[a] : '0;
            e.t = cycle + k;
            expq[m].push_back(e);
          end
          if (cmd[m].len != 0) n_burst_split++;
          beats_issued += longint'(cmd[m].len) + 1;
        end
        // write data handshake updates the model
        if (wvalid[m] && wready[m]) begin
          model[wq[m][0].a] = wq[m][0].d;
          void'(wq[m].pop_front());
        end
        // responses, in order
        if (mrsp_valid[m] && mrsp_ready[m]) begin
          if (expq[m].size() == 0) begin
            failures++; $display("FAIL m%0d: unexpected response", m);
          end else begin
            exp_t e;
            e = expq[m].pop_front();
            checks++;
            if (mrsp[m].wr != e.wr) begin
              failures++; $display("FAIL m%0d: response kind %0b, expected %0b", m, mrsp[m].wr, e.wr);
            end else if (e.known && mrsp[m].rdata != e.d) begin
              failures++; $display("FAIL m%0d: read %h expected %h", m, mrsp[m].rdata, e.d);
            end
            last_lat = int'(cycle - e.t);
            if (measuring) begin
              beats_done++;
              lat_sum += cycle - e.t;
            end
          end
        end
        // next command
        if (!cmd_valid[m] || cmd_ready[m]) begin
          if (gap[m] > 0) gap[m]--;
          if (mode == 3 && m == 0 && !shot_done) begin
            cmd[m] <= '{wr: 1'b0, addr: ADDR_W'(6), len: '0};
            cmd_valid[m] <= 1'b1;
            shot_done = 1;
          end else if ((mode == 1 || mode == 2) && gap[m] == 0) begin
            cmd_t c;
            int   len;
            logic [13:0] off;
            len   = pick_len();
            off   = 14'($urandom_range(0, 16383 - 16));
            c.wr  = (mode == 1) ? 1'($urandom_range(0, 1)) : 1'(pat_wr);
            c.addr = {5'(m), off};
            c.len = LEN_W'(len - 1);
            cmd[m] <= c;
            cmd_valid[m] <= 1'b1;
            if (c.wr)
              for (int k = 0; k < len; k++) begin
                wbeat_t w;
                w.a = c.addr + ADDR_W'(k);
                w.d = mkdata(m, seq[m]++);
                wq[m].push_back(w);
              end
            if (mode == 1) gap[m] = (rate_pct >= 100) ? 0 : len * (100 - rate_pct) / rate_pct;
          end else begin
            cmd_valid[m] <= 1'b0;
          end
        end
      end
    end else begin
      cmd_valid <= '0;
      cmd       <= '0;
    end
  end

  // write data follows the queue head (a second block so the queue has been
  // updated by the block above in the same time step)
  always @(posedge clk) begin
    #1;
    for (int m = 0; m < NM; m++) begin
      wvalid[m] = (wq[m].size() != 0);
      wdata[m]  = wvalid[m] ? wq[m][0].d : '0;
    end
  end

  // ---- mechanism monitors -------------------------------------------------
  for (genvar b = 0; b < N_BB; b++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      n_speedup  += $countones(dut.g_bb[b].u_bb.suq_out_valid & dut.g_bb[b].u_bb.suq_out_ready);
      n_bp_stall += $countones(dut.g_bb[b].u_bb.b_v & ~dut.g_bb[b].u_bb.b_r);
      for (int k = 0; k < BB_BANKS; k++)
        if (dut.g_bb[b].u_bb.kq_v[k] == 2'b11) n_bank_conflict++;
    end
    for (genvar m = 0; m < BB_MASTERS; m++) begin : g_m
      always @(posedge clk) if (rst_n) begin
        if (dut.g_bb[b].u_bb.g_mp[m].u_mp.rsp_valid &&
            dut.g_bb[b].u_bb.g_mp[m].u_mp.rsp.tag != dut.g_bb[b].u_bb.g_mp[m].u_mp.head[TAG_W-1:0])
          n_ooo++;
        if (dut.g_bb[b].u_bb.g_mp[m].u_mp.cur_valid && !dut.g_bb[b].u_bb.g_mp[m].u_mp.rob_free)
          n_rob_full++;
      end
    end
  end

  // ---- sequencing ---------------------------------------------------------
  task automatic drain();
    int n;
    if (mode != 3) mode = 0;
    n = 0;
    forever begin
      int busy;
      @(posedge clk);
      busy = 0;
      for (int m = 0; m < NM; m++) busy += expq[m].size() + int'(cmd_valid[m]);
      if (busy == 0) break;
      if (++n > 20000) begin
        failures++; $display("FAIL: traffic did not drain"); break;
      end
    end
    repeat (2) @(posedge clk);
  endtask

  task automatic run_pattern(int len, int wr, int cycles);
    mode = 2; pat_len = len; pat_wr = wr;
    repeat (100) @(posedge clk);          // warm up
    beats_issued = 0; beats_done = 0; lat_sum = 0; measuring = 1;
    repeat (cycles) @(posedge clk);
    measuring = 0;
    $display("pattern %-6s %-5s throughput %5.1f %%  avg latency %5.1f cycles",
             len == 0 ? "mixed" : $sformatf("B%0d", len), wr ? "write" : "read",
             100.0 * real'(beats_issued) / real'(NM * cycles),
             beats_done == 0 ? 0.0 : real'(lat_sum) / real'(beats_done));
    checks++;
    if (real'(beats_issued) / real'(NM * cycles) < 0.60) begin
      failures++; $display("FAIL: throughput below 60 %%");
    end
    if (len == 0 && beats_done != 0 && real'(lat_sum) / real'(beats_done) >= 60.0) begin
      failures++; $display("FAIL: mixed-traffic latency at full load not under 60 cycles");
    end
    drain();
  endtask

  localparam int UNLOADED_LAT = 10;  // see below

  initial begin
    mode = 0; measuring = 0; rate_pct = 50;
    wvalid = '0; wdata = '0; mrsp_ready = '1;
    beats_issued = 0; beats_done = 0; lat_sum = 0;
    n_burst_split = 0; n_speedup = 0; n_bp_stall = 0; n_bank_conflict = 0; n_ooo = 0; n_rob_full = 0;
    for (int m = 0; m < NM; m++) begin gap[m] = 0; seq[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. random traffic, checked
    mode = 1; rate_pct = 40;
    repeat (1500) @(posedge clk);
    // masters 0..3 stop taking responses for a while: their reorder
    // buffers fill up and their ports must stall
    mrsp_ready[3:0] = '0;
    repeat (300) @(posedge clk);
    mrsp_ready[3:0] = '1;
    rate_pct = 100;
    repeat (1500) @(posedge clk);
    drain();

    // 2. patterns at full load
    for (int wr = 0; wr < 2; wr++)
      for (int p = 0; p < 6; p++)
        run_pattern(p == 5 ? 0 : (1 << p), wr, 600);

    // 3. unloaded read latency. One clock edge per stage from the edge
    // that accepts the command: RSWH0, RSWH1, RSWH2, RSWH3 buffers (4),
    // bank read (1), RSWH3, RSWH2, RSWH1, RSWH0 response buffers (4),
    // reorder buffer write (1): the master takes the data 10 edges later.
    begin
      shot_done = 0;
      last_lat = -1;
      mode = 3;
      repeat (3) @(posedge clk);
      drain();
      mode = 0;
      checks++;
      if (last_lat != UNLOADED_LAT) begin
        failures++; $display("FAIL: unloaded read latency %0d, expected %0d", last_lat, UNLOADED_LAT);
      end else $display("unloaded read latency %0d cycles", last_lat);
    end

    $display("mechanisms: burst_split=%0d speedup_beats=%0d backpressure=%0d bank_conflict=%0d out_of_order=%0d rob_full=%0d",
             n_burst_split, n_speedup, n_bp_stall, n_bank_conflict, n_ooo, n_rob_full);
    checks += 6;
    if (n_burst_split == 0)   begin failures++; $display("FAIL: no burst was split"); end
    if (n_speedup == 0)       begin failures++; $display("FAIL: no speed-up traffic"); end
    if (n_bp_stall == 0)      begin failures++; $display("FAIL: no back-pressure"); end
    if (n_bank_conflict == 0) begin failures++; $display("FAIL: no bank conflict"); end
    if (n_ooo == 0)           begin failures++; $display("FAIL: no out-of-order return"); end
    if (n_rob_full == 0)      begin failures++; $display("FAIL: reorder buffer never full"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
