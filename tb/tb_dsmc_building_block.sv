// tb_dsmc_building_block: self-checking test of one building block
// (16 master ports, 16 banks) on its own.
//
// The block's speed-up links are looped back to itself: beats it sends to
// "the sister block" come back into its own level-2 switches on lane 1, and
// their responses return over the speed-up response links. In this set-up a
// word and its neighbour with the other block bit share a bank location, so
// the test runs two phases that never mix them: first single-beat reads and
// writes to even word addresses only (all local, lane 0), then to odd
// addresses only (all over the speed-up links, lane 1). Each master owns a
// 32K-word slice of the address space; a reference model checks every
// response in order. Both lanes, all banks and all switches are used; the
// test also checks that speed-up traffic, back-pressure and out-of-order
// returns happened, and that the block served at least 30 % of the
// offered full-load traffic in each phase.
module tb_dsmc_building_block;
  import dsmc_pkg::*;

  localparam int NM = BB_MASTERS;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NM-1:0]             cmd_valid, cmd_ready, wvalid, wready, mrsp_valid, mrsp_ready;
  cmd_t  [NM-1:0]             cmd;
  logic  [NM-1:0][DATA_W-1:0] wdata;
  mrsp_t [NM-1:0]             mrsp;

  logic  [2*N_SW-1:0] suq_v, suq_r, sup_v, sup_r;
  req_t  [2*N_SW-1:0] suq_d;
  rsp_t  [2*N_SW-1:0] sup_d;

  dsmc_building_block dut (
    .clk, .rst_n, .bb_id(1'b0),
    .cmd_valid, .cmd_ready, .cmd, .wvalid, .wready, .wdata,
    .mrsp_valid, .mrsp_ready, .mrsp,
    .suq_out_valid(suq_v), .suq_out_ready(suq_r), .suq_out(suq_d),
    .suq_in_valid (suq_v), .suq_in_ready (suq_r), .suq_in (suq_d),
    .sup_out_valid(sup_v), .sup_out_ready(sup_r), .sup_out(sup_d),
    .sup_in_valid (sup_v), .sup_in_ready (sup_r), .sup_in (sup_d)
  );
  int parity;   // 0: even addresses only, 1: odd addresses only

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- traffic control ---------------------------------------------------
  int  mode;        // 0 idle, 1 random single beats
  int  rate_pct;    // offered load in mode 1
  bit  measuring;

  // ---- reference model and per-master state ------------------------------
  logic [DATA_W-1:0] model [logic [ADDR_W-1:0]];

  typedef struct { logic [ADDR_W-1:0] a; logic [DATA_W-1:0] d; } wbeat_t;
  typedef struct { bit wr; bit known; logic [DATA_W-1:0] d; longint t; } exp_t;

  wbeat_t wq   [NM][$];
  exp_t   expq [NM][$];
  int     gap  [NM];
  int     seq  [NM];

  longint beats_issued, beats_done, lat_sum;
  int     n_burst_split = 0, n_speedup = 0, n_bp_stall = 0, n_bank_conflict = 0, n_ooo = 0, n_rob_full = 0;

  function automatic logic [DATA_W-1:0] mkdata(int m, int s);
    return {32'(m) ^ 32'hA5A5_0000, 32'(s) * 32'h9E37_79B9};
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
            if (measuring) begin
              beats_done++;
              lat_sum += cycle - e.t;
            end
          end
        end
        // next command
        if (!cmd_valid[m] || cmd_ready[m]) begin
          if (gap[m] > 0) gap[m]--;
          if (mode == 1 && gap[m] == 0) begin
            cmd_t c;
            int   len;
            logic [14:0] off15;
            len   = 1;
            off15 = 15'($urandom);
            off15[0] = 1'(parity);
            c.wr  = 1'($urandom_range(0, 1));
            c.addr = {4'(m), off15};
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
  always @(posedge clk) if (rst_n) begin
    n_speedup  += $countones(suq_v & suq_r);
    n_bp_stall += $countones(dut.b_v & ~dut.b_r);
  end
  for (genvar m = 0; m < BB_MASTERS; m++) begin : g_m
    always @(posedge clk) if (rst_n)
      if (dut.g_mp[m].u_mp.rsp_valid && dut.g_mp[m].u_mp.rsp.tag != dut.g_mp[m].u_mp.head[TAG_W-1:0])
        n_ooo++;
  end

  // ---- sequencing ---------------------------------------------------------
  task automatic drain();
    int n;
    mode = 0;
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


  initial begin
    mode = 0; measuring = 0; rate_pct = 50; parity = 0;
    wvalid = '0; wdata = '0; mrsp_ready = '1;
    for (int m = 0; m < NM; m++) begin gap[m] = 0; seq[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ph = 0; ph < 2; ph++) begin
      parity = ph;
      mode = 1; rate_pct = 50;
      repeat (800) @(posedge clk);
      rate_pct = 100;
      repeat (100) @(posedge clk);
      beats_issued = 0;
      repeat (800) @(posedge clk);
      checks++;
      $display("phase %0d: %0d beats in 800 cycles", ph, beats_issued);
      if (beats_issued < longint'(0.30 * NM * 800)) begin
        failures++; $display("FAIL: phase %0d throughput too low", ph);
      end
      drain();
    end
    $display("mechanisms: speedup_beats=%0d backpressure=%0d out_of_order=%0d",
             n_speedup, n_bp_stall, n_ooo);
    checks += 3;
    if (n_speedup == 0)       begin failures++; $display("FAIL: no speed-up traffic"); end
    if (n_bp_stall == 0)      begin failures++; $display("FAIL: no back-pressure"); end
    if (n_ooo == 0)           begin failures++; $display("FAIL: no out-of-order return"); end
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
