// tb_dsmc_traffic: traffic generator and meter wrapped around one DSMC-32M32S
// instance, used by the workload test to run the evaluation traffic.
//
// All 32 masters send at once. Each master keeps to its own 16K-word slice
// of the memory (address bits 18:14 = master number) and picks uniformly
// random offsets inside it, so its beats land on both building blocks and
// all banks. Burst length is fixed (1, 2, 4, 8 or 16 beats) or "mixed":
// each burst picks 1, 2, 4, 8 or 16 beats with equal probability. The
// injection rate is the share of cycles in which a master offers a beat: a
// burst of L beats at rate R is offered no earlier than L*100/R cycles
// after the previous burst was accepted. Traffic is either all reads or all writes.
//
// Measured, per run: throughput = beats accepted per master per cycle, and
// average latency = cycles from the cycle a beat leaves the master's burst
// logic (command acceptance + beat number) to the cycle its response is
// taken at the master, in issue order. Every response is checked for its
// kind (read data or write acknowledge) and its order.
//
// Interface: the parent calls run() and latency_probe() through
// hierarchical task calls; results are returned from the tasks. The parent
// supplies the clock. L3_SLICE is passed to the design: the register slices
// in front of level-3 switches used in the timing-closure experiment.
module tb_dsmc_traffic
  import dsmc_pkg::*;
#(
  parameter logic [N_SW-1:0][1:0] L3_SLICE = '0
) (
  input logic clk
);
  localparam int NM = N_MASTERS;

  logic rst_n = 1'b0;

  logic  [NM-1:0]             cmd_valid, cmd_ready, wvalid, wready, mrsp_valid, mrsp_ready;
  cmd_t  [NM-1:0]             cmd;
  logic  [NM-1:0][DATA_W-1:0] wdata;
  mrsp_t [NM-1:0]             mrsp;

  dsmc_top #(.L3_SLICE(L3_SLICE)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int  mode = 0;      // 0 idle, 1 traffic, 2 single probe read
  int  rate_pct = 100;
  int  pat_len = 0;   // 0 = mixed
  int  pat_wr = 0;
  bit  measuring = 1'b0;
  bit  shot_done = 1'b0;
  logic [ADDR_W-1:0] shot_addr = '0;
  int  last_lat = 0;

  typedef struct { bit wr; longint t; } exp_t;

  exp_t   expq [NM][$];
  int     wcnt [NM];
  int     gap  [NM];
  int     wseq [NM];

  longint beats_issued = 0, beats_done = 0, lat_sum = 0;

  initial begin
    wvalid = '0; wdata = '0; mrsp_ready = '1;
    for (int m = 0; m < NM; m++) begin gap[m] = 0; wcnt[m] = 0; wseq[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++) begin
        if (cmd_valid[m] && cmd_ready[m]) begin
          for (int k = 0; k <= int'(cmd[m].len); k++) begin
            exp_t e;
            e.wr = cmd[m].wr;
            e.t  = cycle + k;
            expq[m].push_back(e);
          end
          if (measuring) beats_issued += longint'(cmd[m].len) + 1;
          // next burst no earlier than len*100/rate cycles after this one
          gap[m] = (rate_pct >= 100) ? 0 : (int'(cmd[m].len) + 1) * 100 / rate_pct;
        end
        if (wvalid[m] && wready[m]) begin
          wcnt[m]--;
          wseq[m]++;
        end
        if (mrsp_valid[m] && mrsp_ready[m]) begin
          if (expq[m].size() == 0) begin
            failures++; $display("FAIL m%0d: unexpected response", m);
          end else begin
            exp_t e;
            e = expq[m].pop_front();
            checks++;
            if (mrsp[m].wr != e.wr) begin
              failures++; $display("FAIL m%0d: response kind %0b, expected %0b", m, mrsp[m].wr, e.wr);
            end
            last_lat = int'(cycle - e.t);
            if (measuring) begin
              beats_done++;
              lat_sum += cycle - e.t;
            end
          end
        end
        if (!cmd_valid[m] || cmd_ready[m]) begin
          if (gap[m] > 0) gap[m]--;
          if (mode == 2 && m == 0 && !shot_done) begin
            cmd[m] <= '{wr: 1'b0, addr: shot_addr, len: '0};
            cmd_valid[m] <= 1'b1;
            shot_done = 1'b1;
          end else if (mode == 1 && gap[m] == 0) begin
            cmd_t        c;
            int          len;
            logic [13:0] off;
            len    = (pat_len != 0) ? pat_len : (1 << $urandom_range(0, 4));
            off    = 14'($urandom_range(0, 16383 - 16));
            c.wr   = 1'(pat_wr);
            c.addr = {5'(m), off};
            c.len  = LEN_W'(len - 1);
            cmd[m] <= c;
            cmd_valid[m] <= 1'b1;
            if (c.wr) wcnt[m] += len;
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

  // write data is always available when a write burst is pending; it
  // changes only after it has been taken
  always @(posedge clk) begin
    #1;
    for (int m = 0; m < NM; m++) begin
      wvalid[m] = (wcnt[m] != 0);
      wdata[m]  = {32'(m), 32'(wseq[m])};
    end
  end

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

  // One measured run; returns throughput in percent and average latency.
  task automatic run(input int len, input int wr, input int rate, input int cycles,
                     output real thr, output real lat);
    pat_len = len; pat_wr = wr; rate_pct = rate;
    mode = 1;
    repeat (100) @(posedge clk);          // warm up
    beats_issued = 0; beats_done = 0; lat_sum = 0; measuring = 1'b1;
    repeat (cycles) @(posedge clk);
    measuring = 1'b0;
    thr = 100.0 * real'(beats_issued) / real'(NM * cycles);
    lat = (beats_done == 0) ? 0.0 : real'(lat_sum) / real'(beats_done);
    drain();
  endtask

  // Isolated single reads from master 0 to n random words; returns the
  // smallest and largest latency seen.
  task automatic latency_probe(input int n, output int lmin, output int lmax);
    lmin = 1 << 30; lmax = 0;
    for (int i = 0; i < n; i++) begin
      shot_addr = ADDR_W'($urandom_range(0, (1 << ADDR_W) - 1));
      shot_done = 1'b0;
      mode = 2;
      repeat (3) @(posedge clk);
      drain();
      if (last_lat < lmin) lmin = last_lat;
      if (last_lat > lmax) lmax = last_lat;
    end
  endtask
endmodule
