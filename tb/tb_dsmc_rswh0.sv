// tb_dsmc_rswh0: self-checking test of the first-level switch.
//
// Both master inputs offer random beats (random addresses, reads and
// writes); the four request outputs and two response outputs see random
// back-pressure. For each beat that leaves, the test recomputes the address
// decoding on its own (block = address bit 0, bank = bits 4:1, row = bits
// 18:5) and checks the fields, the output (local 0/1 or speed-up 2/3 by
// block, then bank bit 1), and per-input order; responses from the four
// inputs must reach master port mid[0], in order. It runs once as block 0
// and once as block 1. Nothing may be lost.
module tb_dsmc_rswh0;
  import dsmc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        bb_id;
  logic [1:0]  beat_valid, beat_ready, rsp_valid, rsp_ready;
  beat_t [1:0] beat;
  logic [3:0]  req_valid, req_ready, rsp_in_valid, rsp_in_ready;
  req_t [3:0]  req;
  rsp_t [3:0]  rsp_in;
  rsp_t [1:0]  rsp;

  dsmc_rswh0 dut (.*);

  int checks = 0, failures = 0;
  bit run = 0;
  int seqn [6];
  int lastq [2][4], lastp [4][2];
  int sent, got;
  int n_remote = 0;
  always @(posedge clk) if (rst_n) n_remote += $countones(req_valid[3:2] & req_ready[3:2]);

  always @(posedge clk) begin
    if (!rst_n) begin
      beat_valid <= '0; rsp_in_valid <= '0; req_ready <= '0; rsp_ready <= '0;
      for (int i = 0; i < 6; i++) seqn[i] = 0;
      for (int i = 0; i < 2; i++) for (int o = 0; o < 4; o++) begin lastq[i][o] = -1; lastp[o][i] = -1; end
    end else begin
      for (int o = 0; o < 4; o++)
        if (req_valid[o] && req_ready[o]) begin
          int src, sq;
          logic [ADDR_W-1:0] a;
          src = int'(req[o].wdata[63:62]);
          sq  = int'(req[o].wdata[31:0]);
          a   = req[o].wdata[32 +: ADDR_W];
          checks++; got++;
          if (req[o].bb != a[0] || req[o].bank != a[4:1] || req[o].row != a[18:5] ||
              o != 2 * int'(a[0] != bb_id) + int'(a[2]) || sq <= lastq[src][o] ||
              req[o].mid != MID_W'(src) || req[o].tag != TAG_W'(sq)) begin
            failures++; $display("FAIL: request out %0d addr %h", o, a);
          end
          lastq[src][o] = sq;
        end
      for (int o = 0; o < 2; o++)
        if (rsp_valid[o] && rsp_ready[o]) begin
          int src, sq;
          src = int'(rsp[o].rdata[63:62]);
          sq  = int'(rsp[o].rdata[31:0]);
          checks++; got++;
          if (int'(rsp[o].mid[0]) != o || sq <= lastp[src][o]) begin
            failures++; $display("FAIL: response out %0d", o);
          end
          lastp[src][o] = sq;
        end
      for (int i = 0; i < 2; i++) begin
        if (beat_valid[i] && beat_ready[i]) sent++;
        if (!beat_valid[i] || beat_ready[i]) begin
          beat_t b;
          logic [ADDR_W-1:0] a;
          a = ADDR_W'($urandom);
          b.mid = MID_W'(i); b.tag = TAG_W'(seqn[i]); b.wr = 1'($urandom);
          b.addr = a;
          b.wdata = {2'(i), 11'd0, 19'(a), 32'(seqn[i])};
          seqn[i] = seqn[i] + 1;
          beat[i] <= b;
          beat_valid[i] <= run && ($urandom_range(0, 3) != 0);
        end
        rsp_ready[i] <= ($urandom_range(0, 3) != 0);
      end
      for (int i = 0; i < 4; i++) begin
        if (rsp_in_valid[i] && rsp_in_ready[i]) sent++;
        if (!rsp_in_valid[i] || rsp_in_ready[i]) begin
          rsp_t r;
          r.mid = MID_W'($urandom); r.tag = '0; r.wr = 1'($urandom);
          r.rdata = {2'(i), 30'd0, 32'(seqn[2+i])};
          seqn[2+i] = seqn[2+i] + 1;
          rsp_in[i] <= r;
          rsp_in_valid[i] <= run && ($urandom_range(0, 3) != 0);
        end
        req_ready[i] <= ($urandom_range(0, 3) != 0);
      end
    end
  end

  initial begin
    sent = 0; got = 0;
    for (int b = 0; b < 2; b++) begin
      bb_id = 1'(b);
      rst_n = 0;
      repeat (3) @(posedge clk);
      rst_n = 1;
      run = 1;
      repeat (2000) @(posedge clk);
      run = 0;
      repeat (50) @(posedge clk);
      checks++;
      $display("block %0d: %0d beats in, %0d out", b, sent, got);
      if (sent != got) begin failures++; $display("FAIL: sent %0d got %0d", sent, got); end
      sent = 0; got = 0;
    end
    checks++;
    $display("speed-up beats %0d", n_remote);
    if (n_remote == 0) begin failures++; $display("FAIL: no speed-up traffic"); end
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
