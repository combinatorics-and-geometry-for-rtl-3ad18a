// tb_dsmc_master_port: self-checking test of a master access port.
//
// The test plays both the master (random read/write bursts of 1..16 beats
// with their write data) and the network (it takes beats under random
// back-pressure, keeps them, and answers them in random order, read data
// being a fixed function of the address). Checked:
//   * the beats of a burst carry consecutive word addresses from the
//     command's, its kind, the master's id, the write data in order, and
//     tags that count up modulo the reorder-buffer depth;
//   * responses reach the master in issue order with the right data, even
//     though the network answers out of order;
//   * with no back-pressure, back-to-back 4-beat bursts send one beat every
//     cycle (no gap between bursts);
//   * with no responses, the port stops after exactly ROB_DEPTH beats.
module tb_dsmc_master_port;
  import dsmc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [MID_W-1:0] MID = 5'd19;

  logic [MID_W-1:0] mid;
  logic cmd_valid, cmd_ready, wvalid, wready, mrsp_valid, mrsp_ready;
  logic beat_valid, beat_ready, rsp_valid, rsp_ready;
  cmd_t cmd;
  logic [DATA_W-1:0] wdata;
  mrsp_t mrsp;
  beat_t beat;
  rsp_t  rsp;

  assign mid = MID;
  dsmc_master_port dut (.*);

  int checks = 0, failures = 0;
  int mode = 0;      // 0 random, 1 full rate B4, 2 no responses, 3 idle
  int fired = 0;
  int tagn = 0;

  function automatic logic [DATA_W-1:0] fmem(logic [ADDR_W-1:0] a);
    return {13'd0, a, 13'h1abc, a};
  endfunction

  typedef struct { logic wr; logic [ADDR_W-1:0] a; } ex_t;
  ex_t   beatq[$];                 // beats expected to leave the port
  ex_t   rspq[$];                  // responses expected by the master
  logic [DATA_W-1:0] wq[$];        // write data offered
  logic [DATA_W-1:0] wexp[$];      // write data expected on beats
  beat_t pool[$];                  // beats inside the "network"
  int    wseq = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      cmd_valid <= 0; beat_ready <= 0; rsp_valid <= 0; mrsp_ready <= 0;
    end else begin
      // commands taken (their first beat leaves in the same cycle)
      if (cmd_valid && cmd_ready)
        for (int k = 0; k <= int'(cmd.len); k++) begin
          ex_t e;
          e.wr = cmd.wr;
          e.a  = cmd.addr + ADDR_W'(k);
          beatq.push_back(e);
          rspq.push_back(e);
        end
      // beats leaving the port
      if (beat_valid && beat_ready) begin
        ex_t e;
        fired++;
        checks++;
        e = beatq.pop_front();
        if (beat.addr != e.a || beat.wr != e.wr || beat.mid != MID || beat.tag != TAG_W'(tagn) ||
            (e.wr && beat.wdata != wexp.pop_front())) begin
          failures++; $display("FAIL: beat addr %h (exp %h) wr %b tag %0d", beat.addr, e.a, beat.wr, beat.tag);
        end
        tagn++;
        pool.push_back(beat);
      end
      if (wvalid && wready) void'(wq.pop_front());
      // responses into the port
      if (mode != 2 && pool.size() != 0 && (mode == 1 || $urandom_range(0, 2) != 0)) begin
        int k;
        beat_t b;
        k = (mode == 1) ? 0 : $urandom_range(0, pool.size() - 1);
        b = pool[k];
        pool.delete(k);
        rsp_valid <= 1'b1;
        rsp <= '{mid: b.mid, tag: b.tag, wr: b.wr, rdata: b.wr ? '0 : fmem(b.addr)};
      end else rsp_valid <= 1'b0;
      // responses to the master
      if (mrsp_valid && mrsp_ready) begin
        ex_t e;
        checks++;
        e = rspq.pop_front();
        if (mrsp.wr != e.wr || (!e.wr && mrsp.rdata != fmem(e.a))) begin
          failures++; $display("FAIL: response for %h", e.a);
        end
      end
      // commands
      if (!cmd_valid || cmd_ready) begin
        if (mode == 3 || (mode == 0 && $urandom_range(0, 3) == 0)) cmd_valid <= 1'b0;
        else begin
          cmd_t c;
          c.wr   = (mode == 0) ? 1'($urandom) : 1'b0;
          c.len  = (mode == 0) ? LEN_W'($urandom) : LEN_W'(3);
          c.addr = ADDR_W'($urandom);
          if (c.wr)
            for (int k = 0; k <= int'(c.len); k++) begin
              wq.push_back({32'hD000_0000 + 32'(wseq), 32'(wseq)});
              wexp.push_back({32'hD000_0000 + 32'(wseq), 32'(wseq)});
              wseq++;
            end
          cmd <= c;
          cmd_valid <= 1'b1;
        end
      end
      beat_ready <= (mode == 0) ? 1'($urandom_range(0, 3) != 0) : 1'b1;
      mrsp_ready <= (mode == 0) ? 1'($urandom_range(0, 3) != 0) : 1'b1;
    end
  end

  always @(posedge clk) begin
    #1;
    wvalid = (wq.size() != 0);
    wdata  = wvalid ? wq[0] : '0;
  end

  initial begin
    wvalid = 0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4000) @(posedge clk);
    // full rate
    mode = 3;
    repeat (200) @(posedge clk);
    mode = 1;
    repeat (20) @(posedge clk);
    fired = 0;
    repeat (400) @(posedge clk);
    checks++;
    if (fired != 400) begin failures++; $display("FAIL: %0d beats in 400 cycles at full rate", fired); end
    // no responses: the reorder buffer fills
    mode = 3;
    repeat (200) @(posedge clk);
    mode = 2;
    fired = 0;
    repeat (300) @(posedge clk);
    checks++;
    if (fired != ROB_DEPTH) begin failures++; $display("FAIL: %0d beats without responses, expected %0d", fired, ROB_DEPTH); end
    mode = 3;
    repeat (300) @(posedge clk);
    checks++;
    if (rspq.size() != 0 || beatq.size() != 0) begin failures++; $display("FAIL: %0d responses missing", rspq.size()); end
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
