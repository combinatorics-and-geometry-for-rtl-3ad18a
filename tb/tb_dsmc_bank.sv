// tb_dsmc_bank: self-checking test of one memory bank with its two lanes.
//
// Both lanes offer random reads and writes to a small bank (ROWS = 64). A
// reference array predicts every read. Checked: the response comes back on
// the lane of its request, one cycle after acceptance, with the request's
// master id, tag and kind and the right data; never more than one request
// accepted per cycle; with both lanes busy and the response side always
// ready, the bank serves one request per cycle and the lanes alternate.
module tb_dsmc_bank;
  import dsmc_pkg::*;
  localparam int ROWS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  req_t [1:0] req;
  rsp_t [1:0] rsp;

  dsmc_bank #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] ref_mem [ROWS];
  bit                known   [ROWS];

  typedef struct { bit v; int lane; req_t r; bit known; logic [DATA_W-1:0] d; } pend_t;
  pend_t pend;
  int    served [2];
  int    cyc, taken, phase;

  function automatic req_t rnd_req(int l);
    req_t r;
    r.mid   = MID_W'($urandom);
    r.tag   = TAG_W'($urandom);
    r.wr    = 1'($urandom_range(0, 1));
    r.bb    = 1'(l);
    r.bank  = '0;
    r.row   = ROW_W'($urandom_range(0, ROWS - 1));
    r.wdata = {$urandom, $urandom};
    return r;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      req_valid <= '0; rsp_ready <= '1; pend.v = 0;
    end else begin
      cyc++;
      // response check for the request accepted one cycle ago
      if (pend.v) begin
        checks++;
        if (rsp_valid != (2'b01 << pend.lane)) begin
          failures++; $display("FAIL: response valid %b, expected lane %0d", rsp_valid, pend.lane);
        end else if (rsp[pend.lane].mid != pend.r.mid || rsp[pend.lane].tag != pend.r.tag ||
                     rsp[pend.lane].wr != pend.r.wr ||
                     (pend.known && rsp[pend.lane].rdata != pend.d)) begin
          failures++; $display("FAIL: response content");
        end
        if (rsp_ready[pend.lane]) pend.v = 0;
      end else if (rsp_valid != 0) begin
        failures++; $display("FAIL: response without request");
      end
      // acceptance
      checks++;
      if (req_ready == 2'b11) begin failures++; $display("FAIL: two accepted"); end
      for (int l = 0; l < 2; l++)
        if (req_valid[l] && req_ready[l]) begin
          if (pend.v) begin failures++; $display("FAIL: accepted while response held"); end
          pend.v = 1; pend.lane = l; pend.r = req[l];
          pend.known = !req[l].wr && known[req[l].row];
          pend.d = ref_mem[req[l].row];
          if (req[l].wr) begin ref_mem[req[l].row] = req[l].wdata; known[req[l].row] = 1; end
          served[l]++; taken++;
        end
      // drive
      for (int l = 0; l < 2; l++)
        if (!req_valid[l] || req_ready[l]) begin
          req[l] <= rnd_req(l);
          req_valid[l] <= (phase == 1) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
        end
      rsp_ready <= (phase == 1) ? 2'b11 : 2'($urandom_range(0, 3) | (cyc % 4 == 0 ? 3 : 0));
    end
  end

  initial begin
    cyc = 0; taken = 0; phase = 0; served = '{0, 0};
    for (int i = 0; i < ROWS; i++) known[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    // full load: one request per cycle, shared evenly
    phase = 1;
    repeat (10) @(posedge clk);
    taken = 0; served = '{0, 0};
    repeat (1000) @(posedge clk);
    checks++;
    if (taken < 998 || served[0] < 495 || served[1] < 495) begin
      failures++; $display("FAIL: full-load rate %0d (lane0 %0d lane1 %0d) in 1000 cycles", taken, served[0], served[1]);
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
