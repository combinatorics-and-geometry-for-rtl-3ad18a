// tb_dsmc_reg_slice: self-checking test of a two-stage register slice.
//
// Random valid on the input and random ready on the output; every word must
// come out once, in order. With the output always ready a word takes exactly
// STAGES cycles and one word passes per cycle.
module tb_dsmc_reg_slice;
  localparam int W = 16, STAGES = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;

  dsmc_reg_slice #(.W(W), .STAGES(STAGES)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0, phase = 0, nout = 0;
  logic [W-1:0] q[$];
  int           tin[$];
  logic [W-1:0] nxt = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 0; out_ready <= 0; in_data <= 0;
    end else begin
      cyc++;
      if (out_valid && out_ready) begin
        int t;
        checks++;
        t = tin.pop_front();
        if (q.size() == 0 || out_data != q.pop_front()) begin
          failures++; $display("FAIL: wrong word %h", out_data);
        end
        if (phase == 2) begin
          nout++;
          checks++;
          if (cyc - t != STAGES) begin failures++; $display("FAIL: latency %0d", cyc - t); end
        end
      end
      if (in_valid && in_ready) begin q.push_back(in_data); tin.push_back(cyc); end
      if (!in_valid || in_ready) begin
        in_valid <= (phase != 0) ? 1'b1 : 1'($urandom_range(0, 1));
        in_data  <= nxt;
        nxt = nxt + 1;
      end
      out_ready <= (phase != 0) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    phase = 1;
    repeat (10) @(posedge clk);
    nout = 0;
    phase = 2;
    repeat (500) @(posedge clk);
    checks++;
    if (nout < 499) begin failures++; $display("FAIL: %0d words in 500 cycles", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
