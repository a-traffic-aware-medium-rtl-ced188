// tb_serializer: offers random flits with random gaps and reassembles the
// beats in the testbench. Every accepted flit must come out as exactly four
// consecutive 8-bit beats, most significant first, starting the cycle after
// it was accepted, followed by an idle cycle; with flits offered back to back
// they must be accepted every 5 cycles (32 bits per 5 cycles = 16 Gb/s at
// 2.5 GHz).
module tb_serializer;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, beat_valid;
  logic [31:0] in_flit;
  logic [7:0] beat;
  serializer dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] q[$];
  logic [31:0] asm;
  int nb = 0, run = 0, last_accept = -100, cyc = 0, n_b2b = 0;
  bit prev_valid = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (beat_valid) begin
      asm = {asm[23:0], beat}; nb++; run++;
    end else begin
      if (run != 0) begin
        checks++;
        if (run != 4 || q.size() == 0 || asm != q[0]) begin
          failures++; $display("FAIL run %0d flit %h exp %h", run, asm, q.size() ? q[0] : 0);
        end
        if (q.size()) void'(q.pop_front());
      end
      run = 0;
    end
    if (in_valid && in_ready) begin
      if (prev_valid) begin
        checks++; n_b2b++;
        if (cyc - last_accept != FLIT_TIME) begin
          failures++; $display("FAIL back-to-back accepts %0d cycles apart", cyc - last_accept);
        end
      end
      q.push_back(in_flit);
      last_accept = cyc;
    end
    prev_valid = in_valid && !(in_valid && in_ready) ? 1'b1 : (in_valid && in_ready);
  end

  initial begin
    in_valid = 0; in_flit = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      in_valid = 1; in_flit = $urandom;
      @(posedge clk); #0;
      while (!(in_ready)) begin @(posedge clk); end
      @(negedge clk);
      if (i % 3 == 0) begin in_valid = 0; repeat ($urandom % 7) @(negedge clk); end
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_b2b == 0) begin failures++; $display("FAIL %0d flits not sent, %0d back-to-back", q.size(), n_b2b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
