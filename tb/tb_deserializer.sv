// tb_deserializer: sends random flits as four 8-bit beats, most significant
// first, with the idle framing cycle after each, and now and then a cut-off
// flit of one to three beats (as when a receiver sleeps into a flit). Every
// whole flit must appear on out_flit exactly one cycle after its last beat;
// cut-off flits must produce nothing.
module tb_deserializer;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic beat_valid, out_valid;
  logic [7:0] beat;
  logic [31:0] out_flit;
  deserializer dut (.*);

  int checks = 0, failures = 0, got = 0, sent = 0, cut = 0;
  logic [31:0] exp_q[$];
  int exp_t[$];
  int cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      got++;
      checks++;
      if (exp_q.size() == 0 || out_flit != exp_q[0] || cyc != exp_t[0]) begin
        failures++;
        $display("FAIL flit %h at %0d, expected %h at %0d", out_flit, cyc,
                 exp_q.size() ? exp_q[0] : 0, exp_t.size() ? exp_t[0] : 0);
      end
      if (exp_q.size()) begin void'(exp_q.pop_front()); void'(exp_t.pop_front()); end
    end
  end

  initial begin
    beat_valid = 0; beat = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      logic [31:0] f;
      int nbeats;
      f = $urandom;
      nbeats = ($urandom % 6 == 0) ? 1 + $urandom % 3 : 4;
      for (int b = 0; b < nbeats; b++) begin
        beat_valid = 1; beat = f[31 - 8*b -: 8];
        @(negedge clk);
      end
      if (nbeats == 4) begin
        exp_q.push_back(f); exp_t.push_back(cyc + 1); sent++;
      end else cut++;
      beat_valid = 0; beat = 0;
      repeat (1 + ($urandom % 2) * ($urandom % 4)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent || cut == 0) begin failures++; $display("FAIL got %0d of %0d", got, sent); end
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
