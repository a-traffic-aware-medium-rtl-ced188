// tb_sleep_wake_unit: loads random (initial_sleep, wake, post_wake) triples,
// including all-zero ones and ones with single zero fields, and checks cycle
// by cycle against the flit-window schedule worked out in the testbench:
// after the load, flit k occupies cycles 5(k-1)+1 .. 5k; the receiver must be
// on exactly during the windows of the wake flits and after the slot, off
// otherwise; slot_tick must fire at the end of every window and slot_end
// exactly once, in the last window's final cycle (in the load cycle for an
// empty slot).
module tb_sleep_wake_unit;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic load, rx_on, slot_tick, slot_end;
  logic [SLOT_W-1:0] init_sleep, wake, post_wake, c_i, c_w, c_p;
  sleep_wake_unit dut (.clk, .rst_n, .load, .init_sleep, .wake, .post_wake, .rx_on, .slot_tick,
    .slot_end, .initial_sleep_counter(c_i), .wake_counter(c_w), .post_wake_counter(c_p));

  int checks = 0, failures = 0;
  int n_sleep_cycles = 0;

  initial begin
    load = 0; init_sleep = 0; wake = 0; post_wake = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < 200; s++) begin
      int a, b, p, total;
      a = (s % 4 == 1) ? 0 : $urandom % 12;
      b = (s % 4 == 2) ? 0 : $urandom % 12;
      p = (s % 4 == 3) ? 0 : $urandom % 12;
      if (s % 10 == 0) begin a = 0; b = 0; p = 0; end
      total = a + b + p;
      init_sleep = SLOT_W'(a); wake = SLOT_W'(b); post_wake = SLOT_W'(p);
      load = 1;
      for (int c = 0; c <= 5 * total + 3; c++) begin
        int k;
        bit exp_on, exp_end, exp_tick;
        k = (c + 4) / 5;                       // window index, 0 in the load cycle
        exp_on  = (c == 0) || (k > total) || (k > a && k <= a + b);
        exp_end = (c == 5 * total);
        exp_tick = (c > 0) && (c % 5 == 0) && (k <= total);
        #0;
        checks++;
        if (rx_on != exp_on || slot_end != exp_end || slot_tick != exp_tick) begin
          failures++;
          $display("FAIL slot %0d (%0d,%0d,%0d) cycle %0d: rx_on %0b/%0b end %0b/%0b tick %0b/%0b",
                   s, a, b, p, c, rx_on, exp_on, slot_end, exp_end, slot_tick, exp_tick);
        end
        if (!rx_on) n_sleep_cycles++;
        @(negedge clk);
        load = 0;
      end
    end
    checks++;
    if (n_sleep_cycles == 0) begin failures++; $display("FAIL never slept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
