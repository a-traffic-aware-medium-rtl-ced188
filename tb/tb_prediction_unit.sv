// tb_prediction_unit: drives random per-epoch flit counts into the
// prediction unit and checks Demand_self after each epoch against Eq. (1)
// evaluated in real arithmetic with the weights 0.66, 0.13 and 0.2041
// (tolerance: one flit, for the Q8 weights and rounding), with the clamp at 0
// and the floor of 1 when flits are waiting. Demand_avg and Demand_prev are
// checked exactly against their update rules, and Epoch_counter against the
// loaded epoch length minus the slot ticks given.
module tb_prediction_unit;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic flit_in, has_flits, epoch_end, slot_tick;
  logic [EPOCH_W-1:0] epoch_len, epoch_counter;
  logic [DEMAND_W-1:0] demand_self, demand_counter, demand_avg, demand_prev;
  prediction_unit dut (.*);

  int checks = 0, failures = 0;
  int act, prev_act = 0, avg = 0, ticks, len_loaded = 0;

  initial begin
    flit_in = 0; has_flits = 0; epoch_end = 0; slot_tick = 0; epoch_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 300; e++) begin
      int mode;
      mode = $urandom % 4;
      act = (mode == 0) ? 0 : (mode == 1) ? $urandom % 20 : (mode == 2) ? $urandom % 400 : 200 + $urandom % 50;
      if (e % 50 == 49) act = 0;   // drop to zero: derivative term goes negative
      ticks = $urandom % 300;
      // give act flits and ticks over the epoch
      for (int c = 0; c < (act > ticks ? act : ticks); c++) begin
        flit_in = (c < act); slot_tick = (c < ticks);
        @(negedge clk);
      end
      flit_in = 0; slot_tick = 0;
      checks++;
      if (demand_counter != act || epoch_counter != ((ticks > len_loaded) ? 0 : len_loaded - ticks)) begin
        failures++;
        $display("FAIL counters %0d/%0d epoch %0d", demand_counter, act, epoch_counter);
      end
      has_flits = $urandom % 2;
      epoch_len = EPOCH_W'($urandom % 2000);
      epoch_end = 1;
      @(negedge clk);
      epoch_end = 0;
      begin
        real p; int lo, hi;
        p = 0.66 * act + 0.13 * avg + 0.2041 * (act - prev_act);
        if (p < 0) p = 0;
        lo = int'($floor(p)) - 1; hi = int'($ceil(p)) + 1;
        if (lo < 0) lo = 0;
        if (has_flits && hi < 1) hi = 1;
        if (has_flits && lo < 1) lo = 1;
        if (p > 1023) begin lo = 1023; hi = 1023; end
        checks++;
        if (demand_self < lo || demand_self > hi) begin
          failures++;
          $display("FAIL epoch %0d act %0d avg %0d prev %0d: pred %0d expected %f", e, act, avg, prev_act, demand_self, p);
        end
        if (!has_flits && p < 0.4) begin
          checks++;
          if (demand_self != 0) begin failures++; $display("FAIL expected zero demand"); end
        end
      end
      avg = (act + avg) / 2;
      prev_act = act;
      len_loaded = int'(epoch_len);
      checks++;
      if (demand_avg != avg || demand_prev != prev_act || demand_counter != 0 || epoch_counter != epoch_len) begin
        failures++;
        $display("FAIL registers avg %0d/%0d prev %0d/%0d", demand_avg, avg, demand_prev, prev_act);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
