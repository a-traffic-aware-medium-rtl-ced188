// tb_ook_transceiver: random beats with random transmitter and receiver
// sleep controls. The antenna must carry the beat one cycle after it is
// offered, and only if the transmitter was on; the receiver must pass the
// medium through in the same cycle only while on. The beat counters must
// match the counts kept by the testbench.
module tb_ook_transceiver;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic tx_on, rx_on, tx_beat_valid, ant_tx_valid, ant_rx_valid, rx_beat_valid;
  logic [7:0] tx_beat, ant_tx_beat, ant_rx_beat, rx_beat;
  logic [31:0] beats_sent, beats_heard;
  ook_transceiver dut (.*);

  int checks = 0, failures = 0, n_sent = 0, n_heard = 0;
  logic exp_v; logic [7:0] exp_b;

  initial begin
    tx_on = 0; rx_on = 0; tx_beat_valid = 0; tx_beat = 0; ant_rx_valid = 0; ant_rx_beat = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 2000; i++) begin
      tx_on = $urandom % 2; rx_on = $urandom % 2; tx_beat_valid = $urandom % 2; tx_beat = $urandom;
      ant_rx_valid = $urandom % 2; ant_rx_beat = $urandom;
      #0;
      checks++;
      if (rx_beat_valid != (rx_on && ant_rx_valid) || (rx_on && rx_beat != ant_rx_beat)) begin
        failures++; $display("FAIL receive path");
      end
      exp_v = tx_on && tx_beat_valid; exp_b = tx_beat;
      if (exp_v) n_sent++;
      if (rx_on && ant_rx_valid) n_heard++;
      @(negedge clk);
      checks++;
      if (ant_tx_valid != exp_v || (exp_v && ant_tx_beat != exp_b)) begin
        failures++; $display("FAIL transmit path");
      end
    end
    checks++;
    if (beats_sent != n_sent || beats_heard != n_heard) begin failures++; $display("FAIL counters"); end
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
