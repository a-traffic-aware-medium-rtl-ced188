// ook_transceiver: behavioural model of the 60 GHz on-off-keying wireless
// transceiver of a WI (not synthesizable hardware: the real part is an
// analog/RF circuit with its antenna).
//
// It stands for a transmitter and a receiver with sleep transistors. The
// transmitter puts the serializer's beat on the antenna one cycle later, and
// only while tx_on is high; otherwise it radiates nothing (ant_tx_valid = 0).
// The receiver passes the beat heard on the shared medium to the
// deserializer in the same cycle while rx_on is high, and is silent while
// asleep. A WI hears its own transmission, as every receiver on a shared
// broadcast channel does. Bit errors are not modelled (the paper's
// transceiver has a bit-error rate below 1e-12). The model counts the beats
// sent and received so that a testbench can estimate transceiver energy at
// the paper's 2.06 pJ/bit.
//
// The data rate (one beat per cycle, framed by the serializer to 16 Gb/s)
// and the sleep control come from the paper; the one-cycle transmit latency
// and the counters are modelling choices.
module ook_transceiver
  import winoc_pkg::*;
#(
  parameter int BW = SER_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tx_on,
  input  logic          rx_on,
  input  logic          tx_beat_valid,
  input  logic [BW-1:0] tx_beat,
  output logic          ant_tx_valid,
  output logic [BW-1:0] ant_tx_beat,
  input  logic          ant_rx_valid,
  input  logic [BW-1:0] ant_rx_beat,
  output logic          rx_beat_valid,
  output logic [BW-1:0] rx_beat,
  output logic [31:0]   beats_sent,
  output logic [31:0]   beats_heard
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ant_tx_valid <= 1'b0;
      ant_tx_beat  <= '0;
      beats_sent   <= '0;
      beats_heard  <= '0;
    end else begin
      ant_tx_valid <= tx_on && tx_beat_valid;
      ant_tx_beat  <= (tx_on && tx_beat_valid) ? tx_beat : '0;
      if (tx_on && tx_beat_valid) beats_sent <= beats_sent + 1;
      if (rx_on && ant_rx_valid)  beats_heard <= beats_heard + 1;
    end
  end

  assign rx_beat_valid = rx_on && ant_rx_valid;
  assign rx_beat       = rx_on ? ant_rx_beat : '0;

endmodule
