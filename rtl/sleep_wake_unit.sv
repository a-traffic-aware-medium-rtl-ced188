// sleep_wake_unit: receiver power gating for one transmission slot.
//
// When the slot information packet of a slot has been received (load), the
// three counters are set from its tuples, in flits:
//   initial_sleep_counter  flits sent to other WIs before the first flit for
//                          this WI,
//   wake_counter           flits from the first to the last flit for this WI,
//   post_wake_counter      flits sent to other WIs after that.
// From the cycle after load the unit divides time into flit windows of
// FT cycles (FT-1 beat cycles then the idle cycle in which the deserializer
// delivers the flit), and at the end of each window (slot_tick) decrements
// the first non-zero counter. The receiver is off (rx_on = 0) while
// initial_sleep_counter or post_wake_counter runs and on while wake_counter
// runs. When the last counter expires, slot_end pulses and the receiver is
// turned on to hear the next slot information packet. A slot with no data
// flits ends in the load cycle itself. Outside a slot the receiver stays on.
//
// The counters, their meaning and the order initial_sleep -> wake ->
// post_wake are the paper's; the flit-window timing and the handling of a
// slot with no data flits are choices of this design.
module sleep_wake_unit
  import winoc_pkg::*;
#(
  parameter int CW = SLOT_W,
  parameter int FT = FLIT_TIME
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [CW-1:0] init_sleep,
  input  logic [CW-1:0] wake,
  input  logic [CW-1:0] post_wake,
  output logic          rx_on,
  output logic          slot_tick,
  output logic          slot_end,
  output logic [CW-1:0] initial_sleep_counter,
  output logic [CW-1:0] wake_counter,
  output logic [CW-1:0] post_wake_counter
);

  localparam int PW = $clog2(FT);

  logic          active;
  logic [PW-1:0] phase;
  logic          last_flit;

  assign slot_tick = active && (phase == PW'(FT - 1));
  assign last_flit = (initial_sleep_counter + wake_counter + post_wake_counter) == CW'(1);
  assign slot_end  = (load && init_sleep == '0 && wake == '0 && post_wake == '0)
                   || (slot_tick && last_flit);
  assign rx_on     = !active || (initial_sleep_counter == '0 && wake_counter != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active                <= 1'b0;
      phase                 <= '0;
      initial_sleep_counter <= '0;
      wake_counter          <= '0;
      post_wake_counter     <= '0;
    end else if (load) begin
      active                <= (init_sleep != '0) || (wake != '0) || (post_wake != '0);
      phase                 <= '0;
      initial_sleep_counter <= init_sleep;
      wake_counter          <= wake;
      post_wake_counter     <= post_wake;
    end else if (active) begin
      phase <= (phase == PW'(FT - 1)) ? '0 : phase + 1'b1;
      if (slot_tick) begin
        if (initial_sleep_counter != '0)   initial_sleep_counter <= initial_sleep_counter - 1'b1;
        else if (wake_counter != '0)       wake_counter          <= wake_counter - 1'b1;
        else if (post_wake_counter != '0)  post_wake_counter     <= post_wake_counter - 1'b1;
        if (last_flit) active <= 1'b0;
      end
    end
  end

  a_end_once: assert property (@(posedge clk) disable iff (!rst_n)
    slot_end |-> ##1 !active || load);

endmodule
