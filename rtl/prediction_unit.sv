// prediction_unit: PID prediction of the WI's traffic demand (Prediction
// Unit of the MAC). The demand of an epoch is the number of flits routed to
// the WI's wireless port during it.
//
// Demand_counter counts flits entering the output buffers (flit_in). At
// each epoch end the predictor evaluates
//     D_pred = Kp*D_act + Ki*D_avg + Kd*(D_act - D_prev)
// with D_act = Demand_counter, D_avg = Demand_avg and D_prev = Demand_prev,
// stores it in Demand_self, then sets Demand_avg to the mean of
// Demand_counter and Demand_avg and Demand_prev to Demand_counter, and clears
// Demand_counter (a flit arriving in the epoch-end cycle counts for the new
// epoch). The weights 0.66, 0.13 and 0.2041 are the paper's; here they are
// Q8 constants (169, 33, 52) and the sum is rounded to the nearest integer,
// clamped to 0 .. 2^DEMAND_W-1. If the prediction is 0 while the output
// buffers hold flits, Demand_self is set to 1, so that a WI with flits to
// send always gets a non-zero slot (the paper's no-starvation rule).
//
// Epoch_counter is loaded with the length of the next epoch (epoch_len, in
// flit slots, from the allocation unit) at each epoch end and counts down,
// saturating at 0, once per data-flit time on the channel (slot_tick). What
// is left of it at the epoch end is the number of slots of that epoch that
// carried no flit. In this design the epoch ends when the slot of the last
// WI of the ring ends (epoch_end from the receive controller); the paper
// triggers the prediction "when the Epoch_counter expires", and both points
// coincide when every WI fills its slot.
//
// Timing: all registers update on the clock edge at which epoch_end is high;
// Demand_self is valid from the next cycle.
module prediction_unit
  import winoc_pkg::*;
#(
  parameter int DW      = DEMAND_W,
  parameter int EW      = EPOCH_W,
  parameter int KP      = KP_Q8,
  parameter int KI      = KI_Q8,
  parameter int KD      = KD_Q8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flit_in,        // a flit is routed to the wireless port
  input  logic          has_flits,      // output buffers are not empty
  input  logic          epoch_end,      // one-cycle pulse
  input  logic [EW-1:0] epoch_len,      // length of the next epoch in flit slots
  input  logic          slot_tick,      // one data-flit time passed on the channel
  output logic [DW-1:0] demand_self,
  output logic [DW-1:0] demand_counter,
  output logic [DW-1:0] demand_avg,
  output logic [DW-1:0] demand_prev,
  output logic [EW-1:0] epoch_counter
);

  localparam logic [DW-1:0] DMAX = '1;

  // Signed PID sum in Q8
  logic signed [DW+10:0] pid_q8;
  logic signed [DW+10:0] pid_round;
  logic [DW-1:0]         pred;

  always_comb begin
    pid_q8 = (DW+11)'(KP) * $signed({11'b0, demand_counter})
           + (DW+11)'(KI) * $signed({11'b0, demand_avg})
           + (DW+11)'(KD) * ($signed({11'b0, demand_counter}) - $signed({11'b0, demand_prev}));
    pid_round = (pid_q8 + (DW+11)'(128)) >>> 8;
    if (pid_round < 0)
      pred = '0;
    else if (pid_round > $signed({11'b0, DMAX}))
      pred = DMAX;
    else
      pred = pid_round[DW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      demand_counter <= '0;
      demand_avg     <= '0;
      demand_prev    <= '0;
      demand_self    <= '0;
      epoch_counter  <= '0;
    end else if (epoch_end) begin
      demand_self    <= (pred == '0 && has_flits) ? DW'(1) : pred;
      demand_avg     <= DW'(({1'b0, demand_counter} + {1'b0, demand_avg}) >> 1);
      demand_prev    <= demand_counter;
      demand_counter <= flit_in ? DW'(1) : '0;
      epoch_counter  <= epoch_len;
    end else begin
      if (flit_in && demand_counter != DMAX) demand_counter <= demand_counter + 1'b1;
      if (slot_tick && epoch_counter != '0) epoch_counter <= epoch_counter - 1'b1;
    end
  end

endmodule
