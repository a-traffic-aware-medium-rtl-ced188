// allocation_unit: slot allocation of the MAC (Allocation Unit).
//
// REG_demand holds the predicted demand of every other WI, written from the
// Demand field of each received slot information packet (reg_wr, indexed by
// the packet's ID). At each epoch end the unit computes the WI's own slot
// for the next epoch and the epoch length:
//   D-SAM (default, MODE = MAC_DSAM):  S_self = Demand_self          (Eq. 3)
//                                       E     = Demand_self + sum REG_demand  (Eq. 4)
//   P-SAM (MODE = MAC_PSAM):           S_self = Demand_self * E_F / sum  (Eq. 2)
//                                       E     = E_F (fixed)
// Slot_counter is loaded with S_self at the epoch end and counts down once
// per own data flit sent (tx_flit); its value is the number of flits the WI
// may still announce in its slot. In P-SAM the quotient is rounded down and
// raised to 1 when Demand_self is non-zero, so that a WI with predicted
// traffic is never left without a slot; a zero sum gives a zero slot.
//
// The register file, Slot_counter and both equations are the paper's. The
// P-SAM divider is a plain combinational division; the self entry of
// REG_demand is not kept (Demand_self is used instead), and E_F defaults to
// 8 WIs x 64 flits, a size the paper does not print. epoch_len is
// combinational and is meant to be sampled on the epoch-end edge.
module allocation_unit
  import winoc_pkg::*;
#(
  parameter int        NWI  = N_WI,
  parameter mac_mode_e MODE = MAC_DSAM,
  parameter int        EF   = EF_PSAM,
  parameter int        DW   = DEMAND_W,
  parameter int        EW   = EPOCH_W,
  parameter int        SW   = EPOCH_W,
  localparam int       IW   = $clog2(NWI)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IW-1:0] id_self,
  input  logic          reg_wr,
  input  logic [IW-1:0] reg_wr_id,
  input  logic [DW-1:0] reg_wr_demand,
  input  logic [DW-1:0] demand_self,
  input  logic          epoch_end,
  input  logic          tx_flit,
  output logic [SW-1:0] slot_counter,
  output logic [EW-1:0] epoch_len,
  output logic [NWI-1:0][DW-1:0] reg_demand
);

  logic [EW-1:0] demand_sum;
  logic [SW-1:0] slot_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_demand <= '0;
    end else if (reg_wr && reg_wr_id != id_self) begin
      reg_demand[reg_wr_id] <= reg_wr_demand;
    end
  end

  always_comb begin
    demand_sum = EW'(demand_self);
    for (int k = 0; k < NWI; k++)
      if (IW'(k) != id_self) demand_sum += EW'(reg_demand[k]);
  end

  if (MODE == MAC_DSAM) begin : g_dsam
    assign slot_next = SW'(demand_self);
    assign epoch_len = demand_sum;
  end else begin : g_psam
    logic [DW+EW-1:0] prod;
    logic [DW+EW-1:0] quot;
    assign prod = (DW+EW)'(demand_self) * (DW+EW)'(EF);
    assign quot = (demand_sum == '0) ? '0 : prod / (DW+EW)'(demand_sum);
    assign slot_next = (quot == '0 && demand_self != '0) ? SW'(1) : SW'(quot);
    assign epoch_len = EW'(EF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      slot_counter <= '0;
    else if (epoch_end)
      slot_counter <= slot_next;
    else if (tx_flit && slot_counter != '0)
      slot_counter <= slot_counter - 1'b1;
  end

endmodule
