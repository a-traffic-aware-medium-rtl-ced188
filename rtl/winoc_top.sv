// winoc_top: the wireless layer of a mesh wireless NoC: NWI wireless
// interfaces sharing one broadcast mm-wave channel.
//
// In the 64-core mesh the WIs sit at a central switch of each of the 8
// subnets of 8 cores and give single-hop shortcuts between subnets. This
// module holds the 8 WIs and the channel; the switches and the wired mesh are
// outside, and each WI's switch-side ports are brought out as arrays indexed
// by WI. WI i gets ID_self = i, which is its place in the virtual ring that
// orders the transmission slots.
//
// The channel is modelled as the OR of everything the WIs radiate, heard by
// all of them in the same cycle. The MAC guarantees a single transmitter at a
// time; an assertion checks it. An epoch is one round of the ring: one slot
// per WI, each opened by a slot information packet; with D-SAM (default) a
// slot carries at most the demand the WI predicted and announced in the
// previous epoch, so the epoch length follows the predicted traffic.
//
// From the paper: 8 WIs, one shared channel, slot order by ID. The OR model
// of the channel and the port arrays are choices of this design.
module winoc_top
  import winoc_pkg::*;
#(
  parameter int        NWI  = N_WI,
  parameter int        NVC  = NUM_VC,
  parameter int        DEP  = VC_DEPTH,
  parameter mac_mode_e MODE = MAC_DSAM,
  localparam int       VC_W = $clog2(NVC)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // switch -> WI
  input  logic [NWI-1:0]                    noc_in_valid,
  input  logic [NWI-1:0][VC_W-1:0]          noc_in_vc,
  input  logic [NWI-1:0][FLIT_W-1:0]        noc_in_flit,
  output logic [NWI-1:0][NVC-1:0]           noc_in_full,
  output logic [NWI-1:0][NVC-1:0]           noc_in_busy,
  // WI -> switch
  output logic [NWI-1:0]                    noc_out_valid,
  output logic [NWI-1:0][VC_W-1:0]          noc_out_vc,
  output logic [NWI-1:0][FLIT_W-1:0]        noc_out_flit,
  input  logic [NWI-1:0]                    noc_out_ready,
  // status
  output logic [NWI-1:0][DEMAND_W-1:0]      demand_self,
  output logic [NWI-1:0][EPOCH_W-1:0]       slot_alloc,
  output logic [NWI-1:0][EPOCH_W-1:0]       epoch_counter,
  output logic [NWI-1:0]                    epoch_end,
  output logic [NWI-1:0]                    slot_start,
  output logic [NWI-1:0]                    slot_end,
  output logic [NWI-1:0]                    tx_on,
  output logic [NWI-1:0]                    rx_on,
  output logic [NWI-1:0]                    tx_flit,
  output logic [NWI-1:0]                    rx_data,
  output logic [NWI-1:0]                    rx_drop,
  output logic [NWI-1:0][31:0]              beats_sent,
  output logic [NWI-1:0][31:0]              beats_heard
);

  localparam int IW = $clog2(NWI);

  logic [NWI-1:0]             ant_tx_valid;
  logic [NWI-1:0][SER_W-1:0]  ant_tx_beat;
  logic                       med_valid;
  logic [SER_W-1:0]           med_beat;

  // shared wireless medium
  always_comb begin
    med_valid = 1'b0;
    med_beat  = '0;
    for (int i = 0; i < NWI; i++) begin
      med_valid = med_valid | ant_tx_valid[i];
      med_beat  = med_beat  | ant_tx_beat[i];
    end
  end

  for (genvar i = 0; i < NWI; i++) begin : g_wi
    wireless_interface #(.NWI(NWI), .NVC(NVC), .DEP(DEP), .MODE(MODE)) u_wi (
      .clk, .rst_n,
      .id_cfg(IW'(i)),
      .noc_in_valid(noc_in_valid[i]), .noc_in_vc(noc_in_vc[i]), .noc_in_flit(noc_in_flit[i]),
      .noc_in_full(noc_in_full[i]), .noc_in_busy(noc_in_busy[i]),
      .noc_out_valid(noc_out_valid[i]), .noc_out_vc(noc_out_vc[i]),
      .noc_out_flit(noc_out_flit[i]), .noc_out_ready(noc_out_ready[i]),
      .ant_tx_valid(ant_tx_valid[i]), .ant_tx_beat(ant_tx_beat[i]),
      .ant_rx_valid(med_valid), .ant_rx_beat(med_beat),
      .demand_self(demand_self[i]), .slot_alloc(slot_alloc[i]),
      .epoch_counter(epoch_counter[i]), .epoch_end(epoch_end[i]),
      .slot_start(slot_start[i]), .slot_end(slot_end[i]),
      .tx_on(tx_on[i]), .rx_on(rx_on[i]), .tx_flit(tx_flit[i]),
      .rx_data(rx_data[i]), .rx_drop(rx_drop[i]),
      .beats_sent(beats_sent[i]), .beats_heard(beats_heard[i])
    );
  end

  a_one_talker: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(ant_tx_valid));

endmodule
