// wireless_interface: one wireless interface (WI) with the traffic-aware
// MAC unit, attached to a NoC switch of the mesh.
//
// Flits the switch routes to the wireless port enter the output buffers
// (NUM_VC virtual channels of VC_DEPTH flits). The MAC unit decides when and
// how many of them go on the air:
//   prediction_unit   counts the flits routed to the wireless port in each
//                     epoch and predicts the next demand (PID, Eq. 1);
//   allocation_unit   keeps the demands the other WIs announced (REG_demand)
//                     and sets the own slot and the epoch length (D-SAM by
//                     default, P-SAM with MODE = MAC_PSAM);
//   sleep_wake_unit   switches the receiver off for the flits of a slot that
//                     are not addressed to this WI;
//   ID_self           the WI's place in the virtual ring (loaded from id_cfg
//                     while rst_n is low).
// The WIs take turns in ring order. In its slot a WI sends a slot
// information packet announcing its predicted demand and the partial
// packets it will send (tx_controller), then those flits, through the
// serializer and the transceiver. Every WI hears every slot information
// packet (rx_controller): it records the sender's demand, schedules its
// receiver, and steers flits addressed to it into the input buffers, from
// which the switch reads them (one flit per cycle, round robin over VCs).
//
// NoC side: noc_in_* writes a flit into output VC noc_in_vc; the switch must
// respect noc_in_full and start a packet only in a VC whose noc_in_busy bit
// is low. A head flit names the destination WI in bits [29:26] (4'hF:
// broadcast). noc_out_* is a valid/ready stream of received flits tagged
// with their input VC. Antenna side: ant_tx_* is what the WI radiates,
// ant_rx_* what it hears on the shared medium (including itself).
//
// The structure follows the WI drawing of the paper (transceiver,
// serializer/deserializer, input and output buffers, prediction, allocation
// and sleep/wake units, ID_self); the NoC-side handshake, the round-robin
// read-out and the ID strap are choices of this design.
module wireless_interface
  import winoc_pkg::*;
#(
  parameter int        NWI  = N_WI,
  parameter int        NVC  = NUM_VC,
  parameter int        DEP  = VC_DEPTH,
  parameter mac_mode_e MODE = MAC_DSAM,
  localparam int       IW   = $clog2(NWI),
  localparam int       MAX_OPEN = (NVC / (NWI - 1) > 1) ? NVC / (NWI - 1) : 1,
  localparam int       VC_W = $clog2(NVC)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [IW-1:0]       id_cfg,
  // from the NoC switch
  input  logic                noc_in_valid,
  input  logic [VC_W-1:0]     noc_in_vc,
  input  logic [FLIT_W-1:0]   noc_in_flit,
  output logic [NVC-1:0]      noc_in_full,
  output logic [NVC-1:0]      noc_in_busy,
  // to the NoC switch
  output logic                noc_out_valid,
  output logic [VC_W-1:0]     noc_out_vc,
  output logic [FLIT_W-1:0]   noc_out_flit,
  input  logic                noc_out_ready,
  // antenna / shared medium
  output logic                ant_tx_valid,
  output logic [SER_W-1:0]    ant_tx_beat,
  input  logic                ant_rx_valid,
  input  logic [SER_W-1:0]    ant_rx_beat,
  // status
  output logic [DEMAND_W-1:0] demand_self,
  output logic [EPOCH_W-1:0]  slot_alloc,
  output logic [EPOCH_W-1:0]  epoch_counter,
  output logic                epoch_end,
  output logic                slot_start,
  output logic                slot_end,
  output logic                tx_on,
  output logic                rx_on,
  output logic                tx_flit,
  output logic                rx_data,
  output logic                rx_drop,
  output logic [31:0]         beats_sent,
  output logic [31:0]         beats_heard
);

  localparam int CNT_W = $clog2(DEP + 1);

  // ---------------- ID_self ----------------
  logic [IW-1:0] id_self;
  always_ff @(posedge clk) begin
    if (!rst_n) id_self <= id_cfg;
  end

  // ---------------- output buffers ----------------
  logic                       ob_rd_en;
  logic [VC_W-1:0]            ob_rd_vc;
  logic [FLIT_W-1:0]          ob_rd_data;
  logic [NVC-1:0][CNT_W-1:0]  ob_count;
  logic [NVC-1:0]             ob_empty;

  vc_buffer #(.NUM_VC(NVC), .DEPTH(DEP), .W(FLIT_W)) u_obuf (
    .clk, .rst_n,
    .wr_en(noc_in_valid), .wr_vc(noc_in_vc), .wr_data(noc_in_flit),
    .rd_en(ob_rd_en), .rd_vc(ob_rd_vc), .rd_data(ob_rd_data),
    .count(ob_count), .full(noc_in_full), .empty(ob_empty)
  );

  // ---------------- input buffers ----------------
  logic                       ib_wr_en;
  logic [VC_W-1:0]            ib_wr_vc;
  logic [FLIT_W-1:0]          ib_wr_flit;
  logic [NVC-1:0]             ib_full, ib_empty;
  logic [NVC-1:0][CNT_W-1:0]  ib_count;
  logic                       ib_rd_en;
  logic [NVC-1:0]             ivc_release;

  vc_buffer #(.NUM_VC(NVC), .DEPTH(DEP), .W(FLIT_W)) u_ibuf (
    .clk, .rst_n,
    .wr_en(ib_wr_en), .wr_vc(ib_wr_vc), .wr_data(ib_wr_flit),
    .rd_en(ib_rd_en), .rd_vc(noc_out_vc), .rd_data(noc_out_flit),
    .count(ib_count), .full(ib_full), .empty(ib_empty)
  );

  // round-robin read-out to the switch
  logic [VC_W-1:0] rr_ptr;
  always_comb begin
    noc_out_valid = 1'b0;
    noc_out_vc    = rr_ptr;
    for (int k = NVC - 1; k >= 0; k--) begin
      logic [VC_W-1:0] v;
      v = rr_ptr + VC_W'(k);
      if (!ib_empty[v]) begin
        noc_out_valid = 1'b1;
        noc_out_vc    = v;
      end
    end
  end
  assign ib_rd_en = noc_out_valid && noc_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_ptr <= '0;
    else if (ib_rd_en) rr_ptr <= noc_out_vc + 1'b1;
  end

  always_comb begin
    ivc_release = '0;
    if (ib_rd_en && flit_type(noc_out_flit) == FT_TAIL) ivc_release[noc_out_vc] = 1'b1;
  end

  // ---------------- MAC unit ----------------
  logic                 slot_tick;
  logic [EPOCH_W-1:0]   epoch_len;
  logic                 reg_wr;
  logic [IW-1:0]        reg_wr_id;
  logic [DEMAND_W-1:0]  reg_wr_demand;
  logic                 sw_load;
  logic [SLOT_W-1:0]    sw_init, sw_wake, sw_post;
  logic [IW-1:0]        owner;

  prediction_unit u_pu (
    .clk, .rst_n,
    .flit_in(noc_in_valid), .has_flits(~&ob_empty),
    .epoch_end, .epoch_len, .slot_tick,
    .demand_self,
    .demand_counter(), .demand_avg(), .demand_prev(),
    .epoch_counter
  );

  allocation_unit #(.NWI(NWI), .MODE(MODE)) u_au (
    .clk, .rst_n, .id_self,
    .reg_wr, .reg_wr_id, .reg_wr_demand,
    .demand_self, .epoch_end, .tx_flit,
    .slot_counter(slot_alloc), .epoch_len, .reg_demand()
  );

  sleep_wake_unit u_swu (
    .clk, .rst_n,
    .load(sw_load), .init_sleep(sw_init), .wake(sw_wake), .post_wake(sw_post),
    .rx_on, .slot_tick, .slot_end,
    .initial_sleep_counter(), .wake_counter(), .post_wake_counter()
  );

  // ---------------- transmit path ----------------
  logic               ser_valid, ser_ready, ser_busy, beat_valid;
  logic [FLIT_W-1:0]  ser_flit;
  logic [SER_W-1:0]   beat;

  tx_controller #(.NVC(NVC), .DEP(DEP), .IW(IW), .MAX_OPEN(MAX_OPEN)) u_tx (
    .clk, .rst_n, .id_self,
    .slot_start, .slot_alloc, .demand_self,
    .ob_wr_en(noc_in_valid), .ob_wr_vc(noc_in_vc), .ob_wr_flit(noc_in_flit),
    .ob_count, .ob_rd_data, .ob_rd_en, .ob_rd_vc,
    .ser_valid, .ser_flit, .ser_ready, .ser_busy,
    .tx_on, .tx_flit, .ovc_busy(noc_in_busy)
  );

  serializer u_ser (
    .clk, .rst_n,
    .in_valid(ser_valid), .in_ready(ser_ready), .in_flit(ser_flit),
    .beat_valid, .beat
  );
  assign ser_busy = beat_valid;

  // ---------------- transceiver ----------------
  logic               rx_beat_valid;
  logic [SER_W-1:0]   rx_beat;

  ook_transceiver u_xcvr (
    .clk, .rst_n, .tx_on, .rx_on,
    .tx_beat_valid(beat_valid), .tx_beat(beat),
    .ant_tx_valid, .ant_tx_beat, .ant_rx_valid, .ant_rx_beat,
    .rx_beat_valid, .rx_beat,
    .beats_sent, .beats_heard
  );

  // ---------------- receive path ----------------
  logic               des_valid;
  logic [FLIT_W-1:0]  des_flit;

  deserializer u_des (
    .clk, .rst_n,
    .beat_valid(rx_beat_valid), .beat(rx_beat),
    .out_valid(des_valid), .out_flit(des_flit)
  );

  rx_controller #(.NWI(NWI), .NVC(NVC), .IW(IW)) u_rx (
    .clk, .rst_n, .id_self,
    .des_valid, .des_flit,
    .reg_wr, .reg_wr_id, .reg_wr_demand,
    .sw_load, .sw_init, .sw_wake, .sw_post, .slot_end,
    .slot_start, .epoch_end, .owner,
    .ib_wr_en, .ib_wr_vc, .ib_wr_flit, .ib_full, .ivc_release,
    .rx_drop, .rx_data
  );

endmodule
