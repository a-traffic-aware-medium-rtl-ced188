// tx_controller: transmit side of the WI (slot information packet generator
// and the output multiplexer in front of the serializer).
//
// When the WI's transmission slot starts (slot_start, one-cycle pulse) the
// controller takes one cycle (BUILD) to plan the slot: it walks the output
// VCs in index order and gives each non-empty VC a tuple (PktID, DestWI,
// NumFlits) with NumFlits = min(flits in the VC, allocation left), until the
// slot allocation (slot_alloc, the allocation unit's Slot_counter) is used
// up. A VC may be sent only in part: the rest of its packet follows in a
// later slot under the same PktID, which is how partial packets are carried.
// It then sends the slot information packet (Header, Size, Demand =
// Demand_self, ID = ID_self and the tuples, format in winoc_pkg) followed by
// exactly the announced data flits, tuple by tuple, to the serializer
// (valid/ready). tx_flit pulses for every data flit sent, tx_on stays high
// from the plan cycle until the serializer has sent its last beat. A slot
// with nothing to send consists of the 1-flit slot information packet.
//
// The controller also keeps, per output VC, the destination WI (from the
// head flit, 4'hF = broadcast) and a PktID drawn from a 5-bit running count
// when the head flit is written, and marks the VC busy until its tail flit
// has been sent (ovc_busy). The NoC switch must not start a new packet in a
// busy VC.
//
// From the paper: the packet fields, one tuple per output VC, partial packet
// transfer and the slot limit. Choices of this design: the VC scan order,
// the greedy split of the allocation, the PktID counter and the plan cycle.
//
// The paper does not say what a receiving WI does when a new packet arrives
// and none of its input VCs is free. To rule that case out, at most MAX_OPEN
// packets of a WI may be open on the air at a time (head sent, tail not yet
// sent); a VC holding a packet that has not started is only planned while
// fewer are open; a packet whose tail is sent within the slot being planned
// no longer counts for the VCs after it. With MAX_OPEN = NUM_VC / (N_WI - 1) = 1 a receiver can never
// have more open packets than input VCs, even under broadcast.
module tx_controller
  import winoc_pkg::*;
#(
  parameter int NVC  = NUM_VC,
  parameter int DEP  = VC_DEPTH,
  parameter int IW   = ID_W,
  parameter int DW   = DEMAND_W,
  parameter int SW   = EPOCH_W,
  parameter int MAX_OPEN = 1,
  localparam int VC_W  = $clog2(NVC),
  localparam int CNT_W = $clog2(DEP + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [IW-1:0]               id_self,
  input  logic                        slot_start,
  input  logic [SW-1:0]               slot_alloc,
  input  logic [DW-1:0]               demand_self,
  // output buffer write side (snooped for packet bookkeeping)
  input  logic                        ob_wr_en,
  input  logic [VC_W-1:0]             ob_wr_vc,
  input  logic [FLIT_W-1:0]           ob_wr_flit,
  // output buffer read side
  input  logic [NVC-1:0][CNT_W-1:0]   ob_count,
  input  logic [FLIT_W-1:0]           ob_rd_data,
  output logic                        ob_rd_en,
  output logic [VC_W-1:0]             ob_rd_vc,
  // serializer
  output logic                        ser_valid,
  output logic [FLIT_W-1:0]           ser_flit,
  input  logic                        ser_ready,
  input  logic                        ser_busy,
  // status
  output logic                        tx_on,
  output logic                        tx_flit,
  output logic [NVC-1:0]              ovc_busy
);

  typedef enum logic [1:0] {S_IDLE, S_BUILD, S_SIP, S_DATA} state_e;
  state_e state;

  // per-VC packet bookkeeping
  logic [NVC-1:0][DEST_W-1:0]  vc_dest;
  logic [NVC-1:0][PKTID_W-1:0] vc_pkt;
  logic [PKTID_W-1:0]          pkt_ctr;
  logic [NVC-1:0]              air_open;   // head sent on air, tail not yet
  logic [NVC-1:0]              tail_in;    // tail flit is in the VC

  // planned slot
  sip_tuple_t [NVC-1:0]        tup;
  logic [NVC-1:0][VC_W-1:0]    tup_vc;
  logic [VC_W:0]               ntup;
  logic [SIZE_W-1:0]           sip_size;
  logic [SIZE_W-1:0]           sip_idx;
  logic [VC_W:0]               cur;
  logic [NUMF_W-1:0]           left;
  logic [DW-1:0]               demand_q;

  // ---------------- plan (combinational, used in S_BUILD) ----------------
  sip_tuple_t [NVC-1:0]     plan_tup;
  logic [NVC-1:0][VC_W-1:0] plan_vc;
  logic [VC_W:0]            plan_n;

  always_comb begin
    logic [SW-1:0]     rem;
    logic [NUMF_W-1:0] n;
    int                opened;
    opened  = 0;
    for (int v = 0; v < NVC; v++) if (air_open[v]) opened++;
    rem     = slot_alloc;
    plan_n  = '0;
    plan_tup = '0;
    plan_vc  = '0;
    for (int v = 0; v < NVC; v++) begin
      if (SW'(ob_count[v]) < rem) n = NUMF_W'(ob_count[v]);
      else                        n = NUMF_W'(rem);
      if (n != '0 && !air_open[v]) begin
        if (opened < MAX_OPEN) opened++;
        else n = '0;
      end
      // a packet whose tail goes out in this slot closes again
      if (n != '0 && tail_in[v] && SW'(ob_count[v]) == SW'(n)) opened--;
      if (n != '0) begin
        plan_tup[plan_n[VC_W-1:0]] = '{pktid: vc_pkt[v], dest: vc_dest[v], numflits: n};
        plan_vc[plan_n[VC_W-1:0]]  = VC_W'(v);
        plan_n = plan_n + 1'b1;
      end
      rem = rem - SW'(n);
    end
  end

  // ---------------- SIP flit being sent ----------------
  logic [FLIT_W-1:0] sip_flit;
  always_comb begin
    sip_head_t h;
    sip_cont_t c;
    h = '{hdr: FT_SIP, size: sip_size, id: ID_W'(id_self), demand: demand_q, t0: tup[0]};
    c.rsvd = '0;
    c.ta   = '0;
    c.tb   = '0;
    for (int k = 1; k < SIP_MAX; k++) begin
      if (sip_idx == SIZE_W'(k)) begin
        if (2*k - 1 < NVC) c.ta = tup[2*k - 1];
        if (2*k < NVC)     c.tb = tup[2*k];
      end
    end
    sip_flit = (sip_idx == '0) ? FLIT_W'(h) : FLIT_W'(c);
  end

  // ---------------- output mux ----------------
  assign ob_rd_vc  = tup_vc[cur[VC_W-1:0]];
  assign ser_valid = (state == S_SIP) || (state == S_DATA);
  assign ser_flit  = (state == S_SIP) ? sip_flit : ob_rd_data;
  assign ob_rd_en  = (state == S_DATA) && ser_ready;
  assign tx_flit   = ob_rd_en;
  assign tx_on     = (state != S_IDLE) || ser_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tup      <= '0;
      tup_vc   <= '0;
      ntup     <= '0;
      sip_size <= '0;
      sip_idx  <= '0;
      cur      <= '0;
      left     <= '0;
      demand_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (slot_start) state <= S_BUILD;
        S_BUILD: begin
          tup      <= plan_tup;
          tup_vc   <= plan_vc;
          ntup     <= plan_n;
          sip_size <= SIZE_W'(plan_n >> 1) + 1'b1;
          sip_idx  <= '0;
          cur      <= '0;
          left     <= plan_tup[0].numflits;
          demand_q <= demand_self;
          state    <= S_SIP;
        end
        S_SIP: if (ser_ready) begin
          if (sip_idx == sip_size - 1'b1)
            state <= (ntup == '0) ? S_IDLE : S_DATA;
          sip_idx <= sip_idx + 1'b1;
        end
        S_DATA: if (ser_ready) begin
          if (left == NUMF_W'(1)) begin
            cur <= cur + 1'b1;
            if (cur + 1'b1 == ntup) state <= S_IDLE;
            else left <= tup[cur[VC_W-1:0] + 1'b1].numflits;
          end else begin
            left <= left - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- per-VC bookkeeping ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vc_dest  <= '0;
      vc_pkt   <= '0;
      pkt_ctr  <= '0;
      ovc_busy <= '0;
      air_open <= '0;
      tail_in  <= '0;
    end else begin
      if (ob_wr_en && flit_type(ob_wr_flit) == FT_TAIL) tail_in[ob_wr_vc] <= 1'b1;
      if (ob_rd_en && flit_type(ob_rd_data) == FT_HEAD) air_open[ob_rd_vc] <= 1'b1;
      if (ob_rd_en && flit_type(ob_rd_data) == FT_TAIL) begin
        ovc_busy[ob_rd_vc] <= 1'b0;
        air_open[ob_rd_vc] <= 1'b0;
        tail_in[ob_rd_vc]  <= 1'b0;
      end
      if (ob_wr_en && flit_type(ob_wr_flit) == FT_HEAD) begin
        vc_dest[ob_wr_vc]  <= head_dest(ob_wr_flit);
        vc_pkt[ob_wr_vc]   <= pkt_ctr;
        pkt_ctr            <= pkt_ctr + 1'b1;
        ovc_busy[ob_wr_vc] <= 1'b1;
      end
    end
  end

  a_head_into_free_vc: assert property (@(posedge clk) disable iff (!rst_n)
    (ob_wr_en && flit_type(ob_wr_flit) == FT_HEAD) |-> !ovc_busy[ob_wr_vc]);
  a_no_sip_from_noc: assert property (@(posedge clk) disable iff (!rst_n)
    ob_wr_en |-> flit_type(ob_wr_flit) != FT_SIP);

endmodule
