// rx_controller: receive side of the WI (slot information packet parser and
// the input demultiplexer in front of the input VCs).
//
// Every slot begins with a slot information packet (SIP), which every WI
// receives because receivers are on between slots. On the SIP's header flit
// the controller writes its Demand into REG_demand[ID] (reg_wr) and notes ID
// as the owner of the slot; it collects the tuples of the remaining SIP
// flits. In the cycle the last SIP flit arrives it computes the receiver
// schedule of the slot and loads it into the sleep/wake unit (sw_load):
// the tuples addressed to this WI are those with DestWI = ID_self or the
// broadcast value 4'hF, from a WI other than itself;
//   init_sleep = flits before the first such tuple,
//   wake       = flits from the first to the end of the last such tuple,
//   post_wake  = the remaining flits of the slot.
// Data flits then arrive only while the receiver is awake. The first one
// has index init_sleep in the slot; each is matched to its tuple by index,
// and flits of tuples for this WI are written into the input VC that holds
// packet (owner, PktID). If no VC holds it, the lowest free VC is reserved
// for it. A VC stops matching once the tail flit is received and becomes
// free again when the NoC side has read that tail (ivc_release). A flit for
// which no VC is free, or whose VC is full, is dropped and flagged (rx_drop).
//
// At the end of the slot (slot_end from the sleep/wake unit) the next WI of
// the virtual ring, ID owner+1 mod NWI, owns the medium: if that is this WI,
// slot_start pulses in the next cycle. The end of the slot of WI NWI-1 ends
// the epoch (epoch_end, next cycle). After reset WI 0 starts the first slot.
//
// From the paper: the SIP fields and their use, REG_demand indexing by ID,
// broadcast DestWI, VC reservation by PktID, the ring order by ID_self.
// Choices of this design: matching by (source ID, PktID), the dropping of
// flits that do not fit, and the epoch end at the ring wrap.
module rx_controller
  import winoc_pkg::*;
#(
  parameter int NWI  = N_WI,
  parameter int NVC  = NUM_VC,
  parameter int IW   = ID_W,
  parameter int DW   = DEMAND_W,
  parameter int CW   = SLOT_W,
  localparam int VC_W = $clog2(NVC)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [IW-1:0]          id_self,
  // from the deserializer
  input  logic                   des_valid,
  input  logic [FLIT_W-1:0]      des_flit,
  // to the allocation unit
  output logic                   reg_wr,
  output logic [IW-1:0]          reg_wr_id,
  output logic [DW-1:0]          reg_wr_demand,
  // sleep/wake unit
  output logic                   sw_load,
  output logic [CW-1:0]          sw_init,
  output logic [CW-1:0]          sw_wake,
  output logic [CW-1:0]          sw_post,
  input  logic                   slot_end,
  // ring and epoch
  output logic                   slot_start,
  output logic                   epoch_end,
  output logic [IW-1:0]          owner,
  // input buffers
  output logic                   ib_wr_en,
  output logic [VC_W-1:0]        ib_wr_vc,
  output logic [FLIT_W-1:0]      ib_wr_flit,
  input  logic [NVC-1:0]         ib_full,
  input  logic [NVC-1:0]         ivc_release,
  output logic                   rx_drop,
  output logic                   rx_data
);

  typedef enum logic [1:0] {R_WAIT_SIP, R_SIP, R_DATA} rstate_e;
  rstate_e state;

  sip_tuple_t [NVC-1:0] tup;
  logic [SIZE_W-1:0]    sip_size;
  logic [SIZE_W-1:0]    sip_cnt;
  logic [CW-1:0]        rx_idx;
  logic                 boot;

  // ---------------- SIP parsing ----------------
  sip_head_t            hflit;
  sip_cont_t            cflit;
  logic                 is_head;
  logic                 sip_done;
  sip_tuple_t [NVC-1:0] tup_nx;
  logic [IW-1:0]        owner_nx;

  assign hflit   = sip_head_t'(des_flit);
  assign cflit   = sip_cont_t'(des_flit);
  assign is_head = des_valid && (state == R_WAIT_SIP) && (hflit.hdr == FT_SIP);

  always_comb begin
    tup_nx   = tup;
    owner_nx = owner;
    sip_done = 1'b0;
    if (is_head) begin
      tup_nx    = '0;
      tup_nx[0] = hflit.t0;
      owner_nx  = IW'(hflit.id);
      sip_done  = (hflit.size == SIZE_W'(1));
    end else if (des_valid && state == R_SIP) begin
      for (int k = 1; k < SIP_MAX; k++) begin
        if (sip_cnt == SIZE_W'(k)) begin
          if (2*k - 1 < NVC) tup_nx[2*k - 1] = cflit.ta;
          if (2*k < NVC)     tup_nx[2*k]     = cflit.tb;
        end
      end
      sip_done = (sip_cnt == sip_size - 1'b1);
    end
  end

  assign reg_wr        = is_head;
  assign reg_wr_id     = IW'(hflit.id);
  assign reg_wr_demand = hflit.demand;

  // ---------------- receiver schedule ----------------
  function automatic logic for_me(input sip_tuple_t t, input logic [IW-1:0] src,
                                  input logic [IW-1:0] me);
    return (t.numflits != '0) && (src != me) &&
           ((t.dest == DEST_BCAST) || (t.dest == DEST_W'(me)));
  endfunction

  always_comb begin
    logic [CW-1:0] acc, first_s, last_e;
    logic          any;
    acc = '0; first_s = '0; last_e = '0; any = 1'b0;
    for (int t = 0; t < NVC; t++) begin
      if (for_me(tup_nx[t], owner_nx, id_self)) begin
        if (!any) first_s = acc;
        any    = 1'b1;
        last_e = acc + CW'(tup_nx[t].numflits);
      end
      acc = acc + CW'(tup_nx[t].numflits);
    end
    if (any) begin
      sw_init = first_s;
      sw_wake = last_e - first_s;
      sw_post = acc - last_e;
    end else begin
      sw_init = acc;
      sw_wake = '0;
      sw_post = '0;
    end
  end
  assign sw_load = sip_done;

  // ---------------- data flit steering ----------------
  logic                 hit_me;
  sip_tuple_t           hit_t;
  always_comb begin
    logic [CW-1:0] acc;
    acc    = '0;
    hit_me = 1'b0;
    hit_t  = '0;
    for (int t = 0; t < NVC; t++) begin
      if (rx_idx >= acc && rx_idx < acc + CW'(tup[t].numflits)) begin
        hit_t  = tup[t];
        hit_me = for_me(tup[t], owner, id_self);
      end
      acc = acc + CW'(tup[t].numflits);
    end
  end

  // input VC table
  logic [NVC-1:0]               ivc_alloc, ivc_open;
  logic [NVC-1:0][IW-1:0]       ivc_src;
  logic [NVC-1:0][PKTID_W-1:0]  ivc_pkt;
  logic                         match, free_found;
  logic [VC_W-1:0]              match_vc, free_vc;
  logic                         data_in;

  assign data_in = des_valid && (state == R_DATA) && hit_me;

  always_comb begin
    match = 1'b0; match_vc = '0; free_found = 1'b0; free_vc = '0;
    for (int v = NVC - 1; v >= 0; v--) begin
      if (ivc_open[v] && ivc_src[v] == owner && ivc_pkt[v] == hit_t.pktid) begin
        match = 1'b1; match_vc = VC_W'(v);
      end
      if (!ivc_alloc[v]) begin
        free_found = 1'b1; free_vc = VC_W'(v);
      end
    end
  end

  logic [VC_W-1:0] tgt_vc;
  logic            tgt_ok;
  assign tgt_vc     = match ? match_vc : free_vc;
  assign tgt_ok     = (match || free_found) && !ib_full[tgt_vc];
  assign ib_wr_en   = data_in && tgt_ok;
  assign ib_wr_vc   = tgt_vc;
  assign ib_wr_flit = des_flit;
  assign rx_drop    = data_in && !tgt_ok;
  assign rx_data    = data_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ivc_alloc <= '0;
      ivc_open  <= '0;
      ivc_src   <= '0;
      ivc_pkt   <= '0;
    end else begin
      for (int v = 0; v < NVC; v++)
        if (ivc_release[v]) ivc_alloc[v] <= 1'b0;
      if (ib_wr_en) begin
        if (!match) begin
          ivc_alloc[tgt_vc] <= 1'b1;
          ivc_src[tgt_vc]   <= owner;
          ivc_pkt[tgt_vc]   <= hit_t.pktid;
        end
        ivc_open[tgt_vc] <= (flit_type(des_flit) != FT_TAIL);
      end
    end
  end

  // ---------------- state, ring and epoch ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= R_WAIT_SIP;
      tup        <= '0;
      sip_size   <= '0;
      sip_cnt    <= '0;
      rx_idx     <= '0;
      owner      <= IW'(NWI - 1);
      boot       <= 1'b1;
      slot_start <= 1'b0;
      epoch_end  <= 1'b0;
    end else begin
      boot       <= 1'b0;
      slot_start <= boot && (id_self == '0);
      epoch_end  <= 1'b0;
      tup        <= tup_nx;
      owner      <= owner_nx;
      if (is_head) begin
        sip_size <= hflit.size;
        sip_cnt  <= SIZE_W'(1);
        state    <= R_SIP;
      end else if (des_valid && state == R_SIP) begin
        sip_cnt  <= sip_cnt + 1'b1;
      end
      if (sip_done) begin
        state  <= R_DATA;
        rx_idx <= sw_init;
      end else if (des_valid && state == R_DATA) begin
        rx_idx <= rx_idx + 1'b1;
      end
      if (slot_end) begin
        state      <= R_WAIT_SIP;
        epoch_end  <= (owner_nx == IW'(NWI - 1));
        slot_start <= ((owner_nx == IW'(NWI - 1)) ? '0 : owner_nx + 1'b1) == id_self;
      end
    end
  end

  a_sip_header: assert property (@(posedge clk) disable iff (!rst_n)
    (des_valid && state == R_WAIT_SIP) |-> hflit.hdr == FT_SIP);

endmodule
