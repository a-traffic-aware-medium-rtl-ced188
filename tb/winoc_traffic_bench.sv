// winoc_traffic_bench: drives one winoc_top with the synthetic traffic
// patterns used to evaluate the MAC, and checks every delivery.
//
// Each WI sends 4*PPP packets of PKT_FLITS flits through its switch-side
// port, at a random injection rate (one flit attempt every RATE cycles on
// average). The packets of one source walk through four patterns, PPP
// packets each:
//   0 uniform random   destination drawn uniformly from the other WIs;
//   1 hotspot          half of the packets go to one hotspot WI (NWI/2),
//                      the rest uniformly (the hotspot WI itself sends
//                      uniform traffic);
//   2 bit complement   destination = NWI-1-source (the next WI if that is
//                      the source itself);
//   3 broadcast        half of the packets are broadcast (DestWI 4'hF).
// The destinations are fixed at the start, so the expected deliveries per
// pattern are known. Received flits carry source, packet number,
// destination and index; the bench checks that every packet reaches each
// addressee exactly once, complete, in order and through one input VC, that
// no slot exceeds its allocation and that no flit is dropped. It counts
// deliveries and slot sizes per pattern and raises done when all packets
// have arrived (plus a short drain). checks and failures are running totals.
//
// The patterns are those of the synthetic-traffic evaluation; the hotspot
// and broadcast shares and the rates are this bench's own choices, and the
// patterns act on WIs rather than on cores, since the mesh is not modelled.
// MODE selects the slot allocation scheme of the system under test.
module winoc_traffic_bench
  import winoc_pkg::*;
#(
  parameter int NWI  = N_WI,
  parameter int PPP  = 4,
  parameter int RATE = 4,
  parameter mac_mode_e MODE = MAC_DSAM
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NVC  = NUM_VC;
  localparam int PKTS = 4 * PPP;
  localparam int LEN  = PKT_FLITS;

  logic [NWI-1:0]                 noc_in_valid;
  logic [NWI-1:0][2:0]            noc_in_vc;
  logic [NWI-1:0][FLIT_W-1:0]     noc_in_flit;
  logic [NWI-1:0][NVC-1:0]        noc_in_full, noc_in_busy;
  logic [NWI-1:0]                 noc_out_valid, noc_out_ready;
  logic [NWI-1:0][2:0]            noc_out_vc;
  logic [NWI-1:0][FLIT_W-1:0]     noc_out_flit;
  logic [NWI-1:0][DEMAND_W-1:0]   demand_self;
  logic [NWI-1:0][EPOCH_W-1:0]    slot_alloc, epoch_counter;
  logic [NWI-1:0]                 epoch_end, slot_start, slot_end, tx_on, rx_on;
  logic [NWI-1:0]                 tx_flit, rx_data, rx_drop;
  logic [NWI-1:0][31:0]           beats_sent, beats_heard;

  winoc_top #(.NWI(NWI), .MODE(MODE)) dut (.*);

  localparam int BCAST = int'(DEST_BCAST);

  function automatic logic [FLIT_W-1:0] mk_flit(int idx, int dest, int src, int seq);
    logic [1:0] t;
    t = (idx == 0) ? 2'b01 : (idx == LEN - 1) ? 2'b10 : 2'b00;
    return {t, 4'(dest), 3'(src), 8'(seq), 15'(idx)};
  endfunction

  function automatic int uniform_dest(int s);
    int d;
    d = int'($urandom % (NWI - 1));
    if (d >= s) d++;
    return d;
  endfunction

  int pkt_dest [NWI][PKTS];
  int next_pkt [NWI];
  int vc_active[NWI][NVC];
  int vc_pkt   [NWI][NVC];
  int vc_idx   [NWI][NVC];
  int expected [4];
  int got      [4];
  int exp_total = 0, delivered = 0;
  int exp_idx  [NWI][NWI][PKTS];
  int pkt_vc   [NWI][NWI][PKTS];
  int alloc_at_start[NWI];
  int sent_in_slot [NWI];
  logic start_d[NWI];
  int cycle = 0, epochs = 0;
  int slot_flits = 0, slots = 0, sleep_cycles = 0;

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    for (int k = 0; k < 4; k++) begin expected[k] = 0; got[k] = 0; end
    for (int s = 0; s < NWI; s++) begin
      next_pkt[s] = 0;
      for (int p = 0; p < PKTS; p++) begin
        int d, pat;
        pat = p / PPP;
        case (pat)
          0: d = uniform_dest(s);
          1: d = (s != NWI / 2 && ($urandom % 2) == 0) ? NWI / 2 : uniform_dest(s);
          2: begin d = NWI - 1 - s; if (d == s) d = (s + 1) % NWI; end
          default: d = (($urandom % 2) == 0) ? BCAST : uniform_dest(s);
        endcase
        pkt_dest[s][p] = d;
        expected[pat] += (d == BCAST) ? NWI - 1 : 1;
      end
      for (int v = 0; v < NVC; v++) begin
        vc_active[s][v] = 0; vc_pkt[s][v] = 0; vc_idx[s][v] = 0;
      end
      alloc_at_start[s] = 0; sent_in_slot[s] = 0; start_d[s] = 1'b0;
    end
    for (int k = 0; k < 4; k++) exp_total += expected[k];
    for (int d = 0; d < NWI; d++)
      for (int s = 0; s < NWI; s++)
        for (int p = 0; p < PKTS; p++) begin
          exp_idx[d][s][p] = 0; pkt_vc[d][s][p] = -1;
        end
    noc_in_valid = '0; noc_in_vc = '0; noc_in_flit = '0; noc_out_ready = '0;
  end

  // switch-side drivers, on the falling edge
  always @(negedge clk) begin
    for (int s = 0; s < NWI; s++) begin
      noc_in_valid[s]  <= 1'b0;
      noc_out_ready[s] <= ($urandom % 10) != 0;
      if (rst_n && ($urandom % RATE) == 0) begin
        int v0;
        logic sent;
        v0 = int'($urandom % NVC);
        sent = 1'b0;
        for (int k = 0; k < NVC && !sent; k++) begin
          int v;
          v = (v0 + k) % NVC;
          if (vc_active[s][v] != 0 && !noc_in_full[s][v]) begin
            noc_in_valid[s] <= 1'b1;
            noc_in_vc[s]    <= 3'(v);
            noc_in_flit[s]  <= mk_flit(vc_idx[s][v], pkt_dest[s][vc_pkt[s][v]], s, vc_pkt[s][v]);
            vc_idx[s][v]++;
            if (vc_idx[s][v] == LEN) vc_active[s][v] = 0;
            sent = 1'b1;
          end else if (vc_active[s][v] == 0 && !noc_in_busy[s][v] && next_pkt[s] < PKTS
                       && vc_idx[s][v] == 0) begin
            vc_active[s][v] = 1; vc_pkt[s][v] = next_pkt[s];
            next_pkt[s]++;
            noc_in_valid[s] <= 1'b1;
            noc_in_vc[s]    <= 3'(v);
            noc_in_flit[s]  <= mk_flit(0, pkt_dest[s][vc_pkt[s][v]], s, vc_pkt[s][v]);
            vc_idx[s][v] = 1;
            sent = 1'b1;
          end
        end
      end
      // a VC whose packet has been written is reused once the WI frees it
      for (int v = 0; v < NVC; v++)
        if (vc_active[s][v] == 0 && vc_idx[s][v] == LEN && !noc_in_busy[s][v])
          vc_idx[s][v] = 0;
    end
  end

  // monitors, on the rising edge
  always @(posedge clk) begin
    if (rst_n && !done) begin
      cycle++;
      if (epoch_end[0]) epochs++;
      for (int i = 0; i < NWI; i++) begin
        if (slot_start[i]) begin
          if (epochs > 0) begin
            checks++;
            if (sent_in_slot[i] > alloc_at_start[i]) begin
              failures++;
              $display("FAIL NWI=%0d WI%0d sent %0d flits in a slot of %0d",
                       NWI, i, sent_in_slot[i], alloc_at_start[i]);
            end
            slots++; slot_flits += sent_in_slot[i];
          end
          sent_in_slot[i] = 0;
        end
        if (tx_flit[i]) sent_in_slot[i]++;
        if (start_d[i]) alloc_at_start[i] = int'(slot_alloc[i]);
        start_d[i] = slot_start[i];
        if (!rx_on[i]) sleep_cycles++;
        if (rx_drop[i]) begin
          failures++;
          $display("FAIL NWI=%0d WI%0d dropped a received flit", NWI, i);
        end
        if (noc_out_valid[i] && noc_out_ready[i]) begin
          logic [FLIT_W-1:0] f;
          int src, seq, idx, dst, tp;
          f   = noc_out_flit[i];
          tp  = int'(f[31:30]); dst = int'(f[29:26]); src = int'(f[25:23]);
          seq = int'(f[22:15]); idx = int'(f[14:0]);
          checks++;
          if (src >= NWI || seq >= PKTS || src == i || (dst != i && dst != BCAST)
              || dst != pkt_dest[src % NWI][seq % PKTS]
              || idx != exp_idx[i][src % NWI][seq % PKTS]
              || tp != ((idx == 0) ? 1 : (idx == LEN - 1) ? 2 : 0)) begin
            failures++;
            $display("FAIL NWI=%0d WI%0d got src %0d pkt %0d idx %0d type %0d dest %0d",
                     NWI, i, src, seq, idx, tp, dst);
          end else begin
            if (idx == 0) pkt_vc[i][src][seq] = int'(noc_out_vc[i]);
            else if (pkt_vc[i][src][seq] != int'(noc_out_vc[i])) begin
              failures++;
              $display("FAIL NWI=%0d WI%0d packet %0d/%0d changed VC", NWI, i, src, seq);
            end
            exp_idx[i][src][seq]++;
            if (idx == LEN - 1) begin
              delivered++;
              got[seq / PPP]++;
            end
          end
        end
      end
    end
  end

  initial begin
    wait (rst_n);
    wait (delivered == exp_total);
    repeat (2000) @(posedge clk);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (got[k] != expected[k]) begin
        failures++;
        $display("FAIL NWI=%0d pattern %0d delivered %0d of %0d", NWI, k, got[k], expected[k]);
      end
    end
    checks++;
    if (sleep_cycles == 0) begin
      failures++;
      $display("FAIL NWI=%0d receivers never slept", NWI);
    end
    $display("NWI=%0d %s cycles=%0d epochs=%0d deliveries uniform=%0d hotspot=%0d bitcomp=%0d bcast=%0d mean_slot=%0d.%02d flits",
             NWI, MODE.name(), cycle, epochs, got[0], got[1], got[2], got[3],
             slot_flits / (slots > 0 ? slots : 1), (100 * slot_flits / (slots > 0 ? slots : 1)) % 100);
    for (int i = 0; i < NWI; i++)
      $display("NWI=%0d WI%0d beats sent %0d heard %0d", NWI, i, beats_sent[i], beats_heard[i]);
    done = 1'b1;
  end

endmodule
