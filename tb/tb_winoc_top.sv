// tb_winoc_top: end-to-end test of the wireless layer with all parameters at
// their defaults (8 WIs, 8 VCs of 16 flits, D-SAM).
//
// Every WI is fed, through its switch-side port, with PKTS packets of 64
// flits at a moderate random injection rate, mostly unicast to a random other
// WI and about one in eight broadcast. Flits carry their source, packet
// number, destination and index, so the receiving side can check, without
// any model of the MAC, that every packet arrives exactly once at every WI it
// was sent to, complete, in order, head first and tail last, and through a
// single input VC. Received flits are taken by the switch side with random
// back-pressure.
//
// It also checks the MAC rules: no WI sends more data flits in a slot than
// its Slot_counter allowed at the slot start; within a slot the flits reach
// a receiver on the grid of one flit time (5 cycles, 16 Gb/s); no flit is
// dropped. It counts how often each mechanism occurred and fails if one never
// did: partial packets (a packet spread over several epochs), receiver sleep,
// broadcast delivery, an epoch with no data at all, epochs of different
// lengths, and the no-starvation floor of Demand_self (a slot of 1 flit).
module tb_winoc_top;
  import winoc_pkg::*;

  localparam int NWI  = N_WI;
  localparam int NVC  = NUM_VC;
  localparam int PKTS = 6;
  localparam int LEN  = PKT_FLITS;
  localparam int WATCHDOG = 400000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

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

  winoc_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;

  function automatic logic [FLIT_W-1:0] mk_flit(int idx, int dest, int src, int seq);
    logic [1:0] t;
    t = (idx == 0) ? 2'b01 : (idx == LEN - 1) ? 2'b10 : 2'b00;
    return {t, 4'(dest), 3'(src), 8'(seq), 15'(idx)};
  endfunction

  // ---------------- traffic plan ----------------
  int pkt_dest [NWI][PKTS];
  int next_pkt [NWI];
  int vc_active[NWI][NVC];
  int vc_pkt   [NWI][NVC];
  int vc_idx   [NWI][NVC];
  int expected_deliveries = 0;

  // ---------------- receive bookkeeping ----------------
  int exp_idx  [NWI][NWI][PKTS];
  int pkt_vc   [NWI][NWI][PKTS];
  int first_ep [NWI][NWI][PKTS];
  int delivered = 0;
  int epochs = 0;

  // mechanism counters
  int n_partial = 0, n_sleep = 0, n_bcast = 0, n_idle_epoch = 0, n_floor = 0;
  int ep_len_min = 1 << 30, ep_len_max = 0;
  int data_in_epoch = 0, last_epoch_cycle = 0;

  // per-WI slot accounting
  int alloc_at_start[NWI];
  int sent_in_slot [NWI];
  int last_rx_cycle[NWI];
  logic in_wake[NWI];
  logic start_d[NWI];

  initial begin
    for (int s = 0; s < NWI; s++) begin
      next_pkt[s] = 0;
      for (int p = 0; p < PKTS; p++) begin
        int d;
        if (($urandom % 8) == 0) d = DEST_BCAST;
        else begin
          d = $urandom % (NWI - 1);
          if (d >= s) d++;
        end
        pkt_dest[s][p] = d;
        expected_deliveries += (d == DEST_BCAST) ? NWI - 1 : 1;
      end
      for (int v = 0; v < NVC; v++) begin
        vc_active[s][v] = 0; vc_pkt[s][v] = 0; vc_idx[s][v] = 0;
      end
      alloc_at_start[s] = 0; sent_in_slot[s] = 0; last_rx_cycle[s] = 0; in_wake[s] = 0; start_d[s] = 0;
    end
    for (int d = 0; d < NWI; d++)
      for (int s = 0; s < NWI; s++)
        for (int p = 0; p < PKTS; p++) begin
          exp_idx[d][s][p] = 0; pkt_vc[d][s][p] = -1; first_ep[d][s][p] = 0;
        end
  end

  // ---------------- switch-side drivers (drive on the falling edge) --------
  always @(negedge clk) begin
    for (int s = 0; s < NWI; s++) begin
      noc_in_valid[s]  <= 1'b0;
      noc_in_vc[s]     <= '0;
      noc_in_flit[s]   <= '0;
      noc_out_ready[s] <= ($urandom % 10) != 0;
      if (rst_n && ($urandom % 6) == 0) begin
        int v0;
        logic done;
        v0 = $urandom % NVC;
        done = 1'b0;
        for (int k = 0; k < NVC && !done; k++) begin
          int v;
          v = (v0 + k) % NVC;
          if (vc_active[s][v] != 0 && !noc_in_full[s][v]) begin
            noc_in_valid[s] <= 1'b1;
            noc_in_vc[s]    <= 3'(v);
            noc_in_flit[s]  <= mk_flit(vc_idx[s][v], pkt_dest[s][vc_pkt[s][v]], s, vc_pkt[s][v]);
            vc_idx[s][v]++;
            if (vc_idx[s][v] == LEN) vc_active[s][v] = 0;
            done = 1'b1;
          end else if (vc_active[s][v] == 0 && !noc_in_busy[s][v] && next_pkt[s] < PKTS
                       && (vc_idx[s][v] == 0 || vc_idx[s][v] == LEN)) begin
            vc_active[s][v] = 1; vc_pkt[s][v] = next_pkt[s]; vc_idx[s][v] = 0;
            next_pkt[s]++;
            noc_in_valid[s] <= 1'b1;
            noc_in_vc[s]    <= 3'(v);
            noc_in_flit[s]  <= mk_flit(0, pkt_dest[s][vc_pkt[s][v]], s, vc_pkt[s][v]);
            vc_idx[s][v] = 1;
            done = 1'b1;
          end
        end
      end
    end
  end

  // A VC whose packet has been fully written keeps vc_idx == LEN until the
  // WI reports it free again; a new packet is only started after that.
  always @(negedge clk) begin
    for (int s = 0; s < NWI; s++)
      for (int v = 0; v < NVC; v++)
        if (vc_active[s][v] == 0 && vc_idx[s][v] == LEN && !noc_in_busy[s][v])
          vc_idx[s][v] = 0;
  end

  // ---------------- monitors (sample on the rising edge) ----------------
  always @(posedge clk) begin
    if (rst_n) begin
      cycle++;
      // epochs, seen at WI 0
      if (epoch_end[0]) begin
        int len;
        len = cycle - last_epoch_cycle;
        if (epochs > 0) begin
          if (len < ep_len_min) ep_len_min = len;
          if (len > ep_len_max) ep_len_max = len;
          if (data_in_epoch == 0) n_idle_epoch++;
        end
        epochs++;
        last_epoch_cycle = cycle;
        data_in_epoch = 0;
      end
      for (int i = 0; i < NWI; i++) begin
        if (tx_flit[i]) data_in_epoch++;
        // slot allocation respected
        if (slot_start[i]) begin
          if (epochs > 0) begin
            checks++;
            if (sent_in_slot[i] > alloc_at_start[i]) begin
              failures++;
              $display("FAIL WI%0d sent %0d flits in a slot allocated %0d", i, sent_in_slot[i], alloc_at_start[i]);
            end
          end
          sent_in_slot[i] = 0;
        end
        if (tx_flit[i]) sent_in_slot[i]++;
        if (start_d[i]) begin   // plan cycle after slot_start: capture allocation
          alloc_at_start[i] = int'(slot_alloc[i]);
          if (slot_alloc[i] == 1) n_floor++;
        end
        start_d[i] = slot_start[i];
        if (!rx_on[i]) n_sleep++;
        if (rx_drop[i]) begin
          failures++;
          $display("FAIL WI%0d dropped a received flit", i);
        end
        // flit spacing inside a wake window
        if (slot_end[i]) in_wake[i] = 0;
        if (rx_data[i]) begin
          if (in_wake[i]) begin
            checks++;
            if ((cycle - last_rx_cycle[i]) % FLIT_TIME != 0) begin
              failures++;
              $display("FAIL WI%0d flits %0d cycles apart", i, cycle - last_rx_cycle[i]);
            end
          end
          in_wake[i] = !slot_end[i];
          last_rx_cycle[i] = cycle;
        end
        // delivery check
        if (noc_out_valid[i] && noc_out_ready[i]) begin
          logic [FLIT_W-1:0] f;
          int src, seq, idx, dst, tp;
          f   = noc_out_flit[i];
          tp  = f[31:30]; dst = f[29:26]; src = f[25:23]; seq = f[22:15]; idx = f[14:0];
          checks++;
          if (src >= NWI || seq >= PKTS || (dst != i && dst != DEST_BCAST) || src == i
              || idx != exp_idx[i][src][seq]
              || tp != ((idx == 0) ? 1 : (idx == LEN - 1) ? 2 : 0)) begin
            failures++;
            $display("FAIL WI%0d got src %0d pkt %0d idx %0d (expected %0d) type %0d dest %0d",
                     i, src, seq, idx, (src < NWI && seq < PKTS) ? exp_idx[i][src][seq] : -1, tp, dst);
          end else begin
            if (idx == 0) begin
              pkt_vc[i][src][seq] = noc_out_vc[i];
              first_ep[i][src][seq] = epochs;
            end else if (pkt_vc[i][src][seq] != int'(noc_out_vc[i])) begin
              failures++;
              $display("FAIL WI%0d packet %0d/%0d changed VC", i, src, seq);
            end
            exp_idx[i][src][seq]++;
            if (idx == LEN - 1) begin
              delivered++;
              if (dst == DEST_BCAST) n_bcast++;
              if (epochs > first_ep[i][src][seq]) n_partial++;
            end
          end
        end
      end
    end
  end

  task automatic finish_test();
    checks++;
    if (delivered != expected_deliveries) begin
      failures++;
      $display("FAIL delivered %0d of %0d packets", delivered, expected_deliveries);
    end
    checks++; if (n_partial == 0)   begin failures++; $display("FAIL no partial packet transfer"); end
    checks++; if (n_sleep == 0)     begin failures++; $display("FAIL receivers never slept"); end
    checks++; if (n_bcast == 0)     begin failures++; $display("FAIL no broadcast delivered"); end
    checks++; if (n_idle_epoch == 0) begin failures++; $display("FAIL no epoch without data"); end
    checks++; if (ep_len_max == ep_len_min) begin failures++; $display("FAIL epoch length never changed"); end
    checks++; if (n_floor == 0)     begin failures++; $display("FAIL no 1-flit slot"); end
    $display("cycles=%0d epochs=%0d delivered=%0d/%0d partial=%0d sleep_cycles=%0d bcast=%0d idle_epochs=%0d epoch_len=%0d..%0d one_flit_slots=%0d",
             cycle, epochs, delivered, expected_deliveries, n_partial, n_sleep, n_bcast,
             n_idle_epoch, ep_len_min, ep_len_max, n_floor);
    for (int i = 0; i < NWI; i++)
      $display("WI%0d beats sent %0d heard %0d", i, beats_sent[i], beats_heard[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    noc_in_valid  = '0;
    noc_in_vc     = '0;
    noc_in_flit   = '0;
    noc_out_ready = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (delivered == expected_deliveries);
    repeat (2000) @(posedge clk);
    finish_test();
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    finish_test();
  end

endmodule
