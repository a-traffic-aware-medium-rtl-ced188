// tb_wireless_interface: two wireless interfaces (NWI = 2, so each may keep
// all its VCs open) sharing a medium, each fed by its switch side with
// packets of 64 flits for the other, several at once on different VCs.
// Checks, independently of the MAC: every packet arrives complete, in order
// and through one input VC; each WI sends no more data flits in a slot than
// its Slot_counter allowed; flits on the air follow the 5-cycle flit grid;
// the antenna is silent unless the transmitter was on (one-cycle latency); only one WI talks at
// a time; after traffic stops, Demand_self returns to 0 (no flits waiting).
module tb_wireless_interface;
  import winoc_pkg::*;
  localparam int NWI = 2, NVC = NUM_VC, LEN = PKT_FLITS, PKTS = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NWI-1:0] in_valid, out_valid, out_ready, ant_v, epoch_end, slot_start, slot_end, tx_on, rx_on, tx_flit, rx_data, rx_drop;
  logic [NWI-1:0][2:0] in_vc, out_vc;
  logic [NWI-1:0][31:0] in_flit, out_flit, bs, bh;
  logic [NWI-1:0][NVC-1:0] in_full, in_busy;
  logic [NWI-1:0][7:0] ant_b;
  logic [NWI-1:0][DEMAND_W-1:0] dem;
  logic [NWI-1:0][EPOCH_W-1:0] alloc, ecnt;
  logic med_v; logic [7:0] med_b;
  assign med_v = |ant_v;
  assign med_b = ant_b[0] | ant_b[1];

  for (genvar i = 0; i < NWI; i++) begin : g
    wireless_interface #(.NWI(NWI)) u (.clk, .rst_n, .id_cfg(1'(i)),
      .noc_in_valid(in_valid[i]), .noc_in_vc(in_vc[i]), .noc_in_flit(in_flit[i]),
      .noc_in_full(in_full[i]), .noc_in_busy(in_busy[i]),
      .noc_out_valid(out_valid[i]), .noc_out_vc(out_vc[i]), .noc_out_flit(out_flit[i]), .noc_out_ready(out_ready[i]),
      .ant_tx_valid(ant_v[i]), .ant_tx_beat(ant_b[i]), .ant_rx_valid(med_v), .ant_rx_beat(med_b),
      .demand_self(dem[i]), .slot_alloc(alloc[i]), .epoch_counter(ecnt[i]), .epoch_end(epoch_end[i]),
      .slot_start(slot_start[i]), .slot_end(slot_end[i]), .tx_on(tx_on[i]), .rx_on(rx_on[i]),
      .tx_flit(tx_flit[i]), .rx_data(rx_data[i]), .rx_drop(rx_drop[i]), .beats_sent(bs[i]), .beats_heard(bh[i]));
  end

  int checks = 0, failures = 0, cyc = 0, delivered = 0;
  int nxt_pkt[NWI], vc_act[NWI][NVC], vc_pkt[NWI][NVC], vc_idx[NWI][NVC];
  int exp_idx[NWI][PKTS], pvc[NWI][PKTS];
  int sent_slot[NWI], alloc_q[NWI], sd[NWI];
  int run_start = -1, runs = 0;
  bit prev_med = 0;
  bit tx_on_q[NWI] = '{0, 0};

  always @(negedge clk) begin
    for (int s = 0; s < NWI; s++) begin
      in_valid[s] <= 0; out_ready[s] <= ($urandom % 4) != 0;
      if (rst_n && ($urandom % 3) == 0) begin
        int v;
        v = $urandom % NVC;
        if (vc_act[s][v] != 0 && !in_full[s][v]) begin
          in_valid[s] <= 1; in_vc[s] <= 3'(v);
          in_flit[s] <= {(vc_idx[s][v] == LEN - 1) ? 2'b10 : 2'b00, 4'(1 - s), 3'(s), 8'(vc_pkt[s][v]), 15'(vc_idx[s][v])};
          vc_idx[s][v]++;
          if (vc_idx[s][v] == LEN) vc_act[s][v] = 0;
        end else if (vc_act[s][v] == 0 && !in_busy[s][v] && nxt_pkt[s] < PKTS && vc_idx[s][v] != LEN) begin
          vc_act[s][v] = 1; vc_pkt[s][v] = nxt_pkt[s]; nxt_pkt[s]++;
          in_valid[s] <= 1; in_vc[s] <= 3'(v);
          in_flit[s] <= {2'b01, 4'(1 - s), 3'(s), 8'(vc_pkt[s][v]), 15'(0)};
          vc_idx[s][v] = 1;
        end
      end
      for (int v = 0; v < NVC; v++)
        if (vc_act[s][v] == 0 && vc_idx[s][v] == LEN && !in_busy[s][v]) vc_idx[s][v] = 0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    checks++;
    if (ant_v[0] && ant_v[1]) begin failures++; $display("FAIL two talkers"); end
    // beat runs on the air are exactly 4 long
    if (med_v && !prev_med) run_start = cyc;
    if (!med_v && prev_med) begin
      checks++; runs++;
      if (cyc - run_start != 4) begin failures++; $display("FAIL beat run of %0d", cyc - run_start); end
    end
    prev_med = med_v;
    for (int i = 0; i < NWI; i++) begin
      if (ant_v[i] && !tx_on_q[i]) begin failures++; $display("FAIL radiating while off"); end
      tx_on_q[i] = tx_on[i];
      if (rx_drop[i]) begin failures++; $display("FAIL drop"); end
      if (slot_start[i]) begin
        if (cyc > 10) begin
          checks++;
          if (sent_slot[i] > alloc_q[i]) begin failures++; $display("FAIL WI%0d over allocation", i); end
        end
        sent_slot[i] = 0;
      end
      if (sd[i]) alloc_q[i] = int'(alloc[i]);
      sd[i] = slot_start[i];
      if (tx_flit[i]) sent_slot[i]++;
      if (out_valid[i] && out_ready[i]) begin
        int src, seq, idx;
        src = out_flit[i][25:23]; seq = out_flit[i][22:15]; idx = out_flit[i][14:0];
        checks++;
        if (src != 1 - i || seq >= PKTS || idx != exp_idx[i][seq] || (idx > 0 && pvc[i][seq] != out_vc[i])) begin
          failures++; $display("FAIL WI%0d got %0d/%0d/%0d", i, src, seq, idx);
        end else begin
          if (idx == 0) pvc[i][seq] = out_vc[i];
          exp_idx[i][seq]++;
          if (idx == LEN - 1) delivered++;
        end
      end
    end
  end

  initial begin
    for (int s = 0; s < NWI; s++) begin
      nxt_pkt[s] = 0; sent_slot[s] = 0; alloc_q[s] = 0; sd[s] = 0;
      for (int v = 0; v < NVC; v++) begin vc_act[s][v] = 0; vc_pkt[s][v] = 0; vc_idx[s][v] = 0; end
      for (int p = 0; p < PKTS; p++) begin exp_idx[s][p] = 0; pvc[s][p] = 0; end
    end
    in_valid = 0; in_vc = 0; in_flit = 0; out_ready = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (delivered == NWI * PKTS);
    repeat (3000) @(posedge clk);
    for (int i = 0; i < NWI; i++) begin
      checks++;
      if (dem[i] != 0) begin failures++; $display("FAIL WI%0d demand %0d after idle", i, dem[i]); end
    end
    checks++;
    if (runs == 0) failures++;
    $display("cycles %0d delivered %0d beat runs %0d", cyc, delivered, runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog delivered %0d", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
