// tb_rx_controller: the receive controller with a sleep/wake unit and an
// input VC buffer bank (drained at random by the switch side), fed with flits
// as the deserializer would deliver them: one every 5 cycles from the start
// of each slot information packet. WI 2 is under test. Slots of WIs 0..7 in
// ring order carry random tuples: unicast to WI 2, to other WIs, and
// broadcast, with partial packets of random length continued over later
// slots. The testbench delivers a data flit only if it lies in the window it
// computes the receiver must be awake for, and checks that the receiver is
// indeed on for those beats and off in the windows before and after.
// Checked: the REG_demand write for every header, the loaded
// initial_sleep/wake/post_wake counts, that exactly the flits addressed to
// WI 2 reach the input buffers, each packet in order through one VC, that
// slot_start pulses after the slot of WI 1 only and epoch_end after the slot
// of WI 7 only, and that nothing is dropped.
module tb_rx_controller;
  import winoc_pkg::*;
  localparam int ME = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic des_valid; logic [31:0] des_flit;
  logic reg_wr; logic [2:0] reg_wr_id; logic [DEMAND_W-1:0] reg_wr_demand;
  logic sw_load, slot_end, slot_start, epoch_end, rx_on, slot_tick;
  logic [SLOT_W-1:0] sw_init, sw_wake, sw_post;
  logic [2:0] owner, ib_wr_vc, rd_vc;
  logic ib_wr_en, rx_drop, rx_data, rd_en;
  logic [31:0] ib_wr_flit, rd_data;
  logic [7:0] ib_full, ib_empty, ivc_release;
  logic [7:0][4:0] ib_count;
  logic [2:0] id_self;

  rx_controller dut (.clk, .rst_n, .id_self, .des_valid, .des_flit, .reg_wr, .reg_wr_id, .reg_wr_demand,
    .sw_load, .sw_init, .sw_wake, .sw_post, .slot_end, .slot_start, .epoch_end, .owner,
    .ib_wr_en, .ib_wr_vc, .ib_wr_flit, .ib_full, .ivc_release, .rx_drop, .rx_data);
  sleep_wake_unit u_swu (.clk, .rst_n, .load(sw_load), .init_sleep(sw_init), .wake(sw_wake),
    .post_wake(sw_post), .rx_on, .slot_tick, .slot_end,
    .initial_sleep_counter(), .wake_counter(), .post_wake_counter());
  vc_buffer u_ib (.clk, .rst_n, .wr_en(ib_wr_en), .wr_vc(ib_wr_vc), .wr_data(ib_wr_flit),
    .rd_en, .rd_vc, .rd_data, .count(ib_count), .full(ib_full), .empty(ib_empty));

  int checks = 0, failures = 0;
  // switch side: drain a random non-empty VC
  always_comb begin
    rd_vc = 0; rd_en = 0;
    for (int v = 7; v >= 0; v--) if (!ib_empty[v]) begin rd_vc = 3'(v); rd_en = 1; end
  end
  assign ivc_release = (rd_en && rd_data[31:30] == 2'b10) ? 8'(1 << rd_vc) : 8'h0;

  // per source packet state towards WI 2 (and a generic stream for others)
  int pk_id[N_WI], pk_len[N_WI], pk_pos[N_WI];
  int exp_next[N_WI][32];
  int vc_of[N_WI][32];
  int n_written = 0, n_expected = 0, n_slot_start = 0, n_epoch = 0, n_bcast = 0, n_sleep = 0;
  int exp_slot_start = 0, exp_epoch = 0;

  always @(posedge clk) if (rst_n) begin
    if (slot_start) n_slot_start++;
    if (epoch_end) n_epoch++;
    if (rx_drop) begin failures++; $display("FAIL drop"); end
    if (!rx_on) n_sleep++;
    if (rd_en) begin
      int src, pid, pos;
      src = rd_data[29:27]; pid = rd_data[26:22]; pos = rd_data[15:0];
      checks++;
      if (pos != exp_next[src][pid] || (pos != 0 && vc_of[src][pid] != rd_vc)) begin
        failures++; $display("FAIL src %0d pkt %0d flit %0d (exp %0d) vc %0d", src, pid, pos, exp_next[src][pid], rd_vc);
      end
      if (pos == 0) vc_of[src][pid] = rd_vc;
      exp_next[src][pid] = (rd_data[31:30] == 2'b10) ? 0 : pos + 1;
      n_written++;
    end
  end

  task automatic deliver(input logic [31:0] f, input bit present, input bit must_on, input bit must_off);
    // four beat cycles, then the flit cycle
    for (int b = 0; b < 4; b++) begin
      @(negedge clk);
      if (must_on || must_off) begin
        checks++;
        if ((must_on && !rx_on) || (must_off && rx_on)) begin
          failures++; $display("FAIL receiver %s during beats", must_on ? "off" : "on");
        end
      end
    end
    @(negedge clk);
    des_valid = present; des_flit = f;
    @(posedge clk);
    #0;
    @(negedge clk);   // allow combinational outputs to be seen by the monitors
    des_valid = 0;
  endtask

  initial begin
    id_self = 3'(ME); des_valid = 0; des_flit = 0;
    for (int s = 0; s < N_WI; s++) begin
      pk_id[s] = 0; pk_len[s] = 0; pk_pos[s] = 0;
      for (int p = 0; p < 32; p++) begin exp_next[s][p] = 0; vc_of[s][p] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int slot = 0; slot < 240; slot++) begin
      int own, nt, size, first, last, acc, tot, ei, ew, ep;
      sip_tuple_t t[8];
      int tdst[8];
      logic [31:0] sipf[5];
      sip_head_t h;
      sip_cont_t c;
      logic [DEMAND_W-1:0] dem;
      own = slot % N_WI;
      nt = (slot % 11 == 0) ? 0 : 1 + $urandom % 8;
      first = -1; last = -1; acc = 0;
      for (int k = 0; k < 8; k++) begin
        t[k] = '0;
        if (k < nt) begin
          int d;
          d = $urandom % 4;
          tdst[k] = (d == 0) ? 15 : (d == 1) ? ME : $urandom % N_WI;
          // only one tuple per slot continues the owner's packet to WI 2
          if ((tdst[k] == ME || tdst[k] == 15) && (own == ME || first >= 0 && own != ME)) tdst[k] = (ME + 1 + own) % N_WI == ME ? 0 : (ME + 1 + own) % N_WI;
          if (tdst[k] == ME && own == ME) tdst[k] = 0;
          t[k].dest = 4'(tdst[k]);
          t[k].numflits = 5'(1 + $urandom % 16);
          if ((tdst[k] == ME || tdst[k] == 15) && own != ME) begin
            if (pk_pos[own] == 0) begin
              pk_len[own] = 1 + $urandom % 40;
              pk_id[own] = (pk_id[own] + 1) % 32;
            end
            if (t[k].numflits > pk_len[own] - pk_pos[own]) t[k].numflits = 5'(pk_len[own] - pk_pos[own]);
            t[k].pktid = 5'(pk_id[own]);
            if (first < 0) first = acc;
            last = acc + t[k].numflits;
            if (tdst[k] == 15) n_bcast++;
          end else t[k].pktid = 5'($urandom);
          acc += t[k].numflits;
        end
      end
      tot = acc;
      if (first < 0) begin ei = tot; ew = 0; ep = 0; end
      else begin ei = first; ew = last - first; ep = tot - last; end
      size = 1 + nt / 2;
      dem = DEMAND_W'($urandom);
      h = '{hdr: FT_SIP, size: 3'(size), id: 3'(own), demand: dem, t0: t[0]};
      sipf[0] = h;
      for (int f = 1; f < size; f++) begin
        c.rsvd = 0; c.ta = t[2*f-1]; c.tb = (2*f < 8) ? t[2*f] : '0;
        sipf[f] = c;
      end
      // send the SIP
      for (int f = 0; f < size; f++) begin
        for (int b = 0; b < 4; b++) @(negedge clk);
        @(negedge clk);
        des_valid = 1; des_flit = sipf[f];
        #0;
        if (f == 0) begin
          checks++;
          if (!reg_wr || reg_wr_id != own || reg_wr_demand != dem) begin failures++; $display("FAIL REG_demand write"); end
        end
        if (f == size - 1) begin
          checks++;
          if (!sw_load || sw_init != ei || sw_wake != ew || sw_post != ep) begin
            failures++; $display("FAIL slot %0d schedule %0d/%0d/%0d exp %0d/%0d/%0d", slot, sw_init, sw_wake, sw_post, ei, ew, ep);
          end
        end
        @(posedge clk);
        @(negedge clk);
        des_valid = 0;
        // the flit cycle used one of the 5 cycles of the next window
        if (f == size - 1) break;
        repeat (0) @(negedge clk);
      end
      // data flits: the receiver's window starts the cycle after the load
      begin
        int idx;
        idx = 0;
        for (int k = 0; k < nt; k++)
          for (int i = 0; i < t[k].numflits; i++) begin
            logic [31:0] f;
            bit mine, awake;
            mine = (tdst[k] == ME || tdst[k] == 15) && own != ME;
            awake = (idx >= ei && idx < ei + ew);
            if (mine) begin
              logic [1:0] ty;
              ty = (pk_pos[own] == pk_len[own] - 1) ? 2'b10 : (pk_pos[own] == 0) ? 2'b01 : 2'b00;
              f = {ty, 3'(own), 5'(pk_id[own]), 6'b0, 16'(pk_pos[own])};
              pk_pos[own] = (pk_pos[own] + 1 == pk_len[own]) ? 0 : pk_pos[own] + 1;
              n_expected++;
            end else f = {2'b00, 30'h3fff_ffff};
            // beats occupy 4 cycles, flit delivered on the 5th
            for (int b = 0; b < 4; b++) begin
              if (b > 0 || idx > 0 || 1) begin
                checks++;
                if (rx_on != awake) begin failures++; $display("FAIL slot %0d flit %0d rx_on %0b exp %0b", slot, idx, rx_on, awake); end
              end
              @(negedge clk);
            end
            des_valid = awake; des_flit = f;
            @(negedge clk);
            des_valid = 0;
            idx++;
          end
      end
      repeat (3) @(negedge clk);
      if (own == ME - 1) exp_slot_start++;
      if (own == N_WI - 1) exp_epoch++;
    end
    repeat (50) @(negedge clk);
    checks++;
    if (n_written != n_expected || n_slot_start != exp_slot_start || n_epoch != exp_epoch || n_bcast == 0 || n_sleep == 0) begin
      failures++;
      $display("FAIL totals: flits %0d/%0d slot_start %0d/%0d epochs %0d/%0d bcast %0d sleep %0d",
               n_written, n_expected, n_slot_start, exp_slot_start, n_epoch, exp_epoch, n_bcast, n_sleep);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
