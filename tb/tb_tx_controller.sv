// tb_tx_controller: the transmit controller with an output VC buffer bank in
// front and a randomly stalling serializer stand-in behind it. Before each
// slot the testbench writes random parts of packets (20 flits long, random
// destinations including broadcast) into the output VCs and picks a random
// slot allocation and Demand_self. After slot_start it collects what the
// controller sends and compares it with a plan worked out here: one tuple per
// non-empty VC in index order with NumFlits = min(flits in the VC,
// allocation left); the slot information packet must carry Header 2'b11,
// Size = 1 + tuples/2, ID, Demand and the tuples (PktID = running packet
// number of the head, DestWI of the head), and be followed by exactly the
// announced flits of each VC in FIFO order. tx_flit must pulse once per data
// flit and a VC must stay busy until its tail has been sent. MAX_OPEN is set
// to the number of VCs here, so that every non-empty VC is planned; the
// one-open-packet rule is exercised by the whole-system test.
module tb_tx_controller;
  import winoc_pkg::*;
  localparam int NVC = NUM_VC, LEN = 20;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic slot_start, ob_wr_en, ob_rd_en, ser_valid, ser_ready, tx_on, tx_flit;
  logic [2:0] id_self, ob_wr_vc, ob_rd_vc;
  logic [EPOCH_W-1:0] slot_alloc;
  logic [DEMAND_W-1:0] demand_self;
  logic [31:0] ob_wr_flit, ob_rd_data, ser_flit;
  logic [NVC-1:0][4:0] ob_count;
  logic [NVC-1:0] ob_full, ob_empty, ovc_busy;

  vc_buffer u_buf (.clk, .rst_n, .wr_en(ob_wr_en), .wr_vc(ob_wr_vc), .wr_data(ob_wr_flit),
    .rd_en(ob_rd_en), .rd_vc(ob_rd_vc), .rd_data(ob_rd_data), .count(ob_count), .full(ob_full), .empty(ob_empty));
  tx_controller #(.MAX_OPEN(NVC)) dut (.clk, .rst_n, .id_self, .slot_start, .slot_alloc, .demand_self,
    .ob_wr_en, .ob_wr_vc, .ob_wr_flit, .ob_count, .ob_rd_data, .ob_rd_en, .ob_rd_vc,
    .ser_valid, .ser_flit, .ser_ready, .ser_busy(1'b0), .tx_on, .tx_flit, .ovc_busy);

  int checks = 0, failures = 0;
  logic [31:0] q[NVC][$];
  int vc_written[NVC];    // flits of the current packet written
  int vc_dest[NVC], vc_pid[NVC];
  int pid_ctr = 0;
  logic [31:0] got[$];
  int n_txf = 0, n_multi = 0, n_partial = 0;

  always @(posedge clk) if (rst_n) begin
    if (ser_valid && ser_ready) got.push_back(ser_flit);
    if (tx_flit) n_txf++;
  end

  task automatic write_flit(int v);
    logic [31:0] f; logic [1:0] t;
    if (vc_written[v] == 0) begin
      vc_dest[v] = ($urandom % 5 == 0) ? 15 : $urandom % N_WI;
      vc_pid[v] = pid_ctr; pid_ctr = (pid_ctr + 1) % 32;
    end
    t = (vc_written[v] == 0) ? 2'b01 : (vc_written[v] == LEN - 1) ? 2'b10 : 2'b00;
    f = {t, 4'(vc_dest[v]), 26'($urandom)};
    ob_wr_en = 1; ob_wr_vc = 3'(v); ob_wr_flit = f;
    @(negedge clk);
    ob_wr_en = 0;
    q[v].push_back(f);
    vc_written[v] = (vc_written[v] + 1) % LEN;
  endtask

  initial begin
    id_self = 3'd3; slot_start = 0; ob_wr_en = 0; ob_wr_vc = 0; ob_wr_flit = 0;
    slot_alloc = 0; demand_self = 0; ser_ready = 0;
    for (int v = 0; v < NVC; v++) vc_written[v] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < 300; s++) begin
      int rem, ntup, size, idx;
      int tv[$], tn[$];
      // new traffic; a VC gets a new packet only once its previous tail left
      for (int v = 0; v < NVC; v++) begin
        int n;
        n = $urandom % 8;
        for (int i = 0; i < n; i++)
          if (q[v].size() < VC_DEPTH && !(vc_written[v] == 0 && ovc_busy[v])) write_flit(v);
      end
      slot_alloc = EPOCH_W'((s % 9 == 0) ? 0 : $urandom % 70);
      demand_self = DEMAND_W'($urandom);
      // plan
      tv.delete(); tn.delete();
      rem = int'(slot_alloc);
      for (int v = 0; v < NVC; v++) begin
        int n;
        n = (q[v].size() < rem) ? q[v].size() : rem;
        if (n > 0) begin tv.push_back(v); tn.push_back(n); end
        rem -= n;
      end
      ntup = tv.size();
      size = 1 + ntup / 2;
      if (ntup > 1) n_multi++;
      got.delete(); n_txf = 0;
      slot_start = 1;
      @(negedge clk);
      slot_start = 0;
      for (int c = 0; c < 2000 && (tx_on || c < 3); c++) begin
        ser_ready = ($urandom % 3) != 0;
        @(negedge clk);
      end
      ser_ready = 0;
      // compare
      begin
        int exp_len;
        exp_len = size;
        foreach (tn[k]) exp_len += tn[k];
        checks++;
        if (got.size() != exp_len || n_txf != exp_len - size) begin
          failures++; $display("FAIL slot %0d: %0d flits sent (%0d data), expected %0d", s, got.size(), n_txf, exp_len);
        end else begin
          sip_head_t h;
          sip_tuple_t tt;
          sip_cont_t cc;
          h = sip_head_t'(got[0]);
          checks++;
          if (h.hdr != FT_SIP || h.size != size || h.id != id_self || h.demand != demand_self) begin
            failures++; $display("FAIL slot %0d header %h", s, got[0]);
          end
          for (int k = 0; k < 2 * size - 1; k++) begin
            int fi;
            fi = (k + 1) / 2;
            if (k == 0) tt = h.t0;
            else begin
              cc = sip_cont_t'(got[fi]);
              tt = (k % 2 == 1) ? cc.ta : cc.tb;
            end
            checks++;
            if (k < ntup) begin
              if (tt.numflits != tn[k] || tt.dest != vc_dest[tv[k]] ||
                  (tt.pktid != vc_pid[tv[k]] && !(vc_written[tv[k]] == 0))) begin
                failures++; $display("FAIL slot %0d tuple %0d: %0d/%0d/%0d", s, k, tt.pktid, tt.dest, tt.numflits);
              end
              if (tn[k] < q[tv[k]].size()) n_partial++;
            end else if (tt.numflits != 0) begin
              failures++; $display("FAIL slot %0d unused tuple %0d not empty", s, k);
            end
          end
          idx = size;
          foreach (tv[k])
            for (int i = 0; i < tn[k]; i++) begin
              logic [31:0] e;
              e = q[tv[k]].pop_front();
              checks++;
              if (got[idx] != e) begin
                failures++; $display("FAIL slot %0d data flit %0d: %h exp %h", s, idx, got[idx], e);
              end
              idx++;
            end
        end
        // a VC is busy exactly while part of a packet is not yet sent
        for (int v = 0; v < NVC; v++) begin
          checks++;
          if (ovc_busy[v] != (q[v].size() > 0 || vc_written[v] != 0)) begin
            failures++; $display("FAIL slot %0d VC %0d busy %0b", s, v, ovc_busy[v]);
          end
        end
      end
    end
    checks++;
    if (n_multi == 0 || n_partial == 0) begin failures++; $display("FAIL coverage"); end
    $display("multi-tuple slots %0d, partial tuples %0d", n_multi, n_partial);
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
