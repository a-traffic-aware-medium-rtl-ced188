// tb_allocation_unit: checks both slot allocation mechanisms. A D-SAM and a
// P-SAM instance receive the same random REG_demand writes (including writes
// carrying their own ID, which must be ignored) and Demand_self. At each
// epoch end the D-SAM slot must equal Demand_self and the epoch length the
// sum of all demands (Eqs. 3, 4); the P-SAM slot must equal
// floor(Demand_self * 512 / sum) with the floor of 1 for a non-zero demand
// and the epoch length 512 (Eq. 2). Slot_counter must then count down with
// transmitted flits and stop at 0.
module tb_allocation_unit;
  import winoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [2:0] id_self;
  logic reg_wr, epoch_end, tx_flit;
  logic [2:0] reg_wr_id;
  logic [DEMAND_W-1:0] reg_wr_demand, demand_self;
  logic [EPOCH_W-1:0] slot_d, slot_p, len_d, len_p;
  logic [N_WI-1:0][DEMAND_W-1:0] rd_d, rd_p;

  allocation_unit #(.MODE(MAC_DSAM)) u_d (.clk, .rst_n, .id_self, .reg_wr, .reg_wr_id, .reg_wr_demand,
    .demand_self, .epoch_end, .tx_flit, .slot_counter(slot_d), .epoch_len(len_d), .reg_demand(rd_d));
  allocation_unit #(.MODE(MAC_PSAM)) u_p (.clk, .rst_n, .id_self, .reg_wr, .reg_wr_id, .reg_wr_demand,
    .demand_self, .epoch_end, .tx_flit, .slot_counter(slot_p), .epoch_len(len_p), .reg_demand(rd_p));

  int checks = 0, failures = 0;
  int dem[N_WI];

  initial begin
    reg_wr = 0; epoch_end = 0; tx_flit = 0; reg_wr_id = 0; reg_wr_demand = 0; demand_self = 0;
    id_self = 3'd5;
    for (int k = 0; k < N_WI; k++) dem[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 400; e++) begin
      int sum, exp_p, sent;
      demand_self = (e % 5 == 0) ? 0 : DEMAND_W'($urandom % ((e % 2) ? 8 : 1024));
      for (int k = 0; k < N_WI; k++) begin
        reg_wr = 1; reg_wr_id = 3'(k);
        reg_wr_demand = (e % 7 == 0) ? 0 : DEMAND_W'($urandom % ((e % 3 == 0) ? 5 : 1024));
        if (k != id_self) dem[k] = reg_wr_demand;
        @(negedge clk);
      end
      reg_wr = 0;
      dem[id_self] = demand_self;
      sum = 0;
      for (int k = 0; k < N_WI; k++) sum += dem[k];
      checks++;
      if (len_d != sum || len_p != EF_PSAM) begin
        failures++; $display("FAIL epoch length %0d exp %0d / %0d", len_d, sum, len_p);
      end
      epoch_end = 1;
      @(negedge clk);
      epoch_end = 0;
      exp_p = (sum == 0) ? 0 : (demand_self * EF_PSAM) / sum;
      if (exp_p == 0 && demand_self != 0) exp_p = 1;
      checks++;
      if (slot_d != demand_self || slot_p != exp_p) begin
        failures++; $display("FAIL slots D %0d exp %0d  P %0d exp %0d", slot_d, demand_self, slot_p, exp_p);
      end
      sent = $urandom % 12;
      for (int i = 0; i < sent; i++) begin tx_flit = 1; @(negedge clk); end
      tx_flit = 0;
      checks++;
      if (slot_d != ((demand_self > sent) ? demand_self - sent : 0) ||
          slot_p != ((exp_p > sent) ? exp_p - sent : 0)) begin
        failures++; $display("FAIL slot counters after %0d flits: %0d %0d", sent, slot_d, slot_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
