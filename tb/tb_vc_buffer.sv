// tb_vc_buffer: checks the VC FIFO bank against a queue-per-VC reference.
// Random writes and reads to random VCs (never a write to a full VC or a
// read from an empty one, as seen by the reference); every read value, every
// count and the full/empty flags are compared each cycle. Also fills one VC
// to exactly DEPTH and drains it in order.
module tb_vc_buffer;
  localparam int NVC = 8, DEP = 16, W = 32;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en, rd_en;
  logic [2:0] wr_vc, rd_vc;
  logic [W-1:0] wr_data, rd_data;
  logic [NVC-1:0][4:0] count;
  logic [NVC-1:0] full, empty;
  vc_buffer #(.NUM_VC(NVC), .DEPTH(DEP), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q[NVC][$];

  task automatic check_state();
    for (int v = 0; v < NVC; v++) begin
      checks++;
      if (count[v] != q[v].size() || full[v] != (q[v].size() == DEP) || empty[v] != (q[v].size() == 0)) begin
        failures++;
        $display("FAIL vc %0d count %0d ref %0d", v, count[v], q[v].size());
      end
    end
  endtask

  task automatic step(input bit w, input int wv, input bit r, input int rv);
    wr_en = w; wr_vc = 3'(wv); wr_data = $urandom; rd_en = r; rd_vc = 3'(rv);
    #0;
    if (r) begin
      checks++;
      if (rd_data != q[rv][0]) begin
        failures++; $display("FAIL read vc %0d got %h exp %h", rv, rd_data, q[rv][0]);
      end
    end
    @(posedge clk);
    if (r) void'(q[rv].pop_front());
    if (w) q[wv].push_back(wr_data);
    @(negedge clk);
    check_state();
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_vc = 0; rd_vc = 0; wr_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_state();
    for (int i = 0; i < DEP; i++) step(1, 5, 0, 0);
    checks++; if (!full[5]) begin failures++; $display("FAIL not full"); end
    for (int i = 0; i < DEP; i++) step(0, 0, 1, 5);
    for (int i = 0; i < 3000; i++) begin
      int wv, rv; bit w, r;
      wv = $urandom % NVC; rv = $urandom % NVC;
      r = ($urandom % 2) && q[rv].size() > 0;
      w = ($urandom % 2) && (q[wv].size() < DEP || (r && rv == wv));
      step(w, wv, r, rv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
