// tb_winoc_workloads: runs the synthetic traffic patterns (uniform random,
// hotspot, bit complement, broadcast) end to end on three systems side
// by side, each driven by a winoc_traffic_bench:
//   - the main configuration, 8 WIs, every parameter at its default;
//   - the hierarchical variant with 3 WIs on the channel (NWI = 3);
//   - the main configuration with proportional slot allocation
//     (MODE = MAC_PSAM, fixed epoch of E_F flits).
// All share the clock and reset. The test ends when all benches are done
// and prints the sum of their checks and failures. A watchdog ends it with
// a failure if traffic has not drained after WATCHDOG cycles.
module tb_winoc_workloads;

  localparam int WATCHDOG = 1500000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic done_main, done_hier;
  logic done_psam;
  int   checks_main, failures_main, checks_hier, failures_hier, checks_psam, failures_psam;

  winoc_traffic_bench #(.PPP(4)) u_main (
    .clk, .rst_n, .done(done_main), .checks(checks_main), .failures(failures_main));

  winoc_traffic_bench #(.NWI(3), .PPP(4)) u_hier (
    .clk, .rst_n, .done(done_hier), .checks(checks_hier), .failures(failures_hier));

  winoc_traffic_bench #(.PPP(4), .MODE(winoc_pkg::MAC_PSAM)) u_psam (
    .clk, .rst_n, .done(done_psam), .checks(checks_psam), .failures(failures_psam));

  task automatic report(int extra);
    $display("TB_RESULT checks=%0d failures=%0d",
             checks_main + checks_hier + checks_psam + 1,
             failures_main + failures_hier + failures_psam + extra);
    $finish;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (done_main && done_hier && done_psam);
    report(0);
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("FAIL watchdog");
    report(1);
  end

endmodule
