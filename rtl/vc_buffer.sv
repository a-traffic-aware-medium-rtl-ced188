// vc_buffer: a bank of virtual-channel FIFOs, used for both the input
// buffers (wireless -> NoC switch) and the output buffers (NoC switch ->
// wireless) of a wireless interface.
//
// NUM_VC independent FIFOs of DEPTH flits share one write port and one read
// port. A write puts wr_data at the tail of VC wr_vc; a read removes the head
// of VC rd_vc. rd_data shows the head of rd_vc combinationally (first-word
// fall-through), so a reader can look at a flit and pop it in the same
// cycle. count[v] is the occupancy of VC v after the last clock edge. A
// write and a read may hit the same VC in one cycle.
//
// The paper gives the WI 8 VCs of 16 flits each; the single write and read
// port and the fall-through read are choices of this design. Writing a full
// VC or reading an empty one is an error, checked by assertions.
module vc_buffer #(
  parameter int NUM_VC = winoc_pkg::NUM_VC,
  parameter int DEPTH  = winoc_pkg::VC_DEPTH,
  parameter int W      = winoc_pkg::FLIT_W,
  localparam int VC_W  = $clog2(NUM_VC),
  localparam int PTR_W = $clog2(DEPTH),
  localparam int CNT_W = $clog2(DEPTH + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [VC_W-1:0]             wr_vc,
  input  logic [W-1:0]                wr_data,
  input  logic                        rd_en,
  input  logic [VC_W-1:0]             rd_vc,
  output logic [W-1:0]                rd_data,
  output logic [NUM_VC-1:0][CNT_W-1:0] count,
  output logic [NUM_VC-1:0]           full,
  output logic [NUM_VC-1:0]           empty
);

  logic [W-1:0]     mem [NUM_VC][DEPTH];
  logic [PTR_W-1:0] wptr [NUM_VC];
  logic [PTR_W-1:0] rptr [NUM_VC];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_vc][wptr[wr_vc]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VC; v++) begin
        wptr[v]  <= '0;
        rptr[v]  <= '0;
        count[v] <= '0;
      end
    end else begin
      for (int v = 0; v < NUM_VC; v++) begin
        logic do_wr, do_rd;
        do_wr = wr_en && (wr_vc == VC_W'(v));
        do_rd = rd_en && (rd_vc == VC_W'(v));
        if (do_wr) wptr[v] <= (wptr[v] == PTR_W'(DEPTH - 1)) ? '0 : wptr[v] + 1'b1;
        if (do_rd) rptr[v] <= (rptr[v] == PTR_W'(DEPTH - 1)) ? '0 : rptr[v] + 1'b1;
        if (do_wr && !do_rd) count[v] <= count[v] + 1'b1;
        else if (do_rd && !do_wr) count[v] <= count[v] - 1'b1;
      end
    end
  end

  assign rd_data = mem[rd_vc][rptr[rd_vc]];

  always_comb begin
    for (int v = 0; v < NUM_VC; v++) begin
      full[v]  = (count[v] == CNT_W'(DEPTH));
      empty[v] = (count[v] == '0);
    end
  end

  // A write to a full VC is only legal if the same VC is read in that cycle.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (!full[wr_vc] || (rd_en && rd_vc == wr_vc)));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> !empty[rd_vc]);

endmodule
