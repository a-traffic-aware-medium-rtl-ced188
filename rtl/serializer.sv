// serializer: serializer buffer between the WI and its transmitter.
//
// A shift register takes one FLIT_W-bit flit (valid/ready handshake) and
// sends it most-significant beat first as FLIT_W/SER_W beats of SER_W bits,
// one per cycle, with beat_valid high. After the last beat one idle cycle
// follows, in which the next flit can be loaded, so that back-to-back flits
// leave every FLIT_W/SER_W + 1 cycles: 4 + 1 = 5 cycles for 32-bit flits,
// 16 Gb/s at a 2.5 GHz clock, the transceiver rate of the paper. The idle
// cycle also frames flits for the deserializer.
//
// The paper describes the serializer only as a shift register; the beat
// width and the idle framing cycle are choices of this design.
module serializer
  import winoc_pkg::*;
#(
  parameter int W  = FLIT_W,
  parameter int BW = SER_W,
  localparam int NB = W / BW,
  localparam int CW = $clog2(NB + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_flit,
  output logic          beat_valid,
  output logic [BW-1:0] beat
);

  logic [W-1:0]  shreg;
  logic [CW-1:0] left;

  assign in_ready   = (left == '0);
  assign beat_valid = (left != '0);
  assign beat       = shreg[W-1 -: BW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      left  <= '0;
    end else if (left != '0) begin
      shreg <= shreg << BW;
      left  <= left - 1'b1;
    end else if (in_valid) begin
      shreg <= in_flit;
      left  <= CW'(NB);
    end
  end

endmodule
