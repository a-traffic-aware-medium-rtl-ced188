// deserializer: deserializer buffer between the receiver and the WI.
//
// A shift register collects SER_W-bit beats (beat_valid high), most
// significant first. After FLIT_W/SER_W consecutive beats it presents the
// assembled flit on out_flit with out_valid high for one cycle, one cycle
// after the last beat. Any cycle without a beat restarts the beat count, so
// flits are framed by the idle cycle the serializer puts after each flit and
// a partial flit (cut by the receiver sleeping) is discarded.
//
// The paper describes the deserializer only as a shift register; the beat
// width and the framing rule are choices of this design.
module deserializer
  import winoc_pkg::*;
#(
  parameter int W  = FLIT_W,
  parameter int BW = SER_W,
  localparam int NB = W / BW,
  localparam int CW = $clog2(NB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          beat_valid,
  input  logic [BW-1:0] beat,
  output logic          out_valid,
  output logic [W-1:0]  out_flit
);

  logic [W-1:0]  shreg;
  logic [CW-1:0] got;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      got       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (beat_valid) begin
        shreg <= {shreg[W-BW-1:0], beat};
        if (got == CW'(NB - 1)) begin
          got       <= '0;
          out_valid <= 1'b1;
        end else begin
          got <= got + 1'b1;
        end
      end else begin
        got <= '0;
      end
    end
  end

  assign out_flit = shreg;

endmodule
