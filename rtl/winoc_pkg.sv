// winoc_pkg: constants and types shared by the wireless-interface (WI) RTL.
//
// Flit format (FLIT_W = 32 bits). The top two bits carry the flit type:
//   01 head, 00 body, 10 tail, 11 slot information packet (SIP) flit.
// A head flit carries the destination WI in bits [29:26]; the value 4'hF
// is reserved for a broadcast to all WIs. The remaining bits are payload.
//
// Slot information packet (SIP), sent by a WI at the start of its slot:
//   flit 0 : {2'b11 Header, Size[2:0], ID[2:0], Demand[9:0], tuple 0}
//   flit k : {4'b0, tuple 2k-1, tuple 2k}            (k = 1 .. Size-1)
// A tuple is {PktID[4:0], DestWI[3:0], NumFlits[4:0]} (14 bits), in the
// field order of the packet drawing. NumFlits = 0 marks an unused tuple.
// With one tuple per output VC (8) a SIP is 1 to 5 flits long; up to seven
// tuples fit in 4 flits.
//
// The field order Header, Size, Demand, ID, (PktID, DestWI, NumFlits) and
// the 32-bit flit, 8 WIs, 8 VCs of depth 16 and the PID weights follow the
// paper. Field widths, the flit-type code, the packing of tuples into flits,
// the Q8 fixed-point weights and the beat width are choices of this design.
package winoc_pkg;

  // System and buffer sizes
  localparam int N_WI      = 8;    // wireless interfaces in the 64-core mesh
  localparam int ID_W      = 3;    // width of ID_self
  localparam int FLIT_W    = 32;   // flit and wired-link width
  localparam int NUM_VC    = 8;    // virtual channels per WI port
  localparam int VC_DEPTH  = 16;   // flits per WI virtual channel
  localparam int PKT_FLITS = 64;   // packet length in flits

  // Slot information packet fields
  localparam int DEMAND_W  = 10;   // predicted demand, flits per epoch
  localparam int PKTID_W   = 5;
  localparam int DEST_W    = 4;
  localparam int NUMF_W    = 5;    // up to VC_DEPTH flits per tuple
  localparam int SIZE_W    = 3;
  localparam int SIP_MAX   = 5;    // flits in a SIP with NUM_VC tuples
  localparam logic [DEST_W-1:0] DEST_BCAST = 4'hF;

  // Slot and epoch counting
  localparam int SLOT_W    = 8;    // flits in one transmission slot (<= NUM_VC*VC_DEPTH)
  localparam int EPOCH_W   = DEMAND_W + 3;  // sum of N_WI demands

  // Serial interface to the transceiver: 8-bit beats, 4 beats and one idle
  // cycle per flit, i.e. 32 bits per 5 cycles = 16 Gb/s at 2.5 GHz.
  localparam int SER_W     = 8;
  localparam int BEATS     = FLIT_W / SER_W;
  localparam int FLIT_TIME = BEATS + 1;

  // PID weights of Eq. (1) in Q8 fixed point: 0.66, 0.13, 0.2041
  localparam int KP_Q8 = 169;
  localparam int KI_Q8 = 33;
  localparam int KD_Q8 = 52;

  // Fixed epoch length E_F of P-SAM, in flits: one packet per WI per epoch,
  // as in the token MAC it replaces (8 x 64).
  localparam int EF_PSAM = N_WI * PKT_FLITS;

  typedef enum logic [1:0] {
    FT_BODY = 2'b00,
    FT_HEAD = 2'b01,
    FT_TAIL = 2'b10,
    FT_SIP  = 2'b11
  } flit_type_e;

  typedef enum logic {
    MAC_DSAM = 1'b0,
    MAC_PSAM = 1'b1
  } mac_mode_e;

  typedef struct packed {
    logic [PKTID_W-1:0] pktid;
    logic [DEST_W-1:0]  dest;
    logic [NUMF_W-1:0]  numflits;
  } sip_tuple_t;

  typedef struct packed {
    flit_type_e          hdr;
    logic [SIZE_W-1:0]   size;
    logic [ID_W-1:0]     id;
    logic [DEMAND_W-1:0] demand;
    sip_tuple_t          t0;
  } sip_head_t;

  typedef struct packed {
    logic [3:0]  rsvd;
    sip_tuple_t  ta;
    sip_tuple_t  tb;
  } sip_cont_t;

  function automatic flit_type_e flit_type(input logic [FLIT_W-1:0] f);
    return flit_type_e'(f[FLIT_W-1 -: 2]);
  endfunction

  function automatic logic [DEST_W-1:0] head_dest(input logic [FLIT_W-1:0] f);
    return f[FLIT_W-3 -: DEST_W];
  endfunction

endpackage
