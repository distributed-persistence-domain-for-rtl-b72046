// pcs_pkg: shared types and constants of the persistent CXL switch.
//
// A packet is carried through the switch whole, as one struct: a 54-bit
// metadata word, the 46-bit line address (physical address bits [51:6]) and
// a 64-byte data block. The 54/46/512 widths are the ones the persist buffer
// stores per entry. How the 54 metadata bits split into fields (port IDs,
// opcode, LD-ID, tag) is this design's choice; the CXL flit layout itself
// is not modelled. Persist-buffer entry states are the four the design
// names: Free, Data, Drain Issued and Drain.
package pcs_pkg;

  localparam int unsigned ADDR_W = 46;   // physical address [51:6]
  localparam int unsigned DATA_W = 512;  // 64-byte block
  localparam int unsigned META_W = 54;   // metadata bits kept per entry
  localparam int unsigned ID_W   = 12;   // port ID width (SPID / DPID)

  // Packet kinds seen by the switch.
  typedef enum logic [3:0] {
    OP_NONE       = 4'd0,
    OP_MEM_RD     = 4'd1,   // read request
    OP_MEM_WR     = 4'd2,   // write (persist) request
    OP_WR_ACK     = 4'd3,   // write acknowledgment
    OP_RD_DATA    = 4'd4,   // read data response
    OP_DRAIN_PATH = 4'd5,   // OS-issued DrainPath request
    OP_DRAIN_ACK  = 4'd6    // DrainPath acknowledgment from a memory node
  } opcode_e;

  // 12 + 12 + 4 + 4 + 16 + 6 = 54 bits.
  typedef struct packed {
    logic [ID_W-1:0] spid;    // source port ID
    logic [ID_W-1:0] dpid;    // destination port ID
    opcode_e         opcode;
    logic [3:0]      ld_id;   // logical device ID
    logic [15:0]     tag;     // request tag
    logic [META_W-49:0] rsvd;   // pads the word to META_W bits
  } meta_t;

  typedef struct packed {
    meta_t             meta;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
  } pkt_t;

  // Persist-buffer entry state (2 bits).
  typedef enum logic [1:0] {
    PBE_FREE         = 2'd0,
    PBE_DATA         = 2'd1,
    PBE_DRAIN_ISSUED = 2'd2,
    PBE_DRAIN        = 2'd3
  } pbe_status_e;

  // Drain-threshold schemes.
  typedef enum logic [1:0] {
    DT_EAGER    = 2'd0,   // threshold fixed at 0
    DT_LAZY     = 2'd1,   // threshold fixed at LAZY_PCT of the entries
    DT_ADAPTIVE = 2'd2    // Adaptive_CP: start at INIT_PCT, step by C
  } dt_mode_e;

  // What the Update/Read PB Entry unit asks the Response Generator to make.
  typedef enum logic [1:0] {
    RG_WR_ACK  = 2'd0,    // acknowledge a persisted write
    RG_RD_DATA = 2'd1,    // answer a read from the PB
    RG_FORWARD = 2'd2     // pass a missed read on unchanged
  } rg_kind_e;

  // Event counters of one switch.
  typedef struct packed {
    logic [31:0] wr_to_pbc;     // writes routed to the PB port
    logic [31:0] wr_bypass;     // writes that skipped the PB (PB write failures)
    logic [31:0] wr_persisted;  // writes placed in the PB and acknowledged early
    logic [31:0] wr_coalesced;  // of those, writes that overwrote a buffered block
    logic [31:0] rd_hit;        // reads answered from the PB
    logic [31:0] rd_miss;       // reads routed to the PB but passed on
    logic [31:0] ack_in;        // write-acknowledgments taken by the PBC
    logic [31:0] drains;        // entries written back
    logic [31:0] drain_paths;   // DrainPath requests passed on after draining
    logic [31:0] stalls;        // clocks a write waited for a Request Table slot
  } pcs_stats_t;

endpackage
