// expand_pkg: widths, opcodes and message structs shared by the host-side
// reflector and the SSD-side decider of the expander-driven prefetcher.
//
// Messages are modelled at CXL transaction level (one struct per message,
// one valid per channel) rather than packed into 256-byte flits; the link
// and PHY layers sit below this design. A cache line is 64 bytes, so memory
// addresses are line addresses (byte address bits 51:6 as in CXL.mem).
//
// From the paper: MemRdPC travels on the M2S RwD channel (which carries a
// payload, used here for the PC); BISnpData is a new S2M BISnp opcode whose
// payload follows on the S2M data channel; BIRsp answers a BISnp; the
// reflector tells the decider about cache hits over CXL.io; timestamps are
// 8 bytes (an 80-byte buffer holds 10 of them). Opcode values for the two
// new opcodes, the payload layout and the config register offsets are this
// design's own choices.
package expand_pkg;

  localparam int unsigned LINE_ADDR_W = 46;   // byte address [51:6]
  localparam int unsigned PC_W        = 64;
  localparam int unsigned PID_W       = 16;
  localparam int unsigned DATA_W      = 512;  // one 64-byte line
  localparam int unsigned TS_W        = 64;   // 8-byte arrival timestamps
  localparam int unsigned TAG_W       = 16;   // CXL.mem tag
  localparam int unsigned LAT_W       = 32;   // latencies in cycles
  localparam int unsigned CAT_W       = 6;    // 64 classifier categories
  localparam int unsigned HASH_W      = 16;   // hashed (pid, PC)
  localparam int unsigned DEV_W       = 4;    // device index in the pool
  localparam int unsigned BUS_W       = 8;    // PCIe bus number
  localparam int unsigned CFG_ADDR_W  = 12;   // config space offset

  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [DATA_W-1:0]      line_t;
  typedef logic [TS_W-1:0]        ts_t;
  typedef logic [LAT_W-1:0]       lat_t;

  // M2S Req opcodes (MemRd is the standard one)
  typedef enum logic [3:0] {
    M2S_REQ_MEMINV = 4'b0000,
    M2S_REQ_MEMRD  = 4'b0001
  } m2s_req_op_e;

  // M2S RwD opcodes: MemWr standard, MemRdPC one of the custom encodings
  typedef enum logic [3:0] {
    M2S_RWD_MEMWR   = 4'b0001,
    M2S_RWD_MEMRDPC = 4'b1000
  } m2s_rwd_op_e;

  // S2M BISnp opcodes: BISnpInv standard, BISnpData a custom encoding
  typedef enum logic [3:0] {
    S2M_BISNP_INV  = 4'b0010,
    S2M_BISNP_DATA = 4'b1000
  } s2m_bisnp_op_e;

  // S2M data (DRS) opcodes: demand read data, or the payload of a BISnpData
  typedef enum logic [2:0] {
    S2M_DRS_MEMDATA = 3'b000,
    S2M_DRS_BIDATA  = 3'b111
  } s2m_drs_op_e;

  // M2S RwD message. For MemRdPC the payload holds the PC in bits [63:0]
  // and the process id in bits [79:64].
  typedef struct packed {
    m2s_rwd_op_e         opcode;
    logic [TAG_W-1:0]    tag;
    line_addr_t          addr;
    line_t               data;
  } m2s_rwd_t;

  // M2S BIRsp (answer to a BISnp)
  typedef struct packed {
    logic [TAG_W-1:0]    bi_tag;
    line_addr_t          addr;
  } m2s_birsp_t;

  // S2M BISnp header (no payload in the message itself)
  typedef struct packed {
    s2m_bisnp_op_e       opcode;
    logic [TAG_W-1:0]    bi_tag;
    line_addr_t          addr;
  } s2m_bisnp_t;

  // S2M data message
  typedef struct packed {
    s2m_drs_op_e         opcode;
    logic [TAG_W-1:0]    tag;
    line_t               data;
  } s2m_drs_t;

  // CXL.io cache-hit notification from reflector to decider
  typedef struct packed {
    line_addr_t          addr;
  } io_hit_t;

  // CXL.io configuration request / completion
  typedef struct packed {
    logic                  write;
    logic [DEV_W-1:0]      dev;
    logic [CFG_ADDR_W-1:0] reg_addr;
    logic [31:0]           wdata;
  } cfg_req_t;

  typedef struct packed {
    logic [DEV_W-1:0]      dev;
    logic [31:0]           rdata;
  } cfg_cpl_t;

  // Configuration register offsets on the CXL-SSD
  localparam logic [CFG_ADDR_W-1:0] CFG_DSLBIS_LAT = 12'h100; // read only
  localparam logic [CFG_ADDR_W-1:0] CFG_E2E_LAT    = 12'h104; // written by host

  // Enumeration events seen by the reflector while the host walks the bus tree
  typedef enum logic [1:0] {
    ENUM_SWITCH_DOWN = 2'd0,  // entered a switch (new bridge, new bus)
    ENUM_SWITCH_UP   = 2'd1,  // left that switch again
    ENUM_ENDPOINT    = 2'd2   // found a CXL-SSD endpoint
  } enum_evt_e;

  typedef struct packed {
    enum_evt_e           kind;
    logic [BUS_W-1:0]    bus;
  } enum_evt_t;

  // Requests from the host LLC controller to the reflector
  typedef enum logic [1:0] {
    LLC_RD_MISS = 2'd0,   // read that missed the LLC
    LLC_WR      = 2'd1,   // write-back of a line
    LLC_HIT     = 2'd2    // read that hit the LLC (for hit notification only)
  } llc_op_e;

  typedef struct packed {
    llc_op_e             op;
    logic [TAG_W-1:0]    tag;
    line_addr_t          addr;
    logic [PC_W-1:0]     pc;
    logic [PID_W-1:0]    pid;
    line_t               data;
  } llc_req_t;

  typedef struct packed {
    logic [TAG_W-1:0]    tag;
    logic                from_buffer; // served by the reflector buffer
    line_t               data;
  } llc_rsp_t;

endpackage
