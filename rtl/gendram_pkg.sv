// gendram_pkg: constants and types shared by the GenDRAM logic-die RTL.
//
// The chip is a near-memory processor under a monolithic 3D DRAM stack: 32
// processing units (PUs), 8 of them Search PUs and 24 Compute PUs, one per DRAM
// bank-group, joined by a ring. The numbers below follow the paper's
// configuration (32 PUs, 16 PEs per PU, 1024-bit bank-group I/O, 8 latency
// tiers, 16 banks). Field widths of the ring flit header, the DRAM command
// encoding and the candidate record layout are this design's own choices.
package gendram_pkg;

  // ---- system organisation ----
  localparam int N_PU       = 32;    // one PU per bank-group (16 channels x 2 groups)
  localparam int N_SEARCH   = 8;     // Search PUs
  localparam int N_COMP     = 24;    // Compute PUs
  localparam int IO_W       = 1024;  // per-PU hybrid-bonding data width, also ring flit payload
  localparam int ELEM_W     = 32;    // Int32 datapath element
  localparam int EPB        = IO_W / ELEM_W;  // elements per 1024-bit beat (32)
  localparam int N_TIER     = 8;
  localparam int N_BANK     = 16;    // banks seen by one PU (BK0..BK15)
  localparam int ROW_W      = 15;    // 1 Gb bank / 32 Kb row = 32768 rows
  localparam int COL_W      = 5;     // 32 Kb row / 1024 b beat = 32 beats
  localparam int PU_ID_W    = 5;
  localparam int TILE_IDX_W = 4;     // up to 16 tiles per matrix row

  // saturating "infinity" for min-plus and "minus infinity" for max-plus
  localparam logic signed [ELEM_W-1:0] POS_INF = 32'sh3FFF_FFFF;
  localparam logic signed [ELEM_W-1:0] NEG_INF = -32'sh3FFF_FFFF;

  typedef enum logic {SR_MINPLUS = 1'b0, SR_MAXPLUS = 1'b1} semiring_e;
  typedef enum logic {PREC_INT32 = 1'b0, PREC_INT5 = 1'b1} prec_e;

  // ---- DRAM bank-group command bus ----
  typedef enum logic [2:0] {
    DC_NOP = 3'd0, DC_ACT = 3'd1, DC_RD = 3'd2, DC_WR = 3'd3, DC_PRE = 3'd4
  } dram_cmd_e;

  // ---- ring flit header ----
  typedef enum logic [1:0] {
    FK_TILE = 2'd0,   // one 1024-bit beat of a distance-matrix tile
    FK_CAND = 2'd1    // one candidate location with its read (genomics)
  } flit_kind_e;

  typedef struct packed {
    flit_kind_e            kind;
    logic                  bcast;
    logic [PU_ID_W-1:0]    src;
    logic [PU_ID_W-1:0]    dst;
    logic [TILE_IDX_W-1:0] tile_r;
    logic [TILE_IDX_W-1:0] tile_c;
    logic [7:0]            row;
    logic [2:0]            beat;
  } flit_hdr_t;

  // ---- candidate record carried in an FK_CAND payload ----
  localparam int MAX_READ = 256;     // bases held per read (2 bits each)
  typedef struct packed {
    logic [IO_W-2*MAX_READ-64-1:0] pad;
    logic [15:0]                   read_id;
    logic [15:0]                   read_len;
    logic [31:0]                   loc;
    logic [2*MAX_READ-1:0]         bases;  // base n at bits [2n+1:2n]
  } cand_payload_t;

  // ---- compute PU commands issued by the controller ----
  typedef enum logic [2:0] {
    PC_NOP = 3'd0, PC_LOAD = 3'd1, PC_UPDATE = 3'd2, PC_SEND = 3'd3, PC_STORE = 3'd4
  } pu_cmd_e;

endpackage
