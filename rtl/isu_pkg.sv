// isu_pkg: shared widths and types of the coalescing AXI-Pack indirect stream unit.
//
// The downstream DRAM interface is 512 bit wide (one HBM2 access granule), the stream
// elements are 64 bit, so a wide block holds 8 elements and a narrow address splits into
// a block tag (bits [ADDR_W-1:6]), an element offset inside the block (bits [5:3]) and a
// byte offset (bits [2:0]). These numbers follow the evaluated configuration (512-bit
// HBM granularity, 64-bit nonzeros); the 48-bit address width and the request encoding
// are this design's own choices.
package isu_pkg;

  localparam int unsigned ADDR_W     = 48;             // physical address width
  localparam int unsigned WIDE_W     = 512;            // DRAM / AXI data width
  localparam int unsigned WIDE_BYTES = WIDE_W / 8;     // 64
  localparam int unsigned BLK_LSB    = $clog2(WIDE_BYTES);  // 6
  localparam int unsigned ELEM_W     = 64;             // element width
  localparam int unsigned ELEM_BYTES = ELEM_W / 8;     // 8
  localparam int unsigned ELEM_LSB   = $clog2(ELEM_BYTES);  // 3
  localparam int unsigned EPB        = WIDE_W / ELEM_W; // elements per wide block: 8
  localparam int unsigned OFF_W      = $clog2(EPB);     // element offset width: 3
  localparam int unsigned TAG_W      = ADDR_W - BLK_LSB; // wide block tag
  localparam int unsigned NUM_W      = 32;              // element count of one burst
  localparam int unsigned POS_W      = BLK_LSB;         // index position inside a block (8-bit idx: 64)
  localparam int unsigned ID_W       = 1;               // AXI ID: 0 index fetcher, 1 coalescer

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [WIDE_W-1:0] wide_t;
  typedef logic [ELEM_W-1:0] elem_t;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [OFF_W-1:0]  off_t;

  // Index size: log2 of the index width in bytes.
  typedef enum logic [1:0] {IDX8 = 2'd0, IDX16 = 2'd1, IDX32 = 2'd2, IDX64 = 2'd3} idx_size_e;

  // Indirect read burst as the indirect stream unit sees it.
  typedef struct packed {
    addr_t              idx_base;   // byte address of the first index
    addr_t              elem_base;  // byte address of element 0 of the indexed array
    logic [NUM_W-1:0]   num;        // number of elements (>= 1)
    idx_size_e          idx_size;
  } ind_req_t;

  // Command from the index fetcher to the element request generator.
  typedef struct packed {
    addr_t              elem_base;
    logic [NUM_W-1:0]   num;
    idx_size_e          idx_size;
    logic [POS_W-1:0]   start_pos;  // position of the first index inside its wide block
  } erg_cmd_t;

  // AXI4 read address / read data channels (only the fields this design uses;
  // size is always the full 512 bit, burst type INCR).
  typedef struct packed {
    logic [ID_W-1:0] id;
    addr_t           addr;
    logic [7:0]      len;
  } ar_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
    wide_t           data;
    logic            last;
  } r_t;

  // Packed AXI-Pack read beat toward the upstream manager.
  typedef struct packed {
    wide_t data;
    logic  last;
  } pk_r_t;

endpackage
