// pul_pkg: types and constants shared by the PUL (pre-load / un-load) DMA
// engine and its scratchpad.
//
// A PUL request moves `nbytes` bytes between a byte address in device memory
// (DRAM / NVM) and a byte address in the PE-local scratchpad. The same request
// type serves both directions: a preload copies memory -> scratchpad, an unload
// copies scratchpad -> memory. Addresses are byte-granular on both sides and
// need not be aligned to each other.
//
// The memory port is a small valid/ready protocol in the style of AXI, reduced
// to what the engine uses (this interface is a choice of this RTL; the paper
// does not name the bus):
//   AR  read burst request : word-aligned byte address, beat count - 1, id
//   R   read data beats    : in request order, `last` on the final beat, id
//   W   write beats        : each beat carries its own word-aligned address and
//                            byte strobes; `last` closes a burst
//   B   write acknowledge  : one per burst, id
// All data paths are 64 bits wide, the word size of the 64-bit soft-core PE.
package pul_pkg;

  localparam int unsigned DATA_W     = 64;                 // bits per beat / scratchpad word
  localparam int unsigned STRB_W     = DATA_W / 8;         // bytes per beat
  localparam int unsigned OFF_W      = $clog2(STRB_W);     // byte offset within a word
  localparam int unsigned MEM_ADDR_W = 64;                 // physical byte address into device memory
  localparam int unsigned SPM_ADDR_W = 16;                 // byte address into a 64 KiB scratchpad
  localparam int unsigned SIZE_W     = SPM_ADDR_W + 1;     // transfer size in bytes, 0 .. 65536
  localparam int unsigned LEN_W      = SPM_ADDR_W - OFF_W + 1; // beats - 1 of one burst
  localparam int unsigned ID_W       = 4;                  // identifies the PUL unit (up to 16)

  // One queued transfer. For a preload mem_addr is the source and spm_addr the
  // destination; for an unload it is the other way round.
  typedef struct packed {
    logic [MEM_ADDR_W-1:0] mem_addr;
    logic [SPM_ADDR_W-1:0] spm_addr;
    logic [SIZE_W-1:0]     nbytes;
  } pul_req_t;

  typedef struct packed {
    logic [MEM_ADDR_W-1:0] addr;   // word aligned (low OFF_W bits zero)
    logic [LEN_W-1:0]      len;    // number of beats - 1
    logic [ID_W-1:0]       id;
  } mem_ar_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              last;
    logic [ID_W-1:0]   id;
  } mem_r_t;

  typedef struct packed {
    logic [MEM_ADDR_W-1:0] addr;   // word aligned (low OFF_W bits zero)
    logic [DATA_W-1:0]     data;
    logic [STRB_W-1:0]     strb;
    logic                  last;
    logic [ID_W-1:0]       id;
  } mem_w_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
  } mem_b_t;

  // Register map of a PUL unit, byte offsets on the PE's register bus.
  localparam logic [6:0] REG_PL_MEM  = 7'h00;  // preload source (memory byte address)
  localparam logic [6:0] REG_PL_SPM  = 7'h08;  // preload destination (scratchpad byte address)
  localparam logic [6:0] REG_PL_SIZE = 7'h10;  // preload size in bytes
  localparam logic [6:0] REG_PL_GO   = 7'h18;  // write: queue a preload from the three above
  localparam logic [6:0] REG_UL_SPM  = 7'h20;  // unload source (scratchpad byte address)
  localparam logic [6:0] REG_UL_MEM  = 7'h28;  // unload destination (memory byte address)
  localparam logic [6:0] REG_UL_SIZE = 7'h30;  // unload size in bytes
  localparam logic [6:0] REG_UL_GO   = 7'h38;  // write: queue an unload from the three above
  localparam logic [6:0] REG_STATUS  = 7'h40;  // read: queue and completion status

  // STATUS bit positions
  localparam int unsigned ST_PL_BUSY  = 0;   // a preload is queued or in flight
  localparam int unsigned ST_UL_BUSY  = 1;   // an unload is queued, in flight or unacknowledged
  localparam int unsigned ST_PL_FULL  = 2;   // preload queue full
  localparam int unsigned ST_UL_FULL  = 3;   // unload queue full
  localparam int unsigned ST_PL_CNT   = 8;   // [15:8]  entries in the preload queue
  localparam int unsigned ST_UL_CNT   = 16;  // [23:16] entries in the unload queue

  // Number of bus beats a transfer of nbytes starting at byte offset off covers.
  function automatic logic [LEN_W:0] beats(input logic [OFF_W-1:0] off,
                                           input logic [SIZE_W-1:0] nbytes);
    logic [SIZE_W+1:0] span;
    span = (SIZE_W+2)'(off) + (SIZE_W+2)'(nbytes) + (SIZE_W+2)'(STRB_W - 1);
    return (LEN_W+1)'(span >> OFF_W);
  endfunction

endpackage
