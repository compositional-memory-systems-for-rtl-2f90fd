// l2p_pkg: shared constants and types of the set-partitioned shared L2 memory system.
//
// The memory system labels every processor access with an id (the task id of the
// issuing processor, or the id of a shared buffer when the address lies in one of
// the operating-system-loaded shared-memory intervals) and uses that id to replace
// the conventional set index of the address by an index inside the id's private
// group of cache sets. This package holds the word, line and id sizes and the
// request/response structs that travel between the blocks.
//
// From the paper: a 512 KB, 4-way set-associative L2 shared by four processors, and
// partitions whose sizes are counted in sets. This design's own choices: 32-bit
// addresses and data words, 64-byte lines (hence 2048 sets), 6-bit ids (64
// partitions shared by tasks and buffers) and the struct layouts below.
package l2p_pkg;

  parameter int unsigned ADDR_W     = 32;
  parameter int unsigned DATA_W     = 32;
  parameter int unsigned STRB_W     = DATA_W / 8;
  parameter int unsigned ID_W       = 6;
  parameter int unsigned LINE_BYTES = 64;
  parameter int unsigned LINE_W     = LINE_BYTES * 8;
  parameter int unsigned OFF_W      = $clog2(LINE_BYTES);
  parameter int unsigned LADDR_W    = ADDR_W - OFF_W;       // line address = tag
  parameter int unsigned WORDS      = LINE_W / DATA_W;      // words per line
  parameter int unsigned WOFF_W     = $clog2(WORDS);
  // Widest set index / source field any configuration may use inside a struct.
  parameter int unsigned SETF_W     = 16;
  parameter int unsigned SRC_W      = 4;                    // up to 16 processor ports

  // One interval of shared memory: addresses first..last (inclusive) belong to buffer id.
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] first;
    logic [ADDR_W-1:0] last;
    logic [ID_W-1:0]   id;
  } range_entry_t;

  // Word access from a processor port.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              we;
    logic [STRB_W-1:0] wstrb;
    logic [DATA_W-1:0] wdata;
  } cpu_req_t;

  // Response to a processor port: read data, whether the L2 hit, and the id used.
  typedef struct packed {
    logic [DATA_W-1:0] rdata;
    logic              hit;
    logic [ID_W-1:0]   id;
  } cpu_rsp_t;

  // Request after translation, as routed to an L2 bank.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              we;
    logic [STRB_W-1:0] wstrb;
    logic [DATA_W-1:0] wdata;
    logic [ID_W-1:0]   id;
    logic [SETF_W-1:0] set;   // translated set index, whole cache
    logic [SRC_W-1:0]  src;   // issuing processor port
  } bank_req_t;

  typedef struct packed {
    logic [DATA_W-1:0] rdata;
    logic              hit;
    logic [ID_W-1:0]   id;
    logic [SRC_W-1:0]  src;
  } bank_rsp_t;

  // Line transfer towards main memory (write-back when we=1, refill when we=0).
  typedef struct packed {
    logic               we;
    logic [LADDR_W-1:0] laddr;
    logic [LINE_W-1:0]  wline;
  } mem_req_t;

endpackage
