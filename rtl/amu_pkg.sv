// amu_pkg: types and constants shared by the asynchronous memory access unit (AMU).
//
// The AMU lets a core start memory transfers between a scratchpad memory (SPM) and
// far memory with three instructions: aload and astore (Rd <- id, Rs1 = SPM address,
// Rs2 = memory address) and getfin (Rd <- id of a finished request, or a failure code).
// Further settings live in control registers: memory access configuration registers
// (granularity, QoS label), a default configuration register that picks which of them an
// aload/astore uses, access pattern registers (stride and element count) and
// software-defined registers whose content travels with each memory request.
//
// The instruction set, the kinds of register and their purpose follow the paper. The
// register numbers, field layouts, widths and the failure code are this design's own:
//   * getfin failure code is all ones; ids count from 0 (this is what makes the paper's
//     example loop `while ((rd = getfin()) != 0)` end when its single request, id 0, is done).
//   * SPM and memory addresses are byte addresses; transfers move whole 8-byte beats and
//     ignore address bits [2:0].
package amu_pkg;

  localparam int XLEN       = 64;   // register width of the host core
  localparam int BEAT_BYTES = 8;    // one data beat on the memory and SPM ports
  localparam int ID_W       = 8;    // request id field (up to 255 requests in flight)
  localparam int TAG_W      = 8;    // memory transaction tag field
  localparam int CSR_AW     = 5;    // control register number

  localparam logic [XLEN-1:0] GETFIN_FAIL = '1;

  // Instructions the pipeline hands to the AMU.
  typedef enum logic [2:0] {
    OP_ALOAD  = 3'd0,   // memory -> SPM, Rd <- id
    OP_ASTORE = 3'd1,   // SPM -> memory, Rd <- id
    OP_GETFIN = 3'd2,   // Rd <- finished id, or GETFIN_FAIL
    OP_CSRR   = 3'd3,   // Rd <- control register
    OP_CSRW   = 3'd4    // control register <- Rs1
  } amu_op_e;

  // Control register map.
  localparam logic [CSR_AW-1:0] CSR_MAC0    = 5'd0;   // 0..3  memory access configuration
  localparam logic [CSR_AW-1:0] CSR_DEFCFG  = 5'd4;   //       default configuration select
  localparam logic [CSR_AW-1:0] CSR_PAT0    = 5'd8;   // 8..11 access pattern
  localparam logic [CSR_AW-1:0] CSR_SW0     = 5'd12;  // 12..15 software-defined
  localparam logic [CSR_AW-1:0] CSR_SPMWAYS = 5'd16;  //       L2 ways used as SPM
  localparam logic [CSR_AW-1:0] CSR_STATUS  = 5'd17;  //       read-only status
  // For aload/astore the register field names the configuration instead: CFG_NAMED | n
  // selects MAC n; a field without CFG_NAMED leaves the choice to DEFCFG.
  localparam logic [CSR_AW-1:0] CFG_NAMED   = 5'd16;

  // Memory access configuration register.
  typedef struct packed {
    logic [48:0] rsvd;
    logic [1:0]  pat_idx;  // which access pattern register
    logic        pat_en;   // 0: one element; 1: use the access pattern register
    logic [3:0]  qos;      // QoS label forwarded with every memory request
    logic [7:0]  beats;    // granularity: 8-byte beats per element (0 counts as 1)
  } mac_t;

  // Access pattern register: element i is at memory address base + i*stride and at SPM
  // address spm_base + i*granularity (elements are packed in the SPM).
  typedef struct packed {
    logic [15:0] rsvd;
    logic [15:0] count;    // elements (0: nothing is moved, the request finishes at once)
    logic [31:0] stride;   // bytes between element starts in memory
  } pat_t;

  // Status register.
  typedef struct packed {
    logic [31:0] rsvd;
    logic [7:0]  free_ids;     // ids available to aload/astore
    logic [7:0]  finished;     // finished ids waiting for getfin
    logic [7:0]  in_flight;    // ids allocated and not yet finished
    logic [7:0]  queued;       // requests waiting in the request FIFO
  } status_t;

  // Configuration in force for the next aload/astore.
  typedef struct packed {
    logic [7:0]      beats;
    logic [31:0]     stride;
    logic [15:0]     count;
    logic [3:0]      qos;
    logic [XLEN-1:0] user;
  } amu_cfg_t;

  // One asynchronous request, as queued from the pipeline to the engine.
  typedef struct packed {
    logic [ID_W-1:0] id;
    logic            write;     // 1: astore
    logic [31:0]     spm_addr;  // byte address in the SPM
    logic [XLEN-1:0] mem_addr;  // byte address in memory
    amu_cfg_t        cfg;
  } amu_req_t;

  // Memory port: one request per element, 'beats' beats long. A read returns 'beats'
  // response beats with last on the final one; a write takes 'beats' beats on the write
  // data channel, in request order, and answers with one response beat (last = 1).
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             write;
    logic [XLEN-1:0]  addr;
    logic [7:0]       beats;
    logic [3:0]       qos;
    logic [XLEN-1:0]  user;
  } mem_req_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [XLEN-1:0]  data;
    logic             last;
  } mem_rsp_t;

endpackage
