// synergy_pkg: types and constants shared by the Synergy accelerator fabric.
//
// The fabric moves 32-bit words everywhere: single-precision floats in the
// matrix tiles, addresses, and command words in the four FIFOs of every
// processing engine (PE).  This package fixes the encodings of those command
// words, the job record a PE reads from memory, the burst request that flows
// from a PE through the memory arbiter and MMU to the memory controller, the
// request a MMU sends to the Proc unit, and the AXI4 channel bundles.
//
// The job record follows the paper's job structure field for field (three
// base addresses, the dimensions m, n, k, the tile indices t1, t2 and the
// layer id), one 32-bit word each in that order.  All command-word encodings
// are this design's own; the paper names the FIFOs but not their contents.
package synergy_pkg;

  localparam int unsigned WORD_W = 32;

  // ---------------------------------------------------------------- control
  // Words a PE writes to if_hw2sw: {opcode[31:24], payload[23:0]}.
  localparam logic [7:0] OP_JOB_REQ  = 8'h01;  // PE asks its delegate for a job
  localparam logic [7:0] OP_JOB_DONE = 8'h02;  // PE finished a job, payload = layer id
  // The delegate's first word on if_sw2hw is the start signal (any value),
  // each later word is the (virtual) address of a job record.

  // One job: the tile C(t1,t2) of C[n x m] = A[n x k] * B[k x m].
  localparam int unsigned JOB_WORDS = 9;
  typedef struct packed {
    logic [31:0] a_addr;
    logic [31:0] b_addr;
    logic [31:0] c_addr;
    logic [31:0] m;         // columns of B and C
    logic [31:0] n;         // rows of A and C
    logic [31:0] k;         // columns of A, rows of B
    logic [31:0] t1;        // tile row index of C
    logic [31:0] t2;        // tile column index of C
    logic [31:0] layer_id;
  } job_t;

  // ----------------------------------------------------------------- memory
  // A PE opens a transfer on if_hw2mem with a command word
  // {write, 7'b0, length in bytes [23:0]}, then the virtual byte address,
  // then (for a write) length/4 data words.  A read returns length/4 words
  // on if_mem2hw.
  typedef struct packed {
    logic        write;
    logic [31:0] addr;
    logic [23:0] len;       // bytes, a multiple of 4
  } mem_req_t;

  localparam int unsigned PAGE_BYTES = 4096;
  localparam int unsigned MAX_BEATS  = 256;   // AXI4 INCR burst limit

  // ---------------------------------------------------------------- Proc unit
  typedef struct packed {
    logic        fault;     // 0: ask for the L1 table base, 1: report a page fault
    logic [31:0] vaddr;     // faulting virtual address
  } proc_req_t;

  // ------------------------------------------------------------------- AXI4
  typedef struct packed {
    logic [31:0] awaddr;
    logic [7:0]  awlen;
    logic [2:0]  awsize;
    logic [1:0]  awburst;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wlast;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic [7:0]  arlen;
    logic [2:0]  arsize;
    logic [1:0]  arburst;
    logic        arvalid;
    logic        rready;
  } axi_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rlast;
    logic        rvalid;
  } axi_rsp_t;

  localparam logic [2:0] AXI_SIZE_4B = 3'b010;
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;

endpackage
