// ccsvm_pkg: types and constants shared by every block of the CPU/MTTOP chip
// with cache-coherent shared virtual memory.
//
// The chip is a 5 x 4 two-dimensional torus. Its node map copies the floor
// plan of the system figure: row 0 holds MTTOP cores 0-4, row 1 the four
// L2/directory banks and memory controller 0, row 2 the four CPU cores and
// memory controller 1, row 3 MTTOP cores 5-9. Node id = y*5 + x.
//
// Core numbering: cores 0-3 are the CPUs, cores 4-13 are MTTOP cores 0-9.
// Every core has two L1 caches (unit 0 = L1D, unit 1 = L1I); an L1 is named
// by l1 id = 2*core + unit, which indexes the directory's sharer vectors.
//
// Coherence messages travel whole, one message per flit, on three virtual
// networks so that the protocol cannot deadlock:
//   VN_REQ : L1 -> directory          (GETS, GETX, PUTX)
//   VN_FWD : directory -> L1 or memory controller (FWD_GETS, FWD_GETX, INV,
//            MEM_RD, MEM_WR); always sunk by its receiver
//   VN_RSP : everything else (grants, data, acks, unblocks, memory data)
// The message set, the single message per flit, the block size, the address
// widths and the bank/controller interleave are this design's choices; the
// paper names a standard MOESI directory protocol without listing it.
package ccsvm_pkg;

  // ---- chip organisation (Table 2 / Figure 1) ----
  localparam int unsigned N_X      = 5;
  localparam int unsigned N_Y      = 4;
  localparam int unsigned N_NODES  = N_X * N_Y;
  localparam int unsigned N_CPU    = 4;
  localparam int unsigned N_MTTOP  = 10;
  localparam int unsigned N_CORES  = N_CPU + N_MTTOP;
  localparam int unsigned N_L1     = 2 * N_CORES;
  localparam int unsigned N_BANKS  = 4;
  localparam int unsigned N_MC     = 2;
  localparam int unsigned SIMD_W   = 8;     // threads a MTTOP core executes at once
  localparam int unsigned MTTOP_THREADS = 128; // thread contexts per MTTOP core

  // ---- address and data sizes (assumed) ----
  localparam int unsigned VA_W     = 48;    // x86-64 canonical virtual address
  localparam int unsigned PA_W     = 31;    // 2 GB of DRAM
  localparam int unsigned BLK_BYTES = 64;
  localparam int unsigned OFF_W    = 6;
  localparam int unsigned BA_W     = PA_W - OFF_W;  // block address width
  localparam int unsigned BLK_BITS = BLK_BYTES * 8;
  localparam int unsigned PG_W     = 12;    // 4 KB pages
  localparam int unsigned VPN_W    = VA_W - PG_W;
  localparam int unsigned PPN_W    = PA_W - PG_W;

  localparam int unsigned NODE_W   = $clog2(N_NODES);
  localparam int unsigned L1ID_W   = $clog2(N_L1);

  typedef logic [NODE_W-1:0] node_t;
  typedef logic [BA_W-1:0]   baddr_t;
  typedef logic [BLK_BITS-1:0] block_t;

  typedef enum logic [1:0] {U_L1D = 2'd0, U_L1I = 2'd1, U_DIR = 2'd2, U_MC = 2'd3} unit_e;
  typedef enum logic [1:0] {VN_REQ = 2'd0, VN_FWD = 2'd1, VN_RSP = 2'd2} vnet_e;
  localparam int unsigned N_VNET = 3;
  localparam int unsigned N_VC   = 2;   // dateline classes on the torus rings

  typedef enum logic [3:0] {
    M_GETS     = 4'd0,   // L1 asks for a readable copy
    M_GETX     = 4'd1,   // L1 asks for a writable copy (have_data: it still holds the block)
    M_PUTX     = 4'd2,   // L1 writes back an owned block (dirty flag)
    M_FWD_GETS = 4'd3,   // directory asks the owner for data, owner keeps O
    M_FWD_GETX = 4'd4,   // directory asks the owner for data, owner invalidates
    M_INV      = 4'd5,   // directory invalidates a sharer
    M_INV_ACK  = 4'd6,
    M_OWN_DATA = 4'd7,   // owner's data, to the directory
    M_GRANT    = 4'd8,   // directory grants state gstate, with data if have_data
    M_UNBLOCK  = 4'd9,   // requester has installed the grant
    M_WB_ACK   = 4'd10,
    M_MEM_RD   = 4'd11,
    M_MEM_WR   = 4'd12,
    M_MEM_DATA = 4'd13
  } mtype_e;

  typedef enum logic [2:0] {ST_I = 3'd0, ST_S = 3'd1, ST_E = 3'd2, ST_O = 3'd3, ST_M = 3'd4} mstate_e;

  typedef struct packed {
    mtype_e  mtype;
    node_t   src;
    unit_e   src_unit;
    node_t   dst;
    unit_e   dst_unit;
    baddr_t  addr;
    logic    have_data;
    logic    dirty;
    mstate_e gstate;
    block_t  data;
  } msg_t;

  typedef struct packed {
    vnet_e vnet;
    logic  vc;
    msg_t  msg;
  } flit_t;

  // ---- core-side memory operations (Sec 3.2.4: OpenCL-style atomics) ----
  typedef enum logic [2:0] {
    OP_LD = 3'd0, OP_ST = 3'd1, OP_CAS = 3'd2, OP_ADD = 3'd3, OP_INC = 3'd4, OP_DEC = 3'd5
  } memop_e;

  typedef struct packed {
    memop_e      op;
    logic        ifetch;      // 1: instruction fetch through the L1I
    logic [VA_W-1:0] vaddr;   // 8-byte aligned
    logic [63:0] wdata;       // store data / add operand / CAS new value
    logic [63:0] cmp;         // CAS expected value
  } core_req_t;

  typedef struct packed {
    memop_e      op;
    logic        ifetch;
    logic [PA_W-1:0] paddr;
    logic [63:0] wdata;
    logic [63:0] cmp;
  } l1_req_t;

  // Task descriptor written to the MIFD by create_mthread (Sec 4.3):
  // {PC, arguments, first thread ID, CR3}; the last thread ID gives the size.
  typedef struct packed {
    logic [63:0] pc;
    logic [63:0] args;
    logic [31:0] first_tid;
    logic [31:0] last_tid;
    logic [63:0] cr3;
  } task_desc_t;

  // One SIMD-width chunk (warp) handed to a MTTOP core.
  typedef struct packed {
    logic [63:0] pc;
    logic [63:0] args;
    logic [31:0] first_tid;
    logic [SIMD_W-1:0] lane_mask;
    logic [63:0] cr3;
  } warp_launch_t;

  // ---- node map ----
  function automatic node_t core_node(input int unsigned c);
    int unsigned n;
    if (c < N_CPU)            n = 2 * N_X + c;             // row 2
    else if (c < N_CPU + 5)   n = c - N_CPU;               // row 0
    else                      n = 3 * N_X + (c - N_CPU - 5); // row 3
    return node_t'(n);
  endfunction

  function automatic node_t bank_node(input int unsigned b);
    return node_t'(N_X + b);                                // row 1, x = 0..3
  endfunction

  function automatic node_t mc_node(input int unsigned m);
    return node_t'((m + 1) * N_X + (N_X - 1));              // x = 4, rows 1 and 2
  endfunction

  // Node id -> core index (only meaningful for core nodes).
  function automatic int unsigned node_core(input node_t n);
    int unsigned y, x;
    y = int'(n) / N_X;
    x = int'(n) % N_X;
    if (y == 2)      return x;
    else if (y == 0) return N_CPU + x;
    else             return N_CPU + 5 + x;
  endfunction

  function automatic logic [L1ID_W-1:0] l1_id(input node_t n, input unit_e u);
    return L1ID_W'(2 * node_core(n) + ((u == U_L1I) ? 1 : 0));
  endfunction

  // Block interleave: block address bits [1:0] pick the L2 bank, bit [2] the
  // memory controller.
  function automatic int unsigned addr_bank(input baddr_t a);
    return int'(a[1:0]);
  endfunction
  function automatic int unsigned addr_mc(input baddr_t a);
    return int'(a[2]);
  endfunction

endpackage
