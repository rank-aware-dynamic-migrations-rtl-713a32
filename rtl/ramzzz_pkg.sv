// ramzzz_pkg: types and constants shared by the rank-aware DRAM power-management
// extension of the memory controller.
//
// Sizes follow the default system of the evaluation: 4 KB OS pages, 2 GB of DDR3 in
// 8 ranks (65536 page frames per rank), 16 MQ queues, five DDR3 low-power states,
// slots of 1e8 cycles and epochs of ten slots. The page-descriptor layout (124 bits:
// page 22, reference counter 14, queue 4, last access 27, two 27-bit pointers, 3 flag
// bits) is the one given for the MQ descriptors. Everything else here (request
// format, migration-queue entry layout, command encodings) is this design's choice.
package ramzzz_pkg;

  // ---- address space ----------------------------------------------------------
  localparam int unsigned PAGE_W    = 22;   // page number width (descriptor field)
  localparam int unsigned LINE_W    = 6;    // 64 B lines in a 4 KB page
  localparam int unsigned TIME_W    = 27;   // cycle counts up to a slot of 1e8 cycles

  typedef logic [PAGE_W-1:0] page_t;
  typedef logic [TIME_W-1:0] time_t;

  // ---- memory request (LLC miss or write-back) ----------------------------------
  typedef struct packed {
    logic             write;    // 1 = write-back, 0 = read
    logic             app;      // flag bit: 1 = from applications, 0 = from new modules
    page_t            page;     // physical page number (OS address before remapping)
    logic [LINE_W-1:0] line;    // cache line within the page
  } mem_req_t;

  // ---- MQ page descriptor, 124 bits -------------------------------------------
  localparam int unsigned MQ_QUEUES = 16;
  localparam int unsigned REF_W     = 14;
  localparam int unsigned QNUM_W    = 4;
  localparam int unsigned PTR_W     = 27;
  localparam logic [PTR_W-1:0] PTR_NIL = '1;

  typedef struct packed {
    page_t               page;     // 22
    logic [REF_W-1:0]    refcnt;   // 14, saturating
    logic [QNUM_W-1:0]   qnum;     // 4
    time_t               last;     // 27, logical time of the last access
    logic [PTR_W-1:0]    prev;     // 27, toward the head (more recent)
    logic [PTR_W-1:0]    next;     // 27, toward the tail (less recent)
    logic [2:0]          flags;    // bit0 = valid
  } mq_desc_t;

  // hash of a page number onto a 4K-entry table (MQ entry cache, Remapping Table,
  // pending-update index): the low 12 bits folded with the upper 10 by XOR.
  function automatic logic [11:0] page_hash12(page_t p);
    return p[11:0] ^ {2'b00, p[21:12]};
  endfunction

  // ---- power states (DDR3 chain, Table 1) ---------------------------------------
  // 0 = ACT, 1 = ACT_PDN, 2 = PRE_PDN_FAST, 3 = PRE_PDN_SLOW, 4 = SR_FAST, 5 = SR_SLOW
  localparam int unsigned NUM_LP   = 5;
  localparam int unsigned PSTATE_W = 3;
  typedef logic [PSTATE_W-1:0] pstate_t;
  localparam pstate_t PS_ACT = '0;

  // ---- scheduled page migration, 80 bits (10 KB queue = 1024 entries) -----------
  typedef struct packed {
    logic [12:0] rsvd;
    logic        seg_end;    // last migration of its segment (simple path or cycle)
    page_t       os_page;    // OS physical page being moved
    page_t       src_frame;  // DRAM page frame it leaves
    page_t       dst_frame;  // DRAM page frame it goes to
  } mig_entry_t;

  // migration commands to the base controller / ranks
  typedef enum logic [0:0] {
    MIG_TO_BUF  = 1'b0,   // copy page src_frame into the extra row buffer of dst rank
    MIG_COMMIT  = 1'b1    // write the dst rank's extra row buffer into dst_frame
  } mig_op_e;

  typedef struct packed {
    mig_op_e op;
    page_t   src_frame;
    page_t   dst_frame;
  } mig_cmd_t;

endpackage
