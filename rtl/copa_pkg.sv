// copa_pkg: types and constants shared by the post-L2 memory system of the
// composable on-package GPU (COPA-GPU).
//
// Everything below the GPU's L2 works on whole cache lines. A post-L2 request
// is either a read (an L2 miss that needs a line) or a writeback (a dirty line
// the L2 evicts). Reads are answered with a response carrying the line and the
// requester's id; writebacks are posted and get no response.
//
// Sizes that follow the paper: 960 MB of L3 in the HBML+L3 configuration,
// 167 GB of DRAM (so a 38-bit byte address), 1.4 GHz clock, 10.8 TB/s of
// L2-L3 link bandwidth. The 128-byte line, the 8-bit request id and the
// encodings are this design's own choices; the paper names none of them.
package copa_pkg;

  localparam int unsigned LINE_BYTES = 128;              // bytes per cache line
  localparam int unsigned LINE_W     = LINE_BYTES * 8;   // 1024 data bits
  localparam int unsigned PADDR_W    = 38;               // 256 GB >= 167 GB of HBM
  localparam int unsigned OFFSET_W   = $clog2(LINE_BYTES);
  localparam int unsigned LADDR_W    = PADDR_W - OFFSET_W; // line address, 31 bits
  localparam int unsigned ID_W       = 8;                // requester tag

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [ID_W-1:0]    id_t;

  typedef enum logic {
    OP_READ      = 1'b0,   // L2 miss: return the line
    OP_WRITEBACK = 1'b1    // L2 victim: store the line, no response
  } mem_op_e;

  // Request from the L2 side towards memory.
  typedef struct packed {
    mem_op_e op;
    id_t     id;
    laddr_t  addr;
    line_t   data;   // meaningful for OP_WRITEBACK only
  } mem_req_t;

  // Read response towards the L2 side.
  typedef struct packed {
    id_t   id;
    line_t data;
  } mem_rsp_t;

  // Request on one HBM channel (memory controller to DRAM).
  typedef struct packed {
    logic   we;
    laddr_t addr;
    line_t  wdata;
  } dram_req_t;

  // Per-slice L3 event pulses, one cycle each, for performance counting.
  typedef struct packed {
    logic read_hit;
    logic read_miss;
    logic wb_hit;
    logic wb_miss;
    logic dirty_evict;
  } l3_ev_t;

  // Packaging variants of Fig. 7: 2.5D (GPM has no MC, post-L2 traffic always
  // crosses the link) and 3D (GPM keeps its MCs and a switch per L2 slice).
  typedef enum logic {
    INTEG_2P5D = 1'b0,
    INTEG_3D   = 1'b1
  } integ_e;

endpackage
