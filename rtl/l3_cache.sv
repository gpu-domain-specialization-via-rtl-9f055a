// l3_cache: one slice of the memory-side L3 cache on the memory system module.
//
// The L3 backs the GPU's L2 as one more level of memory-side cache. As the
// paper states, it is neither inclusive nor exclusive of the L2 and keeps no
// coherence with it: the L2 is the point of coherence, its lines always win,
// and every request the L3 sees has already missed in (or been evicted from)
// the L2. The slice therefore handles two kinds of request:
//   * read  - an L2 miss. A hit returns the line; a miss fetches it from the
//             memory controller, installs it clean and returns it.
//   * writeback - an L2 victim. The line is written (installed on a miss) and
//             marked dirty; no response.
// Installing over a dirty victim first writes the victim back to DRAM.
//
// Organisation (this design's choice; the paper gives only the capacity):
// SETS x WAYS lines of 128 bytes, write-back, write-allocate, allocate on
// read miss, victim = first invalid way, else a per-set round-robin pointer.
// Defaults 16384 sets x 15 ways = 30 MB per slice; 32 slices give the 960 MB
// of the HBML+L3 configuration. The slice serves addresses whose low CH_BITS
// line-address bits equal its channel number; the set index is taken above
// them.
//
// The slice is blocking: one request at a time. Tag and data arrays are
// synchronous-read memories. After reset it spends SETS cycles clearing the
// tags (init_done low, req_ready low).
//
// Timing from acceptance in cycle t: read hit -> rsp_valid in t+2;
// writeback hit -> req_ready again in t+2; a miss adds the victim writeback (if
// dirty) and the DRAM round trip.
module l3_cache
  import copa_pkg::*;
#(
  parameter int unsigned SETS    = 16384,
  parameter int unsigned WAYS    = 15,
  parameter int unsigned CH_BITS = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  output logic     init_done,
  // from the L2 (through the UHB link)
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output mem_rsp_t rsp,
  // to the memory controller
  output logic     mreq_valid,
  input  logic     mreq_ready,
  output mem_req_t mreq,
  input  logic     mrsp_valid,
  output logic     mrsp_ready,
  input  mem_rsp_t mrsp,
  // one-cycle event pulses, for statistics
  output logic     ev_read_hit,
  output logic     ev_read_miss,
  output logic     ev_wb_hit,
  output logic     ev_wb_miss,
  output logic     ev_dirty_evict
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - CH_BITS - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [TAG_W-1:0] tag;
  } tag_entry_t;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_COMPARE, S_EVICT, S_FETCH_REQ, S_FETCH_WAIT,
    S_INSTALL, S_RSP
  } state_e;

  // ---------------------------------------------------------------- storage
  // One tag array and one data array per way (see g_way below), each with a
  // single write port and a single synchronous read port, as an SRAM macro
  // would have; plus the round-robin pointers.
  logic [WAY_W-1:0] rr_mem   [SETS];
  line_t            rdata_w  [WAYS];   // data read of every way in S_COMPARE
  line_t            rdata_q;

  state_e           state;
  mem_req_t         r_req;
  tag_entry_t       tags_q [WAYS];
  logic [WAY_W-1:0] rr_q;
  line_t            fill_q;
  logic [WAY_W-1:0] way_q;       // way being replaced or hit
  logic             hit_q;
  logic [IDX_W-1:0] init_idx;

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  assign idx = r_req.addr[CH_BITS +: IDX_W];
  assign tag = r_req.addr[LADDR_W-1 -: TAG_W];

  // ------------------------------------------------------------ tag compare
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic             any_invalid;
  logic [WAY_W-1:0] inv_way;
  logic [WAY_W-1:0] victim;

  always_comb begin
    hit         = 1'b0;
    hit_way     = '0;
    any_invalid = 1'b0;
    inv_way     = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (tags_q[w].valid && tags_q[w].tag == tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!tags_q[w].valid) begin
        any_invalid = 1'b1;
        inv_way     = WAY_W'(w);
      end
    end
    victim = any_invalid ? inv_way : rr_q;
  end

  logic [WAY_W-1:0] sel_way;
  assign sel_way = hit ? hit_way : victim;

  // ---------------------------------------------------------- control FSM
  logic is_read;
  assign is_read = (r_req.op == OP_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      r_req    <= '0;
      way_q    <= '0;
      hit_q    <= 1'b0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IDX_W'(SETS-1)) state <= S_IDLE;
        end
        S_IDLE:
          if (req_valid) begin
            r_req <= req;
            state <= S_COMPARE;
          end
        S_COMPARE: begin
          way_q <= sel_way;
          hit_q <= hit;
          if (hit) begin
            state <= is_read ? S_RSP : S_IDLE;
          end else if (tags_q[victim].valid && tags_q[victim].dirty) begin
            state <= S_EVICT;
          end else begin
            state <= is_read ? S_FETCH_REQ : S_IDLE;
          end
        end
        S_EVICT:
          if (mreq_ready) state <= is_read ? S_FETCH_REQ : S_IDLE;
        S_FETCH_REQ:
          if (mreq_ready) state <= S_FETCH_WAIT;
        S_FETCH_WAIT:
          if (mrsp_valid) state <= S_INSTALL;
        S_INSTALL: state <= S_RSP;
        S_RSP:
          if (rsp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A writeback miss installs its line in the cycle it leaves S_COMPARE
  // (clean victim) or S_EVICT (dirty victim); a writeback hit in S_COMPARE.
  logic wb_write, fill_write, alloc, rr_adv, replaced_valid_q;
  assign wb_write   = !is_read &&
                      ((state == S_COMPARE && (hit || !(tags_q[victim].valid && tags_q[victim].dirty))) ||
                       (state == S_EVICT && mreq_ready));
  assign fill_write = (state == S_INSTALL);
  assign alloc      = (wb_write && !(state == S_COMPARE && hit)) || fill_write;

  logic [WAY_W-1:0] wr_way;
  assign wr_way = (state == S_COMPARE) ? sel_way : way_q;

  logic             tag_rd_en;
  logic [IDX_W-1:0] rd_idx;
  tag_entry_t       tag_wdata;
  line_t            data_wdata;
  assign tag_rd_en  = (state == S_IDLE) && req_valid;
  assign rd_idx     = req.addr[CH_BITS +: IDX_W];
  assign tag_wdata  = (state == S_INIT) ? '0 : '{valid: 1'b1, dirty: wb_write, tag: tag};
  assign data_wdata = wb_write ? r_req.data : fill_q;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    tag_entry_t tag_mem  [SETS];
    line_t      data_mem [SETS];
    logic       way_we;
    assign way_we = (wb_write || fill_write) && (wr_way == WAY_W'(w));

    always_ff @(posedge clk) begin
      if (state == S_INIT)  tag_mem[init_idx] <= tag_wdata;
      else if (way_we)      tag_mem[idx]      <= tag_wdata;
      if (way_we)           data_mem[idx]     <= data_wdata;
      if (tag_rd_en)        tags_q[w]         <= tag_mem[rd_idx];
      if (state == S_COMPARE) rdata_w[w]      <= data_mem[idx];
    end
  end
  assign rdata_q = rdata_w[way_q];

  always_ff @(posedge clk) begin
    if (state == S_INIT)
      rr_mem[init_idx] <= '0;
    else if (alloc && rr_adv)
      rr_mem[idx] <= (rr_q == WAY_W'(WAYS-1)) ? '0 : rr_q + 1'b1;
    if (tag_rd_en) rr_q <= rr_mem[rd_idx];
    if (state == S_FETCH_WAIT && mrsp_valid) fill_q <= mrsp.data;
  end

  // The round-robin pointer only advances when a valid line was replaced.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 replaced_valid_q <= 1'b0;
    else if (state == S_COMPARE) replaced_valid_q <= !hit && !any_invalid;
  end
  assign rr_adv = (state == S_COMPARE) ? (!hit && !any_invalid) : replaced_valid_q;

  // ---------------------------------------------------------------- outputs
  assign init_done  = (state != S_INIT);
  assign req_ready  = (state == S_IDLE);
  assign rsp_valid  = (state == S_RSP);
  assign rsp.id     = r_req.id;
  assign rsp.data   = hit_q ? rdata_q : fill_q;

  logic [LADDR_W-1:0] victim_addr;
  assign victim_addr = {tags_q[way_q].tag, idx, r_req.addr[CH_BITS-1:0]};

  always_comb begin
    mreq_valid = 1'b0;
    mreq       = '0;
    mreq.id    = r_req.id;
    if (state == S_EVICT) begin
      mreq_valid = 1'b1;
      mreq.op    = OP_WRITEBACK;
      mreq.addr  = victim_addr;
      mreq.data  = rdata_q;
    end else if (state == S_FETCH_REQ) begin
      mreq_valid = 1'b1;
      mreq.op    = OP_READ;
      mreq.addr  = r_req.addr;
    end
  end
  assign mrsp_ready = (state == S_FETCH_WAIT);

  assign ev_read_hit    = (state == S_COMPARE) &&  is_read &&  hit;
  assign ev_read_miss   = (state == S_COMPARE) &&  is_read && !hit;
  assign ev_wb_hit      = (state == S_COMPARE) && !is_read &&  hit;
  assign ev_wb_miss     = (state == S_COMPARE) && !is_read && !hit;
  assign ev_dirty_evict = (state == S_EVICT) && mreq_ready;

  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));

endmodule
