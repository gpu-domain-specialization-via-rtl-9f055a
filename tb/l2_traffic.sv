// l2_traffic: stand-in for one GPU L2 slice in the testbenches.
//
// After start it issues N_OPS post-L2 requests on its channel: reads (L2
// misses) and writebacks (L2 victims) with random data, in a footprint of
// FOOTPRINT lines that all map to channel CH_ID (line address low CH_BITS
// bits = CH_ID), STRIDE lines apart within the channel (a stride of the L3
// set count puts them all in one set). It keeps a golden copy of memory, so the data each read must
// return is known when the read is issued; as everything below is in order
// per channel, responses are checked in order for both id and data. Requests
// are offered on random cycles (ISSUE_PCT) and responses accepted on random
// cycles (READY_PCT). done rises when every read has been answered.
module l2_traffic
  import copa_pkg::*;
#(
  parameter int unsigned CH_ID     = 0,
  parameter int unsigned CH_BITS   = 1,
  parameter int unsigned N_OPS     = 100,
  parameter int unsigned FOOTPRINT = 16,
  parameter int unsigned WB_PCT    = 40,
  parameter int unsigned ISSUE_PCT = 70,
  parameter int unsigned READY_PCT = 80,
  parameter int unsigned ADDR_BASE = 0,
  parameter int unsigned STRIDE    = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  output logic     req_valid,
  input  logic     req_ready,
  output mem_req_t req,
  input  logic     rsp_valid,
  output logic     rsp_ready,
  input  mem_rsp_t rsp,
  output logic     done,
  output int       checks,
  output int       failures,
  output int       stalls
);
  line_t    golden [laddr_t];
  mem_rsp_t expq [$];
  int       issued;
  id_t      next_id;

  function automatic laddr_t pick_addr();
    laddr_t a;
    a = laddr_t'(ADDR_BASE + $urandom_range(FOOTPRINT-1) * STRIDE) << CH_BITS;
    return a | laddr_t'(CH_ID);
  endfunction

  function automatic mem_req_t make_req(input id_t id);
    mem_req_t r;
    r.id   = id;
    r.addr = pick_addr();
    r.op   = ($urandom_range(99) < WB_PCT) ? OP_WRITEBACK : OP_READ;
    r.data = (r.op == OP_WRITEBACK) ? tb_pkg::rand_line() : '0;
    return r;
  endfunction

  assign done = rst_n && start && (issued == N_OPS) && !req_valid && (expq.size() == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req       <= '0;
      rsp_ready <= 1'b0;
      issued    <= 0;
      next_id   <= '0;
      checks    <= 0;
      failures  <= 0;
      stalls    <= 0;
      expq.delete();
      golden.delete();
    end else begin
      rsp_ready <= ($urandom_range(99) < READY_PCT);
      if (req_valid && !req_ready) stalls <= stalls + 1;
      if (req_valid && req_ready) begin
        mem_rsp_t e;
        if (req.op == OP_WRITEBACK) begin
          golden[req.addr] = req.data;
        end else begin
          e.id   = req.id;
          e.data = golden.exists(req.addr) ? golden[req.addr] : tb_pkg::init_line(req.addr);
          expq.push_back(e);
        end
        req_valid <= 1'b0;
      end
      if (start && issued < N_OPS && (!req_valid || req_ready) &&
          ($urandom_range(99) < ISSUE_PCT)) begin
        req       <= make_req(next_id);
        req_valid <= 1'b1;
        next_id   <= next_id + 1'b1;
        issued    <= issued + 1;
      end
      if (rsp_valid && rsp_ready) begin
        checks <= checks + 1;
        if (expq.size() == 0) begin
          failures <= failures + 1;
          $display("ch%0d: unexpected response id %0d", CH_ID, rsp.id);
        end else begin
          if (rsp.id !== expq[0].id || rsp.data !== expq[0].data) begin
            failures <= failures + 1;
            $display("ch%0d: response mismatch id %0d (exp %0d) data %s", CH_ID,
                     rsp.id, expq[0].id, (rsp.data === expq[0].data) ? "ok" : "bad");
          end
          void'(expq.pop_front());
        end
      end
    end
  end
endmodule
