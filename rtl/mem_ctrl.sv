// mem_ctrl: memory controller (MC) for one HBM channel.
//
// In the COPA-GPU the MC sits either on the GPM (3D package without an MSM,
// Fig. 7(a)) or on the MSM behind an L3 slice (Fig. 7(b)-(d)). The paper only
// names the block; this is the simplest controller that does the job: a
// request queue of QDEPTH line requests drained in order onto the DRAM
// request port, and a tag queue that remembers the id of every read issued so
// that the in-order DRAM read data can be returned as a tagged response. At
// most MAX_OUT reads are outstanding; a read waits at the head of the queue
// when the tag queue is full. Writes (writebacks) are posted. DRAM command
// scheduling, refresh and bank timing are left to the DRAM side of the port.
//
// Interface: line-request input and tagged response output with valid/ready;
// DRAM side is a request port (we/addr/wdata) and an in-order read-data port,
// both with valid/ready. A request accepted in cycle t reaches dram_req in
// cycle t+1 at the earliest.
module mem_ctrl
  import copa_pkg::*;
#(
  parameter int unsigned QDEPTH  = 16,
  parameter int unsigned MAX_OUT = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output mem_rsp_t  rsp,
  output logic      dram_req_valid,
  input  logic      dram_req_ready,
  output dram_req_t dram_req,
  input  logic      dram_rsp_valid,
  output logic      dram_rsp_ready,
  input  line_t     dram_rsp_data
);
  mem_req_t q_head;
  logic     q_valid, q_pop;
  logic     tag_in_ready, tag_valid;
  id_t      tag_head;
  logic     is_read;
  logic [$clog2(QDEPTH+1)-1:0]  q_count;
  logic [$clog2(MAX_OUT+1)-1:0] tag_count;

  sync_fifo #(.T(mem_req_t), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n,
    .in_valid (req_valid), .in_ready (req_ready), .in_data (req),
    .out_valid(q_valid),   .out_ready(q_pop),     .out_data(q_head),
    .count    (q_count)
  );

  assign is_read        = (q_head.op == OP_READ);
  // A read may only go out when its id can be remembered.
  assign dram_req_valid = q_valid && (!is_read || tag_in_ready);
  assign q_pop          = dram_req_valid && dram_req_ready;
  assign dram_req.we    = !is_read;
  assign dram_req.addr  = q_head.addr;
  assign dram_req.wdata = q_head.data;

  sync_fifo #(.T(id_t), .DEPTH(MAX_OUT)) u_tagq (
    .clk, .rst_n,
    .in_valid (q_pop && is_read), .in_ready(tag_in_ready), .in_data(q_head.id),
    .out_valid(tag_valid), .out_ready(dram_rsp_valid && dram_rsp_ready),
    .out_data (tag_head),  .count(tag_count)
  );

  assign rsp_valid      = dram_rsp_valid && tag_valid;
  assign dram_rsp_ready = rsp_ready && tag_valid;
  assign rsp.id         = tag_head;
  assign rsp.data       = dram_rsp_data;

  // DRAM never returns data for a read that was not issued.
  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
                                  dram_rsp_valid |-> tag_valid);

endmodule
