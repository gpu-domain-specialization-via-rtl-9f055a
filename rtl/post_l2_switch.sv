// post_l2_switch: steering switch between an L2 slice and the memory below it,
// the new element a 3D COPA-GPU adds to the GPU module (Fig. 7(a),(b)).
//
// When no memory system module (MSM) is stacked under the GPM the switch sends
// every post-L2 request to the GPM's own memory controller, as in a GPU of
// today. When an MSM is present it sends them over the UHB link to the L3 on
// the MSM, and the GPM's controller stays idle. Read responses come back from
// the side that was selected.
//
// The route is a configuration register, not a per-request decision. It is
// loaded from the msm_present strap while cfg_load is high, and only when no
// read is outstanding, so no response can return on the wrong side; requests
// are held off while cfg_load is high. That configuration protocol, and the
// outstanding-read counter that guards it, are this design's choices: the
// paper says only that the switch is configured by whether the MSM is present.
// After reset the route points to the local controller.
//
// The request path is combinational (no added latency); valid/ready on every
// port.
module post_l2_switch
  import copa_pkg::*;
#(
  parameter int unsigned MAX_OUT = 256   // reads in flight the counter can track
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     msm_present,
  input  logic     cfg_load,
  output logic     route_msm,
  output logic     busy,
  // L2 slice side
  input  logic     l2_req_valid,
  output logic     l2_req_ready,
  input  mem_req_t l2_req,
  output logic     l2_rsp_valid,
  input  logic     l2_rsp_ready,
  output mem_rsp_t l2_rsp,
  // GPM-local memory controller
  output logic     mc_req_valid,
  input  logic     mc_req_ready,
  output mem_req_t mc_req,
  input  logic     mc_rsp_valid,
  output logic     mc_rsp_ready,
  input  mem_rsp_t mc_rsp,
  // UHB link towards the MSM
  output logic     uhb_req_valid,
  input  logic     uhb_req_ready,
  output mem_req_t uhb_req,
  input  logic     uhb_rsp_valid,
  output logic     uhb_rsp_ready,
  input  mem_rsp_t uhb_rsp
);
  localparam int unsigned OW = $clog2(MAX_OUT+1);

  logic          route_q;
  logic [OW-1:0] outstanding;
  logic          req_fire, rsp_fire, sel_ready;

  assign route_msm = route_q;
  assign busy      = (outstanding != '0);

  // request demultiplexer
  assign sel_ready     = route_q ? uhb_req_ready : mc_req_ready;
  assign l2_req_ready  = sel_ready && !cfg_load &&
                         !(l2_req.op == OP_READ && outstanding == OW'(MAX_OUT));
  assign mc_req_valid  = l2_req_valid && !route_q && l2_req_ready;
  assign uhb_req_valid = l2_req_valid &&  route_q && l2_req_ready;
  assign mc_req        = l2_req;
  assign uhb_req       = l2_req;

  // response multiplexer
  assign l2_rsp_valid  = route_q ? uhb_rsp_valid : mc_rsp_valid;
  assign l2_rsp        = route_q ? uhb_rsp       : mc_rsp;
  assign mc_rsp_ready  = !route_q && l2_rsp_ready;
  assign uhb_rsp_ready =  route_q && l2_rsp_ready;

  assign req_fire = l2_req_valid && l2_req_ready && (l2_req.op == OP_READ);
  assign rsp_fire = l2_rsp_valid && l2_rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      route_q     <= 1'b0;
      outstanding <= '0;
    end else begin
      if (cfg_load && !busy) route_q <= msm_present;
      outstanding <= outstanding + OW'(req_fire) - OW'(rsp_fire);
    end
  end

  // Responses only ever come from the selected side.
  a_no_stray_mc:  assert property (@(posedge clk) disable iff (!rst_n)
                                   route_q |-> !mc_rsp_valid);
  a_no_stray_uhb: assert property (@(posedge clk) disable iff (!rst_n)
                                   !route_q |-> !uhb_rsp_valid);
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   l2_rsp_valid |-> busy);

endmodule
