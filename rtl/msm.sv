// msm: memory system module, the domain-specialised die of a DL-optimised
// COPA-GPU (Fig. 6(b),(d) and Fig. 7(b),(d)).
//
// The MSM holds, for each post-L2 channel that lands on it, the receiving end
// of the UHB link, one slice of the L3 cache and the memory controller that
// drives that channel's HBM. Requests arriving over the link are served by
// the L3 slice; its misses and dirty evictions go to the memory controller.
// Read responses from the L3 slice go back onto the link.
//
// Following the paper's HBML+L3 configuration, two MSMs of 480 MB each give
// the 960 MB L3; each MSM here carries CH = 16 channels of 30 MB. How the
// channels are spread over the HBM sites is left to the ports (one DRAM port
// per channel). The link, L3 and controller inside are the blocks described
// in their own files; the channel count is this design's choice.
//
// All ports are per-channel arrays; timing is that of the L3 slice and the
// memory controller.
module msm
  import copa_pkg::*;
#(
  parameter int unsigned CH        = 16,
  parameter int unsigned CH_BITS   = 5,      // channel-select bits of the whole GPU
  parameter int unsigned L3_SETS   = 16384,
  parameter int unsigned L3_WAYS   = 15,
  parameter int unsigned MC_QDEPTH = 16,
  parameter int unsigned MC_MAXOUT = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      init_done,
  // from the UHB links (receive side of the request channel)
  input  logic      req_valid      [CH],
  output logic      req_ready      [CH],
  input  mem_req_t  req            [CH],
  // to the UHB links (send side of the response channel)
  output logic      rsp_valid      [CH],
  input  logic      rsp_ready      [CH],
  output mem_rsp_t  rsp            [CH],
  // HBM channel ports
  output logic      dram_req_valid [CH],
  input  logic      dram_req_ready [CH],
  output dram_req_t dram_req       [CH],
  input  logic      dram_rsp_valid [CH],
  output logic      dram_rsp_ready [CH],
  input  line_t     dram_rsp_data  [CH],
  // statistics
  output l3_ev_t    l3_ev          [CH]
);
  logic [CH-1:0] ch_init_done;
  assign init_done = &ch_init_done;

  for (genvar c = 0; c < CH; c++) begin : g_ch
    logic     mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
    mem_req_t mreq;
    mem_rsp_t mrsp;

    l3_cache #(.SETS(L3_SETS), .WAYS(L3_WAYS), .CH_BITS(CH_BITS)) u_l3 (
      .clk, .rst_n,
      .init_done      (ch_init_done[c]),
      .req_valid      (req_valid[c]),
      .req_ready      (req_ready[c]),
      .req            (req[c]),
      .rsp_valid      (rsp_valid[c]),
      .rsp_ready      (rsp_ready[c]),
      .rsp            (rsp[c]),
      .mreq_valid, .mreq_ready, .mreq,
      .mrsp_valid, .mrsp_ready, .mrsp,
      .ev_read_hit    (l3_ev[c].read_hit),
      .ev_read_miss   (l3_ev[c].read_miss),
      .ev_wb_hit      (l3_ev[c].wb_hit),
      .ev_wb_miss     (l3_ev[c].wb_miss),
      .ev_dirty_evict (l3_ev[c].dirty_evict)
    );

    mem_ctrl #(.QDEPTH(MC_QDEPTH), .MAX_OUT(MC_MAXOUT)) u_mc (
      .clk, .rst_n,
      .req_valid      (mreq_valid),
      .req_ready      (mreq_ready),
      .req            (mreq),
      .rsp_valid      (mrsp_valid),
      .rsp_ready      (mrsp_ready),
      .rsp            (mrsp),
      .dram_req_valid (dram_req_valid[c]),
      .dram_req_ready (dram_req_ready[c]),
      .dram_req       (dram_req[c]),
      .dram_rsp_valid (dram_rsp_valid[c]),
      .dram_rsp_ready (dram_rsp_ready[c]),
      .dram_rsp_data  (dram_rsp_data[c])
    );
  end

endmodule
