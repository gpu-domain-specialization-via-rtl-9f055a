// copa_gpu: post-L2 memory system of a composable on-package GPU (COPA-GPU).
//
// A COPA-GPU splits the GPU into a GPU module (GPM: SMs, L1s, NoC and L2,
// reused unchanged across products) and a memory system module (MSM) chosen
// per market. This top covers everything below the L2 slices: one channel per
// L2 slice, each carrying that slice's misses and victim writebacks to the
// L3 slice and memory controller on an MSM over an on-package UHB link, and
// bringing read data back. The SMs, NoC and L2 are outside; each L2 slice
// connects through the l2_* port of its channel, and each channel's HBM
// through the dram_* port.
//
// Default configuration is the paper's recommended design, HBML+L3 in a 2.5D
// package (Fig. 7(d)): two MSMs, 960 MB of L3 in total, the GPM without any
// memory controller, post-L2 traffic always crossing the link. Setting
// INTEG = INTEG_3D gives the 3D organisation of Fig. 7(a),(b): each channel
// keeps a memory controller on the GPM and gains a post_l2_switch that, as
// configured from msm_present, steers the channel to that local controller
// (HPC part, no MSM) or over the 3D link to the MSM (DL part). In the 3D case
// the HBM port of a channel is driven by whichever controller is selected,
// which models the GPM's I/O reaching the interposer through the MSM's TSVs.
//
// Channel count 32 (2 x 16) is this design's choice, sized so the links carry
// the 10.8 TB/s the paper assumes (32 x 128 B x 1.4 GHz x 2 directions =
// 11.5 TB/s). L2 slice c must only issue line addresses whose low CH_BITS bits
// equal c. Before the first request wait for init_done (the L3 tag arrays
// are being cleared) and, in 3D, pulse cfg_load to take msm_present.
module copa_gpu
  import copa_pkg::*;
#(
  parameter integ_e      INTEG      = INTEG_2P5D,
  parameter int unsigned NUM_MSM    = 2,
  parameter int unsigned CH_PER_MSM = 16,
  parameter int unsigned L3_SETS    = 16384,
  parameter int unsigned L3_WAYS    = 15,
  parameter int unsigned LINK_LAT   = 4,
  parameter int unsigned LINK_DEPTH = 16,
  parameter int unsigned MC_QDEPTH  = 16,
  parameter int unsigned MC_MAXOUT  = 16,
  localparam int unsigned NUM_CH    = NUM_MSM * CH_PER_MSM
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      init_done,
  // configuration (3D only; ignored in 2.5D)
  input  logic      msm_present,
  input  logic      cfg_load,
  output logic      route_msm      [NUM_CH],
  // L2 slice side, one channel per slice
  input  logic      l2_req_valid   [NUM_CH],
  output logic      l2_req_ready   [NUM_CH],
  input  mem_req_t  l2_req         [NUM_CH],
  output logic      l2_rsp_valid   [NUM_CH],
  input  logic      l2_rsp_ready   [NUM_CH],
  output mem_rsp_t  l2_rsp         [NUM_CH],
  // HBM side, one channel port each
  output logic      dram_req_valid [NUM_CH],
  input  logic      dram_req_ready [NUM_CH],
  output dram_req_t dram_req       [NUM_CH],
  input  logic      dram_rsp_valid [NUM_CH],
  output logic      dram_rsp_ready [NUM_CH],
  input  line_t     dram_rsp_data  [NUM_CH],
  // L3 statistics
  output l3_ev_t    l3_ev          [NUM_CH]
);
  localparam int unsigned CH_BITS = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  // GPM side of each channel's links
  logic      lk_req_valid [NUM_CH], lk_req_ready [NUM_CH];
  mem_req_t  lk_req       [NUM_CH];
  logic      lk_rsp_valid [NUM_CH], lk_rsp_ready [NUM_CH];
  mem_rsp_t  lk_rsp       [NUM_CH];
  // MSM side of each channel's links
  logic      ms_req_valid [NUM_CH], ms_req_ready [NUM_CH];
  mem_req_t  ms_req       [NUM_CH];
  logic      ms_rsp_valid [NUM_CH], ms_rsp_ready [NUM_CH];
  mem_rsp_t  ms_rsp       [NUM_CH];
  // MSM memory controller DRAM ports
  logic      md_req_valid [NUM_CH], md_req_ready [NUM_CH];
  dram_req_t md_req       [NUM_CH];
  logic      md_rsp_valid [NUM_CH], md_rsp_ready [NUM_CH];
  line_t     md_rsp_data  [NUM_CH];

  logic [NUM_MSM-1:0] msm_init_done;
  assign init_done = &msm_init_done;

  // ------------------------------------------------------------- GPM side
  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    if (INTEG == INTEG_3D) begin : g_3d
      logic      mc_req_valid, mc_req_ready, mc_rsp_valid, mc_rsp_ready;
      mem_req_t  mc_req;
      mem_rsp_t  mc_rsp;
      logic      gd_req_valid, gd_req_ready, gd_rsp_valid, gd_rsp_ready;
      dram_req_t gd_req;
      logic      sw_busy;

      post_l2_switch u_switch (
        .clk, .rst_n,
        .msm_present, .cfg_load,
        .route_msm     (route_msm[c]),
        .busy          (sw_busy),
        .l2_req_valid  (l2_req_valid[c]),
        .l2_req_ready  (l2_req_ready[c]),
        .l2_req        (l2_req[c]),
        .l2_rsp_valid  (l2_rsp_valid[c]),
        .l2_rsp_ready  (l2_rsp_ready[c]),
        .l2_rsp        (l2_rsp[c]),
        .mc_req_valid, .mc_req_ready, .mc_req,
        .mc_rsp_valid, .mc_rsp_ready, .mc_rsp,
        .uhb_req_valid (lk_req_valid[c]),
        .uhb_req_ready (lk_req_ready[c]),
        .uhb_req       (lk_req[c]),
        .uhb_rsp_valid (lk_rsp_valid[c]),
        .uhb_rsp_ready (lk_rsp_ready[c]),
        .uhb_rsp       (lk_rsp[c])
      );

      // the GPM's own controller, used when no MSM is stacked
      mem_ctrl #(.QDEPTH(MC_QDEPTH), .MAX_OUT(MC_MAXOUT)) u_gpm_mc (
        .clk, .rst_n,
        .req_valid      (mc_req_valid), .req_ready(mc_req_ready), .req(mc_req),
        .rsp_valid      (mc_rsp_valid), .rsp_ready(mc_rsp_ready), .rsp(mc_rsp),
        .dram_req_valid (gd_req_valid), .dram_req_ready(gd_req_ready),
        .dram_req       (gd_req),
        .dram_rsp_valid (gd_rsp_valid), .dram_rsp_ready(gd_rsp_ready),
        .dram_rsp_data  (dram_rsp_data[c])
      );

      // HBM port is driven by the selected controller
      always_comb begin
        if (route_msm[c]) begin
          dram_req_valid[c] = md_req_valid[c];
          dram_req[c]       = md_req[c];
          dram_rsp_ready[c] = md_rsp_ready[c];
        end else begin
          dram_req_valid[c] = gd_req_valid;
          dram_req[c]       = gd_req;
          dram_rsp_ready[c] = gd_rsp_ready;
        end
      end
      assign md_req_ready[c] =  route_msm[c] && dram_req_ready[c];
      assign gd_req_ready    = !route_msm[c] && dram_req_ready[c];
      assign md_rsp_valid[c] =  route_msm[c] && dram_rsp_valid[c];
      assign gd_rsp_valid    = !route_msm[c] && dram_rsp_valid[c];
      assign md_rsp_data[c]  = dram_rsp_data[c];
    end else begin : g_2p5d
      // no switch and no controller on the GPM: straight onto the link
      assign route_msm[c]    = 1'b1;
      assign lk_req_valid[c] = l2_req_valid[c];
      assign l2_req_ready[c] = lk_req_ready[c];
      assign lk_req[c]       = l2_req[c];
      assign l2_rsp_valid[c] = lk_rsp_valid[c];
      assign lk_rsp_ready[c] = l2_rsp_ready[c];
      assign l2_rsp[c]       = lk_rsp[c];

      assign dram_req_valid[c] = md_req_valid[c];
      assign md_req_ready[c]   = dram_req_ready[c];
      assign dram_req[c]       = md_req[c];
      assign md_rsp_valid[c]   = dram_rsp_valid[c];
      assign dram_rsp_ready[c] = md_rsp_ready[c];
      assign md_rsp_data[c]    = dram_rsp_data[c];
    end

    // ------------------------------------------------------ UHB links
    uhb_link #(.T(mem_req_t), .LATENCY(LINK_LAT), .DEPTH(LINK_DEPTH)) u_link_req (
      .clk, .rst_n,
      .in_valid  (lk_req_valid[c]), .in_ready (lk_req_ready[c]), .in_data (lk_req[c]),
      .out_valid (ms_req_valid[c]), .out_ready(ms_req_ready[c]), .out_data(ms_req[c])
    );
    uhb_link #(.T(mem_rsp_t), .LATENCY(LINK_LAT), .DEPTH(LINK_DEPTH)) u_link_rsp (
      .clk, .rst_n,
      .in_valid  (ms_rsp_valid[c]), .in_ready (ms_rsp_ready[c]), .in_data (ms_rsp[c]),
      .out_valid (lk_rsp_valid[c]), .out_ready(lk_rsp_ready[c]), .out_data(lk_rsp[c])
    );
  end

  // ------------------------------------------------------------- MSM dies
  for (genvar m = 0; m < NUM_MSM; m++) begin : g_msm
    logic      req_valid [CH_PER_MSM], req_ready [CH_PER_MSM];
    mem_req_t  req       [CH_PER_MSM];
    logic      rsp_valid [CH_PER_MSM], rsp_ready [CH_PER_MSM];
    mem_rsp_t  rsp       [CH_PER_MSM];
    logic      dq_valid  [CH_PER_MSM], dq_ready  [CH_PER_MSM];
    dram_req_t dq        [CH_PER_MSM];
    logic      ds_valid  [CH_PER_MSM], ds_ready  [CH_PER_MSM];
    line_t     ds_data   [CH_PER_MSM];
    l3_ev_t    ev        [CH_PER_MSM];

    for (genvar k = 0; k < CH_PER_MSM; k++) begin : g_map
      localparam int unsigned C = m * CH_PER_MSM + k;
      assign req_valid[k]     = ms_req_valid[C];
      assign ms_req_ready[C]  = req_ready[k];
      assign req[k]           = ms_req[C];
      assign ms_rsp_valid[C]  = rsp_valid[k];
      assign rsp_ready[k]     = ms_rsp_ready[C];
      assign ms_rsp[C]        = rsp[k];
      assign md_req_valid[C]  = dq_valid[k];
      assign dq_ready[k]      = md_req_ready[C];
      assign md_req[C]        = dq[k];
      assign ds_valid[k]      = md_rsp_valid[C];
      assign md_rsp_ready[C]  = ds_ready[k];
      assign ds_data[k]       = md_rsp_data[C];
      assign l3_ev[C]         = ev[k];
    end

    msm #(
      .CH(CH_PER_MSM), .CH_BITS(CH_BITS), .L3_SETS(L3_SETS), .L3_WAYS(L3_WAYS),
      .MC_QDEPTH(MC_QDEPTH), .MC_MAXOUT(MC_MAXOUT)
    ) u_msm (
      .clk, .rst_n,
      .init_done      (msm_init_done[m]),
      .req_valid, .req_ready, .req,
      .rsp_valid, .rsp_ready, .rsp,
      .dram_req_valid (dq_valid), .dram_req_ready(dq_ready), .dram_req(dq),
      .dram_rsp_valid (ds_valid), .dram_rsp_ready(ds_ready), .dram_rsp_data(ds_data),
      .l3_ev          (ev)
    );
  end

endmodule
