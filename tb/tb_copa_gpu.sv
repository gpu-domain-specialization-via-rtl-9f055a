// tb_copa_gpu: end-to-end test of the post-L2 memory system at reduced size.
//
// Two instances of the top run side by side, each L2 slice replaced by a
// random traffic source with a golden memory and each HBM channel by a
// behavioural model:
//   * u25 - the default 2.5D organisation with two MSMs of two channels each
//     (4 sets x 2 ways per L3 slice, link with only 4 credits so that the
//     link back-pressures the L2);
//   * u3d - the 3D organisation with one MSM of two channels. Its first phase
//     runs with no MSM configured (all traffic through the GPM's own
//     controllers), then the switches are reconfigured to "MSM present" and a
//     second phase runs through the L3.
// Every read response is checked for id and data. Each mechanism is counted
// and must occur at least once: L3 read hit, read miss, writeback hit,
// writeback miss, dirty eviction, link credit stall, 3D local routing, 3D MSM
// routing and the reconfiguration itself.
module tb_copa_gpu;
  import copa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int unsigned NA = 4;   // 2.5D channels
  localparam int unsigned NB = 2;   // 3D channels

  // ------------------------------------------------------------ 2.5D
  logic      a_init, a_route [NA];
  logic      a_qv [NA], a_qr [NA], a_sv [NA], a_sr [NA];
  mem_req_t  a_q [NA];
  mem_rsp_t  a_s [NA];
  logic      a_dqv [NA], a_dqr [NA], a_dsv [NA], a_dsr [NA];
  dram_req_t a_dq [NA];
  line_t     a_ds [NA];
  l3_ev_t    a_ev [NA];
  int        a_hw [NA], a_hr [NA];
  logic      a_start, a_done [NA];
  int        a_sc [NA], a_sf [NA], a_st [NA];

  copa_gpu #(.INTEG(INTEG_2P5D), .NUM_MSM(2), .CH_PER_MSM(2), .L3_SETS(4), .L3_WAYS(2),
             .LINK_LAT(3), .LINK_DEPTH(4), .MC_QDEPTH(4), .MC_MAXOUT(4)) u25 (
    .clk, .rst_n, .init_done(a_init), .msm_present(1'b1), .cfg_load(1'b0), .route_msm(a_route),
    .l2_req_valid(a_qv), .l2_req_ready(a_qr), .l2_req(a_q),
    .l2_rsp_valid(a_sv), .l2_rsp_ready(a_sr), .l2_rsp(a_s),
    .dram_req_valid(a_dqv), .dram_req_ready(a_dqr), .dram_req(a_dq),
    .dram_rsp_valid(a_dsv), .dram_rsp_ready(a_dsr), .dram_rsp_data(a_ds), .l3_ev(a_ev));

  for (genvar c = 0; c < NA; c++) begin : g_a
    l2_traffic #(.CH_ID(c), .CH_BITS(2), .N_OPS(1200), .FOOTPRINT(20), .ISSUE_PCT(90),
                 .READY_PCT(90)) u_src (
      .clk, .rst_n, .start(a_start), .req_valid(a_qv[c]), .req_ready(a_qr[c]), .req(a_q[c]),
      .rsp_valid(a_sv[c]), .rsp_ready(a_sr[c]), .rsp(a_s[c]), .done(a_done[c]),
      .checks(a_sc[c]), .failures(a_sf[c]), .stalls(a_st[c]));
    hbm_model #(.LATENCY(20), .STALL_PCT(10)) u_hbm (
      .clk, .rst_n, .req_valid(a_dqv[c]), .req_ready(a_dqr[c]), .req(a_dq[c]),
      .rsp_valid(a_dsv[c]), .rsp_ready(a_dsr[c]), .rsp_data(a_ds[c]),
      .writes(a_hw[c]), .reads(a_hr[c]));
  end

  // ------------------------------------------------------------ 3D
  logic      b_init, b_route [NB], b_present, b_cfg;
  logic      b_qv [NB], b_qr [NB], b_sv [NB], b_sr [NB];
  mem_req_t  b_q [NB];
  mem_rsp_t  b_s [NB];
  logic      b_dqv [NB], b_dqr [NB], b_dsv [NB], b_dsr [NB];
  dram_req_t b_dq [NB];
  line_t     b_ds [NB];
  l3_ev_t    b_ev [NB];
  int        b_hw [NB], b_hr [NB];
  logic      b_phase;
  logic      b_start [2], b_done [2][NB];
  logic      b_pv [2][NB], b_pr [2][NB];
  mem_req_t  b_pq [2][NB];
  int        b_sc [2][NB], b_sf [2][NB], b_st [2][NB];

  copa_gpu #(.INTEG(INTEG_3D), .NUM_MSM(1), .CH_PER_MSM(NB), .L3_SETS(4), .L3_WAYS(2),
             .MC_QDEPTH(4), .MC_MAXOUT(4)) u3d (
    .clk, .rst_n, .init_done(b_init), .msm_present(b_present), .cfg_load(b_cfg),
    .route_msm(b_route),
    .l2_req_valid(b_qv), .l2_req_ready(b_qr), .l2_req(b_q),
    .l2_rsp_valid(b_sv), .l2_rsp_ready(b_sr), .l2_rsp(b_s),
    .dram_req_valid(b_dqv), .dram_req_ready(b_dqr), .dram_req(b_dq),
    .dram_rsp_valid(b_dsv), .dram_rsp_ready(b_dsr), .dram_rsp_data(b_ds), .l3_ev(b_ev));

  for (genvar c = 0; c < NB; c++) begin : g_b
    for (genvar p = 0; p < 2; p++) begin : g_p
      l2_traffic #(.CH_ID(c), .CH_BITS(1), .N_OPS(800), .FOOTPRINT(20),
                   .ADDR_BASE(p * 4096)) u_src (
        .clk, .rst_n, .start(b_start[p]), .req_valid(b_pv[p][c]),
        .req_ready(b_qr[c] && (b_phase == p)), .req(b_pq[p][c]),
        .rsp_valid(b_sv[c] && (b_phase == p)), .rsp_ready(b_pr[p][c]), .rsp(b_s[c]),
        .done(b_done[p][c]), .checks(b_sc[p][c]), .failures(b_sf[p][c]), .stalls(b_st[p][c]));
    end
    assign b_qv[c] = b_pv[b_phase][c];
    assign b_q[c]  = b_pq[b_phase][c];
    assign b_sr[c] = b_pr[b_phase][c];
    hbm_model #(.LATENCY(20), .STALL_PCT(10)) u_hbm (
      .clk, .rst_n, .req_valid(b_dqv[c]), .req_ready(b_dqr[c]), .req(b_dq[c]),
      .rsp_valid(b_dsv[c]), .rsp_ready(b_dsr[c]), .rsp_data(b_ds[c]),
      .writes(b_hw[c]), .reads(b_hr[c]));
  end

  // ------------------------------------------------------------ counters
  int n_rh = 0, n_rm = 0, n_wh = 0, n_wm = 0, n_de = 0;
  int n_link_stall = 0, n_local = 0, n_msm = 0, n_reconf = 0;
  logic b_route_q;
  always_ff @(posedge clk) begin
    automatic int rh = 0, rm = 0, wh = 0, wm = 0, de = 0, lo = 0, ms = 0;
    for (int c = 0; c < NA; c++) begin
      rh += int'(a_ev[c].read_hit);
      rm += int'(a_ev[c].read_miss);
      wh += int'(a_ev[c].wb_hit);
      wm += int'(a_ev[c].wb_miss);
      de += int'(a_ev[c].dirty_evict);
    end
    for (int c = 0; c < NB; c++) begin
      lo += int'(b_qv[c] && b_qr[c] && !b_route[c]);
      ms += int'(b_qv[c] && b_qr[c] &&  b_route[c]);
    end
    n_rh <= n_rh + rh; n_rm <= n_rm + rm; n_wh <= n_wh + wh; n_wm <= n_wm + wm;
    n_de <= n_de + de; n_local <= n_local + lo; n_msm <= n_msm + ms;
    if (u25.g_ch[0].u_link_req.in_valid && !u25.g_ch[0].u_link_req.in_ready)
      n_link_stall <= n_link_stall + 1;
    b_route_q <= b_route[0];
    if (rst_n && b_route[0] != b_route_q) n_reconf <= n_reconf + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic mech(input string name, input int n);
    $display("  %-22s %0d", name, n);
    check(n > 0, {name, " never happened"});
  endtask

  initial begin
    a_start = 0; b_start[0] = 0; b_start[1] = 0; b_phase = 0; b_present = 0; b_cfg = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(a_init && b_init)) begin @(posedge clk); #1; end
    // 3D: configure "no MSM" (HPC part)
    b_present = 0; b_cfg = 1;
    @(posedge clk); #1;
    b_cfg = 0;
    a_start = 1; b_start[0] = 1;
    wait (b_done[0][0] && b_done[0][1]);
    @(posedge clk); #1;
    // 3D: reconfigure to "MSM present" (DL part)
    b_present = 1; b_cfg = 1;
    @(posedge clk); #1;
    b_cfg = 0;
    @(posedge clk); #1;
    check(b_route[0] && b_route[1], "3D switches did not take the MSM route");
    b_phase = 1; b_start[1] = 1;
    wait (b_done[1][0] && b_done[1][1]);
    wait (a_done[0] && a_done[1] && a_done[2] && a_done[3]);
    repeat (5) @(posedge clk);
    for (int c = 0; c < NA; c++) begin checks += a_sc[c]; failures += a_sf[c]; end
    for (int p = 0; p < 2; p++) for (int c = 0; c < NB; c++) begin
      checks += b_sc[p][c]; failures += b_sf[p][c];
    end
    $display("mechanisms:");
    mech("L3 read hit", n_rh);
    mech("L3 read miss", n_rm);
    mech("L3 writeback hit", n_wh);
    mech("L3 writeback miss", n_wm);
    mech("L3 dirty eviction", n_de);
    mech("UHB link credit stall", n_link_stall);
    mech("3D route to GPM MC", n_local);
    mech("3D route to MSM", n_msm);
    mech("3D reconfiguration", n_reconf);
    check(n_local == 1600 && n_msm == 1600, $sformatf("3D routing %0d local / %0d MSM, expected 1600 each", n_local, n_msm));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
