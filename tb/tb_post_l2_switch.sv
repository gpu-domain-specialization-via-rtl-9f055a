// tb_post_l2_switch: self-checking test of the post-L2 steering switch.
//
// Each side of the switch (GPM-local and UHB) ends in its own memory
// controller and behavioural HBM channel, so it can be seen where every
// request went. Phase 1 configures "no MSM" and runs 800 random requests: all
// must reach the local side, none the UHB side, and every read must return the
// right data. A reconfiguration attempted while a read is outstanding must be
// ignored, and requests must be held off while cfg_load is high. Phase 2
// configures "MSM present" and runs 800 more requests (a disjoint address
// range), which must all go over the UHB side.
module tb_post_l2_switch;
  import copa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic     msm_present, cfg_load, route_msm, busy;
  logic     l2q_v, l2q_r, l2s_v, l2s_r;
  mem_req_t l2q;
  mem_rsp_t l2s;
  logic     mq_v [2], mq_r [2], ms_v [2], ms_r [2];
  mem_req_t mq [2];
  mem_rsp_t ms [2];
  logic      dq_v [2], dq_r [2], ds_v [2], ds_r [2];
  dram_req_t dq [2];
  line_t     ds [2];
  int        hw [2], hr [2];

  post_l2_switch dut (
    .clk, .rst_n, .msm_present, .cfg_load, .route_msm, .busy,
    .l2_req_valid(l2q_v), .l2_req_ready(l2q_r), .l2_req(l2q),
    .l2_rsp_valid(l2s_v), .l2_rsp_ready(l2s_r), .l2_rsp(l2s),
    .mc_req_valid(mq_v[0]), .mc_req_ready(mq_r[0]), .mc_req(mq[0]),
    .mc_rsp_valid(ms_v[0]), .mc_rsp_ready(ms_r[0]), .mc_rsp(ms[0]),
    .uhb_req_valid(mq_v[1]), .uhb_req_ready(mq_r[1]), .uhb_req(mq[1]),
    .uhb_rsp_valid(ms_v[1]), .uhb_rsp_ready(ms_r[1]), .uhb_rsp(ms[1]));

  for (genvar s = 0; s < 2; s++) begin : g_side
    mem_ctrl u_mc (
      .clk, .rst_n, .req_valid(mq_v[s]), .req_ready(mq_r[s]), .req(mq[s]),
      .rsp_valid(ms_v[s]), .rsp_ready(ms_r[s]), .rsp(ms[s]),
      .dram_req_valid(dq_v[s]), .dram_req_ready(dq_r[s]), .dram_req(dq[s]),
      .dram_rsp_valid(ds_v[s]), .dram_rsp_ready(ds_r[s]), .dram_rsp_data(ds[s]));
    hbm_model #(.LATENCY(10 + 6 * s), .STALL_PCT(15)) u_hbm (
      .clk, .rst_n, .req_valid(dq_v[s]), .req_ready(dq_r[s]), .req(dq[s]),
      .rsp_valid(ds_v[s]), .rsp_ready(ds_r[s]), .rsp_data(ds[s]), .writes(hw[s]), .reads(hr[s]));
  end

  // one traffic source per phase
  logic     st [2], sv [2], srr [2], sdone [2];
  mem_req_t sq [2];
  int       sc [2], sf [2], sst [2];
  logic     phase;   // 0: local, 1: MSM
  for (genvar p = 0; p < 2; p++) begin : g_src
    l2_traffic #(.CH_ID(0), .CH_BITS(0), .N_OPS(800), .FOOTPRINT(40), .ADDR_BASE(p * 1000)) u_src (
      .clk, .rst_n, .start(st[p]), .req_valid(sv[p]), .req_ready(l2q_r && (phase == p)),
      .req(sq[p]), .rsp_valid(l2s_v && (phase == p) && st[p]), .rsp_ready(srr[p]), .rsp(l2s),
      .done(sdone[p]), .checks(sc[p]), .failures(sf[p]), .stalls(sst[p]));
  end

  logic     d_v;
  mem_req_t d_q;
  logic     directed;
  assign l2q_v = directed ? d_v : sv[phase];
  assign l2q   = directed ? d_q : sq[phase];
  assign l2s_r = directed ? 1'b1 : srr[phase];

  int side_reqs [2] = '{0, 0};
  always_ff @(posedge clk) begin
    if (mq_v[0] && mq_r[0]) side_reqs[0] <= side_reqs[0] + 1;
    if (mq_v[1] && mq_r[1]) side_reqs[1] <= side_reqs[1] + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic configure(input logic present);
    msm_present = present; cfg_load = 1;
    @(posedge clk); #1;
    check(!l2q_r, "requests not held off during cfg_load");
    cfg_load = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    int r0, r1;
    msm_present = 0; cfg_load = 0; d_v = 0; d_q = '0; directed = 1; phase = 0;
    st[0] = 0; st[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!route_msm, "route after reset is the local controller");
    configure(0);
    // a read in flight blocks reconfiguration
    d_q.op = OP_READ; d_q.id = 8'h21; d_q.addr = 31'h77; d_v = 1;
    @(posedge clk); #1;
    d_v = 0;
    check(busy, "busy with a read outstanding");
    msm_present = 1; cfg_load = 1;
    @(posedge clk); #1;
    cfg_load = 0;
    check(!route_msm, "route changed while a read was outstanding");
    while (!l2s_v) begin @(posedge clk); #1; end
    check(l2s.id == 8'h21 && l2s.data == tb_pkg::init_line(31'h77), "directed read via local side");
    @(posedge clk); #1;
    check(!busy, "not busy after the response");
    check(side_reqs[0] == 1 && side_reqs[1] == 0, "directed read went to the local side");
    // phase 1: no MSM
    directed = 0; st[0] = 1;
    wait (sdone[0]);
    @(posedge clk); #1;
    check(side_reqs[1] == 0, $sformatf("%0d requests leaked to the UHB side", side_reqs[1]));
    check(side_reqs[0] == 801, $sformatf("local side saw %0d of 801 requests", side_reqs[0]));
    // phase 2: MSM present
    directed = 1;
    configure(1);
    check(route_msm, "route to MSM after configuration");
    r0 = side_reqs[0];
    phase = 1; directed = 0; st[1] = 1;
    wait (sdone[1]);
    @(posedge clk); #1;
    r1 = side_reqs[1];
    check(side_reqs[0] == r0, "requests went to the local side with MSM present");
    check(r1 == 800, $sformatf("UHB side saw %0d of 800 requests", r1));
    checks += sc[0] + sc[1]; failures += sf[0] + sf[1];
    $display("local side %0d requests, UHB side %0d requests, reads checked %0d", side_reqs[0], r1, sc[0] + sc[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
