// tb_copa_gpu_full: the post-L2 memory system at its default size.
//
// Default configuration: 2.5D package, two MSMs, 32 channels, 32 L3 slices of
// 16384 sets x 15 ways (960 MB in total), 4-cycle links with 16 credits. Each
// channel gets an L2 stand-in that, once the L3 tag clear has finished,
// issues 60 random reads and writebacks over 20 lines that all fall in the
// same L3 set (stride 16384 lines), so that the 15 ways overflow and dirty
// lines are evicted to DRAM. Every read is checked for id and data, and read
// hits, read misses, writeback hits and misses and dirty evictions must all
// have occurred. The tag clear is checked to take one cycle per set.
module tb_copa_gpu_full;
  import copa_pkg::*;
  localparam int unsigned N = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  logic      init_done, route [N];
  logic      qv [N], qr [N], sv [N], sr [N];
  mem_req_t  q [N];
  mem_rsp_t  s [N];
  logic      dqv [N], dqr [N], dsv [N], dsr [N];
  dram_req_t dq [N];
  line_t     ds [N];
  l3_ev_t    ev [N];
  int        hw [N], hr [N];
  logic      start, done [N];
  int        sc [N], sf [N], st [N];

  copa_gpu dut (
    .clk, .rst_n, .init_done, .msm_present(1'b1), .cfg_load(1'b0), .route_msm(route),
    .l2_req_valid(qv), .l2_req_ready(qr), .l2_req(q),
    .l2_rsp_valid(sv), .l2_rsp_ready(sr), .l2_rsp(s),
    .dram_req_valid(dqv), .dram_req_ready(dqr), .dram_req(dq),
    .dram_rsp_valid(dsv), .dram_rsp_ready(dsr), .dram_rsp_data(ds), .l3_ev(ev));

  for (genvar c = 0; c < N; c++) begin : g_ch
    l2_traffic #(.CH_ID(c), .CH_BITS(5), .N_OPS(60), .FOOTPRINT(20), .STRIDE(16384),
                 .ADDR_BASE(c * 7)) u_src (
      .clk, .rst_n, .start, .req_valid(qv[c]), .req_ready(qr[c]), .req(q[c]),
      .rsp_valid(sv[c]), .rsp_ready(sr[c]), .rsp(s[c]), .done(done[c]),
      .checks(sc[c]), .failures(sf[c]), .stalls(st[c]));
    hbm_model #(.LATENCY(40), .STALL_PCT(5)) u_hbm (
      .clk, .rst_n, .req_valid(dqv[c]), .req_ready(dqr[c]), .req(dq[c]),
      .rsp_valid(dsv[c]), .rsp_ready(dsr[c]), .rsp_data(ds[c]), .writes(hw[c]), .reads(hr[c]));
  end

  int n_rh = 0, n_rm = 0, n_wh = 0, n_wm = 0, n_de = 0;
  always_ff @(posedge clk) begin
    automatic int rh = 0, rm = 0, wh = 0, wm = 0, de = 0;
    for (int c = 0; c < N; c++) begin
      rh += int'(ev[c].read_hit);  rm += int'(ev[c].read_miss);
      wh += int'(ev[c].wb_hit);    wm += int'(ev[c].wb_miss);
      de += int'(ev[c].dirty_evict);
    end
    n_rh <= n_rh + rh; n_rm <= n_rm + rm; n_wh <= n_wh + wh; n_wm <= n_wm + wm;
    n_de <= n_de + de;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int t0;
    bit all_done;
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cycle;
    while (!init_done) begin @(posedge clk); #1; end
    check(cycle - t0 == 16384, $sformatf("tag clear took %0d cycles, expected 16384", cycle - t0));
    start = 1;
    do begin
      @(posedge clk); #1;
      all_done = 1;
      for (int c = 0; c < N; c++) all_done &= done[c];
    end while (!all_done);
    for (int c = 0; c < N; c++) begin
      checks += sc[c]; failures += sf[c];
      check(route[c], "2.5D channel not routed to the MSM");
    end
    $display("read hit %0d miss %0d, wb hit %0d miss %0d, dirty evictions %0d", n_rh, n_rm, n_wh, n_wm, n_de);
    check(n_rh > 0 && n_rm > 0 && n_wh > 0 && n_wm > 0 && n_de > 0, "an L3 event never happened");
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
