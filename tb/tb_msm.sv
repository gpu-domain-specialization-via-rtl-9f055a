// tb_msm: self-checking test of a memory system module with two channels.
//
// Each channel gets its own L2 stand-in (1500 random reads and writebacks
// over 24 lines, 6x the slice capacity of 4 sets x 2 ways) and its own
// behavioural HBM channel. Checks: every read returns the right data; every
// DRAM request of channel c carries an address of channel c; init_done rises
// after the tag clear; both slices see read hits, read misses and dirty
// evictions.
module tb_msm;
  import copa_pkg::*;
  localparam int unsigned CH = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic      init_done;
  logic      q_v [CH], q_r [CH], s_v [CH], s_r [CH];
  mem_req_t  q [CH];
  mem_rsp_t  s [CH];
  logic      dq_v [CH], dq_r [CH], ds_v [CH], ds_r [CH];
  dram_req_t dq [CH];
  line_t     ds [CH];
  l3_ev_t    ev [CH];
  int        hw [CH], hr [CH];
  logic      start, done [CH];
  int        sc [CH], sf [CH], sst [CH];
  int        n_rh [CH], n_rm [CH], n_de [CH], bad_ch = 0;

  msm #(.CH(CH), .CH_BITS(1), .L3_SETS(4), .L3_WAYS(2), .MC_QDEPTH(4), .MC_MAXOUT(4)) dut (
    .clk, .rst_n, .init_done,
    .req_valid(q_v), .req_ready(q_r), .req(q), .rsp_valid(s_v), .rsp_ready(s_r), .rsp(s),
    .dram_req_valid(dq_v), .dram_req_ready(dq_r), .dram_req(dq),
    .dram_rsp_valid(ds_v), .dram_rsp_ready(ds_r), .dram_rsp_data(ds), .l3_ev(ev));

  for (genvar c = 0; c < CH; c++) begin : g_ch
    l2_traffic #(.CH_ID(c), .CH_BITS(1), .N_OPS(1500), .FOOTPRINT(24)) u_src (
      .clk, .rst_n, .start, .req_valid(q_v[c]), .req_ready(q_r[c]), .req(q[c]),
      .rsp_valid(s_v[c]), .rsp_ready(s_r[c]), .rsp(s[c]), .done(done[c]),
      .checks(sc[c]), .failures(sf[c]), .stalls(sst[c]));
    hbm_model #(.LATENCY(15), .STALL_PCT(10)) u_hbm (
      .clk, .rst_n, .req_valid(dq_v[c]), .req_ready(dq_r[c]), .req(dq[c]),
      .rsp_valid(ds_v[c]), .rsp_ready(ds_r[c]), .rsp_data(ds[c]), .writes(hw[c]), .reads(hr[c]));
    initial begin n_rh[c] = 0; n_rm[c] = 0; n_de[c] = 0; end
    always_ff @(posedge clk) begin
      n_rh[c] <= n_rh[c] + int'(ev[c].read_hit);
      n_rm[c] <= n_rm[c] + int'(ev[c].read_miss);
      n_de[c] <= n_de[c] + int'(ev[c].dirty_evict);
      if (dq_v[c] && dq_r[c] && dq[c].addr[0] != 1'(c)) bad_ch <= bad_ch + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!init_done, "init_done before the tag clear");
    while (!init_done) begin @(posedge clk); #1; end
    start = 1;
    wait (done[0] && done[1]);
    repeat (5) @(posedge clk);
    for (int c = 0; c < CH; c++) begin
      checks += sc[c]; failures += sf[c];
      check(sc[c] > 500, "too few reads checked");
      check(n_rh[c] > 0 && n_rm[c] > 0 && n_de[c] > 0, $sformatf("channel %0d: hit/miss/eviction missing", c));
      $display("ch%0d: reads checked %0d, hits %0d misses %0d dirty evictions %0d, DRAM w %0d r %0d",
               c, sc[c], n_rh[c], n_rm[c], n_de[c], hw[c], hr[c]);
    end
    check(bad_ch == 0, $sformatf("%0d DRAM requests on the wrong channel", bad_ch));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
