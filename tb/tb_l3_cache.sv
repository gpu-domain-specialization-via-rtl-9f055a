// tb_l3_cache: self-checking test of one L3 slice.
//
// The slice is built small (4 sets x 2 ways, channel bit 0 = 1) over a memory
// controller and a behavioural HBM channel. A directed part checks, with
// known expected data and event pulses: read miss fills from DRAM; read hit
// answers 2 cycles after acceptance; a writeback hit is stored and read back;
// two further lines of the same set push the dirty line out, which must be
// written to DRAM (a dirty eviction) and come back from DRAM when read again;
// a writeback miss allocates. A random part then runs 3000 reads and
// writebacks over 32 lines (8x the capacity) against a golden memory, and the
// hit/miss/eviction pulses are checked to have all occurred.
module tb_l3_cache;
  import copa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  logic      req_valid, req_ready, rsp_valid, rsp_ready, init_done;
  mem_req_t  req;
  mem_rsp_t  rsp;
  logic      mq_valid, mq_ready, ms_valid, ms_ready;
  mem_req_t  mq;
  mem_rsp_t  ms;
  logic      dq_valid, dq_ready, ds_valid, ds_ready;
  dram_req_t dq;
  line_t     ds_data;
  int        hw, hr;
  logic      e_rh, e_rm, e_wh, e_wm, e_de;

  l3_cache #(.SETS(4), .WAYS(2), .CH_BITS(1)) dut (
    .clk, .rst_n, .init_done, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp,
    .mreq_valid(mq_valid), .mreq_ready(mq_ready), .mreq(mq),
    .mrsp_valid(ms_valid), .mrsp_ready(ms_ready), .mrsp(ms),
    .ev_read_hit(e_rh), .ev_read_miss(e_rm), .ev_wb_hit(e_wh), .ev_wb_miss(e_wm),
    .ev_dirty_evict(e_de));

  mem_ctrl u_mc (
    .clk, .rst_n, .req_valid(mq_valid), .req_ready(mq_ready), .req(mq),
    .rsp_valid(ms_valid), .rsp_ready(ms_ready), .rsp(ms),
    .dram_req_valid(dq_valid), .dram_req_ready(dq_ready), .dram_req(dq),
    .dram_rsp_valid(ds_valid), .dram_rsp_ready(ds_ready), .dram_rsp_data(ds_data));

  hbm_model #(.LATENCY(12), .STALL_PCT(10)) u_hbm (
    .clk, .rst_n, .req_valid(dq_valid), .req_ready(dq_ready), .req(dq),
    .rsp_valid(ds_valid), .rsp_ready(ds_ready), .rsp_data(ds_data), .writes(hw), .reads(hr));

  // random source (second phase)
  logic     start, s_valid, s_rready, t_done;
  mem_req_t s_req;
  int       t_checks, t_fail, t_stalls;
  l2_traffic #(.CH_ID(1), .CH_BITS(1), .N_OPS(3000), .FOOTPRINT(32), .WB_PCT(40), .ADDR_BASE(64)) u_src (
    .clk, .rst_n, .start, .req_valid(s_valid), .req_ready(req_ready), .req(s_req),
    .rsp_valid(rsp_valid && start), .rsp_ready(s_rready), .rsp, .done(t_done),
    .checks(t_checks), .failures(t_fail), .stalls(t_stalls));

  logic     d_valid;
  mem_req_t d_req;
  assign req_valid = start ? s_valid  : d_valid;
  assign req       = start ? s_req    : d_req;
  assign rsp_ready = start ? s_rready : 1'b1;

  int n_rh = 0, n_rm = 0, n_wh = 0, n_wm = 0, n_de = 0;
  always_ff @(posedge clk) begin
    n_rh <= n_rh + int'(e_rh); n_rm <= n_rm + int'(e_rm);
    n_wh <= n_wh + int'(e_wh); n_wm <= n_wm + int'(e_wm);
    n_de <= n_de + int'(e_de);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic laddr_t mk(input int tag, input int set);
    return laddr_t'((tag << 3) | (set << 1) | 1);
  endfunction

  // issue one request; return the acceptance cycle
  task automatic issue(input mem_op_e op, input laddr_t a, input line_t d, output int t_acc);
    d_req.op = op; d_req.addr = a; d_req.data = d; d_req.id = d_req.id + 1'b1;
    d_valid = 1;
    #1;
    while (!req_ready) begin @(posedge clk); #1; end
    t_acc = cycle;
    @(posedge clk); #1;
    d_valid = 0;
  endtask

  task automatic read_check(input laddr_t a, input line_t exp, input string what,
                            output int lat);
    int t_acc;
    issue(OP_READ, a, '0, t_acc);
    while (!rsp_valid) begin @(posedge clk); #1; end
    lat = cycle - t_acc;
    check(rsp.data == exp && rsp.id == d_req.id, what);
    @(posedge clk); #1;
  endtask

  task automatic wait_idle();
    int t;
    t = 0;
    while (!req_ready || t < 2) begin @(posedge clk); #1; t++; end
  endtask

  initial begin
    int lat, t_acc, rm0, de0, hw0;
    line_t d1, d2;
    start = 0; d_valid = 0; d_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!init_done) begin @(posedge clk); #1; end
    d1 = tb_pkg::rand_line();
    d2 = tb_pkg::rand_line();
    // 1. read miss, then hit
    read_check(mk(0, 0), tb_pkg::init_line(mk(0, 0)), "read miss data", lat);
    check(n_rm == 1 && n_rh == 0, "read miss event");
    read_check(mk(0, 0), tb_pkg::init_line(mk(0, 0)), "read hit data", lat);
    check(n_rh == 1, "read hit event");
    check(lat == 2, $sformatf("read hit latency %0d, expected 2", lat));
    // 2. writeback hit, read back
    issue(OP_WRITEBACK, mk(0, 0), d1, t_acc);
    wait_idle();
    check(n_wh == 1, "writeback hit event");
    read_check(mk(0, 0), d1, "read after writeback", lat);
    check(lat == 2, "read after writeback is a hit");
    // 3. two more lines in set 0 evict the dirty line
    hw0 = hw; de0 = n_de;
    read_check(mk(1, 0), tb_pkg::init_line(mk(1, 0)), "second line of set", lat);
    read_check(mk(2, 0), tb_pkg::init_line(mk(2, 0)), "third line of set", lat);
    check(n_de == de0 + 1, "dirty eviction event");
    repeat (5) @(posedge clk); #1;
    check(hw == hw0 + 1, "dirty victim written to DRAM");
    rm0 = n_rm;
    read_check(mk(0, 0), d1, "evicted dirty line comes back from DRAM", lat);
    check(n_rm == rm0 + 1, "re-read of evicted line misses");
    // 4. writeback miss allocates
    issue(OP_WRITEBACK, mk(5, 2), d2, t_acc);
    wait_idle();
    check(n_wm == 1, "writeback miss event");
    read_check(mk(5, 2), d2, "read of allocated writeback", lat);
    check(lat == 2, "writeback miss allocated the line");
    // 5. random traffic
    start = 1;
    wait (t_done);
    repeat (5) @(posedge clk);
    checks += t_checks; failures += t_fail;
    check(t_checks > 1000, "random phase checked too few reads");
    check(n_rh > 0 && n_rm > 0 && n_wh > 0 && n_wm > 0 && n_de > 0, "some L3 event never happened");
    $display("read hit %0d miss %0d, wb hit %0d miss %0d, dirty evictions %0d", n_rh, n_rm, n_wh, n_wm, n_de);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
