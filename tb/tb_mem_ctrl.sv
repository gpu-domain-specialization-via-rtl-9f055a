// tb_mem_ctrl: self-checking test of the memory controller.
//
// An l2_traffic source drives 2000 random reads and writebacks through the
// controller into a behavioural HBM channel (20-cycle latency, random
// back-pressure); every read's id and data are checked against a golden copy.
// The controller is built with MAX_OUT = 4: a monitor checks that no more
// than 4 reads are ever in flight at the DRAM and that the limit is reached.
// A first directed read on the idle controller checks that a request reaches
// the DRAM port one cycle after it is accepted.
module tb_mem_ctrl;
  import copa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic      req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t  req;
  mem_rsp_t  rsp;
  logic      dq_valid, dq_ready, ds_valid, ds_ready;
  dram_req_t dq;
  line_t     ds_data;
  int        hw, hr;
  logic      start;
  logic      t_done;
  int        t_checks, t_fail, t_stalls;

  mem_ctrl #(.QDEPTH(8), .MAX_OUT(4)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp,
    .dram_req_valid(dq_valid), .dram_req_ready(dq_ready), .dram_req(dq),
    .dram_rsp_valid(ds_valid), .dram_rsp_ready(ds_ready), .dram_rsp_data(ds_data));

  hbm_model #(.LATENCY(20), .STALL_PCT(20)) u_hbm (
    .clk, .rst_n, .req_valid(dq_valid), .req_ready(dq_ready), .req(dq),
    .rsp_valid(ds_valid), .rsp_ready(ds_ready), .rsp_data(ds_data), .writes(hw), .reads(hr));

  logic     s_req_valid, s_rsp_ready;
  mem_req_t s_req;
  l2_traffic #(.CH_ID(0), .CH_BITS(0), .N_OPS(2000), .FOOTPRINT(64), .ISSUE_PCT(90),
               .READY_PCT(70)) u_src (
    .clk, .rst_n, .start, .req_valid(s_req_valid), .req_ready(req_ready), .req(s_req),
    .rsp_valid(rsp_valid && start), .rsp_ready(s_rsp_ready), .rsp, .done(t_done), .checks(t_checks),
    .failures(t_fail), .stalls(t_stalls));

  // directed phase drives the port itself, then hands it to the source
  logic     d_valid;
  mem_req_t d_req;
  assign req_valid = start ? s_req_valid : d_valid;
  assign req       = start ? s_req       : d_req;
  assign rsp_ready = start ? s_rsp_ready : 1'b1;

  // outstanding-read monitor
  int inflight = 0, max_inflight = 0;
  always_ff @(posedge clk) if (rst_n) begin
    automatic int n = inflight + int'(dq_valid && dq_ready && !dq.we) - int'(ds_valid && ds_ready);
    inflight <= n;
    if (n > max_inflight) max_inflight <= n;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    start = 0; d_valid = 0; d_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    d_req.op = OP_READ; d_req.id = 8'h5A; d_req.addr = 31'h123; d_valid = 1;
    check(req_ready, "idle controller not ready");
    @(posedge clk); #1;
    d_valid = 0;
    check(dq_valid && !dq.we && dq.addr == 31'h123, "read not on DRAM port one cycle after acceptance");
    while (!rsp_valid) begin @(posedge clk); #1; end
    check(rsp.id == 8'h5A && rsp.data == tb_pkg::init_line(31'h123), "directed read response");
    @(posedge clk); #1;
    start = 1;
    wait (t_done);
    repeat (5) @(posedge clk);
    check(max_inflight <= 4, $sformatf("%0d reads in flight, limit 4", max_inflight));
    check(max_inflight == 4, $sformatf("outstanding limit never reached (max %0d)", max_inflight));
    check(t_checks > 500, "too few responses checked");
    checks += t_checks; failures += t_fail;
    $display("responses %0d, DRAM writes %0d reads %0d, max in flight %0d", t_checks, hw, hr, max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + t_checks, failures + t_fail);
    $finish;
  end
endmodule
