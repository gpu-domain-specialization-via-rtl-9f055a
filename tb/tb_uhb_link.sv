// tb_uhb_link: self-checking test of the credit-based UHB link layer.
//
// Two links are driven side by side with 32-bit flits carrying a sequence
// number: a full-rate one (LATENCY 4, DEPTH 16) and a starved one (LATENCY 4,
// DEPTH 4, fewer credits than the round trip needs). Checks: the first flit
// arrives LATENCY+1 cycles after it is sent; flits arrive in order and
// unchanged under random receiver back-pressure; with the receiver always
// ready the full link moves 64 flits in 64 + LATENCY + 1 cycles (one flit per
// cycle), while the starved link needs at least 64*(2*LATENCY+1)/DEPTH cycles.
module tb_uhb_link;
  localparam int unsigned LAT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  typedef logic [31:0] flit_t;

  logic  a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  flit_t a_in_data, a_out_data;
  logic  b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  flit_t b_in_data, b_out_data;

  uhb_link #(.T(flit_t), .LATENCY(LAT), .DEPTH(16)) u_full (
    .clk, .rst_n, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_data(a_in_data),
    .out_valid(a_out_valid), .out_ready(a_out_ready), .out_data(a_out_data));
  uhb_link #(.T(flit_t), .LATENCY(LAT), .DEPTH(4)) u_starved (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_data(b_in_data),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_data(b_out_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Sends n flits starting at seq on both links, receivers ready with
  // probability rdy_pct; returns cycles from first send to last receive.
  task automatic run(input int n, input int rdy_pct, output int cyc_a, output int cyc_b,
                     output int first_lat);
    int sa = 0, sb = 0, ra = 0, rb = 0;
    int t0 = cycle;
    int t_first_send = -1;
    cyc_a = -1; cyc_b = -1; first_lat = -1;
    while (ra < n || rb < n) begin
      a_in_valid  = (sa < n); a_in_data = sa;
      b_in_valid  = (sb < n); b_in_data = sb;
      a_out_ready = ($urandom_range(99) < rdy_pct);
      b_out_ready = ($urandom_range(99) < rdy_pct);
      #1;
      if (a_out_valid && a_out_ready) begin
        if (ra == 0) first_lat = cycle - t_first_send;
        check(a_out_data == flit_t'(ra), $sformatf("full link flit %0d got %0d", ra, a_out_data));
        ra++;
        if (ra == n) cyc_a = cycle - t0 + 1;
      end
      if (b_out_valid && b_out_ready) begin
        check(b_out_data == flit_t'(rb), $sformatf("starved link flit %0d got %0d", rb, b_out_data));
        rb++;
        if (rb == n) cyc_b = cycle - t0 + 1;
      end
      if (a_in_valid && a_in_ready) begin
        if (sa == 0) t_first_send = cycle;
        sa++;
      end
      if (b_in_valid && b_in_ready) sb++;
      @(posedge clk); #1;
    end
    a_in_valid = 0; b_in_valid = 0; a_out_ready = 0; b_out_ready = 0;
  endtask

  initial begin
    int ca, cb, fl;
    a_in_valid = 0; b_in_valid = 0; a_out_ready = 0; b_out_ready = 0;
    a_in_data = '0; b_in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // full rate
    run(64, 100, ca, cb, fl);
    check(fl == LAT + 1, $sformatf("first-flit latency %0d, expected %0d", fl, LAT + 1));
    check(ca == 64 + LAT + 1, $sformatf("full link took %0d cycles for 64 flits, expected %0d", ca, 64 + LAT + 1));
    check(cb >= 64 * (2 * LAT + 1) / 4, $sformatf("starved link took only %0d cycles", cb));
    $display("full link %0d cycles, starved link %0d cycles for 64 flits", ca, cb);
    // random back-pressure
    run(500, 40, ca, cb, fl);
    run(300, 90, ca, cb, fl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
