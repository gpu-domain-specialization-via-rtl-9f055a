// uhb_link: one direction of the ultra-high-bandwidth (UHB) on-package link
// between the GPU module (GPM) and a memory system module (MSM).
//
// The paper specifies the link only by bandwidth, energy and latency: 2.5D
// links over the interposer or 3D bonded links, 10.8 TB/s in total for the
// L2-L3 traffic (twice the DRAM bandwidth for reads plus twice for writes).
// This module is the logical link layer seen from the core clock; the
// serialising PHY is not modelled. One flit of type T (a whole request or
// response, i.e. a full 128-byte line) crosses per cycle, so 32 channels in
// each direction at 1.4 GHz carry 11.5 TB/s, just above the paper's 10.8 TB/s.
//
// Flow control is credit based, which is this design's choice: the sender
// holds one credit per entry of the receive FIFO, spends one per flit and gets
// it back LATENCY cycles after the receiver pops the flit. Flits take LATENCY
// register stages to cross. With DEPTH >= 2*LATENCY+1 the link sustains one
// flit per cycle; with less it throttles the sender (in_ready low).
//
// Timing: a flit accepted in cycle t is at out_valid in cycle t+LATENCY+1.
module uhb_link #(
  parameter type         T       = logic [7:0],
  parameter int unsigned LATENCY = 4,    // pipeline stages each way
  parameter int unsigned DEPTH   = 16    // receive FIFO entries = credits
) (
  input  logic clk,
  input  logic rst_n,
  // sender (e.g. GPM side of the request channel)
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  // receiver
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [CW-1:0] credits;
  logic          send;
  logic          fwd_valid [LATENCY+1];
  T              fwd_data  [LATENCY+1];
  logic          crd_ret   [LATENCY+1];
  logic          rx_pop;
  logic          rx_in_ready;
  logic [CW-1:0] rx_count;

  assign in_ready = (credits != '0);
  assign send     = in_valid && in_ready;

  assign fwd_valid[0] = send;
  assign fwd_data[0]  = in_data;
  assign crd_ret[0]   = rx_pop;

  for (genvar s = 0; s < LATENCY; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fwd_valid[s+1] <= 1'b0;
        crd_ret[s+1]   <= 1'b0;
      end else begin
        fwd_valid[s+1] <= fwd_valid[s];
        crd_ret[s+1]   <= crd_ret[s];
      end
    end
    always_ff @(posedge clk) begin
      fwd_data[s+1] <= fwd_data[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= CW'(DEPTH);
    else        credits <= credits - CW'(send) + CW'(crd_ret[LATENCY]);
  end

  sync_fifo #(.T(T), .DEPTH(DEPTH)) u_rx (
    .clk, .rst_n,
    .in_valid (fwd_valid[LATENCY]),
    .in_ready (rx_in_ready),
    .in_data  (fwd_data[LATENCY]),
    .out_valid,
    .out_ready,
    .out_data,
    .count    (rx_count)
  );

  assign rx_pop = out_valid && out_ready;

  // The credit scheme guarantees the receive FIFO never overflows.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  fwd_valid[LATENCY] |-> rx_in_ready);
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                   credits <= CW'(DEPTH));

endmodule
