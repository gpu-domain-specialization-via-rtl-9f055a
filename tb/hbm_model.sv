// hbm_model: behavioural model of one HBM channel as seen by a memory
// controller. Not synthesizable and not part of the design: the DRAM stacks
// are bought-in parts.
//
// Accepts one line request per cycle while fewer than QMAX reads are pending
// (random back-pressure when STALL_PCT > 0). Writes update a sparse line
// store at once; reads return, in order, LATENCY cycles after acceptance, the
// stored line or, for a line never written, tb_pkg::init_line(addr).
// writes and reads counts the accepted requests.
module hbm_model
  import copa_pkg::*;
#(
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned QMAX      = 32,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  dram_req_t req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output line_t     rsp_data,
  output int        writes,
  output int        reads
);
  line_t           store [laddr_t];
  line_t           q_data [$];
  longint unsigned q_time [$];
  longint unsigned now;
  logic            stall;

  assign req_ready = rst_n && !stall && (q_data.size() < QMAX);
  assign rsp_valid = rst_n && (q_data.size() != 0) && (q_time[0] <= now);
  assign rsp_data  = (q_data.size() != 0) ? q_data[0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now    <= 0;
      stall  <= 1'b0;
      writes <= 0;
      reads  <= 0;
      q_data.delete();
      q_time.delete();
    end else begin
      now   <= now + 1;
      stall <= ($urandom_range(99) < STALL_PCT);
      if (rsp_valid && rsp_ready) begin
        void'(q_data.pop_front());
        void'(q_time.pop_front());
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.addr] = req.wdata;
          writes <= writes + 1;
        end else begin
          q_data.push_back(store.exists(req.addr) ? store[req.addr] : tb_pkg::init_line(req.addr));
          q_time.push_back(now + LATENCY);
          reads <= reads + 1;
        end
      end
    end
  end
endmodule
