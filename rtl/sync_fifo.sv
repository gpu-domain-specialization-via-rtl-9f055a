// sync_fifo: single-clock first-in first-out queue with valid/ready ports.
//
// Helper used by the link receiver and the memory controller. Storage is a
// plain array of DEPTH entries addressed by wrap-around read and write
// pointers; a separate occupancy counter tells full from empty. A push and a
// pop may happen in the same cycle, also when the queue is full (the pop makes
// room). Data are visible at the output in the cycle after the push
// (first-word latency one cycle). Reset empties the queue; the entries are not
// cleared because nothing reads them before they are written.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [PW-1:0]  wr_ptr, rd_ptr;
  logic           push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

endmodule
