// cmd_fifo: the command FIFO through which read/write requests from the cache
// controller enter the memory controller. Requests leave in arrival order
// (first-come first-served).
//
// A circular buffer of DEPTH entries with a read and a write pointer and an
// occupancy counter. Interface: valid/ready on both sides; a push and a pop may
// happen in the same cycle, also when the FIFO is full (the pop frees the slot).
// The head (out_data) is visible combinationally while out_valid is high; an
// element pushed in cycle t can be popped in cycle t+1.
//
// The FCFS order is the paper's; the depth (32) is not given there and is this
// design's choice.
module cmd_fifo #(
  parameter type         T     = ramzzz_pkg::mem_req_t,
  parameter int unsigned DEPTH = 32
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
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic            push, pop;

  assign in_ready  = (count < DEPTH[$bits(count)-1:0]) || out_ready;
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  // handshake rule: the occupancy never exceeds the depth
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else a_no_overflow: assert (count <= DEPTH[$bits(count)-1:0]);
  end
endmodule
