// flit_fifo: the input queue of one router port.
//
// A first-in first-out buffer of DEPTH flits held in a register array. A flit is
// written when in_valid and in_ready are both high and read when out_valid and
// out_ready are both high; both may happen in the same cycle. in_ready depends
// only on the stored count, so the ready path between routers is registered and
// no combinational loop forms across the network. A written flit is visible at
// the output in the next cycle (one cycle through the queue).
//
// The published design has queues at the router inputs (messages "wait in
// queues"); their depth is not given, and the default of 4 flits (two two-flit
// messages) is this design's choice. Reset empties the queue.
module flit_fifo
  import mf_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  flit_t in_flit,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_flit,
  input  logic  out_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [AW:0]    count;
  logic           push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_flit  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
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
    if (push) mem[wr_ptr] <= in_flit;
  end

endmodule
