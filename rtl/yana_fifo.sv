// yana_fifo: synchronous first-word-fall-through FIFO with valid/ready on
// both sides. The YANA core uses one for each of its four queues (input
// events, hot neurons, spiking neurons, output events); the depths are this
// implementation's choice.
//
// Interface: a word is pushed when in_valid && in_ready and popped when
// out_valid && out_ready. out_data shows the head word combinationally from
// the storage array, so a pushed word is visible one cycle after the push.
// Push and pop may happen in the same cycle. in_ready depends only on the
// registered fill level, so a full FIFO accepts again one cycle after a pop. `count` is the
// registered fill level. Synchronous, active-high reset empties the FIFO.
module yana_fifo #(
  parameter int unsigned WIDTH = 29,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
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

  a_count_range: assert property (@(posedge clk) disable iff (rst)
    count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
