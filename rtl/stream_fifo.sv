// stream_fifo: valid/ready FIFO used as the accelerator's local buffers and
// between every pair of dataflow stages.
//
// Any depth from 1 up is allowed (a circular buffer with a counter, not a
// power-of-two pointer scheme), so that a depth found by measuring the largest
// occupancy in simulation and adding one can be used as is. The FIFO tracks
// its own high-water mark, max_occupancy, for exactly that measurement; it is
// cleared by clear_max.
//
// Interface: in_valid/in_ready/in_data on the write side, out_valid/out_ready/
// out_data on the read side; a word moves when valid and ready are both high
// at a rising clock edge. Timing: a word written in cycle t can be read in
// cycle t+1 (no fall-through). in_ready is high whenever the FIFO is not full,
// so a full FIFO of depth 1 takes one word every other cycle at most.
// Depth-sizing by occupancy and arbitrary depths follow the paper; the
// handshake, the registered read and the monitor port are this design's.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] occupancy,
  output logic [$clog2(DEPTH+1)-1:0] max_occupancy,
  input  logic                     clear_max
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [CW-1:0]    count;
  logic             push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign occupancy = count;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr        <= '0;
      rd_ptr        <= '0;
      count         <= '0;
      max_occupancy <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (clear_max)             max_occupancy <= '0;
      else if (count > max_occupancy) max_occupancy <= count;
    end
  end

  // A full FIFO must never be written and an empty one never read.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && count == CW'(DEPTH))) else $error("stream_fifo overflow");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(pop && count == '0)) else $error("stream_fifo underflow");
endmodule
