// row_buffer -- the Row Buffer of a Row PE: a synchronous FIFO of row tasks.
//
// The Row Generation Engine pushes one task per Gaussian and row (the first
// fragment of the row plus the Gaussian's values it needs); the Row PE pops
// them in the same order, which is the depth order of the Gaussians.  The
// queue is what lets each Row PE run ahead or fall behind the others and so
// absorb the unequal work of different rows (the paper draws the Row Buffers
// as FIFOs).  DEPTH is this design's choice: the paper gives no depth.
//
// Interface: valid/ready on both sides.  A push happens when push_valid and
// push_ready are high at a clock edge, a pop when pop_valid and pop_ready
// are.  push_ready is low when full, pop_valid high when not empty.  The head
// entry is on pop_data in the cycle pop_valid is high (first-word fall
// through).  Synchronous active-low reset empties the queue.
module row_buffer
  import gbu_pkg::*;
#(
  parameter type         T     = row_task_t,
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  T     push_data,
  output logic pop_valid,
  input  logic pop_ready,
  output T     pop_data,
  output logic empty
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  assign push_ready = (count != (PW+1)'(DEPTH));
  assign pop_valid  = (count != '0);
  assign empty      = (count == '0);
  assign pop_data   = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) begin
        wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      if (do_pop) begin
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      end
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // The occupancy never exceeds the depth, and an entry offered while the
  // queue is full stays offered until it is taken (valid/ready rule).
  assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n)
                   push_valid && !push_ready |=> push_valid);

endmodule
