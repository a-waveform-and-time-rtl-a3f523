// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// Used for every data and information FIFO of the firmware (ADC sample
// FIFOs, record information FIFOs, TDC hit FIFOs). rd_data shows the oldest
// entry whenever empty is low; pop removes it. push and pop may occur in the
// same cycle. count gives the fill level so that writers can check for room
// for a whole record before starting one. DEPTH must be a power of two.
// A push into a full FIFO is allowed only together with a pop. Pushing
// into a full FIFO otherwise, or popping an empty one, is a protocol error and is caught
// by assertions; the FIFO then ignores the request.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     pop,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && (!full || pop);
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));
endmodule
