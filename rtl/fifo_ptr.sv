// fifo_ptr: wrap-around pointer of the synchronous FIFO.
//
// One instance tracks the write position and one the read position. The
// pointer is a PTR_WIDTH-bit binary counter: it starts at 0, advances by one
// on every rising clock edge where inc is high, and wraps from 2^PTR_WIDTH-1
// back to 0, which turns the register array into a circular buffer.
//
// Interface: clock, reset (active high), inc (the operation was accepted,
// i.e. already qualified by full or empty), ptr (current value).
// Timing: ptr changes one clock edge after inc is sampled high. Reset is
// synchronous and has priority over inc.
//
// The 3-bit width, the increment-per-operation and the wrap follow the
// paper; making reset synchronous is this design's choice.
module fifo_ptr #(
    parameter int unsigned PTR_WIDTH = fifo_pkg::PTR_WIDTH
) (
    input  logic                 clock,
    input  logic                 reset,
    input  logic                 inc,
    output logic [PTR_WIDTH-1:0] ptr
);

  always_ff @(posedge clock) begin
    if (reset) ptr <= '0;
    else if (inc) ptr <= ptr + 1'b1;  // wraps modulo 2^PTR_WIDTH
  end

endmodule
