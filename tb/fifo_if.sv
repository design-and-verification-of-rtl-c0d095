// fifo_if: the FIFO's pins as one bundle for a layered test bench.
//
// Carries the clock, reset, data_in, wn, rn, data_out, full and empty of
// syn_fifo. The class-based test bench drives the inputs on the falling
// clock edge and samples the outputs there too, half a cycle away from the
// rising edge on which the FIFO acts, so nothing races the design.
interface fifo_if #(
    parameter int unsigned DW = fifo_pkg::DATA_WIDTH
) (
    input logic clock
);
  logic          reset;
  logic [DW-1:0] data_in;
  logic          wn;
  logic          rn;
  logic [DW-1:0] data_out;
  logic          full;
  logic          empty;
endinterface
