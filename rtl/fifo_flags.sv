// fifo_flags: full and empty status of the synchronous FIFO.
//
// Both flags come from comparing the write pointer with the read pointer.
// The FIFO is empty when the two are equal. It is full when the write
// pointer sits one position behind the read pointer around the circle,
// that is when wptr + 1 == rptr modulo 2^PTR_WIDTH. Because equal pointers
// already mean "empty", one entry of the array is always left free and the
// FIFO holds 2^PTR_WIDTH - 1 words (7 with 3-bit pointers).
//
// Interface: wptr, rptr in; full, empty out. Purely combinational: the
// flags follow the registered pointers in the same cycle.
//
// The equality test for empty and the "one position apart" test for full
// follow the paper's description and its waveforms, which store
// seven words before full rises. The paper also prints the
// condition wptr[2:1] == rptr[2:1] && wptr[0] != rptr[0]; with 3-bit
// pointers that would signal full after a single write, so it is not used.
module fifo_flags #(
    parameter int unsigned PTR_WIDTH = fifo_pkg::PTR_WIDTH
) (
    input  logic [PTR_WIDTH-1:0] wptr,
    input  logic [PTR_WIDTH-1:0] rptr,
    output logic                 full,
    output logic                 empty
);

  logic [PTR_WIDTH-1:0] wptr_next;

  always_comb begin
    wptr_next = wptr + 1'b1;
    empty     = (wptr == rptr);
    full      = (wptr_next == rptr);
  end

endmodule
