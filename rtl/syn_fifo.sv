// syn_fifo: single-clock first-in first-out buffer.
//
// A producer writes words with wn, a consumer reads them with rn, both on
// the rising edge of the same clock; the FIFO absorbs the difference in
// their rates. Two wrap-around pointers (fifo_ptr) address a register array
// (fifo_mem): the write pointer names the next free entry, the read pointer
// the oldest stored word. fifo_flags compares the pointers to raise empty
// (pointers equal) and full (write pointer one step behind the read pointer,
// so DEPTH-1 = 7 words fit).
//
// A write is accepted when wn is high and full is low: data_in is stored and
// the write pointer advances. A read is accepted when rn is high and empty
// is low: the oldest word is loaded into data_out and the read pointer
// advances. Requests that arrive while full (overflow) or empty (underflow)
// are ignored and change nothing. A read and a write may be accepted on the
// same edge. A write while full is refused even if a read frees an entry on
// that same edge, as the write is qualified by full alone.
//
// Timing: data_out changes on the edge that accepts a read and then holds;
// full and empty change on the edge that moves a pointer. Reset is
// synchronous and active high: it clears the array, both pointers and
// data_out, leaving empty = 1, full = 0.
//
// Port names, 8-bit data, 8 entries, 3-bit pointers, the qualification of
// wn/rn by full/empty and the reset behaviour follow the paper. The
// synchronous reset, the exact full rule chosen between two conflicting
// statements (see fifo_flags) and the same-edge behaviour when full are this
// design's choices.
module syn_fifo #(
    parameter int unsigned DATA_WIDTH = fifo_pkg::DATA_WIDTH,
    parameter int unsigned DEPTH      = fifo_pkg::DEPTH
) (
    input  logic                  clock,
    input  logic                  reset,
    input  logic [DATA_WIDTH-1:0] data_in,
    input  logic                  wn,
    input  logic                  rn,
    output logic [DATA_WIDTH-1:0] data_out,
    output logic                  full,
    output logic                  empty
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [PW-1:0] wptr, rptr;
  logic          wr_ok, rd_ok;

  assign wr_ok = wn && !full;
  assign rd_ok = rn && !empty;

  fifo_ptr #(.PTR_WIDTH(PW)) u_wptr (
      .clock(clock),
      .reset(reset),
      .inc  (wr_ok),
      .ptr  (wptr)
  );

  fifo_ptr #(.PTR_WIDTH(PW)) u_rptr (
      .clock(clock),
      .reset(reset),
      .inc  (rd_ok),
      .ptr  (rptr)
  );

  fifo_mem #(.DATA_WIDTH(DATA_WIDTH), .DEPTH(DEPTH)) u_mem (
      .clock(clock),
      .reset(reset),
      .we   (wr_ok),
      .waddr(wptr),
      .wdata(data_in),
      .re   (rd_ok),
      .raddr(rptr),
      .rdata(data_out)
  );

  fifo_flags #(.PTR_WIDTH(PW)) u_flags (
      .wptr (wptr),
      .rptr (rptr),
      .full (full),
      .empty(empty)
  );

  // Handshake rules: an ignored request moves no pointer, the flags never
  // contradict each other, and a stored word count never exceeds DEPTH-1.
  a_no_overflow : assert property (@(posedge clock) disable iff (reset)
      (wn && full && !rn) |=> $stable(wptr) && full);
  a_no_underflow : assert property (@(posedge clock) disable iff (reset)
      (rn && empty && !wn) |=> $stable(rptr) && empty && $stable(data_out));
  a_flags_exclusive : assert property (@(posedge clock) disable iff (reset)
      !(full && empty));

endmodule
