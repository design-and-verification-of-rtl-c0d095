// fifo_mem: register-file storage of the synchronous FIFO.
//
// DEPTH words of DATA_WIDTH bits held in flip-flops. On a rising clock edge
// with we high, wdata is stored at waddr. On a rising edge with re high, the
// word at raddr is copied into the output register rdata, which otherwise
// keeps its value. A write and a read may happen on the same edge; if they
// hit the same address the read returns the old word (the FIFO's flags
// never let that happen). Reset (synchronous, active high) clears every
// entry and rdata.
//
// Interface: clock, reset, we/waddr/wdata (write port), re/raddr (read
// port), rdata (registered read data). Timing: read latency one clock.
//
// Clearing the whole array on reset and a registered data output that is
// 0 after reset follow the paper; this is also why the storage is
// flip-flops rather than a RAM macro. The one-cycle read latency and the
// synchronous reset are this design's choices.
module fifo_mem #(
    parameter int unsigned DATA_WIDTH = fifo_pkg::DATA_WIDTH,
    parameter int unsigned DEPTH      = fifo_pkg::DEPTH,
    localparam int unsigned AW        = $clog2(DEPTH)
) (
    input  logic                  clock,
    input  logic                  reset,
    input  logic                  we,
    input  logic [AW-1:0]         waddr,
    input  logic [DATA_WIDTH-1:0] wdata,
    input  logic                  re,
    input  logic [AW-1:0]         raddr,
    output logic [DATA_WIDTH-1:0] rdata
);

  logic [DATA_WIDTH-1:0] mem[DEPTH];

  always_ff @(posedge clock) begin
    if (reset) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      if (we) mem[waddr] <= wdata;
      if (re) rdata <= mem[raddr];
    end
  end

endmodule
