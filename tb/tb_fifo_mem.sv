// tb_fifo_mem: self-checking test of the FIFO's register array.
//
// Fills the array with random words at random addresses, reads random
// addresses, and compares rdata one clock after each read with a copy of
// the array kept in the testbench. Checks that rdata holds its value when
// re is low, that a same-edge write and read of one address returns the
// old word, and that reset clears both rdata and every entry.
module tb_fifo_mem;
  localparam int unsigned DW = 8;
  localparam int unsigned D  = 8;
  localparam int unsigned AW = 3;

  logic          clock;
  logic          reset, we, re;
  logic [AW-1:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata;

  logic [DW-1:0] model[D];
  logic [DW-1:0] expect_q;
  int checks = 0, failures = 0;

  fifo_mem #(.DATA_WIDTH(DW), .DEPTH(D)) dut (
      .clock(clock), .reset(reset), .we(we), .waddr(waddr), .wdata(wdata),
      .re(re), .raddr(raddr), .rdata(rdata));

  initial begin
    clock = 1'b0;
    forever #5 clock = ~clock;
  end

  task automatic check(input logic [DW-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: rdata=%02h expected %02h", what, rdata, exp);
    end
  endtask

  initial begin
    #50000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    check('0, "rdata after reset");
    for (int i = 0; i < D; i++) model[i] = '0;
    expect_q = '0;
    for (int c = 0; c < 600; c++) begin
      we    = $urandom_range(0, 1) == 1;
      re    = $urandom_range(0, 1) == 1;
      waddr = AW'($urandom);
      raddr = (c % 50 == 7) ? waddr : AW'($urandom);
      wdata = DW'($urandom);
      @(posedge clock);
      if (re) expect_q = model[raddr];   // old contents on a same-edge hit
      if (we) model[waddr] = wdata;
      @(negedge clock);
      check(expect_q, re ? "read" : "hold");
    end
    // Reset must clear every entry and the output register.
    we = 1'b0; re = 1'b1; raddr = 3'd5;
    @(negedge clock);
    re = 1'b0;
    reset = 1'b1;
    @(negedge clock);
    reset = 1'b0;
    check('0, "rdata cleared by reset");
    for (int i = 0; i < D; i++) begin
      re = 1'b1; raddr = AW'(i);
      @(negedge clock);
      check('0, "entry cleared by reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
