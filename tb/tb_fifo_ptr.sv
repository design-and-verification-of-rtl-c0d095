// tb_fifo_ptr: self-checking test of the wrap-around FIFO pointer.
//
// Drives inc with a random pattern for several hundred cycles and compares
// ptr after each clock edge with a counter kept in the testbench (modulo
// 2^PTR_WIDTH). Also checks that reset returns the pointer to 0, that reset
// wins over inc, and that ptr reaches its top value and wraps to 0 at least
// once. Inputs change on the falling edge; checks run after the rising edge.
module tb_fifo_ptr;
  localparam int unsigned PW = 3;

  logic          clock;
  logic          reset;
  logic          inc;
  logic [PW-1:0] ptr;

  int checks = 0, failures = 0, wraps = 0;
  int unsigned model;

  fifo_ptr #(.PTR_WIDTH(PW)) dut (.clock(clock), .reset(reset), .inc(inc), .ptr(ptr));

  initial begin
    clock = 1'b0;
    forever #5 clock = ~clock;
  end

  task automatic check(input int unsigned exp, input string what);
    checks++;
    if (ptr !== PW'(exp)) begin
      failures++;
      $display("FAIL %s: ptr=%0d expected %0d", what, ptr, exp);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1;
    inc   = 1'b1;
    repeat (2) @(posedge clock);
    @(negedge clock);
    check(0, "reset wins over inc");
    reset = 1'b0;
    model = 0;
    for (int c = 0; c < 400; c++) begin
      inc = ($urandom_range(0, 3) != 0);
      @(posedge clock);
      if (inc) begin
        if (model == (1 << PW) - 1) wraps++;
        model = (model + 1) % (1 << PW);
      end
      @(negedge clock);
      check(model, "count");
    end
    reset = 1'b1;
    inc   = 1'b0;
    @(negedge clock);
    check(0, "reset mid-count");
    checks++;
    if (wraps == 0) begin
      failures++;
      $display("FAIL pointer never wrapped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
