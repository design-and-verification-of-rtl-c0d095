// tb_syn_fifo: end-to-end test of the synchronous FIFO at its default size.
//
// The FIFO is instantiated with no parameter overrides (8 entries of 8
// bits). A queue in the testbench is the reference: on every rising edge
// the testbench decides from its own word count whether the FIFO should
// accept the write and the read, updates the queue, and then compares
// data_out, full and empty with it.
//
// Stimulus: a directed fill to full and drain to empty (capacity must be
// exactly 7 words, data must leave in order), then random traffic in
// write-heavy, read-heavy and balanced phases, then a reset in the middle of
// traffic. Inputs change on the falling edge. Each mechanism of the design
// is counted - accepted write, accepted read, same-edge read and write,
// full, refused write (overflow), refused read (underflow), a write refused
// while a read is accepted, pointer wrap-around, reset with data inside -
// and one that never happens counts as a failure. Read latency is checked
// too: data_out must hold the read word right after the accepting edge.
module tb_syn_fifo;
  localparam int unsigned DW  = fifo_pkg::DATA_WIDTH;
  localparam int unsigned CAP = fifo_pkg::DEPTH - 1;

  logic          clock;
  logic          reset;
  logic [DW-1:0] data_in;
  logic          wn, rn;
  logic [DW-1:0] data_out;
  logic          full, empty;

  logic [DW-1:0] q[$];
  logic [DW-1:0] exp_out;
  int checks = 0, failures = 0;

  typedef enum int {
    M_WRITE, M_READ, M_BOTH, M_FULL, M_OVERFLOW, M_UNDERFLOW,
    M_FULL_RW, M_WRAP, M_RESET_LOADED, M_NUM
  } mech_e;
  int    mech[M_NUM];
  string mech_name[M_NUM] = '{"write", "read", "read+write same edge",
      "full reached", "overflow refused", "underflow refused",
      "write refused while read accepted", "pointer wrap", "reset with data"};
  int    writes_total;

  syn_fifo dut (
      .clock(clock), .reset(reset), .data_in(data_in), .wn(wn), .rn(rn),
      .data_out(data_out), .full(full), .empty(empty));

  initial begin
    clock = 1'b0;
    forever #5 clock = ~clock;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    checks += 3;
    if (data_out !== exp_out) begin
      failures++;
      $display("FAIL %s t=%0t: data_out=%02h expected %02h", what, $time, data_out, exp_out);
    end
    if (empty !== (q.size() == 0)) begin
      failures++;
      $display("FAIL %s t=%0t: empty=%0b with %0d words", what, $time, empty, q.size());
    end
    if (full !== (q.size() == CAP)) begin
      failures++;
      $display("FAIL %s t=%0t: full=%0b with %0d words", what, $time, full, q.size());
    end
  endtask

  // One clock cycle with the given requests: the model decides acceptance
  // from its own count, never from the DUT's flags.
  task automatic cycle(input logic w, input logic r, input logic [DW-1:0] d);
    bit acc_w, acc_r;
    wn = w; rn = r; data_in = d;
    acc_w = w && (q.size() != CAP);
    acc_r = r && (q.size() != 0);
    if (w && !acc_w) mech[M_OVERFLOW]++;
    if (r && !acc_r) mech[M_UNDERFLOW]++;
    if (w && !acc_w && acc_r) mech[M_FULL_RW]++;
    if (acc_w && acc_r) mech[M_BOTH]++;
    @(posedge clock);
    if (acc_r) begin
      exp_out = q.pop_front();
      mech[M_READ]++;
    end
    if (acc_w) begin
      q.push_back(d);
      mech[M_WRITE]++;
      writes_total++;
      if (writes_total % fifo_pkg::DEPTH == 0) mech[M_WRAP]++;
    end
    if (q.size() == CAP) mech[M_FULL]++;
    @(negedge clock);
    compare(acc_r ? "read" : "idle");
  endtask

  task automatic do_reset();
    reset = 1'b1; wn = 1'b0; rn = 1'b0;
    @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    q.delete();
    exp_out = '0;
    writes_total = 0;
    compare("after reset");
  endtask

  initial begin
    int unsigned wprob, rprob;
    data_in = '0;
    do_reset();

    // Directed: fill until full. Exactly CAP writes fit; then one refused write.
    for (int i = 0; i < CAP; i++) begin
      checks++;
      if (full) begin
        failures++;
        $display("FAIL full after only %0d writes", i);
      end
      cycle(1'b1, 1'b0, DW'(8'h10 + i));
    end
    checks++;
    if (!full) begin
      failures++;
      $display("FAIL not full after %0d writes", CAP);
    end
    cycle(1'b1, 1'b0, 8'hEE);  // overflow attempt: must be dropped
    // Drain in order, then one refused read.
    for (int i = 0; i < CAP; i++) begin
      cycle(1'b0, 1'b1, '0);
      checks++;
      if (data_out !== DW'(8'h10 + i)) begin
        failures++;
        $display("FAIL order: word %0d = %02h", i, data_out);
      end
    end
    cycle(1'b0, 1'b1, '0);  // underflow attempt: data_out must hold

    // Random phases: write-heavy, read-heavy, balanced, repeated.
    for (int ph = 0; ph < 12; ph++) begin
      case (ph % 3)
        0: begin wprob = 85; rprob = 30; end
        1: begin wprob = 30; rprob = 85; end
        default: begin wprob = 60; rprob = 60; end
      endcase
      for (int c = 0; c < 150; c++)
        cycle($urandom_range(0, 99) < wprob, $urandom_range(0, 99) < rprob, DW'($urandom));
      if (ph == 6) begin
        // Reset in the middle of traffic, with the FIFO holding data.
        while (q.size() < 3) cycle(1'b1, 1'b0, DW'($urandom));
        mech[M_RESET_LOADED]++;
        do_reset();
      end
    end

    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      $display("mechanism %-34s %0d", mech_name[m], mech[m]);
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL mechanism never exercised: %s", mech_name[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
