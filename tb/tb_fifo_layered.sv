// tb_fifo_layered: class-based, layered test bench for the FIFO.
//
// The paper verified its FIFO with a UVM environment (sequence, driver,
// monitor, scoreboard around a SystemVerilog interface). This test bench
// has the same layers, written with plain classes and mailboxes and no
// external library: a sequence produces transactions (one clock cycle each:
// wn, rn, data_in); a driver applies them through a virtual interface
// (fifo_if) on the falling clock edge; a monitor pairs each applied
// transaction with the data_out, full and empty seen at the following
// falling edge, i.e. just after the rising edge that acted on it; a
// scoreboard keeps a queue model, decides acceptance from its own word
// count and compares all three outputs. The sequence runs a directed part
// (fill to full, overflow attempt, a refused write with an accepted read,
// drain, underflow attempt, simultaneous reads and writes) and then random
// traffic; each of these situations must occur at least once.
module tb_fifo_layered;
  localparam int unsigned DW  = fifo_pkg::DATA_WIDTH;
  localparam int unsigned CAP = fifo_pkg::DEPTH - 1;

  class fifo_item;
    bit          wn, rn;
    bit [DW-1:0] data_in;
    bit [DW-1:0] data_out;  // after the edge
    bit          full, empty;  // after the edge
  endclass

  class fifo_sequence;
    mailbox #(fifo_item) to_drv;
    function new(mailbox #(fifo_item) m);
      to_drv = m;
    endfunction
    task automatic send(bit w, bit r, bit [DW-1:0] d);
      fifo_item it = new();
      it.wn = w; it.rn = r; it.data_in = d;
      to_drv.put(it);
    endtask
    task automatic body(int n_random);
      for (int i = 0; i < CAP + 1; i++) send(1'b1, 1'b0, DW'(8'h40 + i));  // fill + overflow
      send(1'b1, 1'b1, 8'hAA);                                          // write refused, read ok
      for (int i = 0; i < CAP + 1; i++) send(1'b0, 1'b1, '0);            // drain + underflow
      for (int i = 0; i < 4; i++) send(1'b1, 1'b0, DW'(8'h80 + i));
      for (int i = 0; i < 20; i++) send(1'b1, 1'b1, DW'(8'hC0 + i));      // simultaneous
      for (int i = 0; i < n_random; i++)
        send($urandom_range(0, 1) == 1, $urandom_range(0, 1) == 1, DW'($urandom));
    endtask
  endclass

  class fifo_driver;
    virtual fifo_if vif;
    mailbox #(fifo_item) from_seq;
    mailbox #(fifo_item) to_mon;  // what was applied, cycle by cycle
    function new(virtual fifo_if v, mailbox #(fifo_item) s, mailbox #(fifo_item) m);
      vif = v; from_seq = s; to_mon = m;
    endfunction
    task automatic run(int n);
      fifo_item it;
      for (int i = 0; i < n; i++) begin
        from_seq.get(it);
        @(negedge vif.clock);
        vif.wn = it.wn;
        vif.rn = it.rn;
        vif.data_in = it.data_in;
        @(posedge vif.clock);
        to_mon.put(it);
      end
      @(negedge vif.clock);
      vif.wn = 1'b0;
      vif.rn = 1'b0;
    endtask
  endclass

  class fifo_monitor;
    virtual fifo_if vif;
    mailbox #(fifo_item) from_drv;
    mailbox #(fifo_item) to_sb;
    function new(virtual fifo_if v, mailbox #(fifo_item) d, mailbox #(fifo_item) s);
      vif = v; from_drv = d; to_sb = s;
    endfunction
    task automatic run(int n);
      fifo_item it;
      for (int i = 0; i < n; i++) begin
        from_drv.get(it);
        @(negedge vif.clock);  // outputs settled after the edge that took the request
        it.data_out = vif.data_out;
        it.full     = vif.full;
        it.empty    = vif.empty;
        to_sb.put(it);
      end
    endtask
  endclass

  class fifo_scoreboard;
    mailbox #(fifo_item) from_mon;
    bit [DW-1:0] q[$];
    bit [DW-1:0] last_out;
    int checks, failures, n_over, n_under, n_both, n_full;
    function new(mailbox #(fifo_item) m);
      from_mon = m;
      last_out = '0;
    endfunction
    function automatic void cmp(bit got, bit exp, string what);
      checks++;
      if (got != exp) begin
        failures++;
        $display("FAIL %s: got %0b expected %0b", what, got, exp);
      end
    endfunction
    task automatic run(int n);
      fifo_item it;
      bit acc_w, acc_r;
      for (int i = 0; i < n; i++) begin
        from_mon.get(it);
        acc_w = it.wn && q.size() != CAP;
        acc_r = it.rn && q.size() != 0;
        n_over  += int'(it.wn && !acc_w);
        n_under += int'(it.rn && !acc_r);
        n_both  += int'(acc_w && acc_r);
        if (acc_r) last_out = q.pop_front();
        if (acc_w) q.push_back(it.data_in);
        n_full += int'(q.size() == CAP);
        checks++;
        if (it.data_out != last_out) begin
          failures++;
          $display("FAIL txn %0d: data_out=%02h expected %02h", i, it.data_out, last_out);
        end
        cmp(it.full, q.size() == CAP, "full");
        cmp(it.empty, q.size() == 0, "empty");
      end
    endtask
  endclass

  logic clock;
  fifo_if vif (.clock(clock));

  syn_fifo dut (
      .clock(clock), .reset(vif.reset), .data_in(vif.data_in), .wn(vif.wn),
      .rn(vif.rn), .data_out(vif.data_out), .full(vif.full), .empty(vif.empty));

  initial begin
    clock = 1'b0;
    forever #5 clock = ~clock;
  end

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int NRAND = 800;
    localparam int NTOT = 2 * (CAP + 1) + 1 + 4 + 20 + NRAND;
    mailbox #(fifo_item) seq2drv, drv2mon, mon2sb;
    fifo_sequence   seq;
    fifo_driver     drv;
    fifo_monitor    mon;
    fifo_scoreboard sb;
    seq2drv = new();
    drv2mon = new();
    mon2sb  = new();
    seq = new(seq2drv);
    drv = new(vif, seq2drv, drv2mon);
    mon = new(vif, drv2mon, mon2sb);
    sb  = new(mon2sb);

    vif.reset = 1'b1; vif.wn = 1'b0; vif.rn = 1'b0; vif.data_in = '0;
    repeat (2) @(posedge clock);
    @(negedge clock);
    vif.reset = 1'b0;
    fork
      seq.body(NRAND);
      drv.run(NTOT);
      mon.run(NTOT);
      sb.run(NTOT);
    join
    checks = sb.checks + 4;
    failures = sb.failures;
    if (sb.n_over == 0) failures++;
    if (sb.n_under == 0) failures++;
    if (sb.n_both == 0) failures++;
    if (sb.n_full == 0) failures++;
    $display("overflow %0d underflow %0d simultaneous %0d full-cycles %0d",
             sb.n_over, sb.n_under, sb.n_both, sb.n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
