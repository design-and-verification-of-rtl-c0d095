// tb_fifo_workloads: the three demonstration sequences run on the FIFO.
//
// The byte values are the ones printed in the paper's simulation waveforms
// and its FPGA board test; their timing is this test's own (back-to-back
// writes, then back-to-back reads).
//
// Each scenario writes a list of bytes back to back with no reads, then
// reads until the FIFO reports empty, and compares what comes out with the
// list computed here: the first DEPTH-1 = 7 bytes in order, everything after
// them having been refused because the FIFO was full.
//   1. Random-byte run: 26 19 07 19 08 03 25 27 22 1a 13 05 17 15 1f 12,
//      then a second burst 27 17 01 1c 0a 09 10 0a 17 07 00 08 03.
//   2. Directed run: a1 b2 c3 d4 e5 f6 07 (exactly fills the FIFO).
//   3. Single word: the value 7 written and read back.
// Full must rise on the 7th accepted write and not before; empty must rise
// on the read that takes the last word. Every accepted read must show its
// word on data_out after the accepting clock edge (one-cycle latency).
module tb_fifo_workloads;
  localparam int unsigned DW  = fifo_pkg::DATA_WIDTH;
  localparam int unsigned CAP = fifo_pkg::DEPTH - 1;

  logic          clock, reset, wn, rn, full, empty;
  logic [DW-1:0] data_in, data_out;
  int checks = 0, failures = 0;

  syn_fifo dut (
      .clock(clock), .reset(reset), .data_in(data_in), .wn(wn), .rn(rn),
      .data_out(data_out), .full(full), .empty(empty));

  initial begin
    clock = 1'b0;
    forever #5 clock = ~clock;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  task automatic run(input string name, input logic [DW-1:0] bytes[$]);
    int unsigned stored, nread;
    stored = (bytes.size() < CAP) ? bytes.size() : CAP;
    rn = 1'b0;
    foreach (bytes[i]) begin
      wn = 1'b1; data_in = bytes[i];
      @(negedge clock);
      expect_bit(full, (i + 1 >= CAP), {name, " full during writes"});
      expect_bit(empty, 1'b0, {name, " empty during writes"});
    end
    wn = 1'b0;
    nread = 0;
    while (!empty && nread < 2 * CAP) begin
      rn = 1'b1;
      @(negedge clock);
      checks++;
      if (data_out !== bytes[nread]) begin
        failures++;
        $display("FAIL %s word %0d: %02h expected %02h", name, nread, data_out, bytes[nread]);
      end
      nread++;
      expect_bit(empty, (nread == stored), {name, " empty during reads"});
    end
    rn = 1'b0;
    checks++;
    if (nread != stored) begin
      failures++;
      $display("FAIL %s: read %0d words, expected %0d", name, nread, stored);
    end
    $display("%s: wrote %0d, stored and read back %0d", name, bytes.size(), nread);
  endtask

  initial begin
    reset = 1'b1; wn = 1'b0; rn = 1'b0; data_in = '0;
    @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    expect_bit(empty, 1'b1, "empty after reset");
    expect_bit(full, 1'b0, "full after reset");
    checks++;
    if (data_out !== '0) begin
      failures++;
      $display("FAIL data_out not cleared by reset");
    end
    run("random burst 1", '{8'h26, 8'h19, 8'h07, 8'h19, 8'h08, 8'h03, 8'h25, 8'h27,
                            8'h22, 8'h1a, 8'h13, 8'h05, 8'h17, 8'h15, 8'h1f, 8'h12});
    run("random burst 2", '{8'h27, 8'h17, 8'h01, 8'h1c, 8'h0a, 8'h09, 8'h10, 8'h0a,
                            8'h17, 8'h07, 8'h00, 8'h08, 8'h03});
    run("directed", '{8'ha1, 8'hb2, 8'hc3, 8'hd4, 8'he5, 8'hf6, 8'h07});
    run("single word", '{8'h07});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
