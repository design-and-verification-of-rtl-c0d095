// tb_fifo_flags: exhaustive test of the full/empty comparison.
//
// Applies every pair of 3-bit write and read pointers and compares the two
// flags with values computed here from the pointer distance: the number of
// stored words is (wptr - rptr) mod 8; empty means 0 words, full means 7.
module tb_fifo_flags;
  localparam int unsigned PW = 3;
  localparam int unsigned N  = 1 << PW;

  logic [PW-1:0] wptr, rptr;
  logic          full, empty;
  int checks = 0, failures = 0;

  fifo_flags #(.PTR_WIDTH(PW)) dut (.wptr(wptr), .rptr(rptr), .full(full), .empty(empty));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < N; w++) begin
      for (int r = 0; r < N; r++) begin
        int unsigned words;
        wptr  = PW'(w);
        rptr  = PW'(r);
        words = (w - r + N) % N;
        #1;
        checks += 2;
        if (empty !== (words == 0)) begin
          failures++;
          $display("FAIL empty w=%0d r=%0d got %0b", w, r, empty);
        end
        if (full !== (words == N - 1)) begin
          failures++;
          $display("FAIL full w=%0d r=%0d got %0b", w, r, full);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
