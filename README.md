# An 8 x 8-bit synchronous FIFO

A FIFO lets a producer and a consumer that run on the same clock, but not at
the same rate, exchange data without losing any: the producer pushes words
while there is room, the consumer pops them in the order they arrived while
there is anything to pop. This design, after the one specified in the
paper cited below, is the smallest useful form of that idea: a circular
buffer of eight 8-bit registers managed by two 3-bit pointers, with a *full* and an *empty* flag that tell each side when it must
wait. Everything happens on the rising edge of one clock, so there is no
clock-domain crossing, no Gray coding and no synchronizer.

## Interface

| port       | dir | width | meaning |
|------------|-----|-------|---------|
| `clock`    | in  | 1     | the only clock; all state changes on its rising edge |
| `reset`    | in  | 1     | active high, synchronous: clears the array, both pointers and `data_out` |
| `data_in`  | in  | 8     | word to write |
| `wn`       | in  | 1     | write request |
| `rn`       | in  | 1     | read request |
| `data_out` | out | 8     | last word read; registered, holds between reads, 0 after reset |
| `full`     | out | 1     | no write will be accepted |
| `empty`    | out | 1     | no read will be accepted |

A write is **accepted** on a rising edge where `wn = 1` and `full = 0`: `data_in`
is stored and the write pointer advances. A read is accepted on an edge where
`rn = 1` and `empty = 0`: the oldest word is copied into `data_out` and the read
pointer advances. One read and one write can be accepted on the same edge.
A request that is not accepted (a write while full, an *overflow*; a read
while empty, an *underflow*) is simply ignored: no pointer moves, no data
changes, `data_out` keeps its value. There is no separate overflow or
underflow output; the flags are the flow control.

### Timing

```
            edge k                 edge k+1
 rn=1,empty=0 sampled  ->  data_out = word, rptr+1, flags updated
```

* Read latency is one clock: the word appears on `data_out` just after the
  edge that accepts the read.
* `full` and `empty` are combinational functions of the two pointer
  registers, so they change right after the edge that moves a pointer and
  are valid for the requests sampled on the next edge.
* Throughput is one write and one read per clock.

## How the pointers and flags work

This is the part worth reading slowly.

Two 3-bit binary counters (`fifo_ptr`) index the array. `wptr` names the
entry the next write will fill; `rptr` names the oldest unread entry. Each
counts up by one per accepted operation and wraps from 7 to 0, so the eight
registers form a ring.

With only three bits per pointer there is no way to tell "ring empty" from
"ring completely full": in both cases the pointers would be equal. The design
resolves this by never filling the last entry:

* `empty = (wptr == rptr)`
* `full  = (wptr + 1 == rptr)` (3-bit arithmetic, so 7 + 1 = 0)

The FIFO therefore holds at most **7 words**, not 8; one register of the
array is always free. For example, from reset seven writes move `wptr` from
0 to 7 and raise `full` (7 + 1 = 0 = `rptr`); an eighth write is refused.
Seven reads then bring `rptr` to 7, equal to `wptr`, and `empty` rises again.
The number of stored words is always `(wptr - rptr) mod 8`.

A write that arrives while `full` is refused even if a read is accepted on
the same edge (which would have freed a slot): the write is qualified by
`full` alone. A producer that keeps `wn` high gets its write accepted on the next edge.

### Where this departs from the paper

The paper this design follows (Y. Penta and R. Islam, "Design and
Verification of a Synchronous First In First Out (FIFO)") describes the full
condition in two ways that do not agree:

1. "full when the write pointer is one position ahead of the read pointer,
   with wrap-around", and
2. `wptr[2:1] == rptr[2:1] && wptr[0] != rptr[0]`.

With 3-bit pointers, rule 2 would report full after a single write into an
empty FIFO (`wptr = 1`, `rptr = 0`). The paper's simulation waveforms instead show
seven words stored before `full` rises and those seven words read back in
order, which is rule 1 read as `wptr + 1 == rptr`. This design implements
rule 1; rule 2 is most likely a garbled form of the common scheme that uses
one extra pointer bit to reach all eight entries, which is *not* what is
built here. If you want all eight entries usable, widen the pointers by one
bit and compare the top bits, as in that scheme.

Other choices the paper leaves open and this design fixes:

* Reset is synchronous. The paper says only that a high reset clears the
  array, the pointers and `data_out`.
* `empty` is 1 and `full` is 0 after reset, as follows from the pointer
  comparison. (One passage of the paper says the flags are reset to zero;
  another says empty is high during reset. The second is followed.)
* One clock of read latency, as stated under *Timing*.
* One waveform description in the paper lists `00` as the first word read
  in a directed test, while the printed trace shows `a1` first; it depends
  only on when the test bench sampled `data_in`, not on the FIFO.

## Structure

```
syn_fifo
 ├─ u_wptr  : fifo_ptr    write pointer, advances on wn && !full
 ├─ u_rptr  : fifo_ptr    read pointer,  advances on rn && !empty
 ├─ u_mem   : fifo_mem    8 x 8 register array + data_out register
 └─ u_flags : fifo_flags  empty / full from the two pointers
fifo_pkg                  DATA_WIDTH = 8, DEPTH = 8, PTR_WIDTH = 3
```

| file | contents |
|------|----------|
| `rtl/fifo_pkg.sv`   | the three sizes, used as parameter defaults |
| `rtl/fifo_ptr.sv`   | wrap-around binary pointer |
| `rtl/fifo_flags.sv` | combinational full / empty comparison |
| `rtl/fifo_mem.sv`   | register array, clear on reset, registered read port |
| `rtl/syn_fifo.sv`   | top: qualifies `wn`/`rn` with the flags and wires the parts; carries assertions |

The array is built from flip-flops, not a RAM macro, because reset must
clear every entry. After generic synthesis the whole FIFO is about 16
word-level cells, 6 pointer flip-flops and 64 storage bits.

`syn_fifo` carries three concurrent assertions: a refused write leaves `wptr`
unchanged and `full` set; a refused read leaves `rptr` and `data_out`
unchanged and `empty` set; `full` and `empty` are never both high.

### Parameters

`syn_fifo` has `DATA_WIDTH` (default 8) and `DEPTH` (default 8). `DEPTH` must
be a power of two, because the pointers wrap by binary overflow; the FIFO then
holds `DEPTH - 1` words. Nothing else in the design depends on the sizes.

## Verification

Each test bench is self-checking: it computes expected values on its own
and ends by printing `TB_RESULT checks=N failures=M`. Each has a watchdog.

| test bench | what it checks |
|------------|----------------|
| `tb/tb_fifo_ptr.sv`   | 400 random cycles of `inc` against a modulo-8 counter; reset priority; wrap seen |
| `tb/tb_fifo_flags.sv` | all 64 pointer pairs; expected flags from the word count `(w - r) mod 8` |
| `tb/tb_fifo_mem.sv`   | 600 random write/read cycles against a copy of the array; hold when not reading; same-address read/write returns the old word; reset clears every entry |
| `tb/tb_syn_fifo.sv`   | whole FIFO at default size against a queue model: directed fill to exactly 7 words and drain in order, then 1800 cycles of write-heavy, read-heavy and balanced random traffic and a reset with data inside. It counts and requires each mechanism: write, read, same-edge read and write, full, refused write, refused read, write refused while a read is accepted, pointer wrap, reset while loaded |
| `tb/tb_fifo_layered.sv` (+ `tb/fifo_if.sv`) | layered, class-based environment in the style of a UVM bench, without the library: sequence, driver, monitor and scoreboard joined by mailboxes, the pins bundled in the `fifo_if` interface; directed corner cases then 800 random cycles, scoreboard against a queue model |
| `tb/tb_fifo_workloads.sv` | the demonstration sequences: a 16-byte burst (26 19 07 19 08 03 25 27 ...) of which only the first 7 are stored and read back, a second 13-byte burst, the directed a1..07 fill, and a single word 7 written and read back |

Run one with Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fifo_pkg.sv tb/tb_syn_fifo.sv --top-module tb_syn_fifo -Mdir obj
./obj/Vtb_syn_fifo
```

Replace `tb_syn_fifo` with any other test bench name. All of them finish in
well under a second. Lint the RTL with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/fifo_pkg.sv rtl/syn_fifo.sv`;
it reports no warnings.

## What is not here

The FIFO was also demonstrated on an FPGA board, where the on-chip processor
wrote a value to a memory-mapped address and read it back. The bus bridge
and the mapping of that address onto `wn`, `rn`, `data_in`, `data_out` and the
flags were not described, so no bus wrapper is included; the top-level ports
are plain signals that any such wrapper can drive.
