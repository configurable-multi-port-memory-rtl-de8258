# Pseudo-quad-port SRAM: a wrapper that time-shares one single-port macro

Multi-port memories usually put extra ports into the bit cell: 8T cells for
one read and one write port, 12T and larger cells for more. That costs area
and leakage, and the ports are fixed as read or write when the chip is made.
This design goes the other way. It keeps a dense single-port 6T SRAM macro
and wraps it in a small amount of logic. The wrapper serves up to four ports
from that one macro by giving each enabled port its own access slot within
every period of the port clock. The macro runs four times faster than the port
clock: in the reference operating point the ports see 250 MHz and the macro
makes 1 G accesses per second. So all four ports are served in every
port-clock cycle.

Each port, A to D, decides in every cycle whether it takes part and whether
it reads or writes. One cycle the memory may act as a 4-read memory, the next
as 1-read/3-write, the next as a single-port memory. Ports are served one after
another, never at the same time. So there is no read/write contention inside
the array and no arbitration stall. The price is latency: a read result
appears at its port in the following port-clock cycle.

The RTL here implements the wrapper and a behaviourally equivalent model of
the macro as synthesizable SystemVerilog with one clock. It is described
below, together with where and why it differs from the original, which is
partly self-timed.

## Port interface and timing

| signal | width | meaning |
|---|---|---|
| `mclk` | 1 | memory clock; one period = one access slot (1 GHz reference) |
| `ext_clk` | 1 | port clock CLK (250 MHz reference); must be generated synchronously to `mclk` |
| `rst_n` | 1 | asynchronous active-low reset of all wrapper registers (not the array) |
| `port_en[p]` | 4 | port p takes part in this CLK cycle |
| `w_rb[p]` | 4 | 1 = write, 0 = read |
| `addr[p]` | 4 x `ADDR_W` | word address |
| `w_data[p]` | 4 x `DATA_W` | write data |
| `r_data[p]` | 4 x `DATA_W` | read result |
| `clkp`, `back`, `clk2` | 1 each | internal sequencing strobes, brought out for observation |

Index 0 is port A, 1 is B, 2 is C, 3 is D in every per-port vector.

A port presents its request in the `mclk` cycle in which CLK rises. That cycle
is called the CLKP cycle. The request is captured then and may change
afterwards. The read result shows on `r_data[p]` one `mclk` cycle after the
*next* CLK rising edge. It stays there for a whole CLK period, until the next
result of that port replaces it. A port that does not read in a cycle keeps
showing its last result.

```
mclk     _|‾|_|‾|_|‾|_|‾|_|‾|_|‾|_|‾|_|‾|_|‾|_
CLK      _|‾‾‾‾‾‾‾|_______|‾‾‾‾‾‾‾|_______|‾‾‾
CLKP     _|‾‾‾|___________|‾‾‾|___________|‾‾‾
slot       A   B   C   D   A   B   C   D       (all four ports enabled)
BACK     _|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|‾‾‾   high in every slot
CLK2     _|‾‾‾‾‾‾‾‾‾‾‾|___|‾‾‾‾‾‾‾‾‾‾‾|___|‾‾‾   high in all but the last slot
requests  <cycle k >       <cycle k+1>
r_data            results of cycle k-1 |  results of cycle k ...
```

A CLK period must hold at least as many `mclk` cycles as ports enabled in it.
With fewer, the next CLKP restarts the sequence and the remaining ports of the
old cycle are not served. The high and low phases of CLK are not used
separately; only its rising edge matters.

## What happens inside one CLK period

The wrapper is a short pipeline of small blocks. Their names follow the
original block diagram:

```
 port A..D ──► input latches ──────────────────► MUX ──► SRAM macro ──► output registers ──► output latches ──► r_data
   port_en ──► N (port counter) ──B1B0──► clock generator ──BACK──────────────┘ (via decoder)        ▲
           ──► priority encoder ──────► FSM ◄──CLK2──┘         ▲                                    │
           ──► enable latch ──────────► FSM ──select lines──► MUX, decoder                          │
 CLK ──► CLKP generator ──CLKP──► latches, clock generator, FSM ─────────────────────────────────────┘
```

1. **CLKP** (`clkp_gen`). CLKP is high for the `mclk` cycle in which CLK has
   just risen: `ext_clk & ~ext_clk_delayed`. Everything per cycle starts
   from it.
2. **Input latches** (`input_latch`). They are transparent while CLKP is high
   and hold afterwards. There is one per port for `{w_rb, addr, w_data}`, and
   a 4-bit one for the enables that the FSM uses. Each is built as a register
   plus a bypass multiplexer, so the CLKP cycle already sees the new request.
3. **Port count** (`port_counter`). B1B0 = number of enabled ports - 1
   (00 = 1 port ... 11 = 4 ports).
4. **Priority encoder** (`priority_encoder`). It gives the first enabled port
   in the fixed order A > B > C > D.
5. **Clock generator** (`clk_gen`). This is the heart of the sequencing. A
   2-bit down counter Q1Q0 is loaded with B1B0 in the CLKP cycle. From then on
   every `mclk` cycle is an access slot, and BACK is high in it. In a slot
   where Q1Q0 is not zero, CLK2 is high too and Q1Q0 counts down at the end
   of the slot. The slot that finds Q1Q0 = 0 is the last one. So N enabled
   ports give N BACK and N-1 CLK2 strobes:

   | ports | B1B0 | Q1Q0 over the slots | BACK | CLK2 |
   |---|---|---|---|---|
   | 4 | 11 | 11, 10, 01, 00 | 4 | 3 |
   | 3 | 10 | 10, 01, 00 | 3 | 2 |
   | 2 | 01 | 01, 00 | 2 | 1 |
   | 1 | 00 | 00 | 1 | 0 |

6. **FSM** (`port_fsm`). Its state is the select lines of the MUX and the
   decoder. In the CLKP cycle the state is forced to the priority encoder
   output, so the first slot belongs to the highest-priority enabled port. At
   the end of every slot with CLK2 it steps to the next enabled port of lower
   priority. The input strings give the enables of A, B, C, D from left to
   right; x means don't care:

   | from | to B | to C | to D |
   |---|---|---|---|
   | A | x1xx | x01x | x001 |
   | B | | xx1x | xx01 |
   | C | | | xxx1 |

   No other move exists. D is only left by the reload at the next CLKP.
7. **MUX** (`port_mux`). It connects the selected port's latched request to the
   macro. The macro is enabled when BACK is high and the selected port is
   enabled.
8. **SRAM macro** (`sram_macro`). It makes one access per slot. A write lands
   at the end of the slot. Read data are valid within the slot.
9. **Decoder and output registers** (`decoder`, `output_stage`). In a read
   slot the decoder enables the selected port's output register, which
   captures the read data at the end of the slot. Write slots leave the output
   registers alone.
10. **Output latches** (`output_stage`). At the end of the next CLKP cycle,
    every port's output register is copied to its `r_data`. This is why
    results appear one CLK cycle later. The last slot of a 4-port cycle ends
    exactly at the next CLK edge, and the copy one `mclk` cycle later still
    catches it.

### Ordering between ports

Ports are served in priority order inside a CLK cycle, so a cycle behaves like
the requests of A, B, C and D applied one after another. If a higher-priority
port writes an address and a lower-priority port reads it in the same cycle,
the reader gets the new data. If the order is reversed, the reader gets the old
data. Two writers to one address leave the lower-priority port's data. Nothing
is ever dropped or stalled while the CLK period has room for the enabled ports.

### No port enabled

The clock generator still makes its one slot, but the selected port is not
enabled, so the macro is not accessed and no output register changes.

## Clocking: self-timed original, synchronous here

In the original circuit the clock generator is a self-timed loop. Each slot
lasts one T_self, the delay of a replica of the SRAM bitline. BACK and CLK2
are real pulse trains that clock the FSM, the counter flip-flops and the
output registers, and CLKP comes from an analog delay chain. None of that
timing can be expressed as synthesizable logic. In this RTL:

- the slot length T_self is the period of the `mclk` input. The bitline
  replica has no counterpart; whatever produces `mclk` must make its period
  cover one macro access;
- BACK and CLK2 are one-cycle strobes used as clock enables, not clocks;
- CLK is sampled as a data signal in the `mclk` domain. It must come from
  the same source as `mclk`, for example a divide-by-4.

The counter sequence, the pulse counts, the CLKP reload, the FSM transitions
and the two-rank output all follow the original. The exact edge positions
of the original pulses do not carry over: here slot 0 is the CLKP cycle
itself.

## Files and parameters

| file | contents |
|---|---|
| `rtl/mpm_pkg.sv` | `NPORTS` = 4, default widths, the `port_sel_t` state type |
| `rtl/mp_sram_wrapper.sv` | top level, wiring as above, protocol assertions |
| `rtl/clkp_gen.sv` | CLKP edge detector |
| `rtl/input_latch.sv` | CLKP-transparent holding register |
| `rtl/port_counter.sv` | enabled-port count, B1B0 |
| `rtl/priority_encoder.sv` | first enabled port |
| `rtl/clk_gen.sv` | BACK / CLK2 sequencer with the Q1Q0 counter |
| `rtl/port_fsm.sv` | select-line FSM |
| `rtl/port_mux.sv` | 4:1 request multiplexer |
| `rtl/decoder.sv` | select lines to output-register enable |
| `rtl/sram_macro.sv` | single-port array model |
| `rtl/output_stage.sv` | output register and output latch of one port |

| parameter | default | note |
|---|---|---|
| `ADDR_W` | 9 | 512 words |
| `DATA_W` | 32 | bits per word; 512 x 32 = 16 Kb, the array size of the original |
| `NPORTS` | 4 | fixed: the FSM and the 2-bit count code are defined for four ports |

Only the 16 Kb total is given by the original. The split into 512 words of 32
bits is a free choice, and any `ADDR_W`/`DATA_W` works. For a real chip,
replace `sram_macro` by the foundry macro. Its read must complete within one
`mclk` cycle, and its write must happen at the clock edge that ends the cycle.
Where it has a registered read, the output registers need one more cycle, and
the last slot of a full CLK period then arrives too late for the output latch.

## Choices not fixed by the original

- The synchronous, single-clock timing described above, and the exact cycle in
  which the output latches take their value.
- Port widths and word organisation.
- Reset: all wrapper registers clear to 0, the FSM to port A. The array has no
  reset.
- Disabled ports never reach the macro. Write slots do not load the output
  register.
- Behaviour with no port enabled, and with a CLK period shorter than the
  number of enabled ports.
- Priority is fixed at A > B > C > D. The original mentions that priority can
  be assigned "based on the requirement" but describes only this order.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
compares against a reference written independently and ends with a line
`TB_RESULT checks=N failures=M`.

- `tb_clk_gen`: N BACK and N-1 CLK2 strobes and the Q1Q0 sequence for every N
  and for CLK periods of 1 to 7 `mclk` cycles, including restarts.
- `tb_port_fsm`: every enable pattern, plus random CLK2 strobes, against a
  walk-the-enables reference.
- `tb_mp_sram_wrapper`: runs the whole design at its default size with
  `mclk` = 4 x CLK. It fills the array; runs the 4-, 3-, 2-, 1-port sequence;
  runs all 16 read/write patterns on four ports; then runs 4000 random cycles
  against a reference memory that applies each cycle's requests in priority
  order. In every cycle it checks every port's `r_data` three times: in the
  CLKP cycle, where the new result must not show yet, and one and three `mclk`
  cycles later, where it must. It also checks the BACK and CLK2 counts of every
  cycle. It also counts, and requires, 0- to 4-port
  cycles, the 4W, 1R3W, 2R2W, 3R1W and 4R mixes, cycles that do not start at
  port A, and same-cycle read-after-write.

The other testbenches cover their blocks exhaustively or with random stimulus.
The top also carries concurrent assertions. They check that one output
register at most captures, and only on a read. They check that the CLKP cycle
is a slot, and that only enabled ports reach the macro. `clk_gen` checks that
CLK2 never comes without BACK.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mpm_pkg.sv \
    tb/tb_mp_sram_wrapper.sv --top-module tb_mp_sram_wrapper -Mdir obj
./obj/Vtb_mp_sram_wrapper
```

Verilator has only two signal states. Uninitialised array words therefore
start at arbitrary values, and the end-to-end test writes every word before
reading it.

What the simulations do not show: whether the wrapper and a macro meet
1 GHz in a given process, and anything about area or power. The original
reports these from a 65 nm layout: about 8 % wrapper overhead on a 16 Kb
macro and 1.8 mW at 1.2 V.
