# CoFHEE in SystemVerilog: a polynomial co-processor for lattice-based homomorphic encryption

Ring-LWE homomorphic encryption schemes such as BFV and CKKS spend almost all of
their time multiplying polynomials of degree n (here up to 2^13) with large
coefficients (here up to 128 bits) modulo a prime q and modulo x^n + 1. The fast
way to do this is with the number theoretic transform (NTT). You transform both
operands, multiply them coefficient by coefficient, and transform back. CoFHEE
is a small co-processor built around this idea. It has:

- one processing element (PE) with a pipelined 128-bit Barrett modular multiplier;
- seven 8192 x 128-bit polynomial memories: three dual-port and four single-port;
- a controller (MDMC, "multiplier data mover and controller") that streams
  coefficients and twiddle factors between the memories and the PE;
- a DMA engine that moves polynomials between memories while the PE computes;
- a command queue and configuration registers, through which a host (over a
  UART link, or an on-chip Cortex-M0) runs sequences of polynomial operations
  without stepping in.

This RTL implements the digital part of that design. It leaves out the
Cortex-M0 core, the PLL, the pads and the SPI link.

## Data layout and the memory map

A polynomial of n coefficients occupies words 0..n-1 of one memory, one
128-bit coefficient per word. Software refers to a memory by a 4-bit id:

| id | memory | bus slave(s) | base address |
|----|--------|--------------|--------------|
| 0..2 | dual-port DP0..DP2 | port A and port B, each a separate slave | `0x2000_0000 + s*0x2_0000`, s = 2*id (port A), 2*id+1 (port B) |
| 3..6 | single-port SP0..SP3 | one slave | `0x2000_0000 + s*0x2_0000`, s = id+3 |
| – | Cortex-M0 memory, 64 KB | one slave | `0x0000_0000` |
| – | configuration registers | one slave | `0x4002_0000` |

Each port of a dual-port memory is its own address space. This lets the
controller read two operands from one memory, or write two results into it, in
the same cycle.

The bus (`bus_xbar`) is a 128-bit request/grant crossbar. A master raises
`valid` with an address. It is granted in the same cycle unless a lower-numbered
master wants the same slave. Read data comes back on the next cycle. Different
slaves serve different masters in parallel.

The masters, in priority order:

1. the five MDMC streams: read A, read B, read twiddle, write A, write B;
2. the DMA;
3. the Cortex-M0 / host port;
4. the UART-M bridge.

This crossbar is a simpler stand-in for the AHB-Lite bus of the original chip.
It has no AHB transfer types, wait states or error responses.

## The arithmetic pipeline

`barrett_modmul` computes a*b mod q in five registered stages:

1. p = a*b (256 bits);
2. t = floor(p*mu / 2^k);
3. t*q;
4. r = p - t*q;
5. one conditional subtraction of q.

Software writes mu = floor(2^k/q) and k. For this quotient estimate k must be
at least 2*bitlen(q); with a 128-bit q, k = 256 and mu is up to 160 bits wide.
The original register description writes the Barrett shift as "2 log n", which
we read as a misprint for 2 log q.

`pe` wraps the multiplier. Its modes and latencies:

| mode | what it computes | latency |
|------|------------------|---------|
| modular add / subtract | a ± b mod q | 1 cycle |
| modular multiply | a*b mod q | 5 cycles |
| butterfly | (a + w*b, a - w*b) mod q | 6 cycles |
| raw product | low 128 bits of a*b | 5 cycles |

In a butterfly the multiplier result feeds the add/subtract stage; this is the
order in which the original block diagram draws MULT, Barrett reduction and
MOD ADD/SUB. The PE accepts a new operation every cycle. Each operation carries
a tag, the write-back address, through the pipeline.

There is one inconsistency in the source: one passage gives multiplication as
4 cycles, another as 5. This RTL uses 5.

## How the controller runs an NTT

The MDMC implements iterative radix-2 transforms, with one butterfly issued per
clock.

**Forward NTT.**
- Input in natural order, output in bit-reversed order.
- Pass s handles pairs (j, j + 2^h) with h = log2 n - 1 - s.
- The butterfly of group g uses twiddle w[bitrev(g)], bit-reversed over
  log2 n - 1 bits.
- The twiddle table is w[i] = omega^i for i < n/2, where omega is a primitive
  n-th root of unity mod q. Software loads it into any memory other than the
  two that hold the data.

**Inverse NTT.**
- Input in bit-reversed order, output in natural order.
- It runs log2 n passes with h = s, reading the same forward table at address
  (j mod 2^h) << (log2 n - 1 - h).
- A final pass writes y[j] = n^-1 * Y[(n - j) mod n]. This turns the forward
  transform into the inverse, so a single table serves both directions. n^-1
  comes from the INV_POLYDEG register.

**Ping-pong between x and t.** Command fields x and t name two dual-port
memories. Passes alternate between them: pass 0 reads x and writes t, pass 1
reads t and writes x, and so on. Reading the two butterfly inputs through ports
A and B of one memory, and writing the two outputs through ports A and B of the
other, gives one butterfly per cycle.

**Where the result lands.** This is the point users most often get wrong.

| transform | log2 n odd | log2 n even |
|-----------|------------|-------------|
| NTT (log2 n passes) | t | x |
| iNTT (log2 n + 1 passes) | x | t |

**Timing.** The pipeline drains between passes (about 8 cycles), so an NTT
takes log2(n) * (n/2 + 8) + 2 cycles: 53,354 at n = 2^13. The chip's measured
figure is 53,535.

**Negacyclic products.** Multiplying in Z_q[x]/(x^n + 1) needs weights psi^i on
the way in and psi^-i on the way out, where psi^2 = omega. These are separate
coefficient-wise PMODMUL commands against tables of psi^i and psi^-i. They are
not folded into the transform.

**Pointwise commands.** These stream x through port A and y through port B,
and write the destination one element per cycle.

**Conflicts.** Before it starts, the controller checks that no two of a
command's streams need the same memory port. It also checks:
- that an NTT's x and t are dual-port;
- that the memory ids are valid;
- that log2 n is between 1 and 13.

A command that fails these checks finishes at once with an error flag.

## Commands and the queue

A command is a 32-bit word:

| bits | field |
|------|-------|
| 3:0 | opcode |
| 7:4 | x |
| 11:8 | y |
| 15:12 | w (twiddle memory) |
| 19:16 | t / destination |
| 26:12 | length in words (copies only; overlaps w and t) |
| 31 | barrier |

| op | name | effect |
|----|------|--------|
| 1 | NTT | forward transform of x, scratch t, twiddles w |
| 2 | INTT | inverse transform |
| 3 | PMODADD | dst = x + y mod q |
| 4 | PMODMUL | dst = x * y mod q |
| 5 | PMODSQR | dst = x * x mod q |
| 6 | PMODSUB | dst = x - y mod q |
| 7 | CMODMUL | dst = x * CMODMUL_CONST mod q |
| 8 | PMUL | dst = low 128 bits of x * y |
| 9 | MEMCPY | copy len words from memory x to memory y (DMA) |
| 10 | MEMCPYR | same, written to bit-reversed addresses |

**Direct mode** (FHECTL1[0] = 0). Writing a command word to FHECTL2 runs that
one command.

**Queue mode** (FHECTL1[0] = 1). Command words written to COMMANDFIFO go into a
32-entry queue.

**Dispatch.** The dispatcher (`gpcfg`) hands commands out in order:
- compute commands go to the MDMC, copies to the DMA;
- the head command waits until its unit is free, so a copy can run while the
  MDMC computes;
- a command with the barrier bit set also waits until both units are idle.

There is no hazard checking between queued commands: software places barriers
where a copy depends on a computation, or the other way round.

**Completion.** When the queue is empty and both units are idle after work has
been issued, STATUS[4] and the host interrupt rise. If UARTS_CTL[0] is set, the
secondary UART sends the byte in UARTS_CTL[15:8]. Errors set STATUS[5]. Both
flags clear on a write of 1. DBG_REG holds the cycle count of the last MDMC
command.

## Registers

The registers sit at `0x4002_0000`, one per 16-byte slot, at slot index
addr[11:4].

| slot | register | notes |
|------|----------|-------|
| 0–7 | pad controls | |
| 8 | UART-M baud divider | clocks per bit |
| 9 | UART-S baud divider | clocks per bit |
| 10 | UART-M control | |
| 11 | UART-S control | |
| 12 | SIGNATURE | 0xC0F4EE01 |
| 13 | Q | |
| 14 | N | log2 n is its highest set bit |
| 15 | INV_POLYDEG | n^-1 mod q |
| 16 | BARRETTCTL1 | k |
| 17 | BARRETTCTL2 | mu[127:0] |
| 18 | BARRETTCTL2 | mu[159:128] |
| 19 | FHECTL1 | mode |
| 20 | FHECTL2 | direct command |
| 21 | FHECTL3 | |
| 22 | PLLCTL | |
| 23 | COMMANDFIFO | |
| 24 | DBG_REG | |
| 25 | STATUS | see below |
| 26 | CMODMUL_CONST | |

STATUS bits:

| bits | meaning |
|------|---------|
| 0 | MDMC busy |
| 1 | DMA busy |
| 2 | queue empty |
| 3 | queue full |
| 4 | interrupt |
| 5 | error (includes queue overflow) |
| 14:8 | queue count |

The register names follow the original design. Their offsets and bit layouts
are this implementation's choice.

## Host link

UART-M (`uart_host`) turns a byte protocol into bus transfers. Frames are 8N1,
and each bit lasts UARTM baud-divider clocks. Addresses and data are sent least
significant byte first.

- **Write:** `'W'`, 4 address bytes, 16 data bytes. The bridge replies `'K'`.
- **Read:** `'R'`, 4 address bytes. The bridge replies with 16 data bytes.

The Cortex-M0 is not included. Its bus master port is a top-level port of
`cofhee_top` (`cm0_req` / `cm0_rsp`), so a testbench or an external core can
drive the chip directly.

## Files

| file | contents |
|------|----------|
| `rtl/cofhee_pkg.sv` | widths, opcodes, command and bus structs, memory map, small arithmetic helpers |
| `rtl/barrett_modmul.sv`, `rtl/pe.sv` | arithmetic |
| `rtl/mdmc.sv`, `rtl/dma.sv` | data movers |
| `rtl/cmd_fifo.sv`, `rtl/gpcfg.sv` | queue, registers, dispatch |
| `rtl/bus_xbar.sv` | interconnect |
| `rtl/sram_dp.sv`, `rtl/sram_sp.sv` | memories (arrays, not foundry macros) |
| `rtl/uart_tx.sv`, `rtl/uart_host.sv` | serial links |
| `rtl/cofhee_top.sv` | the chip |

Each block has a self-checking testbench `tb/tb_<module>.sv`. Shared reference
arithmetic is in `tb/tb_util_pkg.sv`: modular operations, a Barrett constant
from long division, and roots of unity of the 128-bit test prime
q = 2^128 - 0x53fff, which is 1 mod 2^14.

`tb/tb_cofhee_top.sv` runs the whole chip at n = 32. It:
- uses the host link;
- runs a direct command and a deliberately conflicting one;
- queues a complete negacyclic product with copies running alongside.

`tb/tb_cofhee_full.sv` runs the same flow at the default size, n = 8192.

To simulate one test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cofhee_top \
  rtl/cofhee_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_cofhee_top.sv
./obj_dir/Vtb_cofhee_top
```

Every testbench ends with a `TB_RESULT checks=N failures=M` line.

## Status and departures from the original design

**Not built:**
- the NTT mode for n >= 2^14, which runs at half rate out of single-port
  memories;
- the SPI host link;
- the Cortex-M0, the PLL and the pads.

**Departures:**
- The bus is the simplified crossbar described above.
- The as-printed loop bounds of the source's NTT pseudo-code do not visit every
  butterfly. Standard bounds are used instead.
- PMUL keeps only the low half of the product.
- The number of single-port memories is given inconsistently in the source
  (three in the block diagram, five in the text including the processor
  memory, four in a table). This design has four data memories plus the
  processor memory.

**Measured at n = 2^13.** The default-size test (`tb_cofhee_full`) reports
cycle counts next to the original chip's figures:

| operation | this design | original chip |
|-----------|-------------|---------------|
| NTT | 53,354 cycles | 53,535 |
| iNTT | 61,553 cycles | 62,770 |
| coefficient-wise multiply | 8,201 cycles | – |

In that test, the DMA copy overlapped MDMC computation for 24,575 cycles.
