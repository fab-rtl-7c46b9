# FAB kernel: an FPGA accelerator for bootstrappable CKKS

This is SystemVerilog RTL for the FAB kernel. FAB is an accelerator for the CKKS
fully homomorphic encryption scheme, including bootstrapping. It works on
polynomials with N = 2^16 coefficients in residue-number-system form. Each
limb is 54 bits wide. 256 functional units process one row of 256
coefficients per cycle.

## Arithmetic

- `mod_add`, `mod_sub`: modular add and subtract of 54-bit values. They split
  each value into 27-bit words. Latency is 7 cycles.
- `int_mul`: 54x54-bit product built from nine 18x18 products (schoolbook,
  unrolled). Latency is 12 cycles.
- `mod_red`: reduces the 108-bit product modulo q, a 54-bit prime. The high
  half is folded in 6-bit steps. Each step adds `madd[c-1] = c*2^54 mod q`
  from a 63-entry table. Latency is 12 cycles, and the result is in [0, q).
- `automorph_unit`: computes the destination index of a coefficient under
  rotation by k: `new = (g-1)/2 + g*i mod N`, where g = 5^k mod 2N. It can
  also bit-reverse the index, which the NTT needs for its input.
- `functional_unit`: one lane. It chains multiply and reduce into a modular
  adder and subtractor, and includes an automorph unit. Lane latency is
  31 cycles.

## Memories

- Five single-port URAM banks, 4096 rows of 256 x 54 bits each: c0 (two
  banks), c1 (two banks) and misc. Each bank holds 16 limbs.
- Three dual-port BRAM banks: c0 and c1 (2048 rows each) and misc (1024
  rows).
- `reg_file`: the register file. It holds the per-limb modulus and madd
  table, powers of five, 4096 scalar constants and four polynomial slots.
  Each slot has two row-read and two row-write ports, plus a scatter port for
  the automorph permutation.
- `sync_fifo`: the Rd/Wr FIFOs on the HBM ports and the Tx/Rx FIFOs on the
  Ethernet stream.

Bank addresses are `{polynomial, row}`. A row holds 256 consecutive
coefficients, so one limb takes 256 rows.

## Data movement

- `hbm_dma`: 32 AXI4 master ports with 256-bit data. Each coefficient takes
  one 64-bit word, so one beat carries 4 coefficients. One row is spread
  over all 32 ports in 2 beats each. Reads are issued in bursts of up to
  128 beats, with credit so the read FIFO never overflows. Loads can run in
  the background while computation continues. A background load writes a
  row only when the target bank's port is free.
- `cmac_stream`: a 512-bit AXI4-Stream to and from the 100G Ethernet MAC.
  Each row is packed densely into 27 beats, and tlast marks the end of a
  polynomial.
- `axil_regs`: the host's AXI4-Lite port. Register map:

  | Address | Register |
  |---|---|
  | 0x000 | control: write bit 0 to start; read {error, done, busy} |
  | 0x008 / 0x00C | HBM base address |
  | 0x010 | cycle counter |
  | 0x014 | stall counter |
  | 0x018 | retired-instruction counter |
  | 0x001000 + 16i | instruction i, three words; the third write commits it |
  | 0x800000 + 8a | register-file word a, 64 bits; the high half commits it |

## Control and instruction set

`fab_ctrl` fetches 86-bit instructions from a 1024-entry memory and issues
one row per cycle.

Instruction fields: op, async, dst/a/b memory and polynomial, limb, scalar
index and aux.

Operations:
- element-wise: ADD, SUB, MUL, MAC, SMUL, SMAC
- NTT, PERM (automorph and/or bit reversal into the register file)
- LOAD, STORE (HBM); TX, RX (Ethernet)
- WAIT (for background loads), HALT

Write-back happens 32 cycles after issue. Issue stalls for one cycle when
the write-back targets a single-port URAM bank that the current operation
also reads. The pipeline drains between instructions and between NTT stages.

Illegal instructions set the error flag and are skipped. These include:
- too many reads of one bank
- more than two register-file reads
- two equal NTT slots

## NTT

The NTT is a radix-2 Cooley-Tukey transform in constant geometry (see
`ntt_agu`):
- The input is in bit-reversed order. Use PERM in bit-reverse mode to get it.
- Each stage reads rows 2r and 2r+1 and writes rows r and r + N/512.
- It ping-pongs between two register-file slots. After an even number of
  stages the result is in the first slot.
- The twiddles of stage s are stored in the URAM misc bank from row
  `base + sum_{s'<s} ceil(2^s'/256)`.

One transform takes logN * N/512 issue cycles plus the drain. The program
applies the negacyclic twist and the scaling by N^-1 for the inverse
transform as element-wise multiplications.

## Following the paper and own choices

Taken from the paper:
- limb width and word splits
- the 6-bit reduction with the madd table
- the 256 lanes
- the URAM/BRAM bank organisation
- 32 HBM ports with FIFOs
- a 512-bit Ethernet stream
- an AXI4-Lite host port
- the automorph index map
- the data and twiddle mapping with shifts and ANDs

This design's own choices:
- the instruction set and its encoding
- memory layouts and the register map
- constant-geometry ordering of the NTT
- a single clock domain. The paper runs the Rd FIFO at 450 MHz but also
  calls the design synchronous; one clock was used.
- `c >= q` for the final correction. Algorithm 1 prints `c > q`.
- rotation by 5^k instead of the printed 5*i

The host CPU, HBM2 stacks, the CMAC IP, PCIe and the switch are outside the
kernel. Only their interfaces are brought out.

## Verification

Every arithmetic unit has its own self-checking testbench with exact latency
checks: `tb_mod_add`, `tb_mod_sub`, `tb_int_mul`, `tb_mod_red` and
`tb_automorph_unit`.

`tb_fab_top` checks the whole kernel through the host port. It uses a
behavioural HBM model (`hbm_model`) at 8 lanes, N = 512 and 2 HBM ports.
This is the largest configuration that was simulated, and no full-size
(N = 2^16, 256-lane) simulation was run. The test covers:
- load, add, sub, mul, scalar mul and MAC
- a background load that overlaps computation and waits for a busy port
- write-back stalls
- a bit-reversal PERM followed by the NTT, checked against a direct DFT
- an automorph PERM
- Tx with back-pressure, and Rx
- an illegal instruction
- the NTT issue-cycle count

The other blocks are checked through this test.
