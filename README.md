# FHEmem near-mat processing in HBM: RTL

Fully homomorphic encryption (FHE) spends most of its time moving huge polynomials
(64-bit coefficients, 2^16 of them per residue limb) between memory and compute. This design
puts the arithmetic inside the DRAM instead. Each 512-bit-row DRAM mat of an HBM2E bank gets
a small near-mat unit (NMU) with operand latches and 64-bit shift-and-add adders. The mats
are linked by segmentable data lines, so coefficients can be permuted for the NTT
without leaving the bank.

## Organisation (one pseudo-channel)

- **Mat** (`fhemem_mat`): 128 rows x 512 bits with a row of sense amplifiers. An activation takes
  `T_ACT` cycles; data move in 16-bit beats, so a row takes 32 beats.
- **NMU** (`fhemem_nmu`): 8 x 64-bit operand latches and 4 adders, each with a 64-bit operand
  register and a 128-bit accumulator.
  - An add step adds (or subtracts) the operand shifted by k. When masking is on, it adds only
    if bit k of the paired latch is set.
  - A 64x64 multiply is therefore 64 steps.
  - A multiply by a low-Hamming-weight constant (Montgomery-friendly moduli) takes one step per
    set bit.
- **Subarray** (`fhemem_subarray`, controller `fhemem_sa_ctrl`): 16 mats and their NMUs, run in
  lock step by one command.
  - The horizontal data line (HDL) joins the 16 NMUs. Isolation switches cut it into
    segments (`fhemem_seg_link`).
- **Bank** (`fhemem_bank`, controller `fhemem_bank_ctrl`): the subarrays share 16 vertical
  master data lines (MDLs), one per mat column, which are also segmentable. Together the 16
  MDLs form a 256-bit path to a two-entry transfer buffer (`fhemem_xbuf`).
  - The bank controller keeps a busy bit per subarray. Independent commands therefore run in
    different subarrays at once (subarray-level parallelism).
  - The controller owns the switch settings: one control per mat column for the HDLs, one per
    subarray row for the MDLs.
  - Changing a setting waits until the affected lines are idle. It then costs one cycle per
    switch position that changes, at most 16.
- **Channel** (`fhemem_channel`, the top):
  - A micro-program engine (`fhemem_uprog`) expands a host "bbop" from its scratchpad into
    micro-ops.
  - Micro-ops go through a queue (`fhemem_uop_queue`) to the channel controller
    (`fhemem_ch_ctrl`).
  - The controller sends NMU commands over the 16-bit C/A bus (`fhemem_ca_ser` / `fhemem_ca_des`):
    2 beats for 32-bit commands, 4 for the 64-bit permute store.
  - The partial chain (`fhemem_chain`) moves 256-bit blocks directly between neighbouring
    banks of a group of four. All other transfers, and host reads and writes, share the channel IO.

## Commands and timing

The opcodes are ld, st, hmov, vmov, add and pst; opcodes 6 and 7 are reserved. A command
carries a 3-bit opcode and a 10-bit subarray, plus 3-bit column, latch, adder and size fields.
Moves add a direction bit and a 2-bit stride; add carries 6-bit start and end shift positions;
the permute store has 48 bits of per-NMU latch ids. `fhemem_pkg` gives the exact bit layout
and the encoder functions.

| Command | Cycles |
|---|---|
| ld, st, hmov, vmov | 4 per 64-bit word (32 for a full row) |
| add | 1 per shift step |
| pst | 4 |

An HMOV of stride 2^s cuts the HDL into segments of 2^(s+1) mats. The 2^s transfers that share
a segment run one after another. A VMOV pairs subarray i with i +/- 2^s inside an aligned
segment of 2^(s+1) subarrays.

Choices of this design where the source is silent:
- the field bit positions;
- the accumulator's upper-half store;
- the subtract flag;
- VMOV restricted to power-of-two distances;
- the switch-cost rule;
- bank groups of 4;
- 2 cycles per block on the channel IO;
- queue and scratchpad depths;
- `T_ACT` = 15 cycles (tRAS of 29 ns at 500 MHz).

## Sizes and status

- Defaults follow the ARx4-4k configuration: 512 subarrays per bank, 128 rows, 4 adders per
  NMU and 8 banks, except at the top.
- The top uses 64 subarrays per bank. Linting the whole channel needs memory roughly
  proportional to the number of mats: 6.8 GB at 64 subarrays, and it ran out of memory at 128.
- Self-checking testbenches exist and pass for the mat, NMU, segmented line, subarray,
  transfer buffer and micro-op queue. The subarray test runs at 8 rows and checks the
  cycle counts above.
- Not yet verified by simulation:
  - the bank, the bank controller, the C/A link, the micro-program engine, the chain and the
    channel controller;
  - an end-to-end run of the channel. Its C++ build at 16 subarrays per bank was too slow to
    finish.
- No full-size simulation was run. The largest simulated block is one subarray.

## Simulating

    verilator --binary --timing --assert -Irtl -y rtl rtl/fhemem_pkg.sv tb/tb_fhemem_subarray.sv --top-module tb_fhemem_subarray
    ./obj_dir/Vtb_fhemem_subarray

Each testbench prints `TB_RESULT checks=N failures=M`.
