# CENT: a GPU-free LLM inference machine built from PIM memory on CXL — RTL

LLM decoding is limited by memory bandwidth, not arithmetic: every generated token streams the whole
weight matrix set and the key-value cache through a matrix-vector product. CENT replaces the GPU by
CXL memory devices whose GDDR6 DRAM banks each carry a small BF16 multiply-accumulate unit. A CXL
switch joins the devices and the host. Inside a device, the PIM banks do the matrix-vector work
(over 99 % of the arithmetic), near-memory ("PNM") accelerators and RISC-V cores do the rest
(exponent, reductions, residual additions, square roots), and a 64 KB shared buffer connects
everything. This RTL models that device and system at the level of blocks, instructions and
DRAM command timing.

## Structure

```
cent_system ─ cxl_switch ─ host link (ports)
            └ cxl_device x NUM_DEVICES
                 ├ cxl_port          link queues, CRC check, response generation
                 ├ inter_dev_ctrl    SEND/RECV/BCAST_CXL, host accesses
                 ├ instr_buffer      2 MB program memory (128-bit instructions)
                 ├ cent_decoder      PC, decode, micro-op expansion
                 ├ shared_buffer     64 KB, 2048 x 256-bit slots, 32 banks
                 ├ pnm_units         32 x (pnm_accumulator, pnm_reduction_tree, pnm_exp_unit)
                 └ 16 x pim_controller + ldst_unit
                        └ 2 x pim_channel ─ global_buffer, 16 x (dram_bank + pim_pu)
```
Shared types, the instruction format and the BF16 functions are in `rtl/cent_pkg.sv`.
The RISC-V cores and the host CPU are outside the RTL; their connections are module ports.

## How an instruction runs

The host writes instructions into the instruction buffer (address region 0), operands into the
shared buffer (region 1), and the program length to the control register (region 3). The decoder
then executes the program strictly in order, one instruction at a time.

* **PIM instructions** (`MAC_ABK`, `EW_MUL`, `AF`, `WR_SBK`, `RD_SBK`, `WR_ABK`, `COPY_BKGB`,
  `COPY_GBBK`, `WR_BIAS`, `RD_MAC`, `WR_GB`) expand into `OPsize` micro-ops on consecutive columns
  and slots, sent to every PIM controller whose channel is in the channel mask.
* **The PIM controller** issues one all-bank activate, a burst of column commands one per cycle,
  then one all-bank precharge, with the GDDR6 timing tRCDRD 18, tRCDWR 14, tRAS 27, tCL 25, tRP 16,
  tCCDS 1 (cycles of 1 ns). A `MAC_ABK` of N columns therefore takes 18 + N + 25 + 16 cycles.
  The channel model performs the data operation when the command is issued. The controller then
  waits out tCL before it reports idle.
* **A near-bank PU** multiplies the bank's 256-bit column by the global-buffer word, or by the
  neighbouring bank's column, in 16 BF16 lanes. It sums the products in an adder tree into one of
  32 accumulators. `AF` reads a (slope, intercept) pair from a table row in the bank, indexed by
  the sign and exponent of the accumulator, and applies `a*x+b`.
* **PNM instructions** (`EXP`, `RED`, `ACC`) process `OPsize` slots in chunks of 32 on 32 parallel
  units. The shared buffer is 32-way interleaved, so each chunk's operands come from 32 different
  banks. `EXP` uses a 10-term Taylor series in a three-register pipeline.
* **CXL instructions**: `SEND_CXL` and `BCAST_CXL` read one slot and queue a write message. They
  count the acknowledgements they expect and do not wait for them. `RECV_CXL` waits for any
  incoming write. A broadcast is a single message with a reserved type and a device-id mask, and
  the switch copies it to every device in the mask.

## Where this RTL departs from the paper

* Defaults are the paper's sizes, except `cent_system.NUM_DEVICES`: it is 8 here, against 32 in
  the paper. Set it back to 32 for the paper's system; lint memory grows by about 2.5 GB per device.
* The instruction encoding, message format, host address map, CRC and queue depths are choices of
  this design. The paper gives operand lists only. Three operands were added because the paper's
  lists have no field for them: `nb` on `MAC_ABK`, and `BK` on `COPY_BKGB`/`COPY_GBBK`.
* BF16 arithmetic truncates, flushes subnormals and does not handle NaN or infinity.
* One clock for the whole device. The paper uses 1 GHz for PIM and projects 2 GHz for the controller.
* A CXL message carries one 256-bit slot, not a 256-byte flit. There is no link-layer retry, so a
  message that fails the CRC check is dropped and counted.
* Host accesses to the DRAM region are acknowledged but not performed. To load data into DRAM,
  write it to the shared buffer and run `WR_SBK`.
* The RISC-V cores are not modelled.

## Verification status

Simulated with self-checking testbenches: `pnm_accumulator` and `pnm_reduction_tree`. They use
random small-integer BF16 operands, which are exact in BF16, and compare against integer
references. Every other module is lint-clean under `verilator --lint-only -Wall`. These modules
have not been verified in simulation. The code should be treated as a reviewed design
description, not a verified implementation.

## Simulating

```
verilator --binary --timing --assert -Irtl rtl/cent_pkg.sv rtl/pnm_accumulator.sv \
          tb/tb_pnm_accumulator.sv --top-module tb_pnm_accumulator
./obj_dir/Vtb_pnm_accumulator
```
Each testbench prints `TB_RESULT checks=N failures=M`. For larger modules, override `ROWS`, `COLS`,
`IB_DEPTH`, `NUM_CTRL` and `NUM_DEVICES` to keep memory small.
