# UVP: an unlimited-vector-length coprocessor for wireless baseband

## The idea

Most vector extensions give a register a fixed size. A long vector has to be
cut into register-sized pieces by a software loop: that is strip-mining. The
loop also re-configures the vector length and spills registers, and for
non-power-of-two lengths it leaves registers half empty. Baseband kernels
(FFTs of 2048 points, odd-sized matrix products, long reductions) suffer from
all of this.

UVP removes the fixed register size from the programming model:

* **A register group (RG) is just a head register plus a length.** An
  instruction names the first vector register of each operand and takes the
  *application* vector length (AVL) from a scalar register. The RG covers as
  many physical registers as that AVL needs, with no power-of-two grouping
  factor. Element `j` of an RG with head `h` sits in lane `j mod N`, row
  `h + j div N`.
* **Strip-mining is done in hardware.** The AVL is passed unchanged to every
  lane. Each lane works out how many elements are its own,
  `VL_i = floor(S/N) + (i < S mod N)`, where S is the number of 16-bit slots,
  and runs that many micro-ops. A single instruction processes the whole
  vector.
* **Overlapping RGs are tracked in hardware.** Every in-flight instruction
  gets a one-hot ID. A hazard detector compares the register ranges
  `[head, tail]` of a new instruction with the ranges still in use. An
  instruction waits only for the older instructions it really conflicts with
  (RAW, WAR, WAW).
* **Element movement between lanes has its own engine.** The element exchange
  engine (EXE) has one processing element (PE) per lane and a crossbar.
  Gather and scatter are *asymmetric*: the indexed side has length `vsglen`,
  the other side has length AVL. A reduction sum runs in two parts: first
  inside each lane, then in log2(N) steps between lanes.
* **The datapaths suit wireless work.** They support packed 8/16-bit
  saturating arithmetic and a complex arithmetic unit (CAU), which does a
  complex multiply in one instruction. A saturating fixed-point divider
  shifts its numerator left by the `vshamt` CSR before dividing.

## Top level: `uvp_top`

```
                    +--------------------------------------------------------+
 inst, avl, rs1 --->| uvp_main_seq: decode, CSRs, IDs, hazard det., dispatch |
                    +-----------+---------------------------------+----------+
                      lane_cmd  | (broadcast)                     | exe_cmd
            +-------------------+-------------------+        +----+-------------------+
            | uvp_lane 0 ... uvp_lane N-1            |<------>| uvp_exe: FSM, N PEs,   |
            |  lane_seq, ALU, CAU, DIV, MRF,         | reads/ |          crossbar      |
            |  round-robin arbiter, VRF bank         | writes +------------------------+
            +-------------------^--------------------+
                                | slot reads/writes
 AXI4-Lite slave <------> uvp_mmap_conv (linear address map of all VRF banks)
```

Default parameters are the main configuration, Lane16Reg32:

* `N_LANE = 16` lanes.
* `N_VREG = 32` vector registers. Each is one 16-bit slot per lane, so a
  register holds 16 int16 or 32 int8 elements.
* `N_ID = 8` instruction IDs.

The whole VRF holds 512 int16 elements.

### Ports of `uvp_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, active-low asynchronous reset |
| `inst_valid` / `inst_ready` | in / out | instruction handshake; an instruction is taken on a cycle where both are 1 |
| `inst[63:0]` | in | 64-bit UVP instruction |
| `avl_val[31:0]` | in | value of the scalar register named by `rs_avl`: the AVL, or the value for a CSR write |
| `rs1_val[31:0]` | in | scalar operand for the vector-scalar forms; bits 15:0 are used |
| `s_aw*`, `s_w*`, `s_b*`, `s_ar*`, `s_r*` | AXI4-Lite | memory-mapped access to all VRF banks |
| `idle` | out | no instruction in flight |
| `stall_cycles` | out | count of cycles in which the oldest queued instruction could not leave |
| `hz_stall_cycles` | out | count of the cycles among those caused by an RG hazard |
| `illegal_cnt` | out | count of instruction words that were dropped as illegal |

**Memory map.** 16-bit slot `s` is at byte address `2s`. It maps to lane
`s mod N_LANE`, row `s div N_LANE`. So element `j` of the RG with head `h` is
at byte address `2*(h*N_LANE + j)`, and every RG is one contiguous block.

* Each 32-bit AXI access covers two slots.
* A write strobe enables a whole 16-bit half.
* Responses are always OKAY.
* One transaction is handled at a time, and writes win over reads.
* Bus accesses compete with the lanes and PEs for the single-port VRF banks.

### Instruction format

The 64-bit word follows the paper's encoding table:

| bits | field |
|---|---|
| 31:25 | funct7 |
| 24:23 | vew: `00` = int8 (char) elements, anything else = int16 (short) elements |
| 22 | vmask: predicate the instruction with the mask register `vm` |
| {63:52, 21} | vd head |
| {51:42, 20:18} | vs2 head |
| {41:32, 17:15} | vs1 head (the scalar register for `.vx` forms) |
| 14:12 | funct3 (category) |
| 11:7 | rs_avl |
| 6:0 | opcode: custom-1 `0101011` or custom-2 `1011011` |

The paper gives neither the funct3/funct7 code points nor the operand order,
so these are this design's:

| funct3 | opcode | instruction | funct7 |
|---|---|---|---|
| 0 | custom-1 | ALU vector-vector `vd = op(vs2, vs1)` | 0 add, 1 sub, 2 sadd, 3 ssub, 4 and, 5 or, 6 xor, 7 sll, 8 srl, 9 sra, 10 min, 11 max, 12 mv (vd = vs1); 16 eq, 17 ne, 18 lt, 19 le write 0/1 per element into vd |
| 1 | custom-1 | ALU vector-scalar `vd = op(vs2, rs1)` | same codes |
| 2 | custom-1 | compare into `vm` (the paper's compare can target either the VRF or the mask; funct3 0/1 covers the VRF case) | [4:0]: 16 eq, 17 ne, 18 lt, 19 le; [5] = compare with the scalar |
| 3 | custom-1 | CAU | [3:1]: 0 `vs1 ± vs2`, 1 `(vs1 ± vs2) × vd`, 2 `vs1 × vs2 ± vd`, 3 `vs1 × vs2`; [0] = subtract; 64 = complex multiply |
| 4 | custom-1 | saturating divide `vd = (vs1 << vshamt) / vs2` | 0 |
| 5 | custom-2 | mask / reduction | 0 vmnot (invert `vm` for the first AVL elements), 1 reduction sum `vd[lane 0] = Σ vs2` |
| 6 | custom-2 | element exchange | 0 gather `vd[j] = vs1[vs2[j]]`, j < vsglen; 1 scatter `vd[vs2[j]] = vs1[j]`, j < AVL |
| 7 | custom-2 | CSR write, value = AVL register | address 0 `vshamt`, 1 `vsglen`, 2 `vrextra` |

Anything else is dropped and counted in `illegal_cnt`.

**Results of the CAU and the divider.**
* CAU results are shifted right arithmetically by `vshamt`, then saturated to
  16 bits.
* The divider saturates to 0x7fff or 0x8000 on overflow and on division by
  zero.
* Complex vectors hold R = ceil(AVL/N) rows of real parts followed by R rows
  of imaginary parts.

**Element layout and masking.**
* Char elements are packed two to a slot.
* `vm` has one bit per VRF byte. A short element uses bit 0 of its slot.

**Gather and scatter indices.**
* A gather index at or above AVL reads 0.
* A scatter index at or above `vsglen` is dropped.
* Scatter writes that hit the same element within one group of N consecutive
  indices land in arrival order, which is not specified. A later group always
  overwrites an earlier one.

## Blocks (`rtl/`)

| file | block |
|---|---|
| `uvp_pkg.sv` | shared constants, enums, the instruction struct with pack/unpack, lane and EXE command structs, saturation helpers |
| `uvp_main_seq.sv` | main sequencer: decode, CSR writes, instruction monitor (one-hot IDs), hazard detection, in-order dispatch queue, completion tracking; splits a reduction into its lane part and its EXE part |
| `uvp_hazard_det.sv` | hazard detector: registered in-range comparators per register and operand, occupancy tables of one-hot IDs, OR tree, N_ID × N_ID hazard table cleared on completion |
| `uvp_lane.sv` | one lane: sequencer, ALU, CAU, divider, mask slice, arbiter, VRF bank |
| `uvp_lane_seq.sv` | lane sequencer: per-lane VL, operand fetch, uop issue, write-back with byte enables, intra-lane reduction |
| `uvp_vrf.sv` | single-port VRF bank, byte write enables, registered read |
| `uvp_mrf.sv` | the lane's slice of the mask register (2 bits per row) |
| `uvp_rr_arb.sv` | round-robin arbiter for the VRF port: sequencer, bus, PE write, and N PE reads |
| `uvp_alu.sv` | packed 8/16-bit ALU with saturation and compares |
| `uvp_cau.sv` | complex arithmetic unit: pre-adders, two multipliers, post-adder, `vshamt` shifter, two pipeline registers (latency 2) |
| `uvp_div.sv` | saturating fixed-point divider with sign-XOR overflow detection (latency 1) |
| `uvp_exe.sv` | element exchange engine: holds the instruction, FSM, PEs, crossbar, read-data return |
| `uvp_exe_fsm.sv` | EXE state machine: S0 idle, S1 decode, S2 set counter/threshold, S3 read index, S4 read data, S5 write data, S6 end |
| `uvp_exe_pe.sv` | shuffle PE: counter and threshold, index-to-PE and index-to-row mapping, read and write channels, output buffer |
| `uvp_exe_xbar.sv` | PE crossbar: one packet per destination per cycle, lowest source first |
| `uvp_mmap_conv.sv` | AXI4-Lite slave and memory-map-to-lane conversion |
| `uvp_top.sv` | wires all of the above |

Each file's opening comment describes its interface and timing. It also says
which parts follow the paper and which are choices of this design.

## Timing in short

* **Main sequencer.** It accepts one instruction per cycle while an ID and a
  queue slot are free. An instruction can leave the queue two cycles after it
  was taken, once its hazard row is ready. It leaves when it is the oldest,
  its hazard row is clear and its unit is free. One lane instruction and one
  EXE instruction can run at the same time.
* **Lane sequencer.** It handles one slot at a time. It reads each operand
  through the arbiter (data one cycle after the grant) and executes. The ALU
  takes one cycle, the divider 1 + 1, and the CAU 2 + 1 (twice for a complex
  multiply). Then it writes back.
* **Lane throughput.** A short vector add takes about 7 cycles per row when
  nothing else competes for the port. This design processes slots strictly in
  sequence, whereas the paper overlaps them with operand queues.
* **EXE.** It runs one iteration (S3 to S5) per group of N elements. Each
  state waits until all PEs report done. A reduction takes log2(N) iterations.

## Verification (`tb/`)

Every block has a self-checking testbench with a watchdog. Each ends with a
line `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_uvp_alu` | every op, both element widths, random operands, against an integer model |
| `tb_uvp_cau` | every op with random shifts; saturation; latency of exactly 2 |
| `tb_uvp_div` | quotient and shift; overflow and divide-by-zero saturation; latency 1 |
| `tb_uvp_vrf`, `tb_uvp_mrf` | storage against a model; byte and bit enables |
| `tb_uvp_rr_arb` | one-hot grant; no grant without a request; every requester served within NREQ cycles |
| `tb_uvp_exe_fsm` | state sequence against a reference state chart |
| `tb_uvp_exe_xbar` | routing, lowest-source priority, acknowledge rules |
| `tb_uvp_hazard_det` | the hazard table against a set model of RAW/WAR/WAW conflicts |
| `tb_uvp_lane` | a whole lane, including its sequencer; random commands of every kind against a model; concurrent PE reads for port conflicts |
| `tb_uvp_exe` | EXE, including its PEs, against behavioural lane banks with random stalls; gather, scatter, reduction |
| `tb_uvp_mmap_conv` | AXI reads and strobed writes against a flat memory; slot-to-lane mapping |
| `tb_uvp_main_seq` | random instruction stream; in-order dispatch; no dispatch before a conflicting older instruction has completed; CSRs; illegal count; ID limit |
| `tb_uvp_top` | end-to-end test at the default parameters (16 lanes, 32 registers) |
| `tb_uvp_kernels` | three benchmark kernels at the default parameters, scaled to fit: the gather-based matmul (5,9,11), a 496-element reduction sum and a 32-point complex FFT, against integer references (and a floating-point DFT for the FFT) |

**How `tb_uvp_top` runs.**
1. It loads the register file over AXI.
2. It runs a directed program and then 400 random instructions.
3. After each phase it compares the whole register file with a reference
   model. Meanwhile it keeps reading over AXI, so the bus competes with the
   lanes and PEs.
4. It counts each mechanism and fails if one never happened: hazard stalls,
   dispatch stalls, ID-full back-pressure, saturation, divider overflow,
   predication, int8/int16 mode switches, vmnot, reduction, gather, scatter,
   out-of-range gather indices, CSR writes, illegal words, VRF arbitration
   conflicts, lane and EXE running together, and bus accesses during execution.

It simulates in a few seconds.

Every testbench was also run against a copy of its module with one deliberate
bug, and every one of those runs failed.

Run a testbench with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv rtl/uvp_pkg.sv tb/tb_uvp_top.sv --top-module tb_uvp_top
./obj_dir/Vtb_uvp_top
```

## Against the paper

**What follows the paper:**
* the 64-bit encoding;
* RGs with a head and an AVL, and no power-of-two grouping;
* hardware strip-mining through a per-lane VL;
* one-hot instruction IDs, the range-comparator hazard detector and the
  hazard table;
* the lane structure, with a single-port VRF bank behind a multiple-input
  single-output arbiter;
* the CAU datapath and its operations, two pipeline registers, and the
  `vshamt` truncation;
* the divider with a shifted numerator, sign-XOR overflow and NEG_MAX/POS_MAX
  mux;
* the EXE with its S0–S6 state machine, per-lane PEs with counter and
  threshold, and the PE crossbar;
* the two-part reduction, with `log2 N` inter-lane steps that add lane
  `m·2^(n+1)+2^n` into lane `m·2^(n+1)`;
* the `vshamt`, `vsglen` and `vrextra` CSRs;
* one mask register with a bit per VRF byte;
* a passive AXI interface with memory-map-to-lane conversion.

**Where this design differs or decides for itself:**
* **VL_i formula.** The paper prints the tail term of VL_i as
  `i ≥ AVL mod N`, which does not add up to AVL. This design uses
  `i < S mod N`.
* **Divider checks.** A range check on the full-width quotient is ORed into
  the sign-XOR overflow, and division by zero saturates.
* **Code points and operand order.** Both are this design's, as in the table
  above.
* **Instruction flow.**
  * The main sequencer dispatches in order.
  * One lane instruction and one EXE instruction can be in flight at the same
    time.
  * The lane sequencer handles one slot at a time, with no operand queue
    overlap, so it is slower than the paper's pipelined lanes.
* **Arbitration.**
  * The VRF arbiter is round-robin.
  * The crossbar uses fixed priority, lowest source first.
* **Active bus side not built.** The active side of the bus interface, where
  the extension masters memory itself, is only named in the paper and is not
  built. Data moves in and out through the AXI slave.
* **Macros and host core not modelled.** SRAM macros and the host RISC-V core
  are not modelled. The VRF is a synthesizable array, and the testbench acts
  as the host.
* **CSR behaviour.** `vrextra` is placed above the 13-bit head fields. With
  32 registers it has no effect.

**Workloads of the paper at the default size.** The paper's kernels assume
much larger register files than the 512-element default:
* matmul (33,9,129) needs 5715 elements;
* fft512 to fft2048 need 1024 to 4096 slots;
* redsum6144 and redsum8192 need 6144 and 8192 elements;
* MMSE on a 32×32 complex window needs 2048 slots.

At Lane16Reg32 they run only in pieces moved over the bus.

`tb_uvp_kernels` runs three scaled-down kernels at the default size.
* **matmul (5,9,11).** This is C = A×B with A 5×9 and B 9×11. It uses the
  gather kernel: index vectors `piA[p] = (p div 11)·9` and
  `piB[p] = p mod 11` are updated in place by scalar adds. For each of the
  9 inner-product steps, two gathers shuffle A and B, and a CAU multiply-add
  accumulates the product into C. The run takes 45 instructions and about
  1760 cycles, 660 of them hazard stalls. The loop is serial through its
  RGs.
* **redsum496.** A single reduction instruction takes 175 cycles.
* **fft32.** A 32-point complex FFT in five radix-2 Stockham stages, eight
  instructions each:
  * add and subtract the two halves;
  * multiply the difference by Q14 twiddles (`vshamt` = 14);
  * interleave sums and products with two gathers.

  The gathers read the sum and product rows as one 32-element RG. The
  imaginary rows are stored in the opposite order, so the imaginary index
  vector is the real one xor 16. Data, twiddles and index vectors fill all
  32 registers. The run takes 528 cycles. The result equals an integer model
  of the same steps and lies within 11 of a floating-point DFT. `N_VREG` and
`N_LANE` (a power of two) are parameters, but only the default size was
simulated.
