# Fault-tolerant accelerator modules with DMA-fed built-in self-test

A multi-core SoC offloads some functions to hardware accelerators (IP cores).
Soft errors can corrupt such a core. There are two classic remedies, and both
are expensive:

- **Triple modular redundancy** triplicates the core and votes on its outputs.
  This roughly triples the hardware.
- **N-version software** runs the function several times on processors. This
  is slow.

This design takes a third route. Each protected accelerator is tested by a
built-in self-test (BIST) structure shortly before the software needs it.

- If the test passes, the function runs on the accelerator.
- If the test finds a fault, the processor runs the function in software
  instead, using cores that would otherwise be idle.

The test patterns and their correct results are not stored in the accelerator.
They sit in ordinary memory, and the BIST structure fetches them by DMA while
the processor keeps running its own code. On chip, the structure keeps room for
only one pattern at a time. Patterns are stored in priority order: those that
detect the faults you care most about come first. You choose how many to run,
trading test time against fault coverage.

The RTL here implements that hardware: the test wrapper around an accelerator,
the bus, the on-chip memory and a top level with two protected accelerators.
One is a combinational sorter and one is a sequential 8x8 IDCT. The processors
and the software are not part of the RTL.

## System

```
            cpu_req/cpu_rsp (processor bus port, master 0)
                         |
   +---------------------+--------------------------------------+
   |                bus_interconnect                             |
   |   round-robin arbiter, address decoder, error responder     |
   +-----+-------------------------+---------------------+-------+
         | slave 0                 | slave 1 / master 1  | slave 2 / master 2
   +-----+------+          +-------+--------+    +-------+--------+
   | onchip_mem |          | ft_module      |    | ft_module      |
   | 4096 words |          | IP_SORT        |    | IP_IDCT        |
   +------------+          +--ack---fault---+    +--ack---fault---+
```

Word address map of `ft_soc`:

| Range           | Slave                                                  |
|-----------------|--------------------------------------------------------|
| 0x0000 - 0x0FFF | on-chip memory (pattern tables, data)                  |
| 0x1000 - 0x10FF | fault-tolerant sorting module                          |
| 0x1100 - 0x11FF | fault-tolerant IDCT module                             |
| anything else   | answered by the bus with rdata = 0xBAD0ADD4            |

Each module is a bus slave, for its registers, input buffer and result memory.
It is also a bus master, for its DMA engine. It drives two pins to the
processor:

- `ack`: the test has finished.
- `fault`: one bit, 1 when the test found a fault.

## Inside a fault-tolerant module (`ft_module`)

```
 bus write REG_BUF                 Select (from HCU)
        |                              |                      Select
        v                              v                         |
   ip_buffer --Data5--> ip_mux --Data6--> IP core --Data7/Done1--> ip_dmux --Data9/Done3--> HCU result memory
                          ^                                       |
                          | Data4                                 | Data8/Done2
                     +----+------------- bist_core ---------------v----+
                     |  bist_tpg            bist_ctrl          bist_tra |
                     +-----^--------------------|----------------^------+
                           | pattern words      | Done, Result   | correct results
                     +-----+--------------------v----------------+------+
                     |  hcu: registers, DMA master, Select, BIST_Enable |
                     +--------------------------------------------------+
```

The names `Data4`..`Data9`, `Done1`..`Done3`, `Select`, `BIST_Enable`, `Done`,
`Result`, `Read`, `Write` and `Full` are those of the module's block diagram in
the source architecture. The RTL comments refer to them.

The module has two modes. `Select` from the hardware control unit (`hcu`)
switches the MUX in front of the core and the DMUX behind it.

- **Normal mode** (`SEL_NORMAL`). The processor writes operands into the input
  FIFO (`ip_buffer`, 64 words) by writing to `REG_BUF`. The hcu pops them into
  the core whenever the core is ready. Results go into the hcu's 64-word result
  memory, which the processor reads at `REG_RES_BASE + i`. A write to a full
  buffer holds the bus until there is room. A full result memory stalls the
  core, and behind it the buffer. Software should therefore empty the result
  memory before sending more than 64 + 64 words.
- **Test mode** (`SEL_TEST`). See the next section.

## A test run, step by step

1. The processor writes the table address to `REG_PAT_BASE` and the number of
   patterns N to `REG_PAT_COUNT` (default 4). It then writes bit 0 of
   `REG_CTRL`. This is the BIST request, placed in the program early enough
   for the test to finish before the accelerator is needed.
2. The hcu clears `ack`, switches `Select` to test and raises `BIST_Enable`.
   The BIST control unit (`bist_ctrl`) answers with a one-cycle clear of the TPG
   and TRA.
3. The hcu's DMA reads the pattern table in bursts of up to 16 words into a
   32-word prefetch FIFO. It starts the next burst as soon as a whole burst
   fits, while earlier words are still being handed over. Each word goes to
   the BIST core with a flag: pattern word or correct result. Pattern `p` occupies `IN_WORDS + OUT_WORDS` consecutive words at
   `PAT_BASE + p*(IN_WORDS+OUT_WORDS)`: the pattern words first, then the
   correct results.

   | Core  | IN_WORDS | OUT_WORDS | Table size for N patterns |
   |-------|----------|-----------|---------------------------|
   | sort  | 1        | 1         | 2N words                  |
   | IDCT  | 64       | 64        | 128N words                |

   Put the most important pattern first. A run of N patterns always uses the
   first N.
4. The TPG (`bist_tpg`) holds up to one pattern and feeds it to the core
   through the MUX. The TRA (`bist_tra`) holds up to one pattern's correct
   results. It compares each response arriving through the DMUX with the
   oldest correct result, and any difference sets its sticky fault flag. The
   TRA accepts a response only when a correct result is waiting, so the core
   stalls instead of being compared against nothing. The processor is free
   during all of this.
5. After N x OUT_WORDS responses, `bist_ctrl` raises `Done` with `Result`. The
   hcu latches `Result` into `fault`, drops `BIST_Enable`, returns to normal
   mode and raises `ack` one cycle later.
6. The processor polls `ack` (pin or `REG_STATUS` bit 1) and reads `fault`.
   - If `fault` is 0, it uses the accelerator.
   - If `fault` is 1, it runs its software version of the function.

   Diagnostics in registers: `REG_CYCLES` holds the run length in cycles,
   `REG_APPLIED` the pattern words applied and `REG_MISMATCH` the number of
   wrong responses.

Measured test lengths:

| Run                                   | Cycles | Conditions                                          |
|---------------------------------------|--------|-----------------------------------------------------|
| 4 IDCT blocks, module alone           | 788-794 | model memory with random wait states between beats |
| 4 IDCT blocks, in the full system     | 792    | sorting module and processor also using the bus     |
| 2 IDCT blocks, module alone           | 406    | model memory with random wait states between beats |

The IDCT core needs 192 cycles per block, so 4 blocks take at least 768
cycles. With bursts and prefetch, fetching the table costs about 1.2 cycles
per word (19 cycles per 16-word burst, counting the DMA's issue cycle) and overlaps with the core's work, so the core sets the test time.
(An earlier version of this design without bursts fetched one word per bus
transaction and needed 1749 cycles for the same test.)

## Registers (word offsets in a module's window)

| Offset    | Name            | Access | Meaning                                                                  |
|-----------|-----------------|--------|--------------------------------------------------------------------------|
| 0x00      | REG_CTRL        | W      | bit 0: start BIST (ignored while busy); bit 1: empty the result memory    |
| 0x01      | REG_STATUS      | R      | bit 0 busy, bit 1 ack, bit 2 fault, bit 3 input buffer full              |
| 0x02      | REG_PAT_BASE    | RW     | word address of pattern 0 (write ignored while busy)                     |
| 0x03      | REG_PAT_COUNT   | RW     | N, 16 bits, reset value 4 (write ignored while busy)                     |
| 0x04      | REG_RES_COUNT   | R      | results held in the result memory                                        |
| 0x05      | REG_CYCLES      | R      | length of the last test, from the start write to ack                     |
| 0x06      | REG_APPLIED     | R      | pattern words applied by the TPG in the last test                        |
| 0x07      | REG_MISMATCH    | R      | responses found wrong by the TRA in the last test                        |
| 0x08      | REG_BUF         | W      | operand into the input buffer                                            |
| 0x80-0xBF | REG_RES_BASE+i  | R      | result memory word i                                                     |

## Bus protocol

All bus signals are the packed structs `bus_req_t` (`req`, `we`, `blen[3:0]`,
`addr[15:0]`, `wdata[31:0]`) and `bus_rsp_t` (`ready`, `rdata[31:0]`) from
`ft_pkg`.
Addresses count 32-bit words.

- A master raises `req` and holds the request unchanged until it sees a
  one-cycle `ready`. It may drop or change the request after that edge.
- On a read, `rdata` is valid in the `ready` cycle.
- The interconnect grants one master per transaction, round robin, which costs
  one cycle.
- Memory and registers answer one cycle after they see the request. A memory
  access therefore takes three cycles through the bus.
- A read with `blen` = k is a burst of k+1 words from consecutive addresses.
  The slave sends one `ready` pulse per word. The master holds the request
  until the last pulse. The interconnect keeps the grant until that last
  pulse. The on-chip memory gives the words in back-to-back cycles, so a
  16-word burst takes 18 cycles through the bus. Writes are single words
  (`blen` = 0). The module slave windows accept only single transfers.

Assertions in `bus_interconnect` and `hcu` check that masters hold their
requests.

## The two IP cores

**`sort_ip`** is purely combinational. It sorts the four unsigned bytes of a
32-bit word ascending, with the smallest byte in bits 7:0. It uses a
four-stage odd-even transposition network. The result appears in the same
cycle as the operand.

**`idct_ip`** computes the 8x8 inverse DCT of MPEG-2 in three phases:

1. **Load** (64 cycles): the 64 coefficients, row-major and signed 12-bit.
2. **Row pass** (64 cycles): eight multiply-adds per cycle, giving
   `t[v][x] = (sum_u K[u][x]*F[v][u] + 2^9) >> 10`.
3. **Column pass** (64 cycles): `f[y][x] = clip((sum_v K[v][y]*t[v][x] + 2^15) >> 16)`,
   one sample per cycle, written straight to the output.

The kernel is `K[u][x] = round(4096 * C(u) * cos((2x+1)u*pi/16))`, with
`C(0) = 1/sqrt(2)` and `C(u>0) = 1`. Only eight magnitudes occur; the RTL
stores them and derives the sign from `u*(2x+1) mod 32`. Outputs are clipped
to -256..255 and sign-extended to 32 bits.

A block takes 192 cycles when the output is not stalled. The first sample
appears 65 cycles after the last coefficient is accepted. On random MPEG-like
blocks the result is within +-1 of the exact real-valued IDCT. It has not been
checked against the IEEE 1180 accuracy test.

## What follows the source architecture and what is this design's own

**Follows the architecture:**

- The partition into IP core, BUFFER, MUX, DMUX, a BIST core of TPG, TRA and
  BIST control, and a hardware control unit with a result memory, connected as
  in its module diagram.
- Test patterns and correct results are fetched from memory by DMA, with
  burst transfers and data prefetch. Patterns are stored in priority order and
  N is programmable.
- A BIST request from the processor; an ack and a one-bit fault flag back to
  it.
- On-chip pattern storage for one pattern only.
- The test sizes: N = 4 sort patterns, and N = 4 x 64 words (4 IDCT blocks).
- A sorting core as the combinational example and an IDCT as the sequential
  one.

**This design's own choices** (the architecture is silent on them):

- All widths and depths, the register map, the table layout and the bus
  protocol.
- The sorting network and its 4 x 8-bit format.
- The IDCT's fixed-point arithmetic and schedule.
- Round-robin arbitration.

**Departures and omissions:**

- The architecture evaluates a 100 MHz AMBA bus with burst transfers. Here the
  bus is a simpler request/ready bus with read bursts. It has none of AMBA's
  address/data pipelining, write bursts or split transfers.
- Processors are not included. `ft_soc` exposes one processor bus port;
  further processors would be more masters on `bus_interconnect`.
- The software side is not hardware: choosing the fault-tolerance method, the
  software fallback on spare cores, and lowering the MPEG-2 frame size after a
  fault.
- Gate-level fault injection and fault-coverage measurement are analysis
  steps, not hardware. The testbenches inject faults by forcing a core output
  bit.
- A core that hangs (stops producing responses) hangs the test, because there
  is no timeout. The architecture relies on the processor's own estimate of
  the test time.

## Files

| File                                   | Contents                                                          |
|----------------------------------------|-------------------------------------------------------------------|
| `rtl/ft_pkg.sv`                        | bus structs, enums, register map, words per pattern               |
| `rtl/ft_soc.sv`                        | top level                                                         |
| `rtl/bus_interconnect.sv`              | shared bus                                                        |
| `rtl/onchip_mem.sv`                    | RAM                                                               |
| `rtl/ft_module.sv`                     | one fault-tolerant module                                         |
| `rtl/hcu.sv`                           | hardware control unit, burst DMA with prefetch, result memory     |
| `rtl/bist_core.sv`                     | BIST core, built from `bist_tpg.sv`, `bist_tra.sv`, `bist_ctrl.sv` |
| `rtl/ip_buffer.sv`                     | FIFO: input buffer, DMA prefetch, and inside the TPG and TRA      |
| `rtl/ip_mux.sv`, `rtl/ip_dmux.sv`      | mode switches around the core                                     |
| `rtl/sort_ip.sv`, `rtl/idct_ip.sv`     | the two accelerators                                              |
| `tb/tb_<module>.sv`                    | one self-checking testbench per module                            |
| `tb/tb_ref_pkg.sv`                     | reference models shared by the system testbenches                 |
| `tb/tb_idct_coverage.sv`               | stuck-at fault campaign: self-test coverage for 1, 2 and 3 blocks |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
Each has a watchdog that counts a failure if the test hangs. To run one with
Verilator 5, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ft_pkg.sv tb/tb_ref_pkg.sv tb/tb_ft_soc.sv --top-module tb_ft_soc
./obj_dir/Vtb_ft_soc
```

For any other testbench, replace `tb_ft_soc` with its name (`tb_idct_ip`,
`tb_hcu`, ...). `tb_ref_pkg.sv` is needed only by `tb_ft_module`,
`tb_ft_soc` and `tb_idct_coverage`.

`tb_ft_soc` runs the whole system at its default sizes and takes well under a
second. It does the following:

1. Loads both pattern tables through the processor port.
2. Starts both tests at once while the processor keeps reading memory.
3. Uses both accelerators and checks their results against reference models.
4. Fills the sorting module's result memory.
5. Forces a stuck-at fault into each core. It checks that both tests report a
   fault and that the software path is taken.
6. Releases the faults, tests again and uses the hardware again.

It counts each of these events and fails if any never happens.

`tb_ft_module` does the same for one IDCT module, including filling its input
buffer. The unit testbenches check each block against models written
independently of the RTL:

- `tb_idct_ip` computes its IDCT kernel from `$cos`.
- `tb_sort_ip` uses a selection sort.
- `tb_ip_buffer` uses a queue model.

## How many faults does the self-test find?

The self-test applies only a few stored patterns, so it cannot find every
fault. Its coverage grows with N. `tb_idct_coverage` measures this for the
IDCT module. It forces 30 single stuck-at faults, one at a time, on bits of
the core's datapath: the row and column rounding sums, the intermediate
values and the clipped output. The sites were picked at random once and are
fixed in the testbench. The table holds three blocks in priority order: a flat
DC block, a block of small random coefficients and a block shaped like MPEG-2
data.

| Blocks applied (N/64) | Faults found | Coverage |
|-----------------------|--------------|----------|
| 1                     | 14 of 30     | 46%      |
| 2                     | 24 of 30     | 80%      |
| 3                     | 24 of 30     | 80%      |

For gate-level faults, the source architecture reports 63%, 83% and 87% for
the same three block counts. Faults at RTL signals are a different fault
model, so only the trend can be compared. All six faults never found sit on
low bits of the rounding sums, which the following shift discards. They
cannot change any output, so no pattern can find them. Every fault that can
change an output is found with two blocks.

