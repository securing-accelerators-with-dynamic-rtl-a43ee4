# Tag tracking through an accelerator: a DIFT shell for an image-obfuscation SoC

Dynamic information flow tracking (DIFT) attaches a *tag* to every piece of
data and lets the tag follow the data: a processor that tracks tags can
refuse to send tagged (sensitive) data to an output. That protection only
holds if every component that moves data also moves tags. An accelerator
that reads tagged data and writes back its results without tags "launders"
the data: the results look non-sensitive to the rest of the system, whatever
they contain.

This RTL shows the problem and the fix on a small system-on-chip. An
accelerator blurs a rectangular region of an image (a face, in a patient
monitoring camera). The pixels of the face are tagged sensitive. The security
policy says that nothing the program outputs may be sensitive; blurring a
pixel makes it non-sensitive. An attacker who can change the accelerator's
configuration shrinks or moves the blurred rectangle, so that part of the
face comes out unblurred. Without protection the accelerator writes those
raw pixels with tag 0 and the leak goes unnoticed. The *DIFT shell* wraps
the accelerator, which itself stays unchanged and knows nothing about tags.
The shell gives every pixel the accelerator writes its proper tag and
refuses, with an exception, any write that would put a sensitive pixel into
the output.

## Contents

| file | role |
|---|---|
| `rtl/dift_pkg.sv` | shared types (tagged AXI and APB structs), address map, register offsets |
| `rtl/dift_soc.sv` | top level: interconnects, memories, shell with accelerator |
| `rtl/axi_interconnect.sv` | 3-master, 3-slave tagged AXI4 interconnect |
| `rtl/axi_to_mem.sv` | AXI4 slave front end for a synchronous SRAM |
| `rtl/data_ram.sv` | 32 KB data RAM with one tag bit per byte (36 KB in total) |
| `rtl/instr_ram.sv` | 32 KB instruction RAM, no tags, separate fetch port |
| `rtl/apb_interconnect.sv` | AXI4-to-APB bridge with slot decoder |
| `rtl/dift_shell.sv` | the DIFT shell; it instantiates the accelerator |
| `rtl/obfuscator.sv` | the blur accelerator |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_dift_soc` end to end |
| `tb/axi_master_bfm.sv`, `tb/apb_master_bfm.sv`, `tb/axi_mem_model.sv` | bus drivers and a stalling tagged memory model for the testbenches |

## Tags: one bit per byte, everywhere

The SoC uses a *coupled* tag scheme: a tag is stored at the same address as
its data, in the same memory word, and travels in the same bus beat. Each
byte has one tag bit, and 1 means sensitive. A pixel is one byte, so every
pixel has its own tag. For 32 KB of data RAM this adds 4 KB of tag storage,
36 KB in all, a 12.5 % overhead. `data_ram` stores `{tag, byte}` for each of
the four byte lanes of a word. A byte-enabled write updates a byte and its
tag together.

On the bus, the four tag bits of a 32-bit word are user bits on the AXI W
channel (`w_tag`) and R channel (`r_tag`). Because the tags move in the same
beat as the data, tracking costs no bus cycles. Parts of the system that do
not track tags behave as follows:

* the instruction RAM drops written tags and returns tag 0;
* the APB register space returns tag 0;
* the accelerator drives `w_tag = 0` and ignores `r_tag`.

## The system

```
            host (ARM)     core data port     DIFT shell ─┬─ obfuscator
                 │               │                 │       │  (AXI master)
                 └───────────────┼─────────────────┘       │
                      axi_interconnect (tagged)            │ APB registers
             ┌───────────────┬───┴───────────┐             │
        instr_ram        data_ram     apb_interconnect ────┘
     (+ fetch port)    (data + tags)    (AXI→APB)
```

The masters are the host port (0), the core's data port (1) and the shell
(2). The host port is where the ARM processing system loads the program and
the image. The slaves are decoded as follows:

| base | size | slave |
|---|---|---|
| `0x0000_0000` | 32 KB | instruction RAM |
| `0x0010_0000` | 32 KB (+4 KB tags) | data RAM |
| `0x1A10_0000` | 4 KB slot 0 | accelerator and shell registers (APB) |

Any other address gets DECERR.

The processor core is not part of the RTL. `dift_soc` brings out its data
port, a tagged AXI master, and its instruction-fetch port. The core is
expected to propagate tags itself and to take `irq_dift`, the shell's
exception, and `irq_acc_done`, the end of a run. The `dift_en` pin selects
whether the shell protects the accelerator (1) or is transparent (0, an
unprotected accelerator).

### Bus conventions

The interconnect uses a single-beat subset of AXI4: five valid/ready
channels, 32-bit data, and no bursts, IDs or sizes. The structs
`axi_req_t`/`axi_rsp_t` in `dift_pkg` carry a whole port.

`axi_interconnect` has separate write (AW/W/B) and read (AR/R) paths, so one
read and one write can be in flight together. Each path:

1. picks a requesting master round-robin;
2. registers the grant and the decoded slave, which takes one cycle;
3. routes the request and its response combinationally;
4. frees the path on the B or R handshake.

Memory slaves accept AW and W in the same cycle. They answer B one cycle
after the handshake, and deliver R one cycle after the AR handshake. The APB
bridge runs one APB3 transfer per AXI transfer. With a zero-wait APB slave,
its response is valid three cycles after the handshake. Assertions in the
interconnect check that a master holds a valid request, unchanged, until it
is accepted.

## The obfuscator accelerator

The image is `IMG_W x IMG_H` 8-bit pixels stored row by row (default
128 x 96). The patch is rows `[i_row_blur, e_row_blur)` and columns
`[i_col_blur, e_col_blur)`. Inside the patch, an output pixel is the mean,
rounded down, of the 3x3 neighbourhood of the input pixel; border pixels are
repeated at the image edges. Outside the patch it is a copy of the input
pixel.

Registers (APB, byte offsets in slot 0):

| offset | name | meaning |
|---|---|---|
| 0x00 | CTRL | write bit 0 = 1 to start |
| 0x04 | STATUS | bit 0 busy, bit 1 done (since last start) |
| 0x08 | SRC | byte address of the input image |
| 0x0C | DST | byte address of the output image |
| 0x10..0x1C | I_ROW, E_ROW, I_COL, E_COL | patch bounds, 16 bits each |

Register writes are ignored while a run is in progress.

The accelerator produces one output row at a time. For a row inside the
patch's row range it first reads input rows r-1, r and r+1 (clamped to the
image) into three line buffers; for other rows it reads row r only. It then
writes the output row one word (4 pixels) at a time. Each word is computed
in one cycle from three neighbouring words of each line buffer. Each
transfer is a single AXI beat, one at a time. A run therefore makes
`(IMG_H + 2·P)·IMG_W/4` reads and `IMG_H·IMG_W/4` writes, where `P` is the
number of patch rows; the testbench checks these counts.

## The DIFT shell

The shell is the heart of the design. It sits on both ports of the
accelerator and does four jobs. None of them needs any change inside the
accelerator.

**1. Knowing what the accelerator will do.** APB accesses below offset
0x40 go to the accelerator. The shell watches the same register writes, with
the same "ignored while running" rule. It keeps its own copy of SRC, DST and
the four patch bounds, and knows when a run starts and ends. Offsets 0x40
and up are the shell's own registers:

| offset | name | meaning |
|---|---|---|
| 0x40 | SHELL_CTRL | bit 0: state of the `dift_en` pin (read only) |
| 0x44 | SHELL_STATUS | bit 0: violation; write 1 to clear |
| 0x48 | SHELL_VADDR | address of the first blocked write since the last clear |

**2. Collecting input tags.** Every word the accelerator reads from its
input image comes back with four tag bits. The shell turns the read address
into a (row, column) pair relative to SRC. It stores the tags in a
three-row tag buffer, with row y in slot y mod 3, and records which row each
slot holds. Three rows are enough because the accelerator never needs more
than rows r-1, r and r+1 at once. The buffer is cleared at the end of each
run.

**3. Computing output tags.** When the accelerator writes a word, the shell
turns the address into (row, column) relative to DST and gives each of the
four pixels a tag:

* inside the configured patch → 0 (the blur declassifies);
* outside → the tag of the same pixel of the input (a copy keeps its tag),
  looked up in the tag buffer;
* input tag not in the buffer, or a write outside the output image →
  1 (treated as sensitive).

**4. Checking the policy.** If any of the four tags is 1, the write would
put a sensitive pixel in the output. The shell then does the following:

* It does not pass the write on. It answers the accelerator itself with
  SLVERR, and the accelerator carries on.
* It sets the violation flag, which drives the level interrupt `irq_viol` (`irq_dift` at the top level)
  until software clears it.
* If the flag was clear, it records the write's address.

Writes that pass the check go out with their computed tags. Under this
policy those tags are always 0.

Put together: with the real face as the patch, every face pixel is blurred
and every output tag is 0. When an attack shrinks or moves the patch, every
output word that holds an unblurred face pixel is stopped before it reaches
memory. The testbench checks that the memory there keeps its old contents.

**Timing.** The tag lookup and the check are combinational between the
accelerator's request and the interconnect. The shell adds no cycle to any
transfer. The testbench runs the same image with `dift_en` 1 and 0 and
requires identical cycle counts (17 503 cycles at 128 x 96 with a memory
that never stalls).

**Cost.** At the default size, the shell has about 660 flip-flops beside the
accelerator's. Of these, 384 are the tag buffer, 51 record which row each slot holds, and about 220 are the copied
configuration and the address registers. That is in line with the roughly
700 flip-flops reported for the original shell.

**What it relies on.**

* The accelerator reads a whole input row before writing any output pixel
  that copies from it. This is true of the obfuscator's row schedule.
* A slot's row number is updated on every read into it.
* The shell's idea of the patch comes from the same register writes the
  accelerator sees, so the two agree.
* Protection is a pin, not a register, so software cannot switch it off.

## Where this RTL departs from, or goes beyond, the original design

The original work describes the system at block level: the blocks, the
tagging scheme, the memory sizes, the accelerator's function and registers,
and the shell's job. The following are this implementation's own choices:

* the 3x3 box-mean blur;
* half-open patch bounds;
* the 128 x 96 grayscale image size;
* the register layout;
* the accelerator's row schedule and line buffers;
* the shell's snooping of the registers, its three-row tag buffer, and
  blocking a violating write with SLVERR;
* the single-beat AXI subset, the round-robin interconnect and the APB slot
  decoder;
* the PULPino-style address map and the 32 KB instruction RAM.

The original accelerator was produced by high-level synthesis, and its
internal structure is not known; this one is a hand-written equivalent of
its function. The original shell was generated by a methodology for
arbitrary accelerators; this shell is written for this one accelerator. The
processor core, the ARM host and its DRAM are outside this RTL.

## Verification

Each testbench is self-checking and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_data_ram` | random byte-enabled writes with tags against a reference model; B and R latency of one cycle; both ends of the array |
| `tb_instr_ram` | program load, fetch-port read-back, partial writes, tags dropped |
| `tb_axi_interconnect` | three masters at once against three stalling memories: data, tags, DECERR that reaches no slave, arbitration |
| `tb_apb_interconnect` | routing by slot, wait states, PSLVERR→SLVERR, DECERR with no APB transfer, 3-cycle latency |
| `tb_obfuscator` | output against a reference blur for a middle patch, a full-image patch and an empty patch; STATUS, irq, ignored writes, read/write counts |
| `tb_dift_shell` | honest patch (no violation, tags 0); patch shrunk, and patch moved, by the attacker (exactly the expected words blocked, VADDR, flag clear); unprotected attack (raw pixels leak with tag 0); zero cycle overhead |
| `tb_dift_soc` | the whole SoC at default parameters, four scenarios: (1) blur in software over the core port; (2) accelerator with the honest patch; (3) attack, unprotected: leak; (4) attack, protected: blocked and exception. Counts arbitration stalls, DECERR, blurs, blocked writes, leaks, exceptions, done interrupts and mode switches, and fails if any never happened |

All of them pass. `tb_dift_soc` runs at the default sizes in a few seconds.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dift_pkg.sv tb/tb_dift_soc.sv --top-module tb_dift_soc
./obj_dir/Vtb_dift_soc
```

Replace `tb_dift_soc` with any other testbench name. The simulator is
two-state, so the testbenches initialise everything they read.

## Changing it

* `IMG_W` and `IMG_H` on `dift_soc` set the image size for both the
  accelerator and the shell. `IMG_W` must be a multiple of 4. The input and
  output images must fit in the data RAM, with the output at SRC + 0x4000 in
  the testbenches.
* `DRAM_BYTES` and `IRAM_BYTES` set the memory sizes. The interconnect masks
  follow from them.
* More APB peripherals: raise `NPS` on `apb_interconnect`; slot *n* is at
  `0x1A10_0000 + n·0x1000`.
* A different blur needs changes in `obfuscator` (`out_word`). It needs
  changes in `dift_shell` only if the set of declassified pixels changes.
