# A bare-metal RISC-V + NVDLA system-on-chip: interconnect RTL

## The idea

NVDLA is an open deep-learning inference accelerator. The host tells it what to do purely by writing
its configuration registers: layer shapes, buffer addresses in DRAM, a start bit. It then streams
weights and activations from memory itself and raises an interrupt when a layer group is finished.
Most systems drive it from Linux through a kernel driver. This SoC drops the operating system. A
small 32-bit RISC-V core runs straight-line code that is nothing more than the recorded register
traffic of one inference, replayed:

* every recorded register write becomes a store to the accelerator's address window;
* every recorded register read becomes a load, compared against the expected value or polled until
  it matches;
* every model weight sits in DRAM at the address the accelerator was told to use.

Inference therefore needs no driver, no OS and no custom instructions. The hardware must give the
core plain load/store access to the accelerator's registers and share one DRAM between the core and
the accelerator. That hardware is what this RTL describes.

```
            +-------------+
            | program mem |  (AHB-Lite, 1 MiB, zero wait)
            +------+------+
                   | instruction port
            +------+------+  data port (AHB-Lite 32)   +-----------------------------------------------+
            | RISC-V core |---------> sys_bus -------->| nvdla_wrapper                                 |
            |  (external) |<-- irq      | 0x0..0xFFFFF  |  ahb2apb_bridge -> apb2csb ---- CSB --------->|--> NVDLA core
            +-------------+             | 0x100000..    |  ahb2axi_bridge ---------------+              |    (external)
                                        | 0x200FFFFF    |  axi_dwidth_conv <-- DBB 64 ---|--------------|<-- 
                                        | else: ERROR   +--------------------------------|--------------+
                                                          AXI4 32 (core)  |  AXI4 32 (NVDLA)
                                                                   +------+------+
                                                                   | axi_arbiter |
                                                                   +------+------+
                                                                          | AXI4 32
                                                                     external DRAM
```

The core, the NVDLA core and the DRAM are outside this RTL. `soc_top` has their pins as ports:
`imem_*`/`dmem_*`/`irq` for the core, NVDLA's own CSB/DBB/`dla_intr` names for the accelerator, and
one 32-bit AXI4 master (`dram_req`/`dram_rsp`) for memory.

## Address map

| Range (data port)           | Size    | Goes to                                            |
|-----------------------------|---------|----------------------------------------------------|
| `0x0000_0000`–`0x000F_FFFF` | 1 MiB   | NVDLA configuration registers (AHB → APB → CSB)     |
| `0x0010_0000`–`0x200F_FFFF` | 512 MiB | DRAM (AHB → AXI4 → arbiter)                         |
| anything else               |         | default slave: two-cycle AHB ERROR                  |

Both ranges are the ones the original system used and are parameters of `sys_bus`. Addresses are
passed on unchanged. A DRAM access at `0x0010_0000` leaves the SoC with AXI address `0x0010_0000`,
and the memory controller behind the port maps the window. The NVDLA side uses byte address bits
[17:2] as the CSB word address, so register offsets are the byte offsets NVDLA documents.

The instruction port is separate. It sees only the program memory, which is read-only from the core
and is filled through a load port (`prog_load_en/addr/data`) while the core is held in reset.

## The register path: a store becomes a CSB write

This is the path that bare-metal control depends on, and it has the most protocol layers.

1. **`sys_bus`** decodes HADDR in the AHB address phase. It registers the choice, so the data-phase
   response comes from the right slave, and it multiplexes HRDATA/HREADY/HRESP back to the core.
   Only the core's data port masters this bus, so its arbitration reduces to always granting it.
2. **`ahb2apb_bridge`** captures the transfer and runs one APB SETUP cycle, which is also the AHB
   data phase in which HWDATA appears. It then holds ACCESS until PREADY. The core sees HREADY low
   for the whole APB access, and read data one cycle after PREADY. With no APB wait states an access
   occupies 3 data-phase cycles.
3. **`apb2csb`** raises `csb2nvdla_valid` once per ACCESS phase.
   * A write is *posted*: `nposted` is 0, and PREADY is given in the cycle CSB accepts the request.
   * A read is accepted the same way, and PREADY then waits for NVDLA's read return
     (`nvdla2csb_valid`), which has no back-pressure and carries the data straight to PRDATA.

   An assertion flags a read return that has no outstanding read.

So a register write costs the core about four bus cycles plus CSB back-pressure. A register read
costs that plus the accelerator's read latency. Polling a status register is an ordinary load in a
loop.

## The data path: two masters, one narrow DRAM port

NVDLA's data backbone (DBB) is a 64-bit AXI4 master. The DRAM port is 32 bits wide, and the core
must reach the same DRAM to place inputs and read results.

* **`axi_dwidth_conv`** turns every wide INCR burst of N beats into a 32-bit burst of RATIO·N beats
  at the same address, where RATIO = `SLV_W`/32 (2 for the 64-bit DBB). So `len' = RATIO·(len+1)-1`
  and `size' = 2`.
  * Each write beat is sent lowest 32 bits first, each slice with its share of the byte strobes.
    WLAST goes out on the last slice of the last beat.
  * RATIO read beats are packed back into one wide beat, and RRESP is the worst of them.
  * Read and write paths run independently, one burst each.
  * Only what NVDLA issues is supported: full-width beats at full-width-aligned addresses, and bursts
    no longer than 256/RATIO beats (128 at 64 bits). Assertions check this.
  * The wide width and its request/response types are parameters. The default is 64 bits (nv_small).
    Setting `SLV_W = 512` with `soc_pkg::axi512_req_t`/`axi512_rsp_t` gives the converter an nv_full
    DBB needs.
* **`ahb2axi_bridge`** turns each core load or store into a single-beat AXI4 transaction. Strobes
  come from HSIZE/HADDR. It holds HREADY low until R or B returns, and maps SLVERR/DECERR onto the
  AHB ERROR response. AHB bursts are carried as single transfers.
* **`axi_arbiter`** gives the DRAM port to one master for one *whole* transaction: the address, every
  data beat, then the response. The two masters' beats never interleave on the DRAM port. When both
  ask at once the grant alternates (round robin), and a master asking for both a read and a write
  gets the read first. Granting takes one idle cycle; after that all channels pass combinationally.
  The core's accesses are single beats, so under contention it waits at most one accelerator burst.

## Files

| File | Block |
|------|-------|
| `rtl/soc_pkg.sv` | address map, widths, AHB/APB/AXI struct types |
| `rtl/sys_bus.sv` | AHB-Lite decoder, response mux, default slave |
| `rtl/ahb2apb_bridge.sv` | AHB-Lite → APB3 |
| `rtl/apb2csb.sv` | APB3 → NVDLA CSB |
| `rtl/ahb2axi_bridge.sv` | AHB-Lite → AXI4 (core to DRAM) |
| `rtl/axi_dwidth_conv.sv` | AXI4 64 → 32 bit (NVDLA DBB to DRAM), wide side parameterised up to 512 |
| `rtl/axi_arbiter.sv` | 2:1 AXI4 arbiter for the DRAM port |
| `rtl/prog_mem.sv` | program memory with load port |
| `rtl/nvdla_wrapper.sv` | the four bridges around the accelerator |
| `rtl/soc_top.sv` | the SoC |

Each AHB/APB/AXI bundle is a packed struct from `soc_pkg`: request and response for each direction
(`ahb_m2s_t`/`ahb_s2m_t`, `apb_req_t`/`apb_rsp_t`, `axi32_req_t`/`axi32_rsp_t`,
`axi64_req_t`/`axi64_rsp_t`). AHB HSEL and the HREADY input are routed separately. Every module has a
single clock `clk` and an asynchronous active-low reset `rst_n`.

## Parameters

| Parameter | Default | Where |
|-----------|---------|-------|
| NVDLA window | `0x0`–`0xFFFFF` | `sys_bus` (`NVDLA_BASE_P`, `NVDLA_LAST_P`), as in the original system |
| DRAM window | `0x100000`–`0x200FFFFF` | `sys_bus` (`DRAM_BASE_P`, `DRAM_LAST_P`), as in the original system |
| Core bus / DRAM AXI data width | 32 | `soc_pkg`, as in the original system |
| DBB data width | 64 (nv_small); 512 for nv_full | `soc_top.DBB_W` (and types), default from `soc_pkg`, as in the original system |
| Program memory | 262144 words (1 MiB) | `soc_top.PROG_WORDS`, own choice |
| AXI ID width | 8 | `soc_pkg`, own choice |
| CSB address width | 16 | `soc_pkg`, own choice (NVDLA convention) |

The original system was also built with the larger NVDLA configuration (nv_full), whose DBB is 512
bits wide. `soc_top`, `nvdla_wrapper` and `axi_dwidth_conv` take that width as a parameter together
with the matching AXI4 struct types. For nv_full, set all three together:

```systemverilog
soc_top #(.DBB_W(512), .dbb_req_t(soc_pkg::axi512_req_t), .dbb_rsp_t(soc_pkg::axi512_rsp_t)) u_soc (...);
```

The converter and the wrapper are tested at 512 bits (16 narrow beats per wide beat). The full SoC is
only tested end to end at 64. Only the DBB width changes: the DRAM port stays 32 bits, so an nv_full
accelerator would be limited by it. nv_full is also too large for the reference FPGA.

## How far to trust it, and where it departs from the original

* **What the original system specifies**, and this RTL follows: the block structure (system bus with
  decoder, wrapper holding the bridges and width converter, an arbiter between the core and the
  accelerator on DRAM), the bus types and widths, the address map, and the interrupt wired straight
  from accelerator to core.
* **Own choices.** The original system used vendor and third-party IP for the bridges, the width
  converter and the CSB adapter, and does not describe their insides. All of them are written here
  independently and in their simplest correct form:
  * one outstanding transfer per bridge;
  * AHB bursts split into single transfers;
  * an arbiter that grants per transaction and alternates;
  * a program memory with a load port instead of an initialised block RAM;
  * an ERROR response for unmapped addresses.

  None of this is cycle-compatible with the original IP. The CSB adapter follows the CSB handshake as
  NVDLA defines it, but it is not NVDLA's adapter.
* **Clocking.** Descriptions of the original system give its clock both as 100 MHz and as 300 MHz.
  It also put a clock-converting interconnect between the SoC and DDR, outside the SoC. Inside the SoC
  there is one clock domain, and this RTL has no clock crossing.
* **Not included:** the RISC-V core, the NVDLA core, the DDR controller and anything of the FPGA
  test set-up. The synthesizable part is the glue between them.

## Simulation

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops itself through
a watchdog if something hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
          rtl/soc_pkg.sv tb/tb_soc_top.sv --top-module tb_soc_top
./obj_dir/Vtb_soc_top
```

| Testbench | What it shows |
|-----------|---------------|
| `tb_sys_bus` | every range boundary decoded to the right slave; ERROR above the DRAM window; pipelined transfers across slaves |
| `tb_ahb2apb_bridge` | APB SETUP/ACCESS rules, wait states, PSLVERR → ERROR, 3-cycle zero-wait access |
| `tb_apb2csb` | one CSB request per access, PADDR[17:2] addressing, posted writes, read completion on read return |
| `tb_ahb2axi_bridge` | byte/half/word strobes, pipelined order, single-beat AXI, SLVERR → ERROR |
| `tb_axi_dwidth_conv` | 64 ↔ 32 bit splitting and packing, strobes, doubled burst length, 2 cycles per wide beat |
| `tb_axi_dwidth_conv_nvfull` | the same checks with a 512-bit wide side: 16 slices per beat, 16× burst length, 16 cycles per beat |
| `tb_axi_arbiter` | data integrity with two masters, no interleaving, round-robin under contention |
| `tb_prog_mem` | load port, zero-wait fetch (one word per cycle), read-only AHB side, address wrap |
| `tb_nvdla_wrapper` | register, DRAM and DBB paths through the wrapper; interrupt |
| `tb_nvdla_wrapper_nvfull` | the same with a 512-bit DBB and a 512-bit stand-in accelerator |
| `tb_soc_top` | the whole SoC at its default size, see below |

`tb_soc_top` loads a program assembled in the testbench into the program memory and runs it on a
small RV32I instruction-set model of the core (`tb/rv32_model.sv`). The program is written the way
generated bare-metal code is:

1. store part of the input into DRAM;
2. read and check an ID register;
3. write the job registers and the start bit;
4. copy a DRAM block of its own while the accelerator works, so the arbiter sees contention;
5. touch an unmapped address;
6. WFI until the interrupt;
7. poll and clear the status register;
8. checksum the result.

The accelerator here is `tb/nvdla_model.sv`. It has **NVDLA's pins but not NVDLA's function**: a
DMA job that reads 64-bit words from DRAM, adds a constant to each 32-bit lane, writes them back and
interrupts. DRAM is `tb/axi_mem_model.sv`. The test checks the data against values computed
independently. It also counts each mechanism (CSB writes, CSB reads, DBB read and write bursts, core
DRAM accesses, arbiter contention, decode errors, interrupt wake-ups) and fails if any never occurs.

To run real NVDLA workloads, replace `nvdla_model` with the NVDLA release's `NV_nvdla` top. Connect
its CSB, DBB AXI (64-bit, nv_small) and interrupt pins to the same-named ports of `soc_top`. Replace
the program with code generated from a register trace of the network.
