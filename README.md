# PWrapper: a PCI Express endpoint with plain FIFO ports

PWrapper lets user logic in an FPGA use a PCI Express link without knowing the
transaction-layer interface of the vendor's endpoint core. Each user module gets its own
dual-clock FIFO. An RX FIFO delivers whole transaction layer packets (TLPs) addressed to that
module. A TX FIFO takes whole TLPs that the module wants to send. The wrapper runs in the
core's transaction clock (`trn_clk`). It does two jobs:

* it **distributes** received TLPs to the right RX FIFO by their destination address;
* it **schedules** TLPs from the TX FIFOs onto the single transmit interface of the core.

A small configuration/interrupt block sits beside them. It exposes the core's configuration
state to the user modules and shares the core's single interrupt request among them.

The design targets the Xilinx Virtex-5 "Endpoint Block Plus" core. That core has a 64-bit
TRN interface with active-low control signals and one lane at 2.5 GT/s. The target board is
an ML507. The original design reached more than 1.8 Gbit/s between two boards.

```
                 user side (own clocks)             trn_clk              endpoint core
             +-----------------------------------------------------+
 rx_dout[0] <|  RX FIFO 0 <-+                                      |
 rx_dout[1] <|  RX FIFO 1 <-+-- rx_handler (IDLE/DISPATCH/DISCARD) <|=== trn_r*  (receive)
     ...     |     ...    <-+                                      |
 tx_din[0]  >|  TX FIFO 0 --+                                      |
 tx_din[1]  >|  TX FIFO 1 --+-- tx_scheduler (Judging FSM + TX FSM)|===> trn_t* (transmit)
     ...     |     ...    --+                                      |
 cfg reads  <|  cfg_module  ----------------------------------------|<==> cfg_*
 irq_req    >|  intr_arb    ----------------------------------------|===> cfg_interrupt_*
             +-----------------------------------------------------+
```

## The FIFO word and the "whole packet" rule

Every FIFO in the design is 67 bits wide and holds one quad word (QW, 64 bits) per entry.
Each entry also carries three flags (`pwr_pkg::fifo_word_t`):

| field  | bits  | meaning |
|--------|-------|---------|
| `sof`  | 66    | first QW of a TLP |
| `eof`  | 65    | last QW of a TLP |
| `half` | 64    | last QW carries only its upper DW (`data[63:32]`) |
| `data` | 63:0  | the QW in the core's byte order: first DW in bits 63:32 |

A TLP is stored exactly as it appears on the TRN bus. The header comes first, in 2 QWs: a
3-DW header plus its first data DW, or a 4-DW header. The payload follows.
`pwr_pkg::tlp_qwords()` computes the number of QWs from the first header DW:
`ceil((hdr_dws + payload_dws) / 2)`, where `hdr_dws` is 3 or 4. Both sides of the wrapper
use this function. It is also how a user module can tell how long the packet at the head of
its FIFO is.

Two rules make the FIFOs safe to use without a per-word handshake.

1. **Nothing is started that cannot be finished.**
   * The RX handler writes a TLP into a FIFO only after `DEPTH - wr_data_count` shows room
     for all of it.
   * The TX scheduler starts a TLP only after `rd_data_count` shows all of it is already in
     the FIFO.
   * So inside a packet, neither side ever meets a full or empty FIFO. The FSMs never need
     to back off.

   The cost is one wait at the start of each packet. Because of this rule, **every FIFO
   must hold at least the largest TLP** the link will carry. A larger TLP would wait
   forever. At the default 512 entries, 4 KB of payload fits.
2. **Markers allow recovery.** The `sof`/`eof` flags limit damage to a single packet. If a
   TX FIFO holds a word without `sof` at its head while nothing is being sent, the
   scheduler drops that word. It keeps dropping until a start marker appears. This happens
   when a writer was reset mid-packet or wrote garbage. A TLP aborted by the core
   (`trn_rsrc_dsc_n`) leaves an RX FIFO with a packet that has no `eof`. The reader
   resynchronises on the next `sof`.

User modules follow the same rules on their side of a FIFO:
* a **writer** should check `wr_data_count` (or `full`) before it starts a TLP;
* a **reader** sees the head word at once (first-word fall-through) and can decode the
  header before it pops.

`wr_ack`, `valid`, `overflow` and `underflow` are present for modules that prefer to check
each word.

## The FIFO (`async_fifo`)

* Dual-clock, with the usual Gray-coded read and write pointers. Each pointer crosses to the
  other clock through two flip-flops.
* Depth is `2**ADDR_W` (512 by default).
* `wr_data_count` and `rd_data_count` are `ADDR_W+1` bits wide, so a full FIFO reads as
  512. Each count is exact in its own clock domain. It may lag behind the other side by
  about 3 clocks of the counting clock, and it always errs on the safe side: a writer sees
  fewer free entries, and a reader sees fewer stored words.
* The output is first-word fall-through. `dout` is the memory entry at the read pointer,
  read combinationally, so it is valid whenever `empty` is low. On an FPGA this maps to
  distributed RAM or a block RAM with an output register in front of it.
* A write to a full FIFO or a read from an empty one is ignored. It is reported one clock
  later on `overflow` or `underflow`.
* Each side has its own active-low asynchronous reset. Assert both together.

## Receiving: the RX handler

`rx_handler` is one one-hot FSM with three states. It drives the receive side of the core.

```
IDLE      take beat 1 (sof) and beat 2 of the TLP into qw0/qw1
          decode: legal?  -> wait for FIFO room -> DISPATCH
                  illegal -> DISCARD
DISPATCH  write qw0 (sof), qw1, then stream the remaining beats; eof -> IDLE
DISCARD   accept and drop beats up to eof -> IDLE
```

**Routing.** The destination is decided from the header in the two buffered QWs:

| TLP | condition | destination |
|---|---|---|
| memory read or write | hit BAR0 (`trn_rbar_hit_n[0] == 0`) and `addr[ROUTE_LSB +: log2(N_FIFO)] < N_FIFO` | RX FIFO given by those address bits |
| completion (`Cpl`, `CplD`) | – | RX FIFO `CPL_FIFO` (last FIFO by default) |
| anything else: I/O, configuration, messages, BAR1+ hits, unmapped windows | – | discarded |

With the defaults, each FIFO owns a 4 KB window of BAR0. `addr` is the DW-aligned address
from the header: bits 31:2 for a 3-DW header, and the low DW of a 4-DW header.

**Flow control.**
* While a legal TLP waits for room, `trn_rdst_rdy_n` stays high and the core holds the
  packet. The core calls this data-path throttling; the `stall` output is high during the
  wait.
* `trn_rdst_rdy_n` comes from state registers only, with no combinational path from the
  core's inputs.
* The handler takes whatever the core offers. A beat is taken when `trn_rsrc_rdy_n` and
  `trn_rdst_rdy_n` are both low.
* `trn_rnp_ok_n` is held low, so non-posted requests are always accepted.

**Timing.** With room in the FIFO and no pauses from the core, a TLP of N QWs takes
**N + 3 clocks**:
* 2 header beats;
* 1 clock to decide;
* 2 clocks that write the buffered header while the interface pauses;
* N − 2 streamed beats.

Back-to-back TLPs are accepted: the next `sof` is taken on the clock after `eof`. For
128-byte writes (N = 18) this is 1024 bits per 21 clocks, or 3.05 Gbit/s of payload at
62.5 MHz. That is more than a one-lane link can deliver.

`rx_module` is the handler plus `N_FIFO` FIFOs. Each FIFO has its own user clock and reset.

## Transmitting: the TX scheduler

`tx_scheduler` has two one-hot FSMs that talk through a `send`/`done` handshake.

* **Judging FSM (IDLE, TRANSMIT).** In IDLE it checks each FIFO every clock. A FIFO is
  *ready* when all three of these hold:
  * its head word has `sof`;
  * `rd_data_count >= tlp_qwords(head)`;
  * the core reports buffer space for the TLP's class:
    * `trn_tbuf_av[0]` for non-posted;
    * `trn_tbuf_av[1]` for posted (memory writes, messages);
    * `trn_tbuf_av[2]` for completions.

  The lowest-numbered ready FIFO wins (fixed priority). The FSM registers that FIFO,
  raises `send` and waits in TRANSMIT until `done`. In IDLE it also drops a head word that
  lacks `sof`, as described above.
* **TX FSM (IDLE, SEND).** On `send` it streams the chosen FIFO onto `trn_td`:
  * `trn_tsof_n` is low on the first word and `trn_teof_n` on the word marked `eof`;
  * `trn_trem_n` is `8'h0F` for a `half` word and `8'h00` otherwise;
  * a word is popped on each clock where the core has `trn_tdst_rdy_n` low;
  * `trn_tsrc_rdy_n` stays low for the whole packet;
  * at `eof` it pulses `done`.

  `trn_tsrc_dsc_n` is held high; the wrapper never aborts a packet.

**Timing.** A TLP of N QWs takes N + 3 clocks from one decision to the next: decide, pick up
`send`, N beats, and `done` returning. That is again 3.05 Gbit/s for 128-byte writes. The
class check means a completion can overtake a posted write when the core has no room for
posted TLPs. This is how the scheduler avoids blocking on one class.

`tx_module` is the scheduler plus `N_FIFO` FIFOs written by the users in their own clocks.

## Configuration and interrupts (`conf_intr`)

* **`cfg_module`**
  * Decodes the core's configuration outputs into:
    * the completer ID `{bus, device, function}`;
    * bus-master enable (`cfg_command[2]`);
    * max payload size and max read request size in bytes, `128 << code`, taken from
      `cfg_dcommand[7:5]` and `[14:12]`. Reserved codes read as 4096.
  * Offers one configuration-space read port. The user raises `rd_req` with a DW address.
    The module drives `cfg_dwaddr`/`cfg_rd_en_n` and waits for `cfg_rd_wr_done_n`. It
    returns `cfg_do` with a one-clock `rd_valid`. `rd_busy` is high from request to
    result.
  * Passes the user's `usr_trn_pending` to `cfg_trn_pending_n`.
* **`intr_arb`**
  * Shares the core's MSI request among `N_IRQ` user sources. Each source holds `irq_req`
    until it gets a one-clock `irq_ack`.
  * The arbiter grants in round-robin order. It drives `cfg_interrupt_n` low with
    `cfg_interrupt_di = VECTOR_BASE + source` until the core answers with
    `cfg_interrupt_rdy_n`, then acknowledges the source.
  * Legacy INTx assert/deassert messages are not generated.

## The board top and its test module

`pwrapper` wires `rx_module`, `tx_module` and `conf_intr` to the core's TRN and
configuration ports. Its user side is arrays of FIFO ports.

`pwrapper_board` is the top level. It adds `test_module` on RX FIFO 0 and TX FIFO 0, in its
own clock `test_clk`. It brings out the other FIFOs, with index 0 of each port array being
FIFO 1. The test module does two things:

* **On a memory write** it copies bits 7:0 of the first payload DW to the 8 LEDs. That is
  bits 7:0 of QW 1 for a 3-DW header, and bits 39:32 of QW 2 for a 4-DW header.
* **On a memory read** it returns a one-DW completion with data (CplD), once its TX FIFO
  has room for the 2 QWs. The completion carries:
  * the requester ID, tag, traffic class and attributes of the request;
  * status "successful", byte count 4, and lower address `{addr[6:2], 2'b00}`;
  * data `{24'h0, switches}`.

  A read of more than one DW still gets one DW.
* Any other TLP is skipped.

`completer_id` enters `test_clk` without a synchroniser. It changes only during
enumeration.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `N_RX`, `N_TX` (`N_FIFO`) | 4, 4 | pwrapper, board, rx/tx modules | number of user FIFOs per direction |
| `ADDR_W` | 9 | all | FIFO depth `2**ADDR_W` QWs |
| `ROUTE_LSB` | 12 | rx side | BAR0 window size per RX FIFO, `2**ROUTE_LSB` bytes |
| `CPL_FIFO` | `N_RX-1` | rx side | RX FIFO that receives completions |
| `N_IRQ` | 4 | conf_intr | interrupt sources |
| `VECTOR_BASE` | 0 | intr_arb | MSI vector of source 0 |

The original design used four TX FIFOs. Every other value here is this design's own choice.

## How far it follows the original design

**Taken from the original:**
* the partition into RX module, TX module and configuration/interrupt module;
* FIFO-only user interfaces with separate clock domains;
* the RX FSM states, including reading two QWs to find the destination and discarding
  unroutable TLPs;
* the TX side's Judging and TX FSMs with their handshake;
* the rule to start a packet only when it fits or is complete, using FIFO data counts and
  first-word fall-through;
* start/end markers stored with the data;
* one-hot FSMs and reset values for every register;
* the test function: LEDs on writes, switches on reads;
* four TX FIFOs.

**This design's own choices:**
* the address-to-FIFO routing rule and the completion FIFO;
* FIFO depth and width;
* fixed priority with FIFO 0 first;
* using `trn_tbuf_av` as the extra scheduling condition;
* the whole configuration and interrupt block, of which the original gives only the names;
* the completion format of the test module.

**Not built:**
* a FIFO that converts data width (all FIFOs are 64+3 bits on both sides);
* a separate FIFO that keeps unroutable TLPs for later processing (they are always dropped);
* CRC over FIFO contents;
* legacy interrupts;
* configuration writes.

The FIFOs are written here from scratch and are not vendor FIFO cores.

The endpoint core, the PCIe hard block and the host are not part of this RTL. Their
signals are the ports of `pwrapper_board`, and the testbenches model them.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<m>`. `tb/tlp_gen_pkg.sv` builds TLPs (memory read/write
with 3- and 4-DW headers, completions, I/O writes) for the testbenches. The RX and TX tests
check the N + 3 cycle timing.

| testbench | what it exercises |
|---|---|
| `tb_async_fifo` | two unrelated clocks, random push/pop, counts, flags, overflow/underflow |
| `tb_rx_handler` | routing, discard, wait for room, back-to-back, core pauses, core aborts (source discontinue), N+3 timing |
| `tb_rx_module` | all four FIFOs with their own clocks, random packets and readers |
| `tb_tx_scheduler` | priority, complete-packet rule, `trn_tbuf_av` classes, core throttling, resync, N+3 timing |
| `tb_tx_module` | four user writers in different clocks, packet integrity on the TRN side |
| `tb_cfg_module`, `tb_intr_arb`, `tb_conf_intr` | decoding, read handshake, round-robin MSI |
| `tb_test_module` | LED and completion behaviour for 3- and 4-DW headers |
| `tb_pwrapper` | the wrapper with user models on all FIFOs |
| `tb_pwrapper_board` | the top at default sizes, end to end |

`tb_pwrapper_board` runs the top with every parameter at its default and a 62.5 MHz
`trn_clk` (16 ns). It covers these cases:
* writes 0xFF and 0xA5 to the LEDs;
* reads the switches;
* sends TLPs that must be dropped;
* fills an RX FIFO until the handler must stall the core;
* streams back-to-back 128-byte writes in both directions while the core throttles;
* lets a completion overtake blocked posted writes;
* plants a damaged word for the resync logic;
* raises interrupts and reads configuration space.

It counts each of these mechanisms and fails if any of them never happens. It measures
3.05 Gbit/s of payload in each direction. It passes with about 8,800 checks in 240 µs of
simulated time.

Each testbench has also been run against a copy of its module with one deliberate bug.
Every one of those runs failed.

**Limits of this verification:**
* everything was checked in simulation against models of the core written from its
  documented signal behaviour, not against the vendor core itself;
* nothing has been run on hardware;
* the 128-byte payload size in the rate test is an assumption, since the original
  measurement does not state its TLP size.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_pwrapper_board -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/pwr_pkg.sv tb/tlp_gen_pkg.sv tb/tb_pwrapper_board.sv
./obj_dir/Vtb_pwrapper_board
```

Use any other `tb_*` name in place of `tb_pwrapper_board` to run another testbench.
Packages are listed first; Verilator finds the other modules through `-y`. The simulator
starts registers at random values, so every register that is read has a reset.
`--x-assign unique` is a good way to confirm that.

To change a size, override the parameter on `pwrapper_board` or `pwrapper`. Keep
`2**ADDR_W` at least as large as the largest TLP, in QWs, that the host may send. A larger
`N_RX` needs BAR0 to be at least `N_RX << ROUTE_LSB` bytes.
