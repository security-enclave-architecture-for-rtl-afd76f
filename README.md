# CITADEL: a security enclave that guards an SoC through its supply chain

A chip passes through several hands after fabrication: a test house, a packaging
house, the system integrator (OEM), the field, and perhaps a recall. At each
step someone could clone it, overproduce it, swap in a counterfeit part, or sell
a recycled die as new. CITADEL places a small, self-contained security
subsystem, the *enclave*, next to the host SoC. The enclave:

* gives the chip an identity that cannot be copied, built from physically
  unclonable function (PUF) cells spread through the host IPs;
* keeps every host IP functionally locked (its state machine obfuscated) until
  the enclave has checked that IP's PUF response and applied that IP's unlock key;
* controls the boot of the host, holding each host IP in reset until the IP
  has been authenticated;
* tracks the chip's lifecycle (test, OEM, deployment, recall, end of life).
  Each move needs a key. At end of life the enclave erases its secrets.

The enclave never lets host software reach its secrets. It talks to each host IP
only through a *security wrapper* built around that IP. The wrapper holds the
IP's PUF cells, a small buffer, a key-application engine, a reset gate and a
boundary-scan chain.

This repository is a synthesizable SystemVerilog model of that architecture.
It covers the enclave's bus fabric, memory, PUF control module, boot-control
interface, lifecycle controller and host-bus bridge. It also has four wrapped
host IPs. The enclave's processor, the AES-256, SHA-256 and Ethernet cores, and
the host CPU are third-party parts. They are not modelled. Their bus ports are
ports of the top level.

## Block structure

```
                    ce_req/ce_rsp (enclave RISC-V core, external)
                                 |
                  +--------------+---------------------------+
                  |   enclave AXI4-Lite interconnect (axil_xbar)  |
                  +--+------+------+------+-----+-----+-----+--+-+
                     |      |      |      |     |     |     |  |
                 memory   PCM   boot   lifecycle AES  SHA   Eth  bus_interface
                 64 KB          ctl    ctrl     (ports, external) |
                     ^      ^    |  |      |                      | host bus (AXI4-Lite)
                     +------+----|--|------+ purge at EOL         |
                                 |  +-- init_handoff, sys_access, |
                                 |      data_request/ack, irq     |
                                 | rst_gate[i]          +---------+---------+
                                 +--------------------->|  host axil_xbar    |
                                                        +-+-------+-------+-+
                                                          |       |       |
                                                    security_wrapper[0..N_IPS-1]
                                              (port map, buffer, SCM control, MeLPUF bank,
                                               key application, reset release, scan wrapper,
                                               obfuscated IP)
```

`citadel_top` has the following parameters. Their defaults are the sizes the
architecture was evaluated with.

| parameter | default | meaning |
|---|---|---|
| `N_IPS` | 4 | wrapped host IPs |
| `PUF_BITS` | 256 | MeLPUF cells per IP, i.e. signature width |
| `KEY_BITS` | 512 | obfuscation key per IP |
| `IN_W` | 32 | width of the IP's data input; the key goes in this many bits at a time |
| `MEM_BYTES` | 65536 | enclave memory |

Everything runs on one clock. `rst_n` resets the enclave and `host_rst_n` resets
the host side: the bridge's far side, the host interconnect and the wrappers.
All buses are AXI4-Lite. The request and response bundles are packed structs,
`axil_req_t` and `axil_rsp_t`, defined in `citadel_pkg`. One AXI4-Lite front end,
`axil_port_map`, serves every slave. It turns a write (address and data in the
same cycle) into a one-cycle `wr_en` with a response the next cycle. It turns a
read into a combinational register lookup, latched and returned the next cycle.
Assertions check that `bvalid` and `rvalid` stay up until they are accepted.

### Enclave address map

| address | block |
|---|---|
| `0x0000_0000` | memory (`MEM_BYTES`) |
| `0x4000_0000` | PUF Control Module |
| `0x4000_1000` | boot-control interface |
| `0x4000_2000` | lifecycle controller |
| `0x4000_3000` / `0x4000_4000` / `0x4000_5000` | AES-256 / SHA-256 / Ethernet ports |
| `0x8000_0000` and up | host bus; wrapper *i* at `0x8000_0000 + i*0x1000` |

Any other address gets DECERR from the interconnect. The interconnect registers
its decode, so every access costs one cycle more than the slave's own latency.
It serves one write and one read at a time.

## The MeLPUF cell and PUF bank

A MeLPUF bit is a bistable element and a 2:1 multiplexer. On power-up the
bistable settles to a value set by the die's random mismatch. With the select
(`control`) high, the mux passes ordinary circuit data (`din`). Then the cell is
just a mux in a functional path. With `control` low, the mux shows the
bistable's value, which is the PUF bit.

`melpuf_cell` is a **behavioural model**, because a real bistable's power-up
value cannot be expressed in RTL. The power-up value is a parameter. A `noise`
input flips the read-out, to model an unstable or aged cell.

`melpuf_scm` puts `PUF_BITS` cells side by side. It derives each cell's power-up
bit from a per-instance `SEED` and the cell index, using a 32-bit hash:

```
h = (SEED ^ (i * 0x9E3779B9)) * 0x85EBCA6B
h = (h ^ (h >> 13)) * 0xC2B2AE35
bit = h[31]
```

In silicon these bits come from the process. Here, a different seed stands for a
different die or a different IP.

## The security wrapper

Each host IP sits inside a `security_wrapper`. The host bus reaches the wrapper
through a 4 KB register window:

| offset | register |
|---|---|
| `0x000` CTRL | [1:0] command (1 = PUF capture, 2 = unlock, 3 = relock), [8] software reset of the IP (level), [9] clear buffer (pulse). A command written while one is running gets SLVERR. |
| `0x004` STATUS | [0] busy, [1] done, [2] IP unlocked, [3] IP out of reset |
| `0x008` IP_DIN | data for the IP; one input strobe per write |
| `0x00C` IP_DOUT | the IP's output |
| `0x100 + 4*k` | storage buffer word *k*: words 0 .. `PUF_BITS/32-1` receive the PUF signature, the following `KEY_BITS/32` words hold the unlock key |

**SCM control** (`scm_control`) sequences the two security commands:

* **PUF capture.** One cycle with `control` low (select). One cycle with
  `control` low that also writes the bank's outputs into the signature words of
  the buffer (capture). One finish cycle. The command completes 3 cycles after
  it starts. It works while the IP is still held in reset. In the functional
  mode, the cells pass the last IP_DIN value, replicated across the bank, and
  the low `IN_W` outputs feed the IP's input. So the PUF cells really are in the
  IP's data path.
* **Unlock.** `key_apply_scm` latches the key words of the buffer and then
  presents them to the IP `IN_W` bits per cycle for P = ⌈`KEY_BITS`/`IN_W`⌉
  cycles. That is 16 cycles at the defaults. While it runs, the IP's input is
  switched from its functional source to the key fragments. The latched key is
  cleared afterwards. Firmware should also clear the buffer (CTRL[9]).
* **Relock.** A one-cycle pulse that returns the IP to its locked state.

**The obfuscated IP** (`obf_ip`) stands in for a host IP protected by
state-space obfuscation. It powers up in a locked state. Each key fragment
advances it one step if the fragment is right. Any wrong fragment sends it to a
trap state that only relock or reset leaves. After P correct fragments it
enters its functional mode. Its function is a running sum of IP_DIN. While
locked, it outputs the bitwise inverse of its input, so a locked IP gives wrong
results rather than none. The real host IPs (AES, UART, SHA, GPIO in the
original evaluation) are not reproduced. Only the locking behaviour matters to
the enclave.

**Reset release** (`reset_release`) holds the IP in reset while any of these is
true:

* the host reset is asserted;
* the software-reset bit is set;
* the enclave's reset-gating line `rst_gate[i]` from the boot-control interface
  is high.

Assertion is asynchronous. Release goes through a two-flop synchroniser. Because
the obfuscated FSM restarts at reset, re-gating an IP locks it again.

**Boundary scan** (`test_wrapper`) is an IEEE 1500-style chain over the IP's
`IN_W` inputs and `IN_W` outputs. `capture` loads {output, input}. `shift`
moves the chain one place toward `tdo`, and `tdi` enters at the top. `update`
copies the chain to the update register. In `test_mode` the IP input and the
wrapper output come from the update register. The key engine has priority over
test mode on the IP input, so a scan cannot inject into or observe the key path.

## The PUF Control Module (PCM)

The PCM is an enclave slave. It holds one entry per host IP: {IP ID, expected
PUF response, control word}. It checks a freshly captured response against the
stored one. Registers:

| offset | register |
|---|---|
| `0x00` IPID | IP ID used by the next instruction |
| `0x04` INSTR | writing starts an instruction |
| `0x08` CONF | entry slot for PROV_IP_ID |
| `0x0C` STATUS | [0] busy, [1] done, [2] error (ID not stored), [3] a bit was corrected, [4] an uncorrectable segment was seen |
| `0x10` CTL | control word returned by GET_CTL |
| `0x14` RES | [0] match |
| `0x100 + 4*k` STORE | data for PROV_EXP / PROV_CTL (up to 64 words) |
| `0x200 + 4*k` SIG_IN | captured response to check (up to 64 words) |

The two 64-word windows cap the signature at 2048 bits. A larger `SIG_BITS`,
or one that is not a multiple of 32, is reported as an error when the design is
elaborated.

The instructions are:

| instruction | what it does | cycles |
|---|---|---|
| PROV_IP_ID | slot CONF gets IPID | 1 |
| PROV_EXP | the entry named by IPID gets STORE as its expected response | 1 |
| PROV_CTL | the entry's control word gets STORE | 1 |
| GET_CTL | CTL gets the entry's control word | 1 |
| COMPARE | error-corrects SIG_IN one 16-bit segment per cycle, then sets RES | `PUF_BITS/16`, i.e. 16 |

**Error correction.** PUF cells age and drift, so a genuine IP's response can
differ from its enrolment value in a few bits. Each 16-bit segment is treated as
the data of a Hamming(21,16) code. The five check bits come from the *expected*
response, which the PCM holds. The syndrome is the parity of the captured
segment XOR the parity of the expected one. A non-zero syndrome that points at
a data position flips that bit. Any other non-zero syndrome is flagged
uncorrectable. So one flipped bit per 16-bit segment is tolerated, and a
response with more errors fails the match.

The control word is free for firmware use. The end-to-end test stores there the
enclave-memory address of the IP's unlock key.

## Boot control and the four-stage boot

`boot_ctl_if` is the enclave's line to the host processor:

| offset | register |
|---|---|
| `0x00` CTRL | [0] `init_handoff`, [1] `sys_access`, [2] `data_request`, [3] lockdown (write 1 to set) |
| `0x04` RSTGATE | one reset-gating bit per IP; resets to all ones, so every host IP is held from power-on |
| `0x08` PENDING | write 1 to clear: [0] `host_init_done` rose, [1] `data_ack` rose |
| `0x0C` IRQ_EN | interrupt enables |
| `0x10` PINS | synchronised pin levels and [2] host bus awake |

`host_init_done` and `data_ack` pass through a two-flop synchroniser and an edge
detector. `irq` is high while an enabled event is pending. The first rising
edge of `host_init_done` sets *host bus awake*. Until then the bus bridge
answers every enclave access to the host side with SLVERR, without touching the
host bus.

The boot the firmware is expected to run is shown below. The end-to-end
testbench runs it.

1. **Enclave boot.** The enclave reads its lifecycle, then raises
   `init_handoff` and waits for the interrupt.
2. **Host initialisation.** The host powers its IPs and wakes the bus, then
   raises `host_init_done`. The enclave now reaches the wrappers.
3. **Security-module enforcement**, one IP at a time:
   1. Clear that IP's RSTGATE bit.
   2. Issue PUF capture and read the signature.
   3. Load it into SIG_IN and run COMPARE.
   4. On a match, GET_CTL, fetch the key from enclave memory, and write it into
      the wrapper's key words.
   5. Issue unlock, check STATUS.unlocked, and clear the buffer.
   6. Exchange `data_request` and `data_ack` with the host.

   An IP that fails the comparison is left in reset and locked.
4. **System access.** The enclave raises `sys_access`. The authenticated IPs run.

**Abort and lockdown.** When the enclave's own check fails in stage 1, or an
enforcement step fails in stage 3, firmware can set CTRL[3]. The lock is sticky
until the enclave is reset. While it holds:

* every host IP is held in reset;
* `init_handoff`, `sys_access` and `data_request` are low;
* writes to CTRL and RSTGATE get SLVERR.

Reaching end of life sets the same lock from hardware. That gives the truncated
boot of a retired chip. The example firmware in the testbench does not lock
down the whole chip for one counterfeit IP. It leaves only that IP in reset and
locked, which is a policy choice.

At **chip birth** (TEST lifecycle), step 3 is enrolment instead:

* The signature of each IP is stored in the PCM with PROV_IP_ID, PROV_EXP and
  PROV_CTL.
* The signatures are XORed into the pre-hash ChipID and kept in enclave memory.
* The ChipID is sent out through the Ethernet port to the manufacturer's asset
  database.

In the full architecture, the SHA-256 core hashes the XOR to form the 256-bit
ChipID, and AES-256 encrypts it before it leaves the chip. Those cores are
external here.

## Lifecycles

`lifecycle_ctrl` holds the lifecycle. The allowed transitions are:

```
TEST -> OEM -> DEPLOY -> RECALL -> EOL
                 ^          |
                 +----------+   (RECALL -> OEM: re-enrolment)
```

Every state that can be entered has its own 256-bit key. Registers:

| offset | register |
|---|---|
| `0x00` STATE | [2:0] lifecycle, [8] EOL |
| `0x04` TARGET | writing starts a transition check |
| `0x08` STATUS | [0] accepted, [1] rejected, [2] keys locked |
| `0x40 + 4*k` KEYIN | key being presented |
| `0x100 + 0x20*t + 4*k` | key of lifecycle *t* |

Keys can be written only in TEST, where the chip is still in the hands of the
trusted provisioning equipment. Afterwards they can be neither written (SLVERR)
nor read. A request is checked in one cycle: the step must be allowed and KEYIN
must equal the target's key. Otherwise the request is rejected and the state
stays. KEYIN is cleared after every request.

Entering EOL does three things:

* pulses `purge`;
* erases the lifecycle keys;
* raises `eol` for good, which also locks the boot control down (see above).

`purge` clears the PCM's entries and registers at once. It also starts a sweep
of the enclave memory, one 32-bit word per cycle (16384 cycles for 64 KB).
During the sweep `mem_purging` is high and memory accesses get SLVERR. Only the
lifecycle state survives.

The state register resets to TEST. A product needs it in non-volatile storage,
which is outside this RTL.

## Timing summary

| operation | cycles at the defaults |
|---|---|
| AXI4-Lite register access through the enclave interconnect | slave response + 1 decode cycle |
| access to a wrapper | the above, plus the bridge's capture and forward stages and the host interconnect |
| PUF capture inside a wrapper | 3 from the command |
| key application | P = ⌈512/32⌉ = 16 fragment cycles (checked in the testbenches) |
| PCM COMPARE | 256/16 = 16 cycles, one segment each |
| PCM provisioning instructions | 1 cycle each |
| lifecycle transition check | 1 cycle |
| end-of-life memory sweep | `MEM_BYTES/4` = 16384 (checked in the end-to-end test) |
| reset release of a host IP | 2 cycles after the gate drops (synchroniser) |

## How far this follows the original architecture

**Taken from the architecture:**

* The block set: compute enclave port, AXI interconnect, 64 KB memory, PUF
  control module, bus interface, boot-control interface, and ports for
  AES/SHA/Ethernet.
* The MeLPUF cell as a bistable-plus-mux.
* The wrapper's parts: port map with write/read FSMs, storage buffer, SCM
  control, MeLPUF SCM, key-application SCM, IEEE 1500 wrapper, reset release
  under SENTRY reset control.
* The PCM's register and instruction names.
* The boot pins and their four stages.
* The lifecycles, their transitions and the 256-bit keys, with erasure at end
  of life.
* Sequential key application over ⌈K/I⌉ cycles.
* The 256-bit PUF and 512-bit key sizes.

**This design's own choices:**

* All register maps and addresses.
* AXI4-Lite rather than full AXI4.
* The PUF-capture sequence and its cycle counts.
* The hash that stands in for die variation.
* The Hamming(21,16) code and the one-segment-per-cycle comparison. The
  original says only that error correction works on 16-bit segments.
* Keeping the check bits from the expected response inside the PCM.
* The accumulator standing in for each host IP.
* The lifecycle controller as a separate bus slave with volatile state.
* The host-bus-awake gating in the bridge.
* The memory sweep.
* The sticky lockdown register, and tying it to end of life.

**Where the behaviour differs:**

* In the original, the PCM itself sends each IP's control signal and collects
  the responses. Here the PCM is a passive slave. The enclave firmware reads
  the control word (GET_CTL) and moves signatures between wrappers and the PCM
  over the bus. The isolation is the same: only the IP being served is out of
  reset while its data crosses the bus.
* At the move from deployment to recall, the original requires end-user
  assets, firmware and application code to be purged. None of these live in
  the enclave model, so that purge is left to firmware. The hardware purge is
  tied to entering end of life.

**Not modelled:**

* The RISC-V core and its firmware. The testbench plays the firmware.
* AES-256, SHA-256, Ethernet, the asset management infrastructure and the host
  CPU. The testbench puts small register files on their ports.
* Non-volatile lifecycle storage.

## Simulating

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. `tb/axil_bfm.sv` is the bus-master model they
share, with `write`, `write_strb` and `read` tasks. `tb/axil_ram_model.sv` is a
small register-file slave. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/citadel_pkg.sv tb/tb_citadel_top.sv --top-module tb_citadel_top -o sim
./obj_dir/sim
```

Replace `citadel_top` with any module name to run that module's testbench.

`tb_citadel_top` runs the whole chip at its default sizes. It goes through
birth, a deployment boot and end of life in well under a second of CPU time.
It checks each mechanism and reports how often it happened:

* the bus refused before wake-up;
* the hand-off interrupt;
* per-IP reset gating;
* PUF capture;
* ChipID storage and send-out;
* PCM provisioning;
* accepted and rejected lifecycle steps;
* an ECC correction of an aged IP;
* a counterfeit IP (different PUF) that fails authentication and stays locked;
* a wrong key trapping an IP;
* unlocking in 16 cycles;
* the data handshake;
* system access;
* the IP computing over the host bus;
* a boundary scan;
* DECERR;
* the external-core ports;
* locking an unlocked IP back after a policy violation;
* the end-of-life purge;
* the end-of-life lockdown of the host.

A mechanism that never happens counts as a failure.

`tb_citadel_workloads` replays the size sweeps of the original delay study on
the whole chip. It uses six instances built on `tb/citadel_workload_run.sv`,
with ChipID/key sizes of 128/128, 256/192, 512/2048, 512/1024, 1024/256 and
2048/512 bits. Each instance enrols, authenticates and unlocks one IP, with one
aged PUF cell. It checks that the PCM comparison takes `PUF_BITS/16` cycles (8,
16, 32, 32, 64 and 128) and that key application takes ⌈`KEY_BITS`/32⌉ cycles
(4, 6, 64, 32, 8 and 16). The PCM's STORE and SIG_IN windows hold 64 words
each, so 2048 bits is the largest signature it accepts. The
original reports these delays in picoseconds for its own host IPs, whose input
widths differ. Here every IP has a 32-bit input, so the counts scale the same
way but the absolute times are not comparable. The simulator is
two-state, so every register the logic reads has a reset.
