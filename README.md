# Trusted extensions for an IPU host interface: Secure Exchange Pipes and trusted mode

An IPU (a processor made of 1472 tiles, each with its own SRAM) gets its code, training
data and checkpoints from a host server over PCIe, and writes its results back the same
way. If the host cannot be trusted, everything that crosses PCIe must be encrypted and
authenticated. The host also must not be able to read or write tile memory or
configuration registers directly. These extensions do both, without the tiles having to
do any cryptography:

* **Secure Exchange Pipes (SXPs)** sit on the exchange lanes between the PCI complex and
  the exchange blocks. They encrypt the tiles' writes to host memory and decrypt the
  host's replies to tile reads with AES-256-GCM, at one 16-byte block per clock per lane.
  The key is chosen from where a packet comes from (its source tile) and cross-checked
  against where it goes (its host address). Nothing the host sends selects a key.
* **Trusted mode** is a one-way switch. Once it is set, only the board controllers reach
  the IPU's registers: the ICU, and the CCU, a root-of-trust microcontroller. Security
  exceptions go to the CCU on their own pin. Only a reset ends trusted mode, and that reset
  also erases every key.

This repository holds synthesizable SystemVerilog for the datapath and control of these
extensions: `rtl/itx_top.sv` and the blocks under it. It also holds a self-checking
testbench for every block and an end-to-end testbench of the whole top at full size.

## Where it sits

```
                 egress lanes (requests)                     ingress lanes (completions)
 exchange blocks 0-3 ─┐                                          ┌─> exchange blocks 0-3
                      ├ xchg_lane_mux[0] ─> sxp(egress)[0] ─┐    │
 exchange blocks 4-7 ─┘ xchg_lane_mux[1] ─> sxp(egress)[1] ─┤    ├─ sxp(ingress)[0] <─┐
                                                            │    └─ sxp(ingress)[1] <─┤
                                         pci_read_tracker <─┘                         │
                                          │  host_tx[0..1]       host_rx ──> (same) ──┘
                                          v                         ^
                                         PCIe controller / host (outside this RTL)

 host / ICU / CCU register requests ─> itx_ctrl ─> SXP registers, existing control port
                                          │ trusted, sec_exception (CCU), exception (ICU)
                                          └─ Newmanry request ─> itx_reset_gen ─> dev_rst_n
```

The chip has eight exchange blocks, each serving 184 tiles. There are four exchange lanes
with one SXP on each: two carry requests toward the PCI complex and two carry read
completions back. Each lane connects to four exchange blocks, so one egress SXP and one
ingress SXP serve blocks 0-3, and the other pair serves blocks 4-7.

All traffic moves in 128-bit beats (`xbeat_t` in `itx_pkg`). Each beat has a packet
header, start-of-packet and end-of-packet flags, and one 16-byte block. Three kinds of
packet pass an SXP:

* read requests, from tile to host, with no payload;
* write requests, from tile to host;
* read completions, from host to tile.

## Frames, and how a packet's blocks are treated

Software cuts every protected stream into **frames**. A frame is a 128-bit IV, then
data blocks, then a 128-bit authentication tag. A whole frame is a multiple of 128 bytes
and at most 1 KB (64 blocks). The hardware accepts any frame of at least one data block;
the size rule is kept by software. A frame may span several packets. Three header bits tell the SXP what to do:

| bit | meaning | set by |
|---|---|---|
| `AES` | the payload is (to be) encrypted | the tile on writes; restored by the PCI complex on completions |
| `KEY_INDEX[3:0]` | physical key context | the egress SXP on requests; restored by the PCI complex on completions |
| `CC` | this packet ends a frame | the tile on writes; the PCI complex on the last completion of a read |

For a packet that is to be encrypted or decrypted, the SXP gives each payload block to the
GCM engine as one of three operations:

* `AES_IV`: the first block of a packet whose key context has no open frame;
* `AES_MAC`: the last block of a packet with `CC` set. When decrypting this block is the
  received tag. When encrypting it is a padding block, which the engine replaces with the
  computed tag.
* `AES_DATA`: every other block.

So a writer sends IV, plaintext and one padding block. The host stores IV, ciphertext and
tag. A later read of those bytes returns to the tile as IV, plaintext and tag, and the tag
is checked as it passes.

Some blocks bypass the cipher: read requests, packets without `AES`, and every packet
outside trusted mode. They still go through the engine as `OP_BYPASS`, so every beat sees
the same latency and packets never overtake one another on a lane.

## The GCM engine and its 16 key contexts (`sxp_gcm_core`, `aes256_pipe`)

This is the part that takes the most care. The engine accepts one block per cycle. The
context can change from one block to the next, because up to 16 streams with 16 different
keys may be interleaved on a lane, one frame per context at a time.

Each context keeps:

* its 256-bit key;
* the GHASH key `AK = AES_K(0^128)`, computed when the key is loaded;
* `EK = AES_K(J0)` for the current frame;
* the current counter block;
* the running hash `H`;
* whether a frame is open.

The cipher, `aes256_pipe`, is fully unrolled into 15 register stages. The key travels with
its block and the round keys are derived stage by stage, so switching context costs
nothing.

The per-context state is split across the pipe so that back-to-back blocks of one context
never need forwarding:

* The input side owns the key, the counter and the open flag. They are read and updated in
  the cycle a block is accepted. The block enters the cipher as the counter value: `J0` for
  an IV, the next counter for data. This is why the block after an IV can follow at once.
* The output side owns `AK`, `EK` and `H`. A block leaving the cipher updates them in that
  same cycle:
  - IV: store `EK`, clear `H`.
  - DATA: output `data ^ E(counter)` and set `H = (H ^ ciphertext) * AK` in GF(2^128).
  - MAC: output `tag = ((H ^ lenblock) * AK) ^ EK`, compare it with the received block when
    decrypting, and close the frame.
  One multiplier per engine is enough, because only one block leaves per cycle.

The engine computes standard AES-256-GCM with empty additional data and block-aligned
plaintext:

* `J0 = IV[127:32] || 0x00000001` (a 96-bit IV in the top of the IV block).
* Data blocks use `inc32(J0)`, `inc32(inc32(J0))` and so on.
* The length block is `0^64 || 128·n` for `n` data blocks.

Its output therefore matches any AES-GCM library; the testbenches compare it with vectors
from one. The engine does not use the low 32 bits of the IV block.

Loading a key takes eight register writes. The final write queues a key-load operation.
That operation enters the pipe in the next cycle that has no incoming block, and it
computes `AK` as it leaves.

The engine flags an error (`out_err`) for:

* an IV on a context whose frame is open;
* data or a MAC on a context with no open frame;
* a block for a context without a key.

The latency is 16 cycles: 15 for the cipher and one for the output stage.

## Choosing the key (`sxp_key_select`)

On an egress SXP, each request goes through four lookups:

1. The source tile gives the **exchange-block context**. A tile belongs to exchange block
   `tile / 184`, and to context `min(3, (tile mod 184) / 46)` inside that block. Each SXP
   therefore sees 16 contexts: `(block mod 4)·4 + context`.
2. **KXBCTXMAP** maps the exchange-block context to a **physical key context**. That value
   becomes the packet's `KEY_INDEX`.
3. **KPHYSMAP** maps the physical key context to the **key region** it may use.
4. **KSELLIMIT** holds 17 limits that define 17 disjoint address regions. Region `r` is
   `[KSELLIMIT[r-1], KSELLIMIT[r])`, and region 0 starts at 0.

The result depends on the region the request's address falls in:

* **Region 0 is cleartext.** Requests to it pass with `AES` cleared.
* **An encrypted region that matches** the one from step 3: the request proceeds. Read
  requests get `AES` set, so that their completions will be decrypted.
* **Any other region, or no region at all:** the request is a misconfiguration. It is
  dropped and a security exception is raised.

## Why completions can be trusted (`pci_read_tracker`)

A read completion comes from the host, so nothing in its header can be believed. The PCI
complex therefore keeps a table of outstanding reads. When a read request leaves, after the
egress SXP has set its `KEY_INDEX` and `AES`, the table records those bits, the source
tile and the number of 16-byte blocks requested, under a fresh PCI tag. Each egress lane
owns 128 of the 256 tags.

When a completion arrives, its tag selects the table entry. The table then:

* rewrites the tile, `KEY_INDEX` and `AES` fields from the entry;
* subtracts the completion's length from the blocks still pending;
* sets `CC` on the completion that brings the last block, and frees the tag;
* sends the completion down the ingress lane of the tile's exchange block.

A completion is dropped and raises a security exception if its tag is not outstanding, if
its length is zero, or if it brings more blocks than are pending.

The lane multiplexers stop granting read requests while a lane's free tags could not
absorb the requests already in flight (`rd_allow`, 24 tags of margin). So the table never
has to refuse a request.

## Trusted mode, register access and exceptions (`itx_ctrl`, `itx_reset_gen`)

Three requesters share the register bus: the host (over PCIe), the ICU (board controller)
and the CCU (root of trust). One request is served per cycle, with the CCU first, then the
ICU, then the host. A requester holds its request until granted. Its response (`rsp_valid`,
`rsp_rdata`, `rsp_err`) comes one cycle after the grant. A refused access is not carried out,
returns 0 and sets `rsp_err`.

| word address | register | who may access it |
|---|---|---|
| `0x0000` | TRUSTED: write 1 to enter trusted mode; a write of 0 is ignored | write: ICU, CCU. Read: anyone |
| `0x0001` | EXC_STATUS (sticky; write 1 to clear): [0] key-region mismatch, [1] tag mismatch, [2] engine protocol error, [3] forged completion, [4] other IPU exception | ICU, CCU. Host: read only |
| `0x0002` | NEWMANRY: write 1 to reset the device logic | ICU, CCU. Host: only outside trusted mode |
| `0x0003` | STATUS: [0] quiescent (no read outstanding, no block in any SXP) | anyone |
| `0x1000·(n+1) + local` | registers of SXP `n` (0, 1 egress; 2, 3 ingress) | CCU only |
| anything else | the IPU's existing configuration and tile-memory port (`ext_req`) | ICU, CCU. Host: only outside trusted mode |

The local map inside one SXP (`sxp_regs`) uses bits [11:8] to select the space:

| [11:8] | space | entries |
|---|---|---|
| 0 | key | word `ctx·8 + w`, for `w` 0..7, most significant word first. Writing word 7 loads the key; reads return 0 |
| 1 | KXBCTXMAP | 16 × 4 bits |
| 2 | KPHYSMAP | 16 × 5 bits |
| 3 | KSELLIMIT | 17 × 32 bits |
| 4 | CTL | word 0: write 1 to disable every key. Word 1: key-valid mask (read) |

Both egress SXPs need the same tables. All four SXPs need the keys of the contexts they
will use. The ingress SXPs only use keys, because they take `KEY_INDEX` from the
completion.

Exceptions go to different pins depending on the mode:

* **In trusted mode:** every security exception, and any other IPU exception, sets an
  EXC_STATUS bit and drives `sec_exception` to the CCU for as long as a bit is set.
* **Outside trusted mode:** IPU exceptions go to the ICU pin (`exception`) as before.

Trusted mode ends only through `dev_rst_n`, which `itx_reset_gen` produces. It goes low
immediately with the chip reset, or the cycle after a Newmanry request. It is released
two cycles after the chip reset is released, or 10 cycles after the Newmanry request. It
resets every block here, so the keys, tables and trusted-mode flag are all erased.

A typical session:

1. The CCU waits for STATUS.quiescent.
2. It loads keys and tables.
3. It sets TRUSTED.
4. It runs the job.
5. It disables the keys.
6. It writes NEWMANRY.

## Timing

| path | latency | rate |
|---|---|---|
| exchange block → host (`host_tx`) | 19 cycles: lane mux 1, SXP 17, read table 1 | 1 beat/cycle per lane |
| host (`host_rx`) → exchange block | 19 cycles: read table 1, SXP 17, lane mux 1 | 1 beat/cycle in total (one host input) |
| register write → effect | 1 cycle after grant | 1 request/cycle |

At one 16-byte block per cycle, a lane carries 16 GB/s at a 1 GHz clock, or 14.4 GB/s at
900 MHz. The host side has two request outputs, one per egress lane, and one completion
input. Completions therefore arrive at up to 16 GB/s in total and are spread over the two
ingress SXPs by destination tile. This reads the line rate as 32 GB/s summed over both
directions; a second completion input would need a second read-table lookup port and
arbitration for the ingress lanes. Nothing in the
datapath stalls after the lane multiplexer. The only back-pressure is `xb_tx_ready`
toward the exchange blocks (arbitration and read-tag budget). The host side is assumed
always ready.

## Relation to the published design

These follow the published description:

* four SXPs, two per direction, each serving four exchange blocks;
* 16 physical key contexts;
* the per-context state and the three engine operations;
* empty AAD and block-aligned data;
* the `AES` / `KEY_INDEX` / `CC` header bits and the IV / DATA / MAC classification;
* the KXBCTXMAP → KPHYSMAP → KSELLIMIT chain, with 17 regions and region 0 as cleartext;
* a security exception on a region mismatch;
* the PCI complex restoring `KEY_INDEX` / `AES` / tile and setting `CC` on the last
  completion;
* trusted mode entered by a register write, with the host shut out;
* security exceptions to the CCU in trusted mode;
* Newmanry and chip reset clearing the keys.

These are this design's own choices, since the description does not give them:

* **Initial counter.** The description says the IV is combined "with the initial block
  counter (0)", and also that the engine is standard AES-256-GCM. This design follows the
  standard, with `J0` counter = 1, so a host-side library can produce and check frames.
* **Read requests.** The description says read requests pass unchanged, but also that the
  SXP writes `KEY_INDEX` into requests. Here read requests get `KEY_INDEX` and `AES`, and
  their payload (none) is untouched.
* **Mismatched packets are dropped** as well as reported.
* **Failed authentication.** Decrypted blocks of a frame that later fails authentication
  have already been delivered. The exception, not the data path, stops the job; the tiles
  are expected to hold data until the frame is complete.
* **Forged completions** (unknown tag or excess length) are detected and reported.
* **Unspecified details:**
  - the exchange-block-context formula (4 contexts of 46 tiles per exchange block);
  - the region encoding;
  - the register maps, arbitration and flow control;
  - 256 read tags;
  - the 32-bit tile PCI address;
  - the beat format;
  - the STATUS and EXC_STATUS registers;
  - the reset hold time.

## Not included

* The CCU and ICU microcontrollers and their firmware: attestation, key exchange and
  measured boot.
* The tiles and their memory, the internal exchange and the exchange blocks.
* The PCIe controller and PHY.
* The autoloader that scrubs tile memory.
* The IPU-Links.
* All host software.

These parts appear only as ports on `itx_top`, and the testbench models them.

## Files

* `rtl/itx_pkg.sv`: types (`xhdr_t`, `xbeat_t`, `cbus_req_t`), sizes, and the AES and
  GF(2^128) functions. The S-box is a constant table; its formula is given in the file.
* `rtl/aes256_pipe.sv`, `rtl/sxp_gcm_core.sv`, `rtl/sxp_key_select.sv`,
  `rtl/sxp_regs.sv`, `rtl/sxp.sv`: the Secure Exchange Pipe.
* `rtl/xchg_lane_mux.sv`, `rtl/pci_read_tracker.sv`: lanes and the read table.
* `rtl/itx_ctrl.sv`, `rtl/itx_reset_gen.sv`: trusted mode, register access, exceptions,
  reset.
* `rtl/itx_top.sv`: everything wired together.
* `tb/gcm_ref_pkg.sv`: an independent, behavioural AES-256 / GCM reference model used by
  the testbenches.
* `tb/<block>_tb.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.

## Simulating

Each testbench compiles with plain Verilator 5. Give it the package, the reference model,
the RTL it needs and the testbench. For example, the full design:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/itx_pkg.sv tb/gcm_ref_pkg.sv rtl/aes256_pipe.sv rtl/sxp_gcm_core.sv \
  rtl/sxp_key_select.sv rtl/sxp_regs.sv rtl/sxp.sv rtl/xchg_lane_mux.sv \
  rtl/pci_read_tracker.sv rtl/itx_ctrl.sv rtl/itx_reset_gen.sv rtl/itx_top.sv \
  tb/itx_top_tb.sv --top itx_top_tb
./obj_dir/Vitx_top_tb
```

`itx_top_tb` runs the top at its full size: eight exchange blocks, four SXPs with 16
contexts each, and 256 read tags. It runs in a few seconds and covers, counting each event:

* traffic passing unchanged in normal mode, and IPU exceptions reaching the ICU;
* key and table loading by the CCU, and entry into trusted mode;
* host accesses refused;
* encrypted writes on both lanes at once, checked against the reference model;
* read-back with decryption, with completions split across two packets;
* cleartext-region traffic;
* four exchange blocks contending for one lane;
* read throttling once the tag budget runs out;
* region-mismatch, tampered-tag and forged-completion exceptions, each checked in
  EXC_STATUS;
* a Newmanry reset that leaves the keys invalid and the device in normal mode.

It also checks that a full 1 KB frame leaves for the host in 64 consecutive cycles.

`itx_cifar_batch_tb` runs confidential-training traffic through the full-size design for
one CIFAR-10 training batch of 64 images (64 × 3072 bytes, 199 encrypted 1 KB frames):

* Eight tiles, one per exchange block, read the frames back from host memory.
* The host answers in 256-byte completions, interleaving the completions of different
  reads, so the ingress SXPs switch key context packet by packet.
* Eight other tiles write encrypted output frames under a second key at the same time.

Every block is checked against the reference model. The 12,736 completion blocks take
12,780 cycles, so the SXPs never hold up the host link. Batches of 16 and 32 images
differ only in the `BATCH` constant.

The block testbenches go deeper:

* `aes256_pipe_tb`: FIPS-197 and library vectors, one block per cycle, exact latency.
* `sxp_gcm_core_tb`: library GCM vectors, interleaved contexts, random frames against the
  reference model, tampered tags, protocol errors, key clearing.
* `sxp_key_select_tb`: exhaustive tile sweep and region boundaries.
* `sxp_tb`: frames split across packets, read requests, mismatches, bypass and latency.
* `xchg_lane_mux_tb`, `pci_read_tracker_tb`, `itx_ctrl_tb`, `itx_reset_gen_tb`.
