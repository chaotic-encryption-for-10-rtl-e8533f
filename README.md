# Chaotic stream encryption inside a 10GBASE-R PCS

This design encrypts a 10 Gb/s Ethernet link at the physical layer. The
cipher does not work on frames. It works on the 66-bit blocks of the
10GBASE-R physical coding sublayer (PCS). Every block is encrypted: data,
frame start and end, and the idle blocks between frames. An observer of the
fibre therefore cannot see frame contents, frame boundaries or even whether
the link carries traffic. Nothing is added to the block stream, so the link
keeps its full rate.

The cipher sits between the 64b/66b encoder and the scrambler on transmit,
and between the descrambler and the decoder on receive. The scrambler still
sees a normal block stream, so the line keeps its DC balance and transition
density. Each 66-bit block is XORed with a keystream that is 64 bits wide for
the payload, plus 1 bit for the two-bit sync header. The keystream comes from
a skew tent map, a simple chaotic map, computed in 64-bit fixed point. A
linear feedback shift register (LFSR) perturbs the map's state at every step.
Two special control blocks, Cipher_ON and Cipher_OFF, travel in the stream
and switch both ends on and off at the same block.

The RTL covers the complete PCS of one Ethernet interface:

- the XGMII interface on the MAC side;
- the 16-bit words of the serializer and deserializer on the line side;
- both directions;
- the keystream generators and the on/off signalling.

The MAC, the analog transceiver (PMA: serializer, clock recovery, PLL) and
the optical module are not part of it.

## Block stream and where the cipher sits

```
 TX: XGMII -> pcs_encoder -> tx_encrypt ---------------> pcs_scrambler -> pcs_gearbox -> 16-bit words
                               (INSERT, CAPTURE, CIPHER_OP)
 RX: 16-bit words -> pcs_block_sync -> pcs_descrambler -> rx_decrypt ------------> pcs_decoder -> XGMII
                                                     (CIPHER_OP, CAPTURE, EXTRACT)
          cipher_mgmt: commands, counters        keystream_gen x2: TX key, RX key
```

A 66-bit block is `{payload[63:0], header[1:0]}`, with bit 0 first on the
line. A header of `01` means a data block and `10` means a control block, as
in IEEE 802.3 clause 49. Inside the design a block travels as `pcs_blk_t`,
a 66-bit word plus a `valid` strobe (see `physec_pkg.sv`).

## The cipher operation (`cipher_op`)

The payload is XORed with 64 keystream bits. The header cannot simply be
XORed, because it must stay `01` or `10`: the receiver finds block
boundaries by looking for those two patterns. So the header is first mapped
to one bit (`01` gives 0, `10` gives 1). That bit is XORed with the 1-bit
sync keystream and then mapped back. After encryption, half the headers are
`01` and half are `10` whatever the traffic, so the block type is hidden.
The line still has a 0/1 transition every 66 bits.

Decryption is the same operation with the same keystream. A header of `00`
or `11` can only come from a line error. It is passed on unchanged, so the
decoder sees it as an error, as it would without encryption. `cipher_op` is
purely combinational. When `en` is 0 it passes blocks unchanged.

## Switching encryption on and off

### Cipher_ON and Cipher_OFF blocks

Both ends must start their keystream generators at exactly the same block.
They do this with two new control blocks. Each one uses block type `0x55`,
which carries two ordered sets. The standard uses ordered sets `0x00`–`0x03`
for link-fault signalling. This design adds two new codes:

| block      | type | O0, O4 | D1 D2 D3   | D5 D6 D7   |
|------------|------|--------|------------|------------|
| Cipher_ON  | 0x55 | 0x0    | 00 00 `04` | 00 00 `04` |
| Cipher_OFF | 0x55 | 0x0    | 00 00 `05` | 00 00 `05` |

`physec_pkg::seq_os_block()` builds these blocks.

### Transmit path (`tx_encrypt`)

1. **INSERT** (`mgmt_insert`) waits for the next block that is entirely
   idle: type `0x1E`, eight `/I/` characters. It replaces that block with
   the requested ON or OFF block. The MAC always leaves such idle blocks
   between frames, so no data is displaced. At full load a command simply
   waits for the next gap that holds a whole idle block.
2. **CAPTURE** (`cipher_capture`) watches the block after INSERT and
   switches the cipher state for the *following* block:
   - Cipher_ON itself leaves in clear, and everything after it is
     encrypted.
   - Cipher_OFF itself is still encrypted, and everything after it is in
     clear.
3. **CIPHER_OP** encrypts the block.

### Receive path (`rx_decrypt`)

The order is reversed. CIPHER_OP decrypts first, and CAPTURE then looks at
the decrypted block. This is why an encrypted Cipher_OFF is still
recognised. EXTRACT (`mgmt_extract`) then puts an idle block back in place
of the ON or OFF block and reports the event. The MAC never sees the
management blocks. Every ON or OFF block that is inserted comes back out as
an idle block, so the block count is preserved.

### Keystream stepping

The keystream moves one step for every block that is encrypted. It also
moves one step on the Cipher_ON block itself. So the first keystream word is
the map's state after one iteration, and the key's initial value `x0` is
never used directly as keystream. Both ends apply the same rule, so they
stay in step.

Cipher_OFF pauses the generators; it does not reset them. A later Cipher_ON
continues the keystream from where it stopped, so switching encryption off
and on never repeats keystream. Only a key load restarts a generator. Like
any stream cipher, this one must never reuse keystream: XORing two
ciphertexts made with the same keystream cancels it out. So loading the same
key twice on a live link, with long runs of known idle blocks, would expose
the traffic. A new key should be loaded instead.

### Management (`cipher_mgmt`)

`cipher_mgmt` turns one-clock `cmd_on` and `cmd_off` pulses into requests
to INSERT. It keeps only the latest command, and `busy` is high while that
command waits. It holds back a Cipher_ON until the TX keystream generator
reports `ready`, that is, until a key has been fully loaded. It also counts
the ON and OFF blocks that EXTRACT removes (`rx_on_cnt`, `rx_off_cnt`).

Keys are loaded through ports: a `cfg_tx_load` or `cfg_rx_load` pulse with
`tx_key` or `rx_key`. Each direction has its own key, so the two directions
of a link can be keyed differently. Keys are not exchanged over the link.

## Keystream: skew tent map with LFSR noise

### The map (`stm_cell`)

The skew tent map on [0,1) with control parameter γ is:

```
x' = x / γ               if x <= γ
x' = (1 - x) / (1 - γ)   otherwise
```

It stays chaotic for every γ in (0,1). In a digital implementation it does
not stay chaotic forever: with a finite number of bits the orbit must
eventually repeat, often with a short period.

Number formats:

- State and γ are unsigned 64-bit fractions (value = word / 2^64).
- `1 - v` is taken as the one's complement `~v`, which is 1 − v − 2^-64.
  This avoids a 65-bit value and the special case v = 0.

The two divisions become multiplications by reciprocals:

- `r0 = floor((2^128 - 1) / γ)` and `r1 = floor((2^128 - 1) / ~γ)`, both as
  128-bit Q64.64 numbers.
- Each iteration compares x with γ. The comparison selects the operand
  (x or ~x) and the reciprocal (r0 or r1).
- The 64 × 128-bit product is kept as bits [127:64]. It cannot overflow,
  because the selected operand never exceeds the selected denominator.

One iteration therefore takes one clock.

The reciprocals depend only on the key, so they are computed once per key
load. `stm_recip` is a restoring divider that produces one quotient bit per
clock. After a load, a cell is `ready` 129 clocks later (128 steps plus the
load cycle). Steps requested before then are ignored, which is why
management holds back Cipher_ON until the key is ready.

### The basic generator (`stm_generator`, `lfsr61`)

A 61-bit LFSR steps together with the map. Its feedback is
`s[60]^s[4]^s[1]^s[0]`, the reciprocal of the primitive polynomial
x^61+x^5+x^2+x+1, so it has period 2^61 − 1. Before the state is fed back
into the map, its low 8 bits are XORed with 8 LFSR bits. This noise keeps
the orbit from settling into a short cycle.

The generator outputs only the low 16 bits of the state and hides the other
48. Knowing two outputs in a row still leaves 2^96 candidate state pairs.
This makes it hard to reconstruct the map from the output. The key of one
generator is y0 (61 bits), x0 (64 bits) and γ (64 bits): 189 bits.

### Data and sync keystreams

- **`stm_bank`** makes the 64-bit payload keystream. It has four generators,
  each with its own (x0, γ). They share one LFSR: generator k takes LFSR bits
  [8k+7:8k] as noise and drives keystream bits [16k+15:16k].
- **`stm_1bit`** makes the sync-header keystream. It is a basic generator
  with its own LFSR whose output is bit 0 of the state.
- **`keystream_gen`** joins the two for one direction.

The key of one direction is `physec_pkg::dir_key_t`:

```
data_y0 (61) | data_stm[3..0] = {gamma, x0} x 4 (512) | sync_y0 (61) | sync_stm = {gamma, x0} (128)
```

That is 762 bits, made of 573 for the bank and 189 for the sync generator.

## The PCS around the cipher

These blocks follow clause 49 of IEEE 802.3 in a reduced form. They exist
so the cipher can be exercised in a complete link. They are not a certified
10GBASE-R implementation.

- **`pcs_encoder` / `pcs_decoder`** handle all 15 clause-49 block formats:
  data, the idle/control block `0x1E`, start in lane 0 or 4, ordered sets
  `0x2D`/`0x55`/`0x66`/`0x4B`, and terminate in lanes 0–7. They work word by
  word.
  - The encoder turns a word it cannot encode into an error block.
  - The decoder turns a bad header or an unknown type into an all-error word
    (`0xFE` in every lane).
  - The clause-49 transmit and receive state machines, which check the order
    of start, data and terminate, are not implemented.
- **`pcs_scrambler` / `pcs_descrambler`** are the self-synchronising
  scramblers x^58 + x^39 + 1 over the 64 payload bits. Headers are not
  scrambled. Each register holds its state while no block is present.
- **`pcs_gearbox`** cuts 66-bit blocks into 16-bit words, one per clock.
  - It asks for blocks with `req`. Credit-based counting keeps
    16·(AHEAD+1) bits either buffered or requested, so a block pipeline of up
    to AHEAD clocks never lets it run dry.
  - In steady state it asks for 16 blocks every 66 clocks.
- **`pcs_block_sync`** finds block boundaries in the received words.
  - While unlocked, it slips one bit for every block with a bad header.
  - It declares lock after 64 good headers in a row.
  - It drops lock after 16 bad headers within 64 blocks.
  - Blocks are delivered only while locked.

## Top level (`physec_pcs`)

The whole interface runs on one clock, the line word clock. That is
644.53 MHz for 10.3125 Gb/s at 16 bits per word. Blocks move on 16 of every
66 clocks, which is 156.25 M blocks/s.

| port | meaning |
|------|---------|
| `xgmii_tx_ready` | out: the word on `xgmii_txd/txc` is taken at this clock edge |
| `xgmii_txd[63:0]`, `xgmii_txc[7:0]` | in: XGMII transmit word, lane 0 in bits [7:0] |
| `xgmii_rx_valid`, `xgmii_rxd`, `xgmii_rxc` | out: a received XGMII word is present |
| `tx_word[15:0]`, `rx_word[15:0]` | line words, first bit in bit 0 |
| `rx_block_lock` | out: block boundary found |
| `tx_underflow` | out: gearbox had no full word (only right after reset) |
| `cmd_on`, `cmd_off` | in: one-clock commands to start or stop encrypting |
| `cfg_tx_load`, `cfg_rx_load`, `tx_key`, `rx_key` | in: key loading per direction |
| `tx_ks_ready`, `rx_ks_ready` | out: keystream generator keyed and ready |
| `mgmt_busy`, `tx_active`, `rx_active` | out: command waiting; each direction encrypting |
| `rx_on_cnt`, `rx_off_cnt` | out: ON and OFF blocks received |

Latency:

- Transmit: 4 clocks from XGMII to the gearbox (encoder, INSERT, cipher
  register, scrambler), plus the gearbox buffering.
- Receive: 3 clocks from block sync to XGMII (descrambler, EXTRACT,
  decoder).

A typical session:

1. Reset. Both ends reach `rx_block_lock`.
2. Load the keys. The TX key at one end must equal the RX key at the other.
3. Pulse `cmd_on`. The Cipher_ON block waits for key readiness and for an
   idle block. From the block after it, both ends encrypt and decrypt.
4. Pulse `cmd_off` to return to clear.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/physec_ref_pkg.sv`
holds the reference models:

- the map, with exact reciprocals and with real numbers, used to check the
  fixed-point error;
- the LFSR;
- the scrambler;
- a reference keystream;
- an XGMII word generator covering every block type.

`tb_physec_pcs` runs the whole design at its default size. Two interfaces
are cross-connected by their line words, with a different key in each
direction. A third interface listens to one line with a key that differs in
two bits. With random frames and control words, the test checks that:

- after lock, every word arrives intact and in order, through clear,
  encrypted and switching phases;
- the gearbox takes exactly 1600 blocks in 6600 clocks and never runs dry;
- a Cipher_ON issued before the key is loaded waits, and the key becomes
  ready 129 clocks after loading;
- commands wait for idle blocks while frames pass, and four ON and four OFF
  blocks are seen at each end;
- while encrypted, idle-only traffic shows 45–55 % `10` headers on the line,
  against 100 % in clear;
- the eavesdropper recovers almost nothing: about 93 % of its words are
  wrong, counting the clear phases it decodes correctly.

It also counts each of these events and fails if one never happens.

To run one testbench with Verilator (5.x):

```
verilator --binary -j 4 -Wno-fatal --top-module tb_physec_pcs \
  rtl/physec_pkg.sv tb/physec_ref_pkg.sv $(ls rtl/*.sv | grep -v physec_pkg) tb/tb_physec_pcs.sv
./obj_dir/Vtb_physec_pcs
```

Swap the top module and testbench file to run any other block test. The
package files must come first.

## Where this design departs from the published system

- **Multiplier size.** The published design uses 16 DSP slices per map
  cell. Here the cell is written as one 64 × 128-bit multiply plus a
  sequential divider for the reciprocals. How the reciprocals were formed
  in the original is not known. The fixed-point rounding (truncation, the
  one's complement for 1 − x) is this design's choice. Keystreams are
  therefore not bit-compatible with any other implementation.
- **Which bits go where.** The published design does not give the LFSR
  polynomial, which LFSR bits feed which generator, which generator drives
  which 16 keystream bits, or how the per-cell keys are laid out. All of
  these are choices made here.
- **Sync header polarity.** Clause 49 is followed: data `01`, control `10`,
  first bit in bit 0. Plots of the original system show the opposite
  labels, which looks like the bits drawn in the other order.
- **Key handling.** Keys are loaded from ports. Key exchange and key
  refresh over the link are not implemented. Neither was part of the
  original system.
- **Clock.** One clock runs everything at the line word rate. An FPGA build
  would normally run the block path at 156.25 MHz and cross clock domains in
  the gearbox. Here the map's multiplier has a full clock but is used only
  on 16 of every 66 clocks; no timing closure was attempted.
- **PCS.** Clause-49 state machines, bit-error-rate monitoring and test
  patterns are not implemented.
- **Resource figures.** The reported FPGA figures are not reproduced here,
  because this RTL was not built for an FPGA. The original reports 80 DSPs
  per keystream generator, 160 for both directions, and a 16-bit generator
  at 175.4 MHz giving 2806 Mb/s.
