# SecDDR in SystemVerilog: an encrypted, counter-bound MAC lane for DDR4

Memory encryption hides what a DIMM holds. It does not stop an attacker on the memory bus from
*replaying* an old line: the attacker captures a line together with its MAC and later returns
both in answer to a read. Integrity trees defeat replay, but every access then costs extra memory
traffic. SecDDR takes a different route. It treats the DDR channel between the processor and each
rank's ECC chip as an authenticated link. Whenever a MAC crosses the bus, it is XORed with a
one-time pad:

    E-MAC = MAC XOR AES_Kt(C_t)

`K_t` is a key that the processor shares with the rank. `C_t` is a transaction counter that both
ends advance in lock-step. A replayed E-MAC was made with an older counter, so it decrypts to
garbage and the processor's ordinary MAC check fails. No tree and no extra memory accesses are
needed.

The ECC chip stores the plain MAC and never verifies anything. Only the processor verifies. The
chip still has to defend against one attack: a write redirected to another address, which would
leave stale data behind. For that, it checks an encrypted write CRC that covers the address.

This RTL implements the logic at both ends of that link:

- `secddr_mc`: the processor side.
- `secddr_ecc_chip`: the SecDDR logic inside a rank's ECC chip.
- `secddr_channel`: a top that joins one processor-side unit to one ECC-chip block per rank.

All the building blocks are included: AES-128, the multi-unit pad engine, the key and counter
registers, and the CRC.

## The link at a glance

```
        processor (trusted)                untrusted channel              rank r ECC chip (trusted)
 req ->+--------------------+  mc_cmd ---------------> dimm_cmd  +--------------------------+
       |  secddr_mc         |  mc_wlane (80b) -------> dimm_wlane|  secddr_ecc_chip         |
 rsp <-|  K_t,C_t per rank  |  mc_rlane (64b) <------- dimm_rlane|  K_t, C_t, 3 x AES       |
       |  OTP engine, eWCRC |                                   |  eWCRC check, MAC store  |-> st_* (array)
       +--------------------+                                   +--------------------------+
```

The top `secddr_channel` does not join `mc_*` to `dimm_*` itself. It exposes both ends as ports.
A system joins them with wires. A testbench can put an attacker in between to drop, replay,
redirect, or retype commands and bursts.

Everything that is transferred is modelled at transaction level. One command is a
`ddr_cmd_t {valid, is_write, addr}`, where `addr` is `ddr_addr_t {rank, bg, ba, row, col}`. One
ECC-lane burst is a single lane word:

- A read burst (BL8 on an x8 chip) carries 64 bits, the E-MAC.
- A write burst carries 80 bits: the E-MAC plus a 16-bit encrypted eWCRC. The write burst grows from
  BL8 to BL10 to make room.

## Transaction counters: why reads step by one and writes by two

This is the part of the design that needs the most care.

Both ends hold `C_t` for each rank. Each column command consumes one counter value. The processor
picks the rank's initial value and loads it on both ends, together with `K_t`. Counter values
have a fixed parity: reads use even values and writes odd ones. Without that, an attacker could
turn a WRITE into a READ and throw the response away. Both counters would still move by one, so
the write would silently never happen. With the parity rule, the DIMM and the processor disagree
on the next value.

Parity alone is not enough, though. Suppose each end simply takes "the next value of the right
parity". An attacker drops a write to rank 0 completely: command and burst are both removed.
Then:

- The processor has used odd value 7 for the write. Its next read takes 8.
- The DIMM never saw the write and is still at 6. Its next read also takes 8.

The counters have resynchronised. The dropped write goes unnoticed, and stale data is served
afterwards. That contradicts the scheme's own claim that a dropped write makes every later read
fail.

This design fixes the problem with a step rule, in `secddr_pkg::next_ctr`. Write the counter as
`C = 2n + t`, where `t` is 0 for a read and 1 for a write. Then:

    read : n' = n + 1,  C' = 2n'       (C' = {C[63:1],0} + 2)
    write: n' = n + 2,  C' = 2n' + 1   (C' = {C[63:1],0} + 5)

A read adds 1 to `n` and a write adds 2, so `n` counts reads plus twice the writes. Compare the
two ends after an attack:

| Attack | Difference in `n` afterwards | Stays detected? |
|---|---|---|
| Dropped write | 2 | yes, the gap never closes |
| Write turned into a read | 1 | yes |
| Read turned into a write | 1, in the other direction | yes |

No later legitimate traffic closes the gap, because the processor and the DIMM then apply the
same steps. Every later read of that rank fails verification until the processor re-keys the
rank.

The end-to-end testbench shows this for a dropped write and for a write turned into a read.

A limitation remains, and the original scheme shares it: an attacker who can also *inject*
commands can add a READ that only the DIMM sees and so move its `n` forward by one. This design
does not claim to stop command injection combined with response suppression.

The counter is 64 bits (8 bytes) and wraps at 2^64. A processor would re-key long before that.

## Pads and what they cover

The pad for a transaction is `AES-128_Kt(block)`, and the block differs by command type:

| Command | Block | Lane word on the bus | Pad bits used |
|---|---|---|---|
| read | `{64'b0, C_t}` | `MAC XOR pad[63:0]` | 64 |
| write | `{33'b0, addr, C_t}` | `{eWCRC, MAC} XOR pad[79:0]` | 80 |

`addr` is the full 31-bit command address. Because the write pad depends on the address, a
write that an attacker redirects is decrypted with the *wrong* pad at the chip. Most of the
80-bit word turns to noise, and the CRC check fails almost surely: 1 in 2^16 per try. If the pad
covered only the counter, an attacker who knew the CRC's linearity could flip chosen lane bits
together with address bits and keep the CRC consistent. With the address inside AES, that
freedom is gone.

The exact block layout is this design's own. The scheme fixes only that the write pad uses the
same key and counter and also includes the address.

## eWCRC (`secddr_ewcrc`)

The eWCRC is a 16-bit CRC over `{address, MAC}`. It uses polynomial x^16+x^12+x^5+1, initial
value 0, and MSB first; this is the CRC-16/XMODEM convention. The CRC is combinational and
unrolled over the 95 message bits.

- The processor computes it *before* encryption.
- The ECC chip recomputes it *after* decryption. The chip uses its own rank number, fixed by the
  `RANK_ID` parameter, together with the bank group, bank, row and column of the WRITE command
  it actually received.
- On a mismatch, the chip does not write the MAC and pulses `crc_alert`. The counter still
  advances, just as it did at the processor.

The polynomial is a choice of this design; the scheme leaves it open.

## Pad engine and throughput (`secddr_otp_engine`, `aes128_core`)

`aes128_core` is an iterative AES-128 that computes one round per clock, with on-the-fly key
expansion. Its result arrives 11 clocks after `start`, and it can start again in the cycle its
result is taken.

The S-box is not a table. It is computed as the GF(2^8) inverse, x^254 by square-and-multiply,
followed by the affine map. The 20 S-boxes (16 for the state, 4 for the key schedule) are
therefore plain logic.

`secddr_otp_engine` holds `NUM_AES = 3` cores, the count given for a DDR4 x8 ECC chip. Requests
are dispatched round-robin, and pads are collected round-robin, so they leave in request order
without tags.

A core that finished holds its pad until the consumer takes it. Its slot is free again only in
the same cycle the pad leaves. An earlier version treated the `done` cycle as free, and a new
request then overwrote the result; the fault test for this block reintroduces that bug.

Sustained rate is 3 pads per 11 clocks, or 0.273 per clock. That is more than one pad per
`tCCD_S = 4` clocks, which is enough for back-to-back column commands at DDR4-3200.

The original scheme assumes a 500 MHz in-DRAM logic clock and a faster 5-cycle AES. Here
everything runs on one clock. The unit count is kept, and the rate is checked against the
command clock instead.

## Inside the ECC chip (`secddr_ecc_chip`)

The chip behaves like a DRAM. It reacts to commands addressed to its rank, samples the write
lane `TCWL = 16` clocks after its own WRITE, and drives the read lane `TCL = 22` clocks after a
READ. On each command it does three things:

1. It steps its counter and pushes the pad block into a request FIFO that feeds the OTP engine.
   AES takes 11 clocks, which fits under both tCWL and tCL, so pads are always ready in time.
2. On a READ, it reads the stored MAC from the array port (`st_rd_*`, one clock latency) into a
   read-MAC FIFO.
3. It records the command in a pending FIFO, with a due time for reads. For writes, it also
   records the capture time in its own FIFO.

The pending FIFO retires commands strictly in order:

- A read retires at its due time. The chip drives `MAC XOR pad` on `rlane`.
- A write retires once its lane word has been captured. The chip decrypts the word, checks the
  eWCRC, and either writes the MAC (`st_wr_*`) or raises `crc_alert`.

Assertions check three things: a read never retires without its pad, a command is never lost
to a full FIFO, and a write burst is never lost.

The chip samples the lane on its own timing and does not look for a strobe. So a dropped or
delayed burst is decrypted as whatever the lane then holds, and the check fails as it should.

## Processor side (`secddr_mc`)

`secddr_mc` accepts `{is_write, addr, mac}` requests from the scheduler. The scheduler is not
part of this RTL and is responsible for DRAM timing. For each accepted request, `secddr_mc`:

1. Takes the rank's next counter.
2. Requests the pad.
3. Issues the command on the following clock.

For a write, it drives `wlane` exactly `TCWL` clocks later. For a read, it decrypts the `rlane`
word whenever it arrives, in command order, and returns the MAC on `rsp_*` with the read address.
Comparing that MAC with one computed from the data is the job of the memory encryption engine,
which is outside this RTL.

`req_ready` is low in three cases:

- The rank has no key.
- The pad engine is busy.
- `QDEPTH = 8` transactions are outstanding.

`secddr_session` holds each rank's key, counter and `established` flag. A `ld_*` pulse loads
a new key and counter. That is the hook for the key-exchange engine, and also how a rank is
re-keyed after a detected attack.

## The top and its testbench

`secddr_channel` has these parameters, all at their original values: 2 ranks, 3 AES units at
each end, tCL 22 and tCWL 16. It exposes the following signals as ports:

- Both ends of the channel.
- Both sets of key-load ports, one per end of the link.
- The rank arrays' storage ports.
- Per-rank status: `crc_alert`, `*_established` and `*_ctr`.

Ranks are selected by `addr.rank`, as chip select would do.

`tb/tb_secddr_channel.sv` runs the top at its defaults. It plays the scheduler, the DRAM arrays,
the verification engine (it keeps the expected MAC of every line) and the attacker. In order, it
checks:

1. Both ranks are keyed with different keys and counters.
2. Honest traffic: reads return the written MAC, write bursts come exactly tCWL after the
   WRITE, read bursts exactly tCL after the READ, and both ends' counters agree.
3. Stalls: back-to-back requests make `req_ready` fall.
4. Replay: an old E-MAC returned for a read fails verification.
5. Redirected write: the row is changed in flight. The chip raises `crc_alert` and stores
   nothing.
6. Dropped write: all later reads of that rank fail. Re-keying repairs the rank.
7. Write turned into a read: it is detected.
8. DIMM substitution: a rank re-loaded with an old counter fails verification.

The testbench counts each of these events and fails if any never happened. A typical run does
23 verified reads, 6 detected violations, 1 alert and about 24 stall cycles.

The unit testbenches check each block against independent reference models in
`tb/aes_ref_pkg.sv`: a table-driven AES, the counter rule in arithmetic form, and CRC long
division.

## Simulating

Each testbench is a top with no ports. It prints `TB_RESULT checks=N failures=M` at the end and
has a watchdog. For example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/secddr_pkg.sv tb/aes_ref_pkg.sv tb/tb_secddr_channel.sv --top-module tb_secddr_channel
./obj_dir/Vtb_secddr_channel
```

Substitute any of these for `tb_secddr_channel`: `tb_aes128_core`, `tb_secddr_otp_engine`,
`tb_secddr_session`, `tb_secddr_ewcrc`, `tb_secddr_mc`, `tb_secddr_ecc_chip`. Every testbench
runs in seconds.

To change the design:

- Widths, timing constants and the counter rule are in `rtl/secddr_pkg.sv`.
- Unit counts and queue depths are module parameters.

## Where this departs from the original scheme, and what is left out

- **Transaction-level lanes.** Each burst is one lane word. Beats, pins and the BL8/BL10 burst
  shape are not modelled; only the 80-bit write word reflects the longer write burst.
- **Counter step rule.** Parity follows the scheme. Stepping by 1 for a read and 2 for a write is
  this design's own rule, explained above.
- **Pad timing.** Pads are computed when a command is issued or received, and hidden under
  tCWL/tCL. The scheme says pads can be computed ahead of time, independent of traffic. That
  would be an optimisation here, not a change of function. The scheme also expects the chip's
  write pad to take longer than tCWL, adding write latency. At 11 clocks it does not here.
- **Single clock.** The I/O versus core clock ratio of a real DRAM is not modelled.
- **AES unit.** This design uses an iterative 11-clock AES-128, not the 5-cycle engine the sizing
  assumed.
- **Not in this RTL:** the memory encryption and MAC engine; the attestation and key exchange
  (elliptic-curve arithmetic, SHA-256, endorsement keys); the packing of MAC and error-correction
  bits into the ECC lane (the lane word is treated as one opaque, fully encrypted 64-bit word); the DRAM arrays; the RCD and data
  buffers; the DDR PHY; the scheduler. Their connections are ports of the top.
