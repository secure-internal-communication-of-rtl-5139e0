# Crypto IP: stream-cipher encryption of SoC-internal bus traffic

On a TrustZone-enabled FPGA SoC (for example a Zynq-7000), secure software in
the processor's trusted execution environment often has to exchange sensitive
data with a secure IP block in the programmable logic. TrustZone tags each bus
access as secure or non-secure, but the data itself still crosses the AXI
interconnect in the clear. A hardware Trojan in the programmable logic, or a
malicious buffer inside the interconnect, can copy it on the way.

This design closes that gap with a small **crypto IP** placed in the secure
part of the programmable logic, next to the IP it protects. Software and the
crypto IP share a key and a message counter. Both run the same lightweight
synchronous stream cipher, Trivium or Grain-128a, so both produce the same
keystream. Software XORs its data with the keystream before sending it over
the bus. The crypto IP XORs it again and hands plaintext to the target IP.
Data read from the target goes back the same way. Only ciphertext travels
between the processor and the crypto IP.

```
 secure software                 crypto_ip (programmable logic, secure area)              target IP
 (trusted app)     AXI4-Lite   +---------------+   +-------------------+   +----------------+  AXI4-Lite
 ciphertext  <===============> | axil_slave_if |<->| crypto_controller |<->| axil_master_if |<==========> plaintext
                  s_axi_*      +---------------+   +---------+---------+   +----------------+  m_axi_*
                                                             |
                                               trivium_core | grain128a_core
                                                  (parameter CIPHER, W bits/clock)
```

The four-block split (slave interface, controller, stream cipher, master
interface), the two ciphers, their output rates and initialisation lengths,
and the counter-generated IV come from the design this RTL implements. The
register map, the message protocol, AXI4-Lite, the key port and all timing
beyond the cipher initialisation are this implementation's own choices. They
are listed below wherever they matter.

## Messages: how a transfer works

All traffic is organised in **messages**. A message is a run of `LEN`
consecutive 32-bit words, moving in one direction, at consecutive word
addresses of the target, starting at `ADDR`. Every message uses a fresh IV,
which is the current value of a 64-bit message counter. The counter is 0
after reset and goes up by one when a message finishes. Software keeps its
own copy of the counter, and it must stay in step with the hardware's.

Registers on the slave port (byte offsets; only `addr[7:0]` is decoded):

| Offset | Name   | Access | Contents |
|--------|--------|--------|----------|
| 0x00   | CTRL   | W (R)  | `[0]` start, `[1]` direction (0: software to IP, 1: IP to software), `[31:16]` LEN in words |
| 0x04   | ADDR   | RW     | byte address of the first target word |
| 0x08   | STATUS | R      | `[0]` busy, `[1]` cipher initialising, `[2]` direction, `[3]` target bus error in the last message, `[31:16]` words left |
| 0x0C   | DATA   | RW     | write: next ciphertext word (direction 0); read: next ciphertext word (direction 1) |
| 0x10   | IVLO   | R      | message counter `[31:0]` |
| 0x14   | IVHI   | R      | message counter `[63:32]` |

**Software to IP (decrypt and write).** Software writes ADDR, then CTRL with
start=1, direction=0 and LEN. It then writes LEN ciphertext words to DATA.
For word *n*, the crypto IP XORs the ciphertext with keystream word *n*,
writes the result to `ADDR + 4n`, and only then completes the DATA write. If
the target answered with an error, the DATA write gets SLVERR.

**IP to software (read and encrypt).** Software writes ADDR, then CTRL with
direction=1. The crypto IP reads `ADDR`, XORs the word with keystream word 0
and holds it. Software reads it from DATA. The read of the next target word
starts as soon as that DATA read has been answered.

**Stalls instead of polling.** A DATA access that the IP cannot serve yet,
because the cipher is still initialising or the target has not answered, is
not refused. The AXI access is held until the IP is ready. Software may issue
the first DATA access right after the start.

**Refused requests** get SLVERR and change nothing:

- any access with `AxPROT[1] = 1` (non-secure), which is stopped in the slave
  interface before the controller sees it;
- CTRL or ADDR written while a message is running;
- start with LEN = 0;
- DATA accessed outside a message, or in the wrong direction;
- writes to read-only registers;
- unknown offsets.

All accesses on the master side are issued as secure (`AxPROT = 3'b000`).

## The keystream

The IV of the message with counter value *c* is:

- Trivium: `iv[79:0] = c` (zero-extended);
- Grain-128a: `iv[95:0] = {31'b0, c, 1'b0}`. In Grain-128a, IV bit 0 selects
  the authenticated mode. Keeping it 0 makes the keystream the plain
  pre-output. The authentication (MAC) part of Grain-128a is not built.

The key comes in on the 128-bit `key` port; Trivium uses `key[79:0]`.

Keystream word *n* of a message is made of keystream bits `32n … 32n+31`, with
bit *j* of the word equal to keystream bit `32n + j`. The port bit order
follows the cipher specifications' numbering:

- Trivium: `key[i-1]` is K<sub>i</sub> and `iv[i-1]` is IV<sub>i</sub>;
- Grain-128a: `key[i]` is k<sub>i</sub> and `iv[i]` is IV<sub>i</sub>.

With this order both cores reproduce the published test vectors for the
all-zero key and IV:

- Trivium: `FBE0BF26 5859051B…`, keystream bits packed into bytes LSB first;
- Grain-128a: `C0207F22 1660650B…`, packed MSB first.

The core testbenches check both.

**Trivium** (`trivium_core`) has a 288-bit state made of three shift
registers of 93, 84 and 111 bits. Each round does three things:

- it XORs six state bits into one output bit;
- it forms three feedback bits, each with one AND of two adjacent bits;
- it shifts every register by one.

Key and IV are loaded into the first two registers. The last three bits of
the third register are set to 1. The state is then run for 1152 rounds with
no output.

**Grain-128a** (`grain128a_core`) has a 128-bit NFSR and a 128-bit LFSR.
The LFSR feedback is linear (f). The NFSR feedback (g) is nonlinear and also
takes the LFSR's oldest bit. The pre-output is a small nonlinear function h of
nine state bits, plus one LFSR bit and seven NFSR bits. During its 256
initialisation steps, the pre-output is also XORed into both feedbacks.

**Output rate W.** Both cores compute W rounds per clock. The round is written
once as a function and applied W times in a combinational loop, so synthesis
unrolls it. This is exact for W ≤ 64 (Trivium) and W ≤ 32 (Grain-128a),
because every bit a round reads is still inside the registers for that many
rounds. The controller always consumes 32-bit words and gathers 32/W cipher
outputs per word, so W must divide 32: 1, 2, 4, 8, 16 or 32.

## Timing

The controller accepts the start on some clock. From the next clock on, the
cipher initialises, then the controller needs a little more time before the
first target access:

| Cipher     | W  | Initialisation clocks | First target access after busy rises |
|------------|----|-----------------------|--------------------------------------|
| Trivium    | 1  | 1152 | 1152 + 32 + 2 = 1186 |
| Trivium    | 8  | 144  | 144 + 4 + 2 = 150 |
| Trivium    | 16 | 72   | 72 + 2 + 2 = 76 |
| Trivium    | 32 | 36   | 36 + 1 + 2 = 39 |
| Grain-128a | 1  | 256  | 256 + 32 + 2 = 290 |
| Grain-128a | 8  | 32   | 32 + 4 + 2 = 38 |
| Grain-128a | 16 | 16   | 16 + 2 + 2 = 20 |
| Grain-128a | 32 | 8    | 8 + 1 + 2 = 11 |

The initialisation counts (1152/W and 256/W) are those of the reference
design. The extra clocks are this implementation's overhead:

- 32/W clocks to gather the first keystream word;
- one clock for the controller to change state;
- one clock for the master interface to take the command.

The reference implementation clocks the programmable logic at 200 MHz. No
timing analysis has been done on this RTL. The unrolled cipher step is not
W rounds deep. Within W rounds no round reads a bit that an earlier round of
the same clock produced. Every new bit is therefore a one-round function of
the registered state: the logic grows wider with W, not deeper.

After the first word, the next keystream word is gathered while the current
bus access is in flight. For W = 32 the bus alone sets the word rate. The
cipher is re-initialised for every message, so short messages pay the
initialisation every time.

## Modules and files

| File | What it is |
|------|------------|
| `rtl/crypto_pkg.sv` | AXI4-Lite request/response structs, register request struct, register offsets, direction and cipher enums |
| `rtl/trivium_core.sv` | Trivium, W bits per clock |
| `rtl/grain128a_core.sv` | Grain-128a pre-output generator, W bits per clock |
| `rtl/axil_slave_if.sv` | AXI4-Lite slave: one access at a time, non-secure filter, register request port with back-pressure |
| `rtl/axil_master_if.sv` | AXI4-Lite master: one outstanding access, command/response port |
| `rtl/crypto_controller.sv` | register file, message sequencer, keystream gatherer, IV counter |
| `rtl/crypto_ip.sv` | top: wires the four blocks; parameters `CIPHER` (`TRIVIUM` default, `GRAIN128A`) and `W` (32) |

Every AXI4-Lite port is a pair of packed structs, `axil_req_t` (manager to
subordinate) and `axil_rsp_t` (subordinate to manager), from `crypto_pkg`. To
attach the IP to a tool-generated interconnect, unpack the struct fields onto
the usual `awvalid/awready/...` wires.

Reset is asynchronous and active low. It clears:

- the cipher state and the ready flags;
- the message counter;
- all handshake state.

The handshake modules check the AXI rule that a raised valid, with its
payload, stays raised until it is accepted. The controller checks that the
cipher is only stepped when ready, and that a bus command is only issued with
a full keystream word. These checks are concurrent assertions, active with
`--assert`.

## Simulation

Each testbench checks itself and prints one line,
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/crypto_pkg.sv tb/cipher_ref_pkg.sv tb/tb_crypto_ip.sv --top-module tb_crypto_ip
./obj_dir/Vtb_crypto_ip
```

Replace `tb_crypto_ip` with any of the following:

| Testbench | What it exercises |
|-----------|-------------------|
| `tb_trivium_core`, `tb_grain128a_core` | W = 32, 8 and 1 against a bit-serial reference, exact initialisation length, `next` held low, published test vector |
| `tb_axil_slave_if` | random AW/W order, stalled register port, error responses, non-secure filter |
| `tb_axil_master_if` | random target delays, read-back, error responses, secure AxPROT |
| `tb_crypto_controller` | both directions with a real Trivium core, latency of the first word, stall on an early DATA read, every refusal, bus error, counter |
| `tb_crypto_ip` | the default top (Trivium, W = 32) end to end: 20 messages of both directions, the last two 1000 words long, with the test acting as the trusted application |
| `tb_crypto_ip_variants` | the same end-to-end test on Grain-128a at W = 32 and 8, and on Trivium at W = 16 and 1 |

Shared testbench parts:

- `tb/cipher_ref_pkg.sv`: bit-serial reference models of both ciphers,
  written in the specifications' own numbering;
- `tb/axil_host_model.sv`: behavioural processor-side AXI master;
- `tb/axil_mem_model.sv`: behavioural target IP, a small AXI memory that
  answers SLVERR above a given address.

The end-to-end tests count each mechanism and fail if any of them never
happened:

- messages in both directions;
- the timed initialisation;
- a DATA read stalled by initialisation;
- non-secure accesses refused;
- DATA refused outside a message;
- a target bus error reported;
- the counter advancing;
- keystream gathering from narrow cores (variants test only).

## Size

At W = 32, synthesis of the RTL gives these flip-flop counts:

| Block | Flip-flops |
|-------|-----------:|
| `trivium_core` | 295 (288 state bits + counter + ready) |
| `grain128a_core` | 261 (256 state bits + counter + ready) |
| whole IP with Trivium | about 700 |

The reference FPGA implementation reports 358 and 304 flip-flops for the two
32-bit ciphers. Its control blocks used about 105 LUTs without the cipher.
The control blocks here are larger in flip-flops, about 400:

- an address and a data register on each AXI port;
- a 64-bit counter;
- a 32-bit keystream buffer;
- a 32-bit output buffer.

To shrink them, narrow the counter (the `IV_CNT_W` localparam in `crypto_ip`) or drop the
output buffer by reading straight through.

## Where this implementation departs from, or goes beyond, the reference design

- **Protocol.** The reference design fixes only the controller's role:
  pre- and post-processing, and scheduling of encryption and decryption. The
  message model, the register map, the stall-based flow control and the error
  rules above are this implementation's.
- **Keys.** How the key reaches the hardware is left open. Here it is a plain
  input port, to be driven from secure key storage. It is deliberately not a
  bus register.
- **Counter synchronisation.** The counter is 64 bits and visible to software.
  It cannot be written: if software loses step, a reset brings both sides back
  to 0. A writable counter would allow a key/IV pair to be reused.
- **TrustZone filtering.** The secure partitioning of the reference design is
  done with SoC configuration, outside the IP. The `AxPROT[1]` check in the
  slave interface is an extra guard added here.
- **Grain-128a MAC.** Grain-128a can also authenticate messages. That mode is
  not built: the crypto IP uses only the pre-output, as its flip-flop budget
  shows.
- **Not hardware.** The trusted application, the processor system, the AXI
  interconnect, the external memory and the target IP are not part of this
  RTL. The testbenches model the trusted application, the processor-side bus
  master and the target IP behaviourally.
