# PUF-gated key authenticator for a hybrid-encryption hardware security module

Firmware and data files for industrial machines are often carried to the
machine physically, and a man-in-the-middle on that path can read or alter
them. The hardware security module (HSM) described here guards such files
with hybrid encryption, and puts an FPGA in charge of releasing the key. It
has three parts:

* **On a computer**, the file is encrypted with AES. The AES key is then
  encrypted with the RSA public key.
* **On a single-board computer (SBC)** next to the machine sit the encrypted
  file and the encrypted AES key. The SBC decrypts them, but only once it has
  been told that the right RSA private key has been presented.
* **On the FPGA**, the RSA private key is checked. The key arrives over a UART
  and is used as the *challenge* of an arbiter physical unclonable function
  (PUF). The PUF's *response* is looked up in a list of registered responses.
  A registered response lights a green LED and sends a signal byte to the SBC
  over a second UART. An unknown response lights a red LED and sends nothing.

An unusual point of this design is how it uses the PUF. A PUF usually derives
a key from the chip. Here the PUF is an authenticator: it maps the presented
key to a chip-specific fingerprint. A copied bitstream on another FPGA, or a
wrong key on this one, gives a fingerprint that is not in the list.

This repository holds the SystemVerilog of the FPGA part, with self-checking
testbenches. AES, RSA, the host GUI and the SBC software are not hardware
here (see "Not in this RTL").

```
 host GUI ──UART──► uart_rx ──bytes──► key_buffer ──KInput(0..7)──► fold ──challenge──► arbiter_puf
                                          ▲                                                  │ response
                                          │ clear                                            ▼
 LEDs (green/red) ◄── auth_controller ◄───┴──────────── match ◄── response_memory ◄── resp_leds
                           │                                            ▲
                           └── signal byte ──► uart_tx ──UART──► SBC     └── enrolment port
```

## The arbiter PUF

This is the block that needs the most care, in simulation and on silicon.

**Structure** (`arbiter_puf`, `puf_delay_line`, `puf_mux_pair`). The PUF has
`RESP_W` = 16 independent *delay lines*, one per response bit. A line is a
chain of `CHAL_W` = 16 *mux pairs*. Each pair has two 2:1 multiplexers, one
for the upper path and one for the lower path. Challenge bit *i* drives both
selects of stage *i*:

* with the bit at 0, each path goes straight through;
* with the bit at 1, the two paths swap.

One launch signal feeds both paths of every line. At the end of a line, a D
flip-flop acts as the *arbiter*: the upper path drives D and the lower path
drives the clock. The flip-flop therefore stores 1 when the upper path's
rising edge arrives first. Every line sees the same challenge. The lines
differ only in their delays, so each gives its own bit.

**Where the response comes from.** Logically the two paths carry the same
signal, so on an ideal chip the result would be a tie. On a real FPGA the
route and gate delays of each multiplexer differ slightly, and they differ
from die to die. Those differences decide the race, and no logic equation
describes them. Two consequences for this RTL:

* *Simulation.* Every multiplexer route carries a delay
  (continuous-assignment delays, in picoseconds):
  - a route's delay is `BASE_PS` (500) plus a value from 0 to `SPREAD_PS` (31);
  - that value comes from an integer hash of `DEVICE_SEED`, the line, the
    stage and the route (`hsm_pkg::puf_route_delay`).

  Each `DEVICE_SEED` thus stands for one die, and the simulator's event
  ordering resolves the race exactly as the silicon would. A tie resolves to
  0, because D sees an extra 0.5 ps. The model has no noise and no
  metastability, so a die always gives the same answer to a challenge.
* *Implementation.* Synthesis drops the delays and keeps the structure. To
  make a working PUF on an FPGA:
  - place and route the paths of a line symmetrically;
  - stop the tool from merging the two paths of a line (the nets carry
    `keep`/`dont_touch` attributes for that).

  A generic synthesis that ignores these attributes folds each line into one
  flip-flop, so area numbers from such a run are meaningless for this block.

**Timing.**

* The clock edge that samples `trigger` latches the challenge and raises the
  launch signal.
* The next edge only marks the race as in flight.
* The edge after that copies the 16 arbiter outputs into `response`, pulses
  `resp_valid` and drops the launch signal. A falling edge does not clock the
  arbiters.

The race therefore has two clock periods to settle. At the defaults it takes
at most 16 × 531 ps ≈ 8.5 ns. An assertion checks that bound against
`2 * CLK_PERIOD_PS` (100 MHz assumed). `resp_valid` is high in the third cycle
after the trigger cycle. A trigger that arrives while a race is running is
ignored.

**What to expect from it.** The publication tested its PUF with eleven 16-bit
keys, each presented twice, and reported the following:

* the same response in both runs;
* 8 distinct responses per run, which it gives as a uniqueness of
  16/22 = 72%.

With the default seed, the model gives identical runs and 10 distinct
responses per run, or 20/22. The responses themselves cannot match the
published ones, because they come from a model of a die, not from the
authors' board.

## From key bytes to a challenge

The host GUI converts the key file into bytes and sends them over the UART
(8N1, 115200 baud; `CLKS_PER_BIT` = 868 at 100 MHz). `key_buffer` writes the
bytes in order into the eight byte-wide buffers `KInput(0)` to `KInput(7)`.
When the eighth byte arrives it raises `key_valid`. It then ignores further
bytes until the controller clears it.

The published key path has eight byte buffers, which is 64 bits. The
published PUF has 16-bit challenges. The publication does not say how one
becomes the other. This design concatenates the buffers with `KInput(0)` as
the most significant byte, cuts the result into 16-bit words and XORs the
words together (`hsm_top`). A 16-bit key sent as two bytes followed by six
zero bytes therefore reaches the PUF unchanged. The end-to-end test sends the
published keys this way.

## Registered responses and the decision

`response_memory` holds `DEPTH` = 16 responses, each with a valid bit. A
lookup compares the response with every valid entry in parallel and answers
one clock later with `match` and the lowest matching index. After reset:

* entry 0 holds `1111111111011110`, the response that the published test
  lists as authenticated;
* the other 15 entries are empty.

The publication does not say how responses are registered. Here an operator
does it through the enrolment port (`enroll_we`, `enroll_idx`, `enroll_resp`,
`enroll_valid`), which can also revoke an entry. For enrolment the operator
needs to see a new key's response, so `hsm_top` shows the last response on
the 16-bit `resp_leds` output. A Nexys 4 board has 16 user LEDs.

`auth_controller` runs one authentication in six states:

1. **IDLE**: wait for `key_valid`.
2. **LAUNCH**: pulse the PUF trigger.
3. **WAIT_PUF**: wait for `resp_valid`, then start the lookup.
4. **LOOKUP**: wait for the lookup result.
5. **REPORT**: show the result.
6. **CLEAR**: empty the key buffers.

In REPORT the LEDs take the result. On success the controller also hands the
signal byte `8'h01` to `uart_tx`, waiting while the transmitter is busy. On
failure nothing goes to the SBC. The LEDs hold the last result until the next
authentication, and both are off after reset.

## Timing of one authentication

Cycle 0 is the cycle in which the receiver delivers the eighth byte, in the
middle of its stop bit:

| cycle | event |
|---|---|
| 0 | `uart_rx.valid`; the byte is written to `KInput(7)` |
| 1 | `key_valid` high; controller leaves IDLE |
| 2 | PUF trigger |
| 3 | race launched |
| 5 | response captured, `resp_valid`, lookup request |
| 6 | `match` valid |
| 7 | REPORT: LED registers load, `tx_start` on success |
| 8 | LEDs show the result; signal frame on the SBC line begins |

At 115200 baud, a key takes 8 × 10 bit times ≈ 0.69 ms to arrive. The
signal frame takes another 87 µs. The logic itself adds 8 clock cycles.

## Top-level ports (`hsm_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (100 MHz assumed), synchronous active-low reset |
| `uart_rx_i` | in | 1 | key bytes from the host GUI |
| `uart_tx_o` | out | 1 | signal to the SBC (`8'h01` after a success) |
| `led_green`, `led_red` | out | 1 | result of the last authentication |
| `resp_leds` | out | 16 | last PUF response |
| `enroll_we`, `enroll_idx`, `enroll_resp`, `enroll_valid` | in | 1, 4, 16, 1 | register (valid = 1) or revoke (0) a response |
| `frame_err` | out | 1 | strobe: a byte with a low stop bit was dropped |

The parameters are `CLKS_PER_BIT` (868), `KEY_BYTES` (8), `CHAL_W` (16),
`RESP_W` (16), `MEM_DEPTH` (16) and `DEVICE_SEED`.

## What follows the publication and what does not

These points come from the publication:

* the division of work between computer, SBC and FPGA;
* key entry over UART;
* the eight key buffers;
* an arbiter PUF built from multiplexer pairs with one D flip-flop per line;
* 16-bit challenges and responses;
* authentication by finding the response in a list held in the FPGA;
* green LED for success and red LED for failure;
* a UART signal to the SBC on success;
* the one registered response used in the reset contents.

These are this design's own choices, because the publication is silent on
them:

* the UART frame, baud rate and clock frequency;
* the folding of 64 key bits into the 16-bit challenge;
* all delay values of the PUF model, the tie rule and which path drives D;
* the two-cycle capture;
* the size of the response list, its parallel compare, the enrolment port and
  the response display;
* the value of the signal byte;
* starting as soon as the key is complete: the publication's photos show a
  push button being pressed, but it gives the button no role;
* no timeout between key bytes.

Two more departures:

* The publication's users also type a PIN passphrase into the UART interface.
  Its length, its framing and where it is checked are not given, so it is not
  implemented.
* Changing `CHAL_W` or `KEY_BYTES` changes the folding with it. The reset
  contents of `response_memory` are still 16 bits wide.

## Not in this RTL

* **AES**: key generation and encryption on the computer, decryption on the
  SBC. This is software in the publication.
* **RSA**: key generation, encryption of the AES key and its decryption on the
  SBC. Also software.
* **The SBC itself** (storage and decryption), the host GUI and the industrial
  machine.

## Files

`rtl/` holds one module or package per file:

* `hsm_pkg` has the shared sizes, the controller state type and the PUF delay
  function.
* The blocks are `uart_rx`, `key_buffer`, `arbiter_puf` (with `puf_delay_line`
  and `puf_mux_pair`), `response_memory`, `auth_controller` and `uart_tx`.
* The top is `hsm_top`.

`tb/` holds one testbench per block plus `tb_hsm_top`. `puf_ref_pkg` is an
independent reference model of the PUF delay race, used to predict the
responses. Every testbench prints `TB_RESULT checks=N failures=M` and has a
watchdog.

* `tb_uart_rx`: 40 bytes, a low stop bit, a start glitch, and the strobe
  position.
* `tb_uart_tx`: 30 frames sampled mid-bit, and a busy time of exactly 10 bit
  times.
* `tb_key_buffer`: 20 keys, the `key_valid` timing, bytes ignored while full,
  and clear.
* `tb_arbiter_puf`: two dies against the reference model. It checks the
  latency, stability, ignored re-triggers, that the dies differ, and the
  response spread.
* `tb_response_memory`: the 22 lookups of the published test against the
  reset contents, then random enrolment, revocation and lookup against a
  model.
* `tb_auth_controller`: the controller surrounded by small models of its
  neighbours. It checks the order of events, the LEDs, that the signal byte is
  sent only on success and only when the transmitter is free, and the clears.
* `tb_hsm_top`: end to end, at the default parameters (115200 baud at
  100 MHz). It checks:
  - the 22 published key presentations, response by response against the
    reference, and stability between the two runs;
  - enrolment, then acceptance with the signal byte decoded on the SBC line;
  - the 8-cycle latency;
  - the fold of a full eight-byte key;
  - revocation;
  - a framing error followed by a good key.

  It counts each of these mechanisms and fails if one never happens.

## Simulating

Verilator 5 with timing support is needed, because the PUF's delays matter.
The modules in `arbiter_puf`'s hierarchy declare their own time units, so give
the others a default time scale:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/hsm_pkg.sv tb/puf_ref_pkg.sv \
  --top-module tb_hsm_top tb/tb_hsm_top.sv -o sim
./obj_dir/sim
```

Replace `tb_hsm_top` with any other testbench name. The end-to-end run
simulates about 20 ms of device time (about 80,000 clock cycles per key)
and finishes in seconds.

To model another board, change `DEVICE_SEED`. To go faster in simulation,
lower `CLKS_PER_BIT`. A wider PUF needs the capture bound in `arbiter_puf` to
hold: `CHAL_W * (BASE_PS + SPREAD_PS)` must stay below two clock periods.
