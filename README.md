# Symbol-level encryption for a 1000BASE-X optical Ethernet PCS

A gigabit optical Ethernet link carries a continuous stream of 8b/10b code-groups. It carries them even when no frame is being sent, because idle sets fill every gap. Someone who taps the fibre therefore sees the payload and also the traffic pattern: where frames start and end, how long they are, and how busy the link is.

This design encrypts the link at the Physical Coding Sublayer (PCS). The cipher works on the symbols that go into the 8b/10b encoder. Each symbol is a data octet or a control code, so the ciphertext is again a legal symbol stream. The encoder still produces valid, DC-balanced code-groups, the receiver still keeps its clock, and not one extra bit is sent.

Data symbols, idles, start and end delimiters are all encrypted the same way. After encryption the K (control) flag on the line looks random whether the link is idle or full. Throughput stays at 100 % of the line, and the cipher adds one clock cycle of latency in each direction.

The cipher is a stream cipher with an unusual alphabet:

* **Alphabet.** 1000BASE-X can carry 256 data symbols and 12 control symbols without a code error. K28.7 is dropped because its comma can falsely realign a receiver when it sits next to certain symbols. That leaves **267 symbols**. Each is numbered 0..266, and encryption is addition modulo 267.
* **Keystream.** The keystream must be uniform over 0..266, which a binary cipher cannot give directly. It comes from **FF3**, the NIST SP 800-38G format-preserving block cipher, run in counter (CTR) mode with radix 267. The block is **22 symbols**, the largest FF3 allows at radix 267.
* **Rate.** The FF3 engine is pipelined so that it finishes one block every 22 clock cycles. That yields one keystream symbol per 125 MHz clock, which is the 1000BASE-X symbol rate.

```
 GMII TX ─► TX_PCS_CTRL ─► TX_ENCRYPT ─► 8b/10b ENCODER ─► tx_code ─► (SERDES, fibre)
                                ▲
                         KEYSTREAM GENERATOR (CTR counter ─► FF3 ─► 22:1 mux)

 (fibre, SERDES) ─► rx_code ─► 8b/10b DECODER ─► RX_DECRYPT ─► RX_PCS_CTRL ─► GMII RX
                                                     ▲
                                          KEYSTREAM GENERATOR (same key, same counter)
```

The top module is `eth_pcs_crypt`: one Ethernet interface with both directions. The MAC and the SERDES are outside it, and their buses are its ports.

## The symbol alphabet: MAP and DEMAP

`symbol_map` turns a symbol (K flag plus octet) into an integer, and `symbol_demap` turns it back:

| symbol | value |
|---|---|
| Dx.y (K = 0) | the octet, 0..255 |
| K28.0 … K28.6 | 256 … 262 |
| K23.7, K27.7, K29.7, K30.7 | 263 … 266 |

The set of 267 symbols and the exclusion of K28.7 follow the published scheme. The order of the numbering is this design's own. Any order works, as long as both ends use the same one.

A symbol that is not in the alphabet goes through **unciphered**. That means K28.7, or a K flag on an octet that is no control code. The keystream symbol for that cycle is still used up, so both ends stay in step.

## Cipher operation (TX_ENCRYPT, RX_DECRYPT)

`cipher_operation` is the per-symbol datapath:

* encrypt: `c = (MAP(p) + ks) mod 267`
* decrypt: `p = (MAP(c) − ks) mod 267`

DEMAP then turns the result back into a K flag and octet. The sum of two numbers below 267 needs at most one subtraction of 267 (one addition for decryption), so the datapath is one 9-bit adder, a compare and a register. The output is registered: **one cycle of latency**.

The operation passes its input through unchanged (bypass) in two cases:

* `en` is low, so encryption is switched off;
* the keystream is not yet valid after reset.

The keystream advances every cycle, whether or not it is used.

`tx_encrypt` and `rx_decrypt` each combine one keystream generator with one cipher operation. They differ only in the sign of the operation.

## Keystream generator: FF3 in counter mode

`keystream_generator` contains three parts:

* **COUNTER** (`radix_counter`): 22 radix-267 digits, with the last digit least significant. It is loaded from `cnt_init` while reset is held, and it steps by one every 22 cycles.
* **FPE blockcipher** (`ff3_blockcipher`): encrypts the counter value into a 22-symbol block S0..S21.
* **cnt mod 22** (`slot_counter`): selects S_slot, one symbol per cycle.

The result is the CTR keystream `F_K(CNT0) ‖ F_K(CNT0+1) ‖ …` with no gaps.

The FF3 pipeline is 27 periods of 22 cycles deep, so the first block that belongs to `CNT0` appears **594 cycles** after reset. `ks_valid` rises at that point, with slot 0. Until then the cipher operation is in bypass.

Interface timing:

* `key` and `cnt_init` must be stable from reset onwards.
* `block_strobe` marks the last cycle of every 22-cycle period.

## The FF3 pipeline

FF3 splits the 22-symbol input into two halves, A and B, of u = v = 11 symbols, and runs 8 Feistel rounds. Round i does four steps:

1. Build the 128-bit block `P = (W xor i) ‖ NUM(REV(B))`. Here `W` is the right tweak half in even rounds and the left half in odd rounds, and NUM takes the 11 digits as a 96-bit integer.
2. Compute `y = NUM(REVB(AES_REVB(K)(REVB(P))))`.
3. Compute `c = (NUM(REV(A)) + y) mod 267^11`.
4. The new A is the old B, and the new B is c.

At the end, STR turns each half back into 11 digits. The tweak is fixed at zero, as in the published design. It is a parameter (`TWEAK`), which the testbench uses to run the NIST FF3 sample vector.

The hardware follows the stage budget of the published design. It has 27 stages in a row, each lasting one 22-cycle period, and every stage register takes its new value in the last cycle of the period:

| part | stages | what happens |
|---|---|---|
| REV | 0 | only a reordering of wires |
| NUM (`ff3_num`) | 1 | both halves to integers (Horner, ×267 + digit, 11 terms) |
| round 0..7 | 2 each | AES (one stage) and `mod 267^11` (`ff3_modadd`, two stages); the AES stage and the first reduction stage share one period |
| STR (`ff3_str`) | 10 | one division by 267 per stage, one digit out per stage |

The total is 1 + 8×2 + 10 = 27 stages. The stage counts of NUM, AES, the reduction and STR follow the published design. Placing AES and the first reduction stage in the same period is this design's choice. The AES result is ready by cycle 18 of 22, and the reduction register takes its value at the end of that period.

Keeping the halves as integers between rounds is this design's choice, and it is exact. Each round needs NUM(REV(A)) and NUM(REV(B)), and those are exactly the integers the previous round produced. So NUM and STR are needed once each, at the ends of the pipeline, not in every round.

### One AES core for eight rounds

Eight rounds each need one AES encryption per block, and there is a new block every 22 cycles. A single AES core that accepts a block every cycle covers all eight. `aes128_pipe` is a fully pipelined AES-128 with ten stages, one per round, and its round keys are computed from the key without registers. It is shared like this:

* In cycle `r` of each period (r = 0..7), the input mux feeds it the block `P` of Feistel round r. The Feistel stage of round r holds that block for the whole period.
* Ten cycles later, in cycle `r + 10`, the result comes out and is captured in `yr[r]`.
* By cycle 21, the last of the period, all eight results are ready. The `mod 267^11` stage of each round then takes its value.

This sharing works only because a period of 22 cycles is longer than 8 + 10 cycles. That is why the largest block size was the right choice: a longer block gives every pipeline stage more cycles to reuse the same hardware.

The AES key is byte-reversed (REVB(K)) once, at the core's key input. The S-box is computed when the design is elaborated (x^254 in GF(2^8) followed by the affine map), so no table file is needed.

### Arithmetic modulo 267^11

267^11 is about 4.9·10^26, an 89-bit number. AES gives a 128-bit `y`. `ff3_modadd` reduces `y` modulo 267^11 in its first stage and adds A in its second, with at most one subtraction of the modulus at the end.

`ff3_str` divides by the constant 267 once per stage. Yosys and the FPGA tools turn these divisions by a constant into large combinational logic. A radix that is not a power of two makes these two blocks the expensive part of FF3.

## Keeping both ends in step

CTR mode only works if the receiver subtracts exactly the keystream symbol that the transmitter added. The published scheme does not say how the two counters are synchronised. This design uses the simplest rule:

* Both ends load the same `cnt_init` and `key`.
* The receiver leaves reset exactly as many cycles after the far-end transmitter as a symbol takes from one cipher to the other. In a direct loop-back that is 3 cycles: the cipher register, the encoder and the decoder.
* Encryption is switched on and off the same way: `rx_dec_en` follows `tx_enc_en` after the same delay.

This is fine for a simulation or a fixed back-to-back setup. A real link would need some in-band way to align the counters, which is not part of this design.

## 8b/10b ENCODER and DECODER

`enc8b10b` and `dec8b10b` implement the standard Clause 36 code: 5b/6b and 3b/4b sub-blocks, the alternate D.x.7 form, the K28 and Kx.7 control codes, and running disparity.

* Bit 9 of a code-group is bit `a`, the first bit on the line.
* While in reset, the encoder sends K28.5 encoded from RD−.
* The decoder flags an invalid code-group (`code_err`) and a running-disparity violation (`disp_err`).
* After reset the decoder does not yet know the running disparity. It learns it from the first code-group whose disparity is not zero, and disparity errors are masked until then.
* Both have one cycle of latency.

## PCS controllers (TX_PCS_CTRL, RX_PCS_CTRL)

These are **reduced** Clause 36 controllers. They contain only what is needed to carry frames over the encrypted link.

`tx_pcs_ctrl`, from GMII to symbols:

* It sends /I2/ idle pairs (K28.5, D16.2) in the gap between frames.
* A frame starts with /S/ (K27.7) in an even position. If TX_EN rises in an odd position, the idle pair is completed first and /S/ replaces the second preamble octet.
* TX_ER during a frame sends /V/ (K30.7).
* A frame ends with /T/ /R/, plus a second /R/ when needed so that the next idle starts in an even position.

`rx_pcs_ctrl`, from symbols to GMII:

* /S/ is delivered as a 0x55 preamble octet with RX_DV set.
* /T/ ends the frame.
* A control code or a decoder error inside a frame sets RX_ER. A K28.5 inside a frame ends it with an error.

These parts of the PCS are **not** built: auto-negotiation (/C/ ordered sets), /I1/ idles, code-group synchronisation, carrier extension and clock-rate adaptation. Both directions also run on one clock.

## Where this RTL departs from the published design

* **Cipher latency.** The published TX_ENCRYPT latency is 192 ns (24 cycles). It is not broken down. Here the keystream is ready before the plaintext arrives, and the encryptor adds a single register: 1 cycle. No delay was padded in to match.
* **Counter synchronisation.** The two ends are aligned by their reset timing (see above). The published scheme does not describe a mechanism.
* **MAP order.** The numbering of the 267 symbols is this design's own.
* **PCS.** It is simplified, as described above. It uses one clock and has no elastic buffer.
* **Resources.** The published FPGA implementation stores the AES core in 77 block RAMs. Here each S-box is a constant 256×8 table filled in at elaboration. A synthesis tool may map it to ROM (block RAM) or to logic. A generic yosys synthesis of `eth_pcs_crypt` gives about 7,600 cells, 8,550 flip-flop bits and 756,000 bits of read-only tables. Nearly all of those table bits are S-boxes, at 2,048 bits each. Each AES core has 10 stages of 16 SubBytes S-boxes. The key schedule adds 40 S-boxes, and the two cores share them because they use the same key. These are not FPGA LUT counts, so they do not compare directly with the published 16,978 LUTs and 11,127 registers.

## Throughput and the traffic patterns

The line needs one symbol per 8 ns cycle at 125 MHz. The design makes one keystream symbol per cycle, so it runs at line rate for any load.

The end-to-end testbench runs the four published traffic patterns at the default sizes:

* **A:** idle link;
* **B, C, D:** 1024-byte frames with random payload at 10.2 %, 50 % and 91 % of line rate.

The results:

* With encryption on, the symbol entropy over 30,000 encrypted idle symbols is 8.05 bit. The ideal is log2 267 ≈ 8.06. The same stream in the clear has 1.0 bit.
* Control symbols make up about 4 % of the ciphertext, close to the 11/267 expected.
* Every frame arrives intact at the GMII receive port.

## Files

| file | contents |
|---|---|
| `rtl/pcs_crypt_pkg.sv` | constants (radix, block, stage counts), K-code octets, `pow_radix`, `revb128` |
| `rtl/aes_pkg.sv` | AES functions; S-box computed at elaboration |
| `rtl/aes128_pipe.sv` | 10-stage pipelined AES-128 |
| `rtl/ff3_num.sv`, `rtl/ff3_modadd.sv`, `rtl/ff3_str.sv` | NUM, `mod 267^11`, STR stages |
| `rtl/ff3_blockcipher.sv` | the 27-stage FF3 pipeline with the shared AES core |
| `rtl/radix_counter.sv`, `rtl/slot_counter.sv` | CTR counter, modulo-22 counter |
| `rtl/keystream_generator.sv` | counter + FF3 + symbol mux |
| `rtl/symbol_map.sv`, `rtl/symbol_demap.sv`, `rtl/cipher_operation.sv` | per-symbol cipher |
| `rtl/tx_encrypt.sv`, `rtl/rx_decrypt.sv` | the two cipher blocks of the PCS |
| `rtl/enc8b10b.sv`, `rtl/dec8b10b.sv` | 8b/10b code |
| `rtl/tx_pcs_ctrl.sv`, `rtl/rx_pcs_ctrl.sv` | reduced PCS controllers |
| `rtl/eth_pcs_crypt.sv` | top: one encrypted 1000BASE-X PCS |
| `tb/ref_model_pkg.sv` | independent reference models: AES-128, FF3 (on arbitrary-length digit arrays), CTR, MAP, 8b/10b |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with `$finish`. Each has a watchdog.

`tb_ff3_blockcipher` checks the RTL against the reference model at radix 267. It also checks the published NIST FF3 sample, at radix 10 with a 64-bit tweak. `tb_eth_pcs_crypt` uses the top with its default parameters. It loops `tx_code` back to `rx_code` and runs the traffic patterns. It counts each mechanism: start-up bypass, encryption switched on and off, even and odd frame starts, control codes created from data symbols, and carries in the counter. It counts a failure for any mechanism that never happened.

## Simulating

With Verilator 5, list the packages first and let Verilator find the modules in `rtl/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/pcs_crypt_pkg.sv rtl/aes_pkg.sv tb/ref_model_pkg.sv \
    tb/tb_eth_pcs_crypt.sv --top-module tb_eth_pcs_crypt -o sim
./obj_dir/sim
```

Replace the last file and the top-module name to run another testbench. `ref_model_pkg.sv` is needed only by the testbenches that import it. The top-level test takes about ten seconds.

To change the design:

* **Radix and block size** are the parameters `RADIX` and `HALF`. The pipeline depth follows them: STR takes `HALF − 1` stages.
* **Period.** The period is `2·HALF` cycles. The shared AES core needs at least 19 of them: 8 inputs, 10 cycles of latency and 1 cycle to capture. An elaboration-time assertion in `ff3_blockcipher` checks this.
