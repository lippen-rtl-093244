# LIPPEN: full-pointer encryption engine in SystemVerilog

Pointer-authentication schemes such as Arm PAC keep the raw address in a
64-bit pointer and squeeze a short MAC into the few unused high bits. With
11 to 16 bits of MAC, an attacker who can test guesses (for example through a
speculative oracle) finds a valid code in minutes. LIPPEN takes the opposite
approach: the whole 64-bit pointer is replaced by its encryption under a
64-bit block cipher. A pointer is *sealed* (encrypted) when it is created or
stored and *unsealed* (decrypted) right before it is dereferenced. A forged or
corrupted sealed pointer decrypts to a random 64-bit value. Its unused high
bits are then almost certainly non-zero, and the engine flags it. Even when
the check passes by chance, the attacker gets a random address and not one
they chose.

This repository holds synthesizable RTL for the engine: a single-cycle
unrolled PRINCEv2 cipher, the seal and unseal datapaths with the modifier
(context) mixing, the configuration registers, and a RoCC-style coprocessor
wrapper with request and response queues. It is meant to sit next to a RISC-V
core. The core itself is not included.

## The seal and unseal equations

Let `K` be the 128-bit domain key, `ptr` the pointer, and `m` a 64-bit
modifier that binds the pointer to its context: the stack pointer for return
addresses, or a type or object id for data pointers. The modifier is split in
two, `m = m2 || m1`:

```
sealed = Enc_{K ^ m2}(ptr ^ m1)
ptr    = Dec_{K ^ m2}(sealed) ^ m1        fault = (unused bits of ptr) != 0
```

- **m1 is folded into the pointer.** It may only cover pointer bits that
  never form an address. Otherwise an attacker could flip a modifier bit and
  flip the matching address bit with it, without touching the ciphertext.
  With a `VA_W`-bit virtual address (48 by default) these are bits 48..63,
  plus the two alignment bits 0 and 1 of a word-aligned pointer, so
  `|m1| <= 64 - VA_W + 2 = 18`. In this RTL, modifier bit `j` of m1 lands on
  pointer bit `VA_W + j`. Past the high bits it lands on bits 0, then 1.
- **m2 is folded into the key.** It buys more context bits when m1 runs out,
  but it makes keys of different domains related. The OS must therefore keep
  the `128 - |m2|` key bits that m2 does not touch unique per domain. In this
  RTL, m2 bit `j` is XORed into key bit `j` (the low end of the second key
  half).
- **Memory tags.** If the top `TAG_W` bits of a pointer hold a memory tag
  (parameter `TAG_W`, default 0), m1 stays out of them and the check ignores
  them. The tag is encrypted along with the rest of the pointer and comes
  back unchanged. Each tag bit costs one m1 bit: `|m1| <= 64 - VA_W - TAG_W + 2`.
- **The check.** A genuine sealed pointer to a user-space address decrypts to
  a value whose free high bits (`VA_W` up to `63 - TAG_W`) are zero. If m1 reaches into bits 0 and 1,
  those must be zero as well. A wrong modifier or a forged ciphertext makes
  these bits non-zero with probability `1 - 2^-|m1|`.

Reset configuration: `|m1| = 16`, `|m2| = 0`, protection on. Sixteen bits
distinguish every pointer variable of the largest SPEC CPU2017 program
(about 32,000).

## The cipher: `prince_v2_core`

PRINCEv2 is a 64-bit block cipher with a 128-bit key `k0 || k1`. It was
built for fully unrolled, single-cycle hardware. The core is purely
combinational: twelve layers of 4-bit S-boxes, the `M'` diffusion matrix, a
ShiftRows permutation and constant/key additions, computed in one pass.

```
s = m ^ k0
round i = 1..5 : s = SR(M'(S(s))) ^ RC_i ^ (i odd ? k1 : k0)
middle         : s = S^-1( M'( S(s) ^ k0 ) ^ k1 ^ BETA )
round i = 6..10: s = S^-1( M'( SR^-1( s ^ RC_i ^ (i odd ? k1^ALPHA^BETA : k0) )))
c = s ^ RC_11 ^ k1 ^ ALPHA ^ BETA
```

Decryption is the exact inverse of these steps in reverse order. The core
holds two chains, one per direction, and `decrypt_i` selects between them.
Round constants, `ALPHA`, `BETA`, the S-box and `M'` are in `lippen_pkg`.
The core reproduces the five published PRINCEv2 test vectors, for example
plaintext 0 under key 0 gives `0125fc7359441690`.

One detail is not pinned down by those vectors. The middle layer could add
`k0` before `M'` and `k1 ^ BETA` after it, or `k1` before and `k0 ^ BETA`
after. The vectors give the same result either way. This RTL uses the first
form, which keeps the key sequence alternating. If you have the reference
implementation, compare a random key against it before relying on
interoperability with other PRINCEv2 implementations.

## Instructions and the accelerator: `lippen_top`

The engine is a coprocessor that receives custom instructions. The funct7
value of the instruction selects the operation:

| funct7 | instruction            | rs1            | rs2        | rd                     |
|-------:|------------------------|----------------|------------|------------------------|
| 0      | `SET_KEY(K1, K2)`      | K1 (key bits 127:64) | K2 (key bits 63:0) | 0 if xd=1   |
| 1      | `SET_M_SIZE(m1, m2)`   | bits 6:0 = \|m1\|, bit 63 = protection off | bits 6:0 = \|m2\| | 0 if xd=1 |
| 2      | `PTR_SEAL(ptr, mod)`   | pointer        | modifier   | sealed pointer         |
| 3      | `PTR_UNSEAL(ptr, mod)` | sealed pointer | modifier   | pointer, plus `resp_fault_o` |

The sizes are clamped: `|m1| <= 64 - VA_W - TAG_W + 2` and `|m2| <= 64 - |m1|`.
Setting bit 63 of rs1 in `SET_M_SIZE` turns protection off for debugging.
Seal and unseal then return their operand unchanged and never fault.

Data flow:

```
cmd ──► request queue ──► head ──┬─► lippen_cfg_regs (SET_KEY / SET_M_SIZE)
        (REQ_DEPTH=2)            ├─► lippen_seal   ─┐
                                 └─► lippen_unseal ─┴─► response queue ──► resp
                                                        (RESP_DEPTH=2)
```

- Commands execute strictly in order. A `SET_KEY` affects every later seal
  and unseal and no earlier one, because configuration changes pass through
  the same queue.
- **Timing.** A command accepted at clock edge *t* reaches the head of the
  request queue. The cipher works on it combinationally, and its result is
  written into the response queue at edge *t+1*. With no backpressure, a
  dependent instruction stream therefore sees 2 cycles per seal or unseal,
  and independent commands complete one per cycle.
- **Stall.** A command answers only if `xd = 1`. Such a command waits at the
  head while the response queue is full. The request queue then fills and
  `cmd_ready_o` drops.
- **Faults.** An unseal fault is returned as `resp_fault_o` next to the
  response, together with the decrypted value. Whether the core traps or
  poisons the register is left to the core.

### Files

| file | contents |
|------|----------|
| `rtl/lippen_pkg.sv` | types (`cfg_t`, `req_t`, `resp_t`, `rocc_inst_t`, `funct_e`), PRINCE constants, cipher layer functions, m1/m2 placement |
| `rtl/prince_v2_core.sv` | unrolled PRINCEv2 encrypt/decrypt |
| `rtl/lippen_seal.sv` | seal datapath |
| `rtl/lippen_unseal.sv` | unseal datapath and zero check |
| `rtl/lippen_cfg_regs.sv` | key, modifier sizes, enable |
| `rtl/lippen_queue.sv` | valid/ready FIFO (request and response queues) |
| `rtl/lippen_top.sv` | the accelerator |
| `tb/prince_ref_pkg.sv` | reference model of the cipher and of seal, written independently of the RTL |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_lippen_workloads` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For
example, with Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/lippen_pkg.sv tb/prince_ref_pkg.sv \
  rtl/prince_v2_core.sv rtl/lippen_seal.sv rtl/lippen_unseal.sv \
  rtl/lippen_cfg_regs.sv rtl/lippen_queue.sv rtl/lippen_top.sv \
  tb/tb_lippen_top.sv --top-module tb_lippen_top
./obj_dir/Vtb_lippen_top
```

- `tb_prince_v2_core`: published test vectors, 200 random encryptions
  against the reference model, and decrypt(encrypt(x)) = x.
- `tb_lippen_seal`, `tb_lippen_unseal`: random keys, pointers, modifiers and
  splits. The unseal bench also checks detection of a flipped m1 bit, a
  flipped m2 bit, forged ciphertexts and a misaligned pointer under an 18-bit
  m1.
- `tb_lippen_top`: the whole accelerator at its default parameters, with
  random command traffic and a randomly throttled response channel. Every
  response is compared with a model of the architectural state. It also
  checks the 2-cycle latency and one-per-cycle throughput, and that seal,
  good unseal, tamper, forgery, key change, m2 use, debug bypass, command
  stall and response backpressure each occurred.
- `tb_lippen_workloads`: the micro-benchmark access patterns at full size.
  A recursion 4096 deep seals return addresses with the stack pointer as
  modifier, then unseals them in reverse, and one overwritten frame must
  fault. Nested calls of depth 8 are looped. Pointer chasing does 32
  dependent unseals per walk with a zero, a shared or a per-node modifier,
  in 64 cycles.

All testbenches finish in well under a minute.

## Where this RTL departs from, or goes beyond, the published description

- **Engineering choices of this RTL.** The instruction encoding, the operand
  layout of `SET_M_SIZE`, the debug-disable bit, the exact bit positions of
  m1 and m2, the queue depths and the reporting of faults as a response flag
  are all decisions made here.
- **Separate datapaths.** Seal and unseal have a cipher chain each. The
  published FPGA figures are for a shared encrypt/decrypt datapath, so this
  RTL is larger than that.
- **Modifier width.** Context is limited to 64 bits: one modifier register,
  split into m1 and m2. The scheme allows contexts of up to 192 bits, which
  would need a wider modifier operand.
- **Tag position.** `TAG_W` (default 0) reserves the top pointer bits for a
  hardware memory tag. Placing the tag at the very top is a choice of this
  RTL; a tag elsewhere (for example bits 59:56) needs a different mask
  function in `lippen_pkg`.
- **Key management.** Only one key register exists, for the current domain.
  Keeping keys unique per domain, and deriving or swapping them, is up to the
  OS.
- **Not included.** The host core (a Rocket or BOOM class RISC-V core), the
  compiler instrumentation, and the full RoCC bundle (memory and page-table
  ports, interrupt) are not part of this RTL.
