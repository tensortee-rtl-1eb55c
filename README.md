# TensorTEE hardware: tensor-granularity memory protection for CPU + NPU

This is SystemVerilog RTL for the memory-protection hardware of TensorTEE. In
TensorTEE, one trusted execution environment spans a host CPU and a discrete
NPU. Both sides protect memory per tensor rather than per 64-byte line. The
CPU keeps one version number (VN) and one MAC for each tensor it detects. The
NPU verifies a tensor's MAC once the whole tensor has been read, and keeps
running while that check is pending. Because both sides use the same
encryption, a tensor moves between the enclaves as ciphertext, with no
re-encryption. Only its small metadata needs a protected channel.

## Encryption used everywhere

A line is encrypted in counter mode: `C = AES_K(address, VN) xor P`. Four
AES-128 blocks cover one 64-byte line. The line MAC is a keyed 56-bit value
computed from the ciphertext, the address and the VN. A tensor's MAC is the
XOR of its line MACs, so it does not depend on the order the lines are
visited in.

The counter address is the virtual address of the tensor line. This lets the
CPU and the NPU produce the same keystream for the same tensor. The AES and
MAC latencies are padded to the 40 cycles given for the evaluated system.

## Blocks (`rtl/`)

| File | Role |
|---|---|
| `tee_pkg.sv` | Widths (VA 64, VN 56, MAC 56, stride 10 bits), entry and statistics types, AES S-box, counter-block layout |
| `aes128_core.sv` | Iterative AES-128 encryption, one round per clock |
| `mee.sv` | Line encryption engine: 4 keystream cores + 1 MAC core, encrypt or decrypt a line, padded to `AES_LAT`/`MAC_LAT` |
| `meta_table.sv` | 512 tensor entries: base/last address, length, stride, VN, MAC, UF/BS flags; lookup classes hit-in / hit-boundary / miss; insert with 1-D merging in both directions |
| `tensor_filter.sv` | 10 entries × 4 miss samples; emits a tensor when the 4 samples share a VN and a bitmap bit and form a regular power-of-two line stride |
| `bitmap_cache.sv` | 6 KB direct-mapped cache of the per-line update bitmap, backed by a bitmap store in memory |
| `ten_analyzer.sv` | CPU memory-controller extension: read/detection and write/update dataflows, EnTMF enable, transfer install and metadata query |
| `ten_manager.sv` | NPU memory-controller extension: 512 tensor descriptors, tensor reads with delayed verification, instruction fetches verified before use, tensor writes that commit VN+1 and the XOR MAC |
| `poison_tracker.sv` | Per-tensor poison bits (own and derived), propagation through kernels, unverified-tensor limit, verification barrier |
| `trust_channel.sv` | Encrypted, sequence-numbered transfer of `{address, length, VN, MAC}` between the enclaves |
| `direct_channel.sv` | Copies ciphertext lines from one memory to the other |
| `tensortee_top.sv` | CPU request sequencer, NPU side, and the transfer unit that drives both channels |

### CPU read path

When a request arrives, the Meta Table classifies it:

- **Hit-in.** The address lies inside an entry, and the entry's VN is used at
  once.
- **Hit-boundary.** The address is the entry's last address plus its stride.
  - The entry VN is used as a guess while the off-chip VN is fetched.
  - If the two match, the entry grows by one line, and the line MAC is XORed
    into the tensor MAC.
  - If they differ, the top decrypts the line again with the correct VN.
- **Miss.** The off-chip VN is used. With EnTMF set, the line's VN, MAC and
  bitmap bit also go to the Tensor Filter.

A detected tensor is inserted into the Meta Table. It is merged with a recently
inserted entry when the two runs are adjacent at either end and share their
stride and VN.

### CPU write path

The Meta Table classifies a write as a hit on an edge of an entry (its first
or last line), a hit inside an entry, or a miss. BM is the line's bitmap bit.
BS and UF are the entry's flags.

- **Edge, UF=0.** Assert1 (BM==BS); flip BM; set UF. The tensor update
  starts.
- **Edge, UF=1.** Assert1; flip BM; Assert2 (every line updated); then VN+1,
  BS=~BS and UF=0. The update finishes, and the new tensor MAC takes effect.
- **Inside.** Assert3 (UF=1); Assert1; flip BM.
- **Miss.** The off-chip VN is incremented.

A failed assertion invalidates the entry. After that, the off-chip per-line
VNs, which every write keeps current, are used again. Assert2 is checked with
a per-entry count of lines updated. Because Assert1 lets each line flip only
once per update, this count tests the same condition as reading every bit.

### NPU side

- **Tensor reads.** A tensor read returns plaintext at once, marked as
  poisoned. The XOR of its line MACs is compared with the tensor MAC once the
  whole tensor has been read. That check clears the poison bit or raises a
  verification failure.
- **Kernels.** A kernel's output tensor inherits poison from its inputs. At
  most `MAX_UNVERIFIED` tensors may be unverified at once.
- **Instruction fetches.** These are checked against their line MAC before
  the data is returned.
- **Tensor writes.** These accumulate the XOR MAC, then commit VN+1 and the
  new MAC when the last line has been written.
- **Barrier.** An NPU-to-CPU transfer waits at the verification barrier until
  its tensor carries no poison. After any verification failure, the transfer
  is refused.

### Transfers

- **CPU to NPU.** The Meta Table entry for the tensor is sent over the trusted
  channel and becomes the NPU's tensor descriptor. At the same time, the
  direct channel copies the ciphertext from host to device memory.
- **NPU to CPU.** After the barrier, the descriptor travels back over the
  trusted channel and is installed as a Meta Table entry. The CPU then
  decrypts the copied lines with a hit-in lookup.

### Parameters (defaults = the evaluated configuration)

| Parameter | Value | Origin |
|---|---|---|
| `META_ENTRIES` | 512 | Meta Table size in the evaluation |
| `FILTER_ENTRIES`, `FILTER_ADDRS` | 10, 4 | Tensor Filter size |
| `BITMAP_BYTES` | 6144 | 6 KB bitmap cache |
| `NPU_TENSORS` | 512 | 512 tensor poison bits |
| `AES_LAT`, `MAC_LAT` | 40, 40 | engine latencies |
| `MAX_UNVERIFIED` | 16 | own choice; the source only says a counter limits it |

## Choices of this design (not given by the source)

- Entries store base, last address, length and a line stride. They do not
  store the 92-bit dimension field.
- Only 1-D merging is built. The 2-D and 3-D merges, which infer tensor
  dimensions, are not.
- The Meta Table is not saved and restored on a context switch.
- The tensor-filter pattern test, round-robin replacement, the bitmap cache
  organisation, the MAC function and the trusted-channel cipher are all this
  design's own choices. The trusted channel uses AES-CTR with a sequence
  number, a direction bit and a zero-pad check.
- An NPU read pass is assumed to touch each line exactly once. Instruction
  lines use VN 0.
- Derived poison bits are cleared when no tensor is unverified any more.
- The CPU does not verify line MACs on hit-in reads. It outputs the
  recomputed MAC instead.
- Lines copied by the direct channel do not get new per-line VN/MAC records.

## Not built

These are existing parts that the architecture reuses, not parts it designs:
CPU cores and caches, DRAM and its controllers, the NPU's control processor,
PE array and scratchpad, PCIe, attestation and key exchange, and the
conventional per-line VN/MAC/Merkle-tree path. The testbenches model their
ports behaviourally.

## Verification (`tb/`)

Every block has a self-checking testbench, `tb_<module>.sv`. Each testbench
prints `TB_RESULT checks=N failures=M` and has a watchdog. `tb_ref_pkg.sv`
holds an independent reference model: AES, line encryption and the MAC.

`tb_tensortee_top` runs the whole design at its default sizes through one
step of CPU/NPU collaborative training:

1. The CPU detects a weight tensor through misses, the filter and boundary
   hits.
2. It rewrites the tensor, which is the tensor update: VN 1→2.
3. It sends the tensor to the NPU.
4. The NPU reads it with delayed verification and derives a poisoned
   gradient.
5. The gradient's transfer is held at the barrier until the weights verify.
6. The CPU then reads the gradient through the installed entry.

It also covers:

- a refuted boundary guess;
- an Assert3 violation;
- a merge;
- EnTMF off;
- an instruction fetch;
- the unverified limit;
- a refused transfer;
- tampered device memory, which blocks the next transfer.

The testbench fails if any of these mechanisms never occurred.

### Simulating

From the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/tee_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_tensortee_top.sv --top-module tb_tensortee_top -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Replace `tb_tensortee_top` with any other `tb_<module>` to run that block's
testbench. Each testbench starts with reset high and drives it low at 1 ns. The
reset is asynchronous and acts on a falling edge, so the testbenches also pass
when every flop starts at a random value. The end-to-end run takes about a
minute, most of it spent compiling.

## Workload sizing

Each Adam step on the CPU touches four tensors for every parameter tensor: the
weight, the gradient, m and v.

- The listed models (GPT to OPT-6.7B) have between about 146 and 771
  parameter tensors.
- That is 584 to 3084 optimizer tensors, more than the 512 Meta Table
  entries. Entries are therefore replaced round-robin and detected again in
  each iteration.
- The NPU's 512 tensor slots hold the parameter tensors of every model except
  the largest-layered ones: GPT2-XL (580), OPT-2.7B and OPT-6.7B (516), and
  XGLM-4.5B (771).
- A 256×256 fp32 GEMM with 64×64 tiles needs 768 1-D entries. The 2-D
  merging described by the source, which is not built here, would bring this
  down to 3.
