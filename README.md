# TTD-Engine: a tensor-train decomposition engine beside a GEMM accelerator

Tensor-train decomposition (TTD) compresses a weight tensor of a neural network
by a chain of truncated SVDs: the tensor is reshaped into a matrix, the matrix
is decomposed, its small singular values are dropped, and the remainder is
reshaped for the next step. On a small edge processor that already has a
matrix-multiply (GEMM) accelerator, most of the time of such an SVD is not
spent in multiplication at all. It goes to the work the GEMM unit cannot do:
building Householder vectors, scalar divisions, norms, and sorting and
truncating the singular values. The host core does that work, and the data
keeps moving between DRAM and the accelerator's scratchpad.

The TTD-Engine moves that work next to the accelerator. It is a small block
with one floating-point unit. It drives the existing GEMM accelerator and
works on the accelerator's own scratchpad memory (SPM, 320 KB). The engine
does three things on its own:

* **Householder bidiagonalization (HBD).** It reduces a matrix A to
  A = U_B · B · V_Bᵀ, where B is upper-bidiagonal. The following QR
  diagonalization of the small matrix B stays in software.
* **Sorting.** It sorts the singular values and reorders the singular vectors
  to match.
* **δ-truncation.** It chooses the truncated rank from the prescribed accuracy.

While the engine runs, the host core can be clock-gated. This repository
holds synthesizable SystemVerilog (IEEE 1800-2017) for the engine, together
with a stand-in for the GEMM accelerator, the SPM, and self-checking
testbenches.

## Block overview

```
            APB                       DMA command port        SPM system port
             |                          ^        |                 |
      +------v------+   start/done   +--+--------v--+              |
      | REGISTER    |--------------->|   HBD-ACC    |---GEMM cmd--+ |
      | FILE        |<---------------|              |             | |
      +-------------+   results      +--+-------+---+             | |
         |      |                       |FP req |SPM              v v
   +-----v--+ +-v----------+            |       |        +----------------+
   |SORTING | |TRUNCATION  |--FP req--+ |       |        |   GEMM I/F     |
   +----+---+ +------------+          v v       |        +-------+--------+
        |                        +-----------+  |                | 16x16x16 blocks
        |                        |Shared     |  |        +-------v--------+
        |                        |FP-ALU     |  |        | GEMM accel.    |
        |                        +-----+-----+  |        +-------+--------+
        |                              |stream  |                |
      +-v------------------------------v--------v----------------v---+
      |      SPM I/F (fixed priority: system, GEMM, FP-ALU, HBD, SORT)  |
      +-------------------------------+------------------------------+
                                      |
                              SPM, 81920 x 32 bit
```

| Module | File | Role |
|---|---|---|
| `ttd_engine` | rtl/ttd_engine.sv | top: wires everything; APB, SPM system port, DMA command port |
| `reg_file` | rtl/reg_file.sv | APB registers, start pulses, sticky done flags, result read-back |
| `hbd_acc` | rtl/hbd_acc.sv | runs the whole bidiagonalization |
| `sorting` | rtl/sorting.sv | bubble sort with index array, reordering of U and Vᵀ |
| `truncation` | rtl/truncation.sv | threshold δ and truncated rank r_k |
| `fp_alu` | rtl/fp_alu.sv | shared FP-ALU: decoder and arbiter for two clients |
| `fp_alu_vec_stream` | rtl/fp_alu_vec_stream.sv | reads a vector from the SPM into a 4-entry FIFO; writes single results back |
| `fp_alu_core` | rtl/fp_alu_core.sv | MAC, DIV, SQRT units and their sequencer, NORM operation |
| `fp_add`, `fp_mul`, `fp_div`, `fp_sqrt` | rtl/ | FP32 arithmetic units |
| `gemm_if` | rtl/gemm_if.sv | splits any strided product into 16×16×16 blocks |
| `gemm_acc` | rtl/gemm_acc.sv | block GEMM engine on the SPM (stand-in for the existing accelerator) |
| `spm_if` | rtl/spm_if.sv | fixed-priority arbiter for the single SPM port |
| `spm` | rtl/spm.sv | 320 KB scratchpad, one port, one-cycle read |
| `sync_fifo` | rtl/sync_fifo.sv | small FIFO |
| `tt_pkg` | rtl/tt_pkg.sv | widths, structs, opcodes, register map |

All values are IEEE-754 single precision. Every address is a word address in
the SPM (17 bits). Matrix dimensions are 12 bits wide.

## The bidiagonalization (HBD-ACC)

HBD is the most involved part of the design. The textbook algorithm alternates
left and right Householder transforms and handles them with separate code.
Here, both directions run through one flow, selected by a bit `order`: 0 for a
column (left) transform and 1 for a row (right) transform. Each transform has
two parts:

1. **HOUSE.** For the vector x (part of column i below the diagonal, or part
   of row i right of the super-diagonal):
   - q = −sign(x₁)·‖x‖;
   - v = x, except v₁ = x₁ + sign(x₁)·‖x‖.

   q becomes the new diagonal entry B[i,i] (order 0) or super-diagonal entry
   B[i,i+1] (order 1).
2. **HOUSE_MM_UPDATE.** Compute β = v₁·q and v' = v/β. Then two matrix
   products update the trailing sub-matrix S:
   - order 0: w = vᵀ·S, then S ← S + v'·w;
   - order 1: w = S·v, then S ← S + w·v'ᵀ.

   This is the reflection S ← (I − 2vvᵀ/‖v‖²)·S written so that it needs only
   one division per element and two GEMMs.

The algorithm has two phases:

- **Reduction**, for i = 0 … N−1. Apply a column transform, then, for
  i < N−1, a row transform.
  - The transforms are applied to A itself.
  - Each Householder vector is written back into A in place of the reduced
    column or row, so it stays in the SPM for later.
  - The diagonal of B goes to array `d` and the super-diagonal to array `e`.
- **Accumulation**, for i = N−1 … 0. Read the stored vectors back.
  - Apply the same update to U_B (column transforms) and V_Bᵀ (row
    transforms).
  - Both start as identity; the HBD-ACC writes the identity itself.
  - In this phase v₁ comes from the SPM and q from `d` or `e`, so no HOUSE
    step is needed.

Each of the 2N−1 transforms in each phase passes through four stages:

| Stage | What happens | Used resource |
|---|---|---|
| PREPARE | address of the vector: `A + i·(N+1) + order`; DMA gather of `len` words, stride N (column) or 1 (row), into buffer `v` | DMA command port |
| HOUSE | NORM(v) on the FP-ALU; ADD ‖v‖+\|v₁\|; signs by bit manipulation; write v₁, q | FP-ALU, SPM |
| VEC DIVISION | β = q·v₁ (MUL); v'[k] = v[k]/β element by element (DIV with the store flag, so the FP-ALU writes v'[k] into buffer `v'` itself) | FP-ALU, SPM |
| REQUEST GEMM | two GEMM commands with strided operands, the second accumulating into S | GEMM I/F |

The HBD-ACC never computes a product itself. Both GEMMs go to the GEMM I/F as
one strided command each, for example w (1×cols) = vᵀ (1×rows) · S (rows×cols),
with A's row stride N. Transposition is only a swap of the row and column
strides.

Per decomposition the HBD-ACC issues:

- 4N−2 DMA gathers;
- 8N−4 GEMM commands;
- 2N−1 NORM operations;
- about N·M divisions.

**Memory needs.** The buffers v, v' and w are given by address; w needs
max(M,N) words. A matrix of M×N (M ≥ N) needs:

- M·N words for A;
- M·N words for U_B;
- N² words for V_Bᵀ;
- 2N words for d and e;
- about 3M words of buffers.

**Departure.** The accumulation phase updates U_B[i:M, i:N]. The algorithm
listing this design follows writes the column range as i+1:N. With that range,
column i of U_B would never be reflected, and U_B would not be orthogonal;
the testbenches confirm the corrected range.

**Limits.**
- A zero column or row (β = 0) is not treated specially and gives NaNs.
- sign(0) is taken as +1.

## Shared FP-ALU

The engine has a single floating-point unit, shared by HBD-ACC (client 0,
higher priority) and TRUNCATION (client 1).

- **Protocol.** A client holds `req_valid` with a stable `fp_req_t` until
  `req_ready`. The result comes back as a one-cycle `rsp_valid` to that client
  only.
- **Concurrency.** One operation runs at a time. The other client waits; the
  end-to-end test makes this happen.

The unit has three parts:

- **Decoder.** Arbitrates between the clients and remembers the owner of the
  running operation.
- **Vector streamer.** Loads vectors for NORM and stores single results.
  For NORM it latches `addr` and `len`, then reads
  SPM word `addr + cnt_k` for cnt_k = 0 … len−1 into a 4-entry FIFO. It issues
  a read only while the FIFO entries plus the reads in flight stay below 4, so
  the FIFO never overflows, however long the SPM arbiter stalls.
  A single operation requested with the `store` flag has its result written
  by the streamer to SPM word `addr`. The client's `rsp_valid` then comes in
  the cycle the write is granted, so the word can be read from the next cycle
  on.
- **Core.** Three arithmetic units — MAC, DIV and SQRT — and a sequencer:

  | Operation | Unit and latency |
  |---|---|
  | ADD, MUL | the MAC unit (×1.0 or +0), 2 cycles |
  | MAC | multiply rounded, then add rounded (not fused), 2 cycles |
  | DIV | restoring divider, 27 cycles |
  | SQRT | digit-by-digit, 26 cycles |
  | NORM | MAC of each streamed element with itself into an accumulator, then SQRT |

Arithmetic rounds to nearest-even and flushes subnormals to zero. Infinities
and NaNs propagate. No exception flags are kept.

## Sorting

SORTING bubble-sorts the n singular values at `sig_addr` into descending order,
in place.

- **Sort.** Each adjacent pair is read, compared, and written back only when
  the two values are exchanged. A pass without an exchange ends the sort.
- **Index array.** An index array in registers (MAX_N = 64 entries) tracks
  where every value came from.
- **Reorder.** The array is then used to copy U (u_rows × n, any row stride)
  column by column and Vᵀ (n × v_cols) row by row into destination regions:
  - Us[:, j] = U[:, idx[j]];
  - Vsᵀ[j, :] = Vᵀ[idx[j], :].

  Source and destination must not overlap.
- **Comparator.** The comparison is a small comparator for FP32 values inside
  the module, not an FP-ALU operation. Comparing two floats needs only their
  sign and magnitude bits. It also keeps SORTING from competing with HBD-ACC
  for the FP-ALU.
- **Counter.** `swaps` counts the exchanges.

## δ-truncation

TRUNCATION runs two commands.

- **DELTA.** Runs once per decomposition and computes
  δ = ε / √(d−1) · ‖σ‖. Here ‖σ‖ is the norm of the first SVD's singular
  values, which equals the Frobenius norm of the input tensor. The steps, all
  on the FP-ALU, are:
  1. NORM(σ);
  2. SQRT(d−1);
  3. MUL(ε, ‖σ‖);
  4. DIV.

  ε and d−1 are written as FP32 values into the register file.
- **TRUNC.** Finds the rank for a descending vector of `rank` values. It starts
  with the candidate rank−1 and asks the FP-ALU for the norm of the values that
  would be dropped, σ[cand … rank−1].
  - If that norm exceeds δ, the search stops with r_k = cand+1.
  - Otherwise the candidate is accepted, decremented, and the test repeats.
  - At least one value is always kept.

  The norm is compared with δ by comparing the bit patterns of the two
  non-negative floats. `steps` counts the accepted decrements.

## GEMM path and the scratchpad

**GEMM I/F.** Takes one command `C (+)= A·B` of any size m×k · k×n. Each
operand is given as base, row stride and column stride. The interface cuts the
command into blocks of at most 16×16×16:

- Output blocks are issued in row-major order, with the k-blocks innermost.
- The first k-block uses the command's `acc` flag; the later ones accumulate.
- A command with a zero dimension finishes at once.
- `tiles` counts the blocks issued.

**GEMM accelerator (`gemm_acc`).** Stands in for the processor's existing
accelerator.

- It has the same function — one 16×16×16 block C (+)= A·B on SPM data.
- It computes with a single multiply-accumulate datapath that walks the block
  element by element. It does not use the 64-PE array of the real unit.
- It is therefore much slower than the real unit. The engine does not depend
  on its timing: every block ends with a `done` pulse.

**SPM and SPM I/F.** The SPM is one 81920×32-bit array with one port and a
one-cycle read.

- The SPM I/F grants it to one of five clients per cycle, with fixed priority:
  1. the system-side port;
  2. the GEMM accelerator;
  3. the FP-ALU streamer;
  4. HBD-ACC;
  5. SORTING.
- Every client uses the same handshake (`mem_req_t` / `mem_rsp_t`):
  - the client holds `req` until `gnt`, which is combinational;
  - read data arrives with `rvalid` on the next cycle.

## Register map

APB, 32-bit registers at byte address 4·index, no wait states. An access at
index 32 or higher answers with `pslverr`.

| Idx | Name | Access | Meaning |
|---|---|---|---|
| 0 | CTRL | W | bit0 start HBD, bit1 start SORT, bit2 start DELTA, bit3 start TRUNC (one-cycle pulses; also clear that unit's done flag) |
| 1 | STATUS | R | [0] HBD busy, [1] SORT busy, [2] TRUNC busy, [3] any busy, [4] HBD done, [5] SORT done, [6] TRUNC done (sticky) |
| 2–4 | A_ADDR, M, N | RW | matrix A for HBD (M ≥ N, row-major) |
| 5–8 | U_ADDR, VT_ADDR, D_ADDR, E_ADDR | RW | outputs of HBD |
| 9–11 | V_ADDR, VP_ADDR, W_ADDR | RW | HBD work buffers v, v', w |
| 12, 13 | SIG, SIG_N | RW | singular values and their count (SORT and TRUNC) |
| 14–17 | SU_SRC, SU_DST, SU_ROWS, SU_LD | RW | U to reorder |
| 18–21 | SV_SRC, SV_DST, SV_COLS, SV_LD | RW | Vᵀ to reorder |
| 22, 23 | EPS, DM1 | RW | ε and d−1 (FP32) |
| 24 | DELTA | R | threshold δ (FP32) |
| 25 | RK | R | truncated rank |
| 26 | TILES | R | GEMM blocks issued |
| 27 | SWAPS | R | sorting exchanges |
| 28 | TSTEPS | R | truncation decrements |

**Typical sequence for one step of a decomposition:**

1. Load A through the system port.
2. Write the HBD registers and set CTRL bit0.
3. Optionally start DELTA at the same time.
4. Wait for STATUS[4].
5. Let the host diagonalize B with the QR method.
6. Write the singular values, U and Vᵀ.
7. Start SORT, then TRUNC.
8. Read RK.

## Top level and what lies outside it

`ttd_engine` contains everything above, including the GEMM accelerator and the
SPM, so that it can be simulated alone. Three things are not modelled and
connect through ports:

- **The system DMA.** The HBD-ACC issues gather commands
  (`dma_valid/dma_ready`, `dma_cmd` = {src, stride, dst, len}) and waits for
  `dma_done`. The DMA moves the data through the SPM's system-side port
  `ext_req/ext_rsp`, which the host core also uses. In this design A lives in
  the SPM, so a gather copies within the SPM.
- **The host core and the system interconnect.** They are modelled in the
  testbench by the APB driver and the memory accesses.
- **QR diagonalization of B.** It is done by the host core.

`busy` is high while any unit runs, and can gate the host core's clock.

## How far it has been tested

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog. Expected values are
computed independently in the testbench, usually in double precision.

- **Arithmetic** (`tb_fp_alu_core`): random and special operands for every
  operation, compared with real arithmetic within 1 ulp-level tolerance.
- **Streamer, FP-ALU, SPM, SPM I/F, GEMM I/F, GEMM accelerator**: random
  traffic on a memory model that stalls at random, with checks on data,
  ordering, priority and block counts.
- **HBD-ACC** (`tb_hbd_acc`): matrices of 1×1, 2×2, 5×5, 12×4 and 37×18
  (larger than one GEMM block in both directions). It checks:
  - that U_B·B·V_Bᵀ equals A (error around 4e-6 against values up to 8);
  - orthogonality of U_B and V_Bᵀ;
  - the number of DMA gathers and GEMM commands.
- **Workload** (`tb_resnet_layer_hbd`, top at default parameters): HBD of a
  576×64 matrix, the shape of ResNet-32's largest convolution kernel
  (64×64×3×3) unfolded, filled with random values. The SPM holds 79 680 of its
  81 920 words. The run takes 41.8 million cycles (about a minute of
  Verilator time) and issues 33 964 GEMM blocks. It checks reconstruction
  (error 1.4e-5 against values up to 8) and orthogonality (7e-7). Most of the
  cycles go to the single-MAC GEMM stand-in.
- **SORTING, TRUNCATION, register file**: against reference bubble sort,
  reference rank search and a shadow register copy.
- **End to end** (`tb_ttd_engine`, top at its default parameters including the
  full 320 KB SPM):
  - It runs HBD on a 20×6 matrix. DELTA and then SORT run concurrently with
    it, and TRUNC runs afterwards.
  - It counts that every mechanism occurred: column and row gathers, HOUSE
    and accumulation steps, block splitting, FP-ALU and SPM contention,
    exchanges, rank decrements, and an APB error.

Each testbench was also run against a deliberately broken copy of its module,
and detected the fault.

**Simulating with Verilator.** Run from the repository root, replacing
`tb_hbd_acc` by any testbench name:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hbd_acc \
  rtl/tt_pkg.sv tb/tb_fp_pkg.sv -y rtl -y tb tb/tb_hbd_acc.sv -o sim
./obj_dir/sim
```

The testbenches use `$urandom` only and need no input files.

## Sizes

| Parameter | Default | Where |
|---|---|---|
| SPM_WORDS / WORDS | 81920 (320 KB) | `ttd_engine`, `spm` |
| TILE | 16 | `tt_pkg`, `gemm_if`, `gemm_acc` |
| FIFO_DEPTH | 4 | `tt_pkg`, `fp_alu_vec_stream` |
| MAX_N | 64 | `sorting` |
| NREQ | 2 | `fp_alu` |
| NCLI | 5 | `spm_if` |

The largest layer of a ResNet-32 (64×64×3×3 kernel) unfolds to a 576×64
matrix. Its bidiagonalization needs about 79 700 words (A, U_B, V_Bᵀ, B and
buffers), which fits in the 81 920-word SPM. Its at most 64 singular values fit
the sorter's index array.

## Where this design departs from or adds to its source

- **Accumulation range.** HBD updates U_B[i:M, i:N] instead of the published
  i+1:N (see above).
- **Sort comparator.** SORTING compares values with its own comparator; the
  source's text has the shared FP-ALU do the comparison, while its block
  diagram draws a comparator in SORTING.
- **MAC.** The multiply-add is not fused.
- **GEMM accelerator.** `gemm_acc` has one MAC instead of the 64-PE array.
  Cycle counts of GEMM-heavy work are therefore not representative.
- **DMA.** The DMA engine and its interface are outside the engine; A is kept
  in the SPM, and the DMA gathers from it.
- **Own choices.** The register map, all handshakes, the priorities and the
  DIV/SQRT algorithms are this design's own.
