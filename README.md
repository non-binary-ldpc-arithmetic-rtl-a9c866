# Non-binary LDPC arithmetic error correction for a PIM macro

An analog processing-in-memory (PIM) array computes multiply-accumulate (MAC)
results in the current of its bit-lines. Those results are noisy. A read-out value
can be off by one or two counts because of device variation, IR drop or ADC
offsets. Ordinary memory ECC cannot protect them. It protects stored bits, but the
value that leaves a PIM column is a *sum* of many stored bits, computed in the
analog domain.

This design protects the sums themselves, using a **linear code over a small
prime field GF(p)** (here p = 3):

* Every row written into the array is a codeword `w' = w·H_G`. It holds the data
  symbols plus check symbols.
* The code is linear. So a sum of any set of rows, reduced mod p, is again a
  codeword. The column sums that a PIM MAC produces therefore still satisfy every
  parity check `H_C · y = 0 (mod p)`, whatever rows were switched on.
* A non-binary LDPC decoder takes the integer column results, checks them modulo
  p, and corrects the ones that break the checks. It then converts each corrected
  residue back into the nearest integer MAC result.

The same hardware protects plain memory reads, which are the one-row case. The
RTL here models the whole prototype:

* a 256 × 320 binary RRAM crossbar with ten flash ADCs, as a behavioural model;
* an encoder on the write path;
* an input scheduler;
* a GF(3) decoder with 288 variable nodes, and one check-node unit reused over
  time for 32 check nodes.

## The code

| quantity | value | meaning |
|---|---|---|
| P | 3 | field GF(3); a check symbol needs two binary cells |
| N_DATA | 256 | data symbols = data columns (one binary cell each) |
| N_CA | 32 | check symbols = check nodes (CN) |
| N_VA | 288 | codeword symbols = variable nodes (VN) |
| columns | 256 + 2·32 = 320 | array width; code rate 256/320 = 80 % |
| D_V | 2 | check nodes per symbol |
| D_C | 18 | symbols per check node |

The connection matrix H_C is not stored anywhere. It is a closed-form function of
the node indices, defined in `nbldpc_pkg`:

* data symbol `i = g·32 + r` (group g = 0..7, row r) is on CN `r` and on CN
  `(r + 2 + g) mod 32`. Each group uses a different shift, which keeps 4-cycles
  out of the graph;
* check symbol `256 + t` is on CN `t` and CN `t+1 (mod 32)`. This staircase
  lets the encoder solve the check symbols one after another;
* every edge has a fixed non-zero coefficient (1 or 2), computed by a hash-like
  formula. The last staircase coefficient is forced so that the staircase can
  always be solved.

Because the code is fixed, the VN↔CN "network" reduces to one constant
multiplexer per CN input. It is selected by the number of the CN currently being
processed.

**Reading values back.**

* A data column holds one binary cell. Its value in memory mode is 0..1, and in PIM
  mode 0..ADC_MAX, where ADC_MAX = 4 is the largest count the flash ADC resolves.
* A check symbol `c` is stored as bits `c0, c1` in two columns. The scheduler
  rebuilds its value as `col(c0) + 2·col(c1)`. That is the sum of the check symbols
  over the active rows, so it is consistent modulo 3 with the data sums.
* Each symbol therefore has a value `y` and a known range `0..ymax`. The decoder
  uses the range: a corrected value must stay inside it.

## Decoding

The decoder is a max-sum (log-domain) belief-propagation decoder. Every message is
an **LLV group**: one signed 8-bit log-likelihood per field element. Larger means
more likely, and values saturate at ±127.

### 1. Prior LLVs (`llv_init`)

For element `k`, the prior is minus the distance from the received value `y` to
the nearest integer in `0..ymax` that is ≡ k (mod 3). For example, if y = 3 and
ymax = 4, the candidates are 3 (≡0), 4 (≡1) and 2 (≡2), so the LLVs are
(0, −1, −1). If no in-range integer has residue k, the nearest one outside the
range is used. This happens in memory mode, where binary data only reaches 0 and 1.

### 2. Check nodes: forward-backward propagation (`cn_unit`, `fbp_prop`)

The core operation `⊕` combines two LLV groups:

* `(A ⊕ B)[k] = max over a+b≡k of (A[a] + B[b])` (max-plus convolution);
* then element 0 is subtracted from all three elements (normalisation).

A check node with inputs `L[0..17]` computes:

* the forward chain `FM[i] = FM[i-1] ⊕ L[i-1]`;
* the backward chain `BM[i] = BM[i-1] ⊕ L[18-i]`;
* the outputs `LLV'[i] = reflect(FM[i] ⊕ BM[17-i])`. Here `reflect` maps element
  k to −k.

`FM[i] ⊕ BM[17-i]` is the likelihood of the sum of every input except `L[i]`. For
the check to be zero, symbol i must equal minus that sum, hence the reflection.
`FM[0]` and `BM[0]` are the neutral element. They are marked by a flag rather
than stored as a special value.

**Error detection** comes for free: the check passes when the most likely element
of `reflect(FM[17])` equals the most likely element of `L[17]`. In other words,
the hard decisions of all 18 symbols add up to 0.

The inputs reach the CN already multiplied by the edge coefficients. The H_C
multiplexer does this by permuting each group: element z of the CN's copy is
element `z·h⁻¹` of the VN's group. The outputs are permuted back on the way to
the VN.

Timing of one check node (two `fbp_prop` instances, one for FM and one for BM):

| phase | cycles |
|---|---|
| sampling | 1 |
| forward/backward chains | 17 |
| LLV' outputs, two per cycle | 9 |
| **start → done** | **27** |

### 3. Variable nodes (`vn_group`, `vn_decide`)

Each VN stores:

* its prior;
* one LLV' slot per check node it belongs to;
* its *temporal* LLV group, which is what it sends to the CNs.

After a full pass over the CNs, every VN sets `temporal = norm(prior + slot0 +
slot1)`.

The decision takes the element with the largest temporal LLV (ties go to the
lowest element). It then outputs the integer in `0..ymax` nearest to `y` with that
residue (ties go to the smaller value). That integer is the corrected MAC result.

### 4. Control (`nbldpc_decoder`)

```
IDLE -> INIT (N_VA/N_VI cycles: priors) -> 32 x [CN_START, CN_WAIT]
     -> all CNs passed?  yes: out_valid, ok=1
                         no, iteration < MAX_ITER: VN update -> 32 rounds again
                         no, limit reached: out_valid, ok=0
```

The first CN pass doubles as plain error detection: an error-free word leaves
after it without any VN update. With N_VI = 288 and N_CI = 1, the latency is as
follows:

| case | cycles |
|---|---|
| error-free word | 2 + 32·28 = **898** |
| each further iteration | + 1 + 32·28 = **897** |

`out_iter_o` reports the number of VN updates and `out_ok_o` whether all checks
passed.

## Chip datapath (`nbldpc_pim_chip`)

```
wr_data (256 bits) -> nbldpc_encoder -> 320-bit row -> pim_core (256x320, 10 ADCs)
                                                           | 10 codes/beat, 32 beats
                        dbg_* (debug codeword input) --mux-+
                                                           v
                                             input_scheduler -> nbldpc_decoder -> out_val (256)
```

* `pim_core` is a **behavioural model** of the analog macro.
  * A computation takes a word-line vector `wl_i`, which is one row in memory
    mode.
  * The code of each column is the number of active rows whose cell is 1,
    clipped to ADC_MAX.
  * The codes are streamed ten columns per beat.
  * `inj_*` adds a signed offset to one column of the next computation, which is
    how tests create analog errors.
* `input_scheduler` collects the 32 beats into one codeword, forms the check
  values and ranges from `mode_i`, and holds the codeword until the decoder takes
  it. While the codeword waits, it applies back-pressure to the core.
* With `dbg_en_i` set, beats come from the `dbg_*` ports instead. This is the
  debug codeword input of the prototype. The serial host link that loads them
  (I2C in the prototype) is not part of this RTL: its protocol and registers are
  not described.

## Parameters

The defaults are the prototype's. The decoder, scheduler and top are
parameterised by:

* `N_VA`, `N_VI`, `N_CA`, `N_CI`, `D_V`;
* `C_P` and `N_P` (ADC lanes and number of cores);
* `ADC_MAX` and `MAX_ITER`.

The code needs the following:

* `N_VA − N_CA` must be a multiple of `N_CA`;
* `N_VI` must divide `N_VA`;
* `N_CI` must divide `N_CA`.

The decoder checks these at elaboration. The field order `P` and the LLV width
are package constants.

## Where this design departs from, or goes beyond, its source

These values come from the published prototype:

* GF(3);
* the 256 × 320 array;
* ten ADCs and one core;
* 288 hardware VNs and one hardware CN;
* the 80 % rate 256-symbol word.

Everything else below is this design's own.

* **Number of check nodes.** The prototype figures (320 columns, 80 % rate, two
  cells per check symbol) give 32 check nodes. The design-space study of the
  original work speaks of `N_CI = 16` being `N_CI/N_CA = 1`, which would mean 16.
  That study is a separate simulation setup, so 32 is used here.
* **H_C, H_G and the degrees** are not published. The structure above (D_V = 2,
  D_C = 18) is an assumption chosen to match the sizes. The encoder solves the
  staircase instead of multiplying by a stored generator matrix.
* **Reflection point.** The original text reflects every forward/backward message.
  Its block diagram reflects only where LLV' leaves the CN. Reflecting the chain
  messages would compute the wrong sums, so the diagram is followed.
* **Not given, so chosen here:**
  * the iteration limit (MAX_ITER = 10);
  * the LLV width (8 bits);
  * the ADC range (0..4, a "2.5-bit" flash ADC at row parallelism 4);
  * the beat order of the scheduler;
  * all handshakes;
  * the cycle schedule of the CN unit;
  * the tie rules.
* **Correction strength.** This decoder always corrects a single wrong symbol per
  word. Two or three wrong symbols are corrected only sometimes (about one word in
  four in the decoder test). Four or more are not corrected, but they are detected
  and flagged.
  * The published prototype reports correcting multi-bit errors. That relies on
    its own, unpublished code construction.
  * With degree-2 symbols, a max-sum decoder sees the same margin in a check-node
    message as in the prior. So a correct symbol between two failing checks can be
    pulled the wrong way.
  * Changing the messages to extrinsic form did not help measurably. The temporal
    form of the original is kept.
* **Not built:** the debug buffer and I2C port logic, and anything analog beyond
  the behavioural array model.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_nbldpc_pkg` | field arithmetic, LLV saturation and arg-max, H_C degrees and absence of 4-cycles |
| `tb_llv_init`, `tb_vn_decide` | exhaustive over values and ranges against reference functions |
| `tb_fbp_prop` | random groups against a reference convolution, plus a hand-worked example |
| `tb_cn_unit` | random checks against a brute-force reference; latency 27 |
| `tb_vn_group` | initialisation, slot writes, update and decisions (12 VNs, 4 lanes) |
| `tb_hc_connect` | every edge address and both permutations at full size |
| `tb_nbldpc_encoder` | syndrome of random words is zero |
| `tb_input_scheduler`, `tb_pim_core` | beat order, check values, ranges, clipping, back-pressure |
| `tb_nbldpc_decoder` | full-size decoder: 0 and 1 errors always correct with exact cycle counts; the success rate for 2–5 errors is printed |
| `tb_nbldpc_pim_chip` | full-size chip at default parameters, about 1 s in verilator |

`tb_nbldpc_pim_chip` runs:

* memory reads and PIM MACs;
* injected errors in data and check columns;
* decoder stalls with core back-pressure;
* debug-port words;
* words that hit the iteration limit.

It counts each of these, and a count of zero is a failure.

Run a testbench with verilator 5, putting the package first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_nbldpc_pim_chip \
    rtl/nbldpc_pkg.sv $(ls rtl/*.sv | grep -v nbldpc_pkg) tb/tb_nbldpc_pim_chip.sv
./obj_dir/Vtb_nbldpc_pim_chip
```

## Notes on lint

* Verilator reports some unused signal bits, for example the upper index bits in
  the VN loops, the CN `busy` output that the decoder does not need, and the
  decided symbols that the top does not output.
* `cn_unit` carries an assertion that forbids starting a check node while one is
  in flight. Its `disable iff (!rst_n)` makes verilator note that the reset is
  also used in a synchronous context. This is a simulation-only check, not a
  circuit path.
