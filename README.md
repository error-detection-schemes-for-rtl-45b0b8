# Fault-detecting Barrett reduction in an NTT butterfly

Lattice-based schemes such as Kyber, Dilithium and Falcon spend most of
their arithmetic in the number-theoretic transform (NTT), and most of each
NTT butterfly in one modular multiplication, `V = x * w mod q`. A glitch
or laser pulse that corrupts this multiplication can leak key material. This
RTL builds the multiplier so that it checks itself. Every step of the
reduction is computed twice:

* once on the plain operands, by a word-wise Barrett reducer;
* once on operands that have been re-encoded, by a *recomputation unit*.

The encoding is chosen so that, without a fault, the two results are equal
bit for bit. A comparator raises `fault` when they differ. Three encodings
are provided:

* **RESWO** (recomputation with swapped operand bits), the default;
* **RENO** (negated operand);
* **RESO** (shifted operands).

The multiplier sits inside a three-stage Cooley-Tukey butterfly. That
butterfly sits inside a small NTT engine with a coefficient memory, a
control unit, a loop-index generator and a twiddle ROM. At the default
parameters the engine runs a complete Kyber forward NTT
(n = 256, q = 3329, 12-bit coefficients, 4-bit words).

The scheme follows the paper "Error Detection Schemes for Barrett Reduction
of CT-BU on FPGA in Post Quantum Cryptography" (Baidya, Paul, Srivastava,
Debnath). Several points the paper leaves open or states inconsistently had
to be decided here. They are listed in "Departures from the paper" below.

## 1. Word-wise Barrett reduction

An `l`-bit operand `alpha` is split into `NW = l/w` words `alpha_i` of `w`
bits, and `beta` likewise. The product is a sum of word products:

    alpha * beta = sum over i, j of  c_ij,   c_ij = (alpha_i * beta_j) << ((i+j) w)

Each `c_ij` is less than `2^(2l)`. It is reduced on its own with the Barrett
constant `mu = floor(2^(2l) / q)`:

    qhat = (c * mu) >> 2l          (bits [2k-1 : k] of c*mu, k = 2l)
    r    = c - qhat * q

`qhat` is never more than one below `floor(c/q)`, so `r` lies in `[0, 2q)`.
The partial results are summed with two conditional subtractions:

    r'  = r >= q ? r - q : r
    rho = rho + r';  rho = rho >= q ? rho - q : rho

`rho` always stays in `[0, q)`. For Kyber, `mu = 5039` and `NW = 3`, so there
are 9 word steps.

The words are small, so one word step is a short path:

* a `w x w` multiplier;
* a shifter;
* an `(2l) x (~l)` multiplier and an `(~l) x l` multiplier;
* a subtractor.

`barrett_reduce` is that word step. `mbrfd` runs one word step per clock
cycle, `i` as the outer loop and `j` as the inner one. The word size `w` is
a parameter. It trades multiplier size against cycle count without changing
the result.

## 2. The three recomputations

Each recomputation unit takes the same two words and the same offset `i+j`
as the main path. It returns `rf`, which must equal `r` exactly, not merely
modulo `q`. The comparison is made before the final subtractions, so an
exact match is what makes it meaningful.

**RESWO** (`reswo_recomp`). Two bits of the alpha word, positions `SI` and
`SJ`, are exchanged. By default these are the top and bottom bits of the
word. Swapping changes the word by

    Delta = (a[SI] - a[SJ]) * (2^SI - 2^SJ),   so   a_swapped = a - Delta

The unit computes `a_swapped * b + Delta * b`, which is `a * b` again. The
correction `Delta * b` is zero or `+/-((b << SI) - (b << SJ))`, so it needs
only shifts and one add/subtract. The corrected product is then shifted and
reduced exactly like the main path.

The encoding is what catches faults. The recomputation's multiplier sees
different bit patterns from the main multiplier. A stuck or flipped bit
therefore rarely corrupts both results in the same way.

**RENO** (`reno_recomp`). The alpha word is negated in two's complement,
so the product is `-c`. The quotient is taken from the magnitude `c` and
applied with a negative sign. The result is `-c + qhat*q = -r`, which a
final two's complement turns back into `r`.

Shifting the negative product arithmetically would round the quotient the
other way and give `r - q`. That is why the magnitude is used.

**RESO** (`reso_recomp`). Both words are shifted left by one bit, so the
product is `4c`. Taking bits `[2k+1 : k+2]` of `4c * mu` gives the same
`qhat` as the main path. The unit subtracts `qhat * 4q` (the factor 4 is a
wired shift of `q`) to get `4r`. A right shift by two gives `r`.

## 3. Timing of one multiplication (`mbrfd`)

The main path and the recomputation are offset by one cycle. Cycle `s`
reduces word pair `s` on the main path and registers `r` together with the
*clean* words. Cycle `s+1` feeds those registers to the recomputation unit,
compares `rf` with the registered `r`, and accumulates `r` into `rho`.

A transient that disturbs one clock cycle therefore hits the two
computations of the same word pair at different times.

    edge:   0      1     2     ...   9     10    11
            start  w0    w1          w8
                         cmp0  ...   cmp7  cmp8
                                           done

`start` is accepted when `busy` is low. `done` is a one-cycle pulse
`NW*NW + 2` edges later (11 for Kyber). `rho` and `fault` hold their values
until the next `done`. `fault` is the OR of the mismatches of all word steps
of that multiplication.

## 4. Butterfly and NTT engine

`ct_bu` has three stages:

1. It registers `U = alpha[j]`, `x = alpha[j+t]` and the twiddle `w`.
2. It runs `mbrfd` to get `V = x*w mod q`.
3. It registers `y0 = U+V mod q` and `y1 = U-V mod q`, together with the
   fault flag.

Stage 2 takes several cycles, so one butterfly is in flight at a time.
`in_ready` falls on acceptance. `out_valid` pulses `NW*NW + 4` edges after
acceptance.

`ntt_fd_top` wires the rest around the butterfly:

* `poly_mem`: N x l coefficient memory. It has one port (`addr`,
  `rd_wr_en`, `din`, `dout`) and reads synchronously.
* `mem_mux`: the mux/demux pair that gives this port either to the NTT or
  to the external `ext_*` port. The external port stands for the other
  units of a Kyber core that share the memory (polynomial multiplier,
  adder, loader). The side that does not own the memory reads zero.
* `ijk_gen`: walks the NTT loops. The layer with `m` blocks of half-size
  `t` starts at `t = N/2`, `m = 1`. Block `i` starts at `k = 2*i*t`, and
  butterfly `j` runs over `k .. k+t-1`. The generator outputs the addresses
  `j` and `j+t` and the twiddle index `m+i`.
* `twiddle_rom`: entry `e` is `ZETA^bitrev(e) mod Q`. The table is
  computed at elaboration, so it changes automatically with the
  parameters.
* `ctrl_unit`: per butterfly, RD0 (read `alpha[j]`), RD1 (read
  `alpha[j+t]`, capture U), RD2 (capture x), BU (hand over), WAIT, WR0
  (write y0), WR1 (write y1, step the indices). It owns the memory while
  busy. It counts butterflies whose fault flag is set (`fault_count`) and
  raises `fault_flag`. Both clear on the next `start`.

Each butterfly takes `NW*NW + 10` cycles. A Kyber NTT has 7 layers of 128
butterflies and takes 896 x 19 + 1 = 17,025 cycles from `start` to `done`.
That is 170 us at the 100 MHz clock the paper's FPGA results use.

Results overwrite the input in place: coefficients go in in normal order
and come out in bit-reversed order. The transform is the standard Kyber
NTT with 7 layers and `zeta = 17`. It is not the full 8-layer NTT, because
3329 has no 512-th root of unity.

### Using the engine

1. While `busy` is low, write the polynomial through `ext_addr`, `ext_we`
   and `ext_din`, one word per cycle.
2. Pulse `start`.
3. Wait for `done`.
4. Read the result through `ext_addr` and `ext_dout`. Read data appears one
   cycle after the address.

Tie `fi_alpha` and `fi_beta` to zero.

## 5. Fault injection and what gets detected

`fi_alpha` and `fi_beta` are XOR masks. They corrupt the operands of the
**main** Barrett path only, passing through `ct_bu` and `mbrfd`. They
reproduce the paper's error-coverage experiment, which flips random or
adjacent ("burst") bits of alpha, of beta, or of both.

A fault is flagged exactly when it changes the Barrett remainder of at
least one word step. A fault that changes no word product can go
unflagged, for example a flipped bit in an alpha word whose partner beta
words are all zero. Such a fault also leaves the result correct.

Suppose a fault changes a word product `alpha_i * beta_j` by some amount
`d`. The remainders differ unless `d` is a multiple of `q`. The change is
nonzero and smaller than `2^(2w)`. When `2^(2w) < q`, as for Kyber with
w = 4, it can never be a multiple of `q`, so every changed product is
caught.

The coverage bench (`tb_mbrfd_coverage`) uses l = 24, q = 8380417, w = 4,
8 and 24, and fault sizes of 1 to 23 bits. It flags 100% of its 13,200
injections per configuration. The paper reports 99.95 to 99.97% from a
software model with 1.5 million samples. This RTL does not explain or
reproduce that small gap.

The flag is advisory. The butterfly still writes its (possibly wrong)
results, and the system above decides what to do.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 256 | coefficients per polynomial |
| `L` | 12 | coefficient width l; must be a multiple of `W` and at least `clog2(Q)` |
| `W` | 4 | word width w of the word-wise reduction |
| `Q` | 3329 | modulus |
| `LAYERS` | 7 | NTT layers (`log2 N` for a full NTT) |
| `ZETA` | 17 | primitive `2^(LAYERS+1)`-th root of unity mod Q |
| `RECOMP` | `RC_RESWO` | `RC_RESWO`, `RC_RENO` or `RC_RESO` |
| `SI`, `SJ` | w-1, 0 | RESWO swap positions (on `reswo_recomp`) |

The other parameter sets the paper synthesises run unchanged with
overridden parameters. Each was simulated end to end:

| set | N | Q | L | LAYERS | ZETA | cycles per NTT |
|---|---|---|---|---|---|---|
| Dilithium | 256 | 8380417 | 24 | 8 | 1753 | 47,105 |
| Falcon | 512 | 12289 | 16 | 9 | 10302 | 59,905 |
| NTRU-style | 2048 | 12289 | 16 | 11 | 1331 | 292,865 |

The paper gives only `n` and `q` for these sets. The coefficient widths and
roots of unity are standard values.

## 7. Departures from the paper

* **Comparison against q.** The paper's algorithm and figures write the
  conditional subtractions as `if r > n`, where `n` stands for the
  modulus. This design compares with `>= q`, so results land in `[0, q)`.
* **RESO quotient scaling.** The paper's RESO formula multiplies the
  quotient by `q`. Here it is multiplied by `4q`, because only then is the
  shifted-back result equal to `r`.
* **RENO signs.** The paper's RENO formulas are inconsistent in sign. The
  implementation follows the block chain of the paper's figure (negate,
  multiply, shift, reduce, negate) and makes the result exact.
* **Delayed recomputation.** The paper says the recomputation runs "with a
  delayed clock input". Here it runs one cycle later in the same clock
  domain, fed from registers.
* **Number of layers.** The paper's NTT algorithm assumes `q = 1 mod 2n`,
  which Kyber's q does not meet. The engine runs Kyber's 7-layer NTT
  (`LAYERS` is a parameter).
* **Twiddle storage.** Twiddles come from their own ROM. The paper's block
  diagram suggests they are read from the coefficient memory.
* **Unspecified details.** The control schedule, single-port memory timing,
  handshakes, synchronous active-low reset and fault-count outputs are not
  specified in the paper. The paper's index names in its block diagram
  (`alpha[j+k]`, `alpha[j+k+i/2]`) are read as `alpha[j]`, `alpha[j+t]`.
* **Fault-injection masks.** `fi_alpha` and `fi_beta` are an addition for
  evaluation.
* **Not reproduced.** The FPGA figures (slices, LUTs, power, the 9.51 ns
  delay) are not reproduced. The polynomial multiplier and adder that share
  the memory in a full Kyber core are not part of this design.

## 8. Simulating

All files are plain SystemVerilog. List the package first. Every testbench
prints `TB_RESULT checks=N failures=M` and finishes by itself. For example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/ntt_fd_pkg.sv tb/tb_ntt_fd_top.sv --top-module tb_ntt_fd_top -o sim
    ./obj_dir/sim

The testbenches are:

* `tb_ntt_fd_top`: full Kyber NTT at default parameters, checked against a
  reference NTT. It also checks the cycle count, memory ownership and fault
  flagging for faults in alpha and in beta.
* `tb_ntt_fd_top_variants`: the same with RENO and with RESO.
* `tb_ntt_fd_top_pqc`: the Dilithium, Falcon and NTRU-style NTTs.
* `tb_mbrfd_coverage`: the fault-injection campaign.
* One testbench per block (`tb_<module>`). The reducer and the three
  recomputation units are tested exhaustively. `mbrfd` is tested with all
  three units side by side.

Each simulation finishes in well under a second.
