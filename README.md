# A multiplier-free 127-tap FIR filter: bit layer multiply accumulate

A FIR filter output is a dot product, y = Σ w[k]·x[k]. This design computes it
with no multiplier. It uses one adder/subtractor, a one-bit right shift and a
small code memory. Each coefficient is written in signed binary digits
(−1, 0, +1). The dot product is then built one *bit layer* at a time: layer i
is the set of digit i of every coefficient. In a layer, every non-zero digit
(a *pulse*) adds or subtracts its sample into an accumulator. The accumulator
is halved (shifted right) at the end of the layer. So the cost of the filter
is set by how many non-zero digits its coefficients have, not by how many bits
they have. For typical quantised low-pass, high-pass, band-pass and
band-stop filters this comes to about three operations per distinct
coefficient.

The RTL is a complete, fully programmable machine for symmetric (type I)
filters:

* 127 taps;
* 8-bit signed samples;
* 16-bit signed coefficients;
* a 256-word code memory;
* an exact output with no rounding: up to 31 significant bits, delivered on
  a 34-bit port.

It needs one clock per code word. For the 127-tap Hamming-window test filters
described below, that averages 221 clocks per output sample.

## The arithmetic

### Bit layers

Let each coefficient be w[j] = Σᵢ d[i][j]·2ⁱ with d ∈ {−1, 0, +1}. Then

    y = Σⱼ w[j]·x[j] = Σᵢ 2ⁱ · ( Σⱼ d[i][j]·x[j] )

The inner sum for one layer i needs only additions and subtractions. The
layers could be combined from the top by doubling (left shifts). This machine
instead starts at layer 0 and halves after each layer (right shifts):

    acc ← acc ± x[j]      for every pulse of layer i
    acc ← acc >>> 1       at the end of layer i; the bit shifted out is bit i of y

Once layer i is finished, the accumulator's least significant bit is final:
no later layer can change it. It is shifted out into a 16-bit shift register.
After all 16 layers, the exact two's complement result is the concatenation
`{acc, shift_register}`. The accumulator only has to hold the upper part of
the result, which keeps it narrow. Here it is 18 bits, although the full
result can need 31.

### Signed digits

Ordinary binary wastes pulses. For example, 31 = 11111₂ has five pulses.
Written in signed digits, 31 = 2⁵ − 2⁰ has two. Coefficients are therefore
stored in non-adjacent form (NAF), which gives the fewest pulses possible. In
NAF, no two neighbouring digits are both non-zero. Two more examples:

* 118 = 2⁷ − 2³ − 2¹ has 3 pulses.
* 27 = 2⁵ − 2² − 2⁰ has 3 pulses.

A negative coefficient is the same digits with their signs flipped, so it
costs exactly the same. Any 16-bit signed value fits in 16 digit positions,
so there are always 16 layers.

### Symmetry

A type I filter has w[k] = w[126−k]. Pairs of taps share a coefficient, so
the machine first adds x[j] + x[126−j] (the pre-adder). It then runs a
64-term dot product over j = 0…63. The middle tap, j = 63, has no partner
and is added only once.

## Code stream

The coefficients are never stored as numbers. The code memory holds the
pulses, layer by layer, as run-length codes. There is one 8-bit word per code:

| bits | field | meaning |
|------|-------|---------|
| 7    | EOR   | 1: end of the current layer (bits 6:0 ignored) |
| 6    | SIGN  | 1: pulse is −1 (subtract), 0: pulse is +1 (add) |
| 5:0  | ZRUN  | number of zero digits in this layer since the previous pulse |

The codes are ordered as follows:

* Layers go from 0 (least significant) to 15.
* Within a layer, pulses go in increasing j.
* Every layer ends with an EOR code, even an empty one. An empty layer is a
  single EOR.

The total number of codes is therefore (number of pulses) + 16. It must be
at most 256.

Example: a layer with pulses +1 at j = 0, −1 at j = 1 and −1 at j = 2 is
coded as `(+,0) (−,0) (−,0) EOR`. ZRUN is 6 bits because j never exceeds 63.

The file `tb/blmac_tb_pkg.sv` has the NAF expansion (`naf`) and the encoder
(`build_codes`). They show exactly how a coefficient set becomes a code
stream.

## Datapath

```
 addr counter ─► weight_memory ─┬─ EOR ─────────────────────────────┐
   (+1/code)      256 x 8       ├─ SIGN ─────────────────┐          │
                                └─ ZRUN ─► run_length_   │          │
                                           expander      │          │
                                              │ j        ▼          ▼
 samples ─► sample_memory ─ x[j], x[126-j] ─► pre_adder ─► ± ─► mux(±, >>1) ─► acc
            127-deep shift chain                                    │ LSB
            with two read muxes                                     ▼
                                                           lsb_shift_register (16)
                           result = {acc, shift register}
```

| module | role |
|--------|------|
| `blmac_pkg` | sizes, code word struct `rl_code_t` |
| `weight_addr_counter` | read address. It is cleared at start and advances one word per clock. |
| `weight_memory` | 256 × 8 code store. Writes are synchronous; reads are asynchronous, as in LUT RAM. |
| `run_length_expander` | j = base + ZRUN. Then base ← j + 1, or base ← 0 after EOR. |
| `sample_memory` | delay line, with x[0] the newest sample. It has reads at j and 126−j, and a `centre` flag for j = 63. |
| `pre_adder` | 9-bit x[j] + x[126−j]. The second operand is dropped at the centre tap. |
| `blmac_accumulator` | 18-bit register fed by a 2:1 multiplexer. One input is acc ± din; the other is acc >>> 1. The LSB goes out. |
| `lsb_shift_register` | collects the 16 bits shifted out. Bit i of y ends in bit i. |
| `blmac_controller` | start / busy / done. It counts EOR codes; the 16th ends the dot product. |
| `fir_blmac_top` | wires these together |

The whole path, from code word to accumulator input, is combinational. It
runs from the counter, through the memory read, the expander adder, the
sample multiplexers and the pre-adder, to the add/subtract unit. There is no
pipelining, so one code is consumed every clock.

## Interface and timing (`fir_blmac_top`)

1. **Program.** Write the codes with `wm_we`, `wm_waddr` and `wm_wdata`. This
   is needed only when the filter changes.
2. **Fill.** Shift samples in with `sample_valid` and `sample_in`, one per
   clock. A sample is accepted only while `sample_ready` is high, which means
   the machine is idle. Before the first output the delay line needs 127
   samples. It is cleared by reset, so fewer samples give the response with
   zero history.
3. **Run.** Pulse `start` for one clock while idle. That clock clears the
   address, the expander, the accumulator and the shift register. `busy` then
   stays high for exactly one clock per code word.
4. **Read.** `done` pulses for one clock after the 16th EOR. `result` (signed,
   34 bits) then holds y = Σₖ w[k]·x[k] and stays there until the next
   `start`.
5. **Next output.** Shift in one new sample, then start again.

The time per output is (pulses + 16) clocks, plus the start clock and the
sample shift. It depends on the coefficients, not on the data.

## How well it matches the published machine

Followed from the published description:

* the block structure and the connections;
* 127 taps, 8-bit samples and 16-bit coefficients;
* the 256 × 8 code memory;
* a right-shift accumulator whose shifted-out bits go into a 16-bit shift
  register;
* the pre-adder for symmetric taps;
* an exact result;
* one code per clock.

Choices made here, where the description is silent:

* the code word layout above, and storing layers LSB-first;
* the 18-bit accumulator. With 64 pulses of at most |256| per layer, the
  accumulator stays within ±2¹⁵;
* the arithmetic right shift;
* zeroing the second pre-adder operand at the centre tap;
* ending a dot product by counting 16 EORs;
* the start/busy/done handshake, and refusing samples while busy;
* asynchronous active-low reset of all registers except the code memory.

Left out:

* **Entropy coding of the code stream.** The general architecture makes it
  optional, and the 127-tap machine does not use it.
* **Performing the last add of a layer together with its shift.** This is
  described only as a possible improvement, worth 16 clocks per output.
* **A subtracting pre-adder.** Type II–IV filters would need one; this is
  also described only as a possible extension.

Cycle count:

* The published average for this filter set is about 231.6 clocks per
  output.
* This RTL takes one clock per code, which gives 221.0 on the regenerated
  filter set.

The difference of about 10 clocks is most likely fixed per-output overhead
in the original prototype, which is not described. It could also come from
small differences in how the filters were regenerated.

The published FPGA figures (about 100–134 LUTs, 300–800 MHz) are for a
hand-mapped AMD implementation. Nothing here was checked against them.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module against an independent software model and ends with a
`TB_RESULT checks=… failures=…` line.

* `tb_fir_blmac_top` tests 6 random symmetric coefficient sets, with 24
  outputs each. The coefficient magnitudes are skewed and include −32768 and
  32767; the samples include full-scale ±128 patterns. Each output is checked
  bit for bit against the direct-form sum, and each cycle count against the
  code count. The test also counts the following, and requires each to occur
  at least once:
  * add pulses;
  * subtract pulses;
  * layer shifts;
  * empty layers;
  * centre-tap pulses;
  * samples refused while busy;
  * negative results.
* `tb_fir_hamming_workload` runs with every parameter at its default.
  * **Part 1** designs all 9,900 filters of a 127-tap Hamming-window grid:
    99 low-pass, 99 high-pass, 4,851 band-pass and 4,851 band-stop, with
    cut-offs on a 1/100 grid of the Nyquist band. It uses the window method
    with unity gain at the centre of the first pass band. Each filter is
    quantised by the largest power of two that keeps every coefficient in 16
    signed bits, with round-half-to-even. The test reports how many fit
    256 codes: 8,153. The other 17.6 % do not fit, close to the roughly 18 %
    reported for the original prototype.
  * **Part 2** runs 200 of the fitting filters, spread over all four types,
    through the machine. Each gets 126 + 256 random samples, and all 256
    outputs are checked bit for bit, with their cycle counts. It takes about
    10 s in Verilator.

The filter designer is in `tb/fir_design_pkg.sv`. It is written in
SystemVerilog with `$sin` and `$cos`, so no external data files are used.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fir_hamming_workload \
  -y rtl -y tb +libext+.sv rtl/blmac_pkg.sv tb/blmac_tb_pkg.sv tb/fir_design_pkg.sv \
  tb/tb_fir_hamming_workload.sv
./obj_dir/Vtb_fir_hamming_workload
```

To run any other testbench, replace the top module and the last file. The
unit testbenches only need `rtl/blmac_pkg.sv` (and `tb/blmac_tb_pkg.sv` if
they import it) in front of their own file.

## Changing it

All sizes are in `rtl/blmac_pkg.sv`. For a different odd tap count, change
`N_TAPS`; the index width follows. Keep `ZRUN_W` able to hold N_TAPS/2.
`CODE_DEPTH` sets how many codes a filter may use. `WEIGHT_W` sets the
number of layers. If samples or coefficients get wider, `ACC_W` must grow to
hold about 2 × (N_TAPS/2 + 1) × 2^SAMPLE_W.
