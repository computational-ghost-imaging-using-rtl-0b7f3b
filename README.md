# A parallel reconstruction circuit for computational ghost imaging

Computational ghost imaging takes a picture with a single photodetector. A
projector lights the object with a long series of known random binary patterns
I_i(x,y). For each pattern one number is measured: S_i, the total light that
passes the object. The image is then the correlation between the measurements
and the patterns. This RTL computes the correlation in the *differential*
form (DGI):

    O(x,y) = <S_i I_i(x,y)> - <S_i>/<R_i> * <R_i I_i(x,y)>,   R_i = sum over x,y of I_i(x,y)

Here `<.>` is the mean over all n patterns. The costly terms are the two
correlations, each n x (pixels) operations. `<R_i>` and `<R_i I>` do not depend
on the object, so the host computes them once. The circuit multiplies the
formula through by `<R_i>` and drops that constant factor from the result,
which removes the divider:

    O'(x,y) = <R_i> * <S_i I_i(x,y)>  -  <S_i> * <R_i I_i(x,y)>

What remains is one sum per pixel, `<S_i I(x,y)>`. That sum is cheap because
I is one bit: "multiply" is an AND gate and the sum is an accumulator. The
circuit runs 64 such accumulators side by side. It regenerates the patterns
on chip, 64 bits per clock, from the same M-sequence that the projector shows.

The design reproduces the circuit described in I. Hoshi, T. Shimobaba,
T. Kakue and T. Ito, "Computational ghost imaging using a field-programmable
gate array". It uses that paper's sizes: 32 x 32 pixels, 16,384 patterns,
64 calculation modules, 100 MHz, and the fixed-point widths of its block
diagrams. Where the paper does not say how something works, the choice made
here is stated below and in the header comment of each file.

## Structure

```
 rx byte stream                                                        tx byte stream
 ──────────► rx_unit ──► calc_unit ────────────────────────────────► tx_unit ──────►
               │          │
   <R_i>  ─────┤          ├─ S memory (16384 x 8) ──┐      mseq_lfsr (71 FF, 64 bits/clk)
   table  ─────┤          ├─ mean_acc  <S_i>        │          │ I(63..0)
   S_i    ─────┘          │                         ▼          ▼
                          │               parallel_calc: 64 x calc_module + multiplexer
                          │                         │ <S_i I(x,y)>
                          ├─ image RAM (1024 x 21) ◄┘
                          ├─ table RAM (1024 x 21, <R_i I(x,y)> from the host)
                          └─ dgi_combine: <R_i>*<SI> - int(<S_i>)*<RI>  ──►  O(x,y)
```

| file | what it is |
|---|---|
| `rtl/cgi_pkg.sv` | fixed-point types, widths, command codes, the averaging addend `scale_term` |
| `rtl/mseq_lfsr.sv` | M-sequence pattern generator, STEP (64) sequence bits per clock |
| `rtl/calc_module.sv` | one calculation module: AND gate, adder, per-pass RAM |
| `rtl/parallel_calc.sv` | NMOD calculation modules and the output multiplexer |
| `rtl/mean_acc.sv` | the `<S_i>` adder and register |
| `rtl/sdp_ram.sv` | one-write/one-read RAM with registered read (S memory, image RAM, table) |
| `rtl/dgi_combine.sv` | two multipliers, the selector and the subtractor |
| `rtl/calc_unit.sv` | calculation unit: memories, registers and the frame sequencer |
| `rtl/rx_unit.sv`, `rtl/tx_unit.sv` | host byte-stream receiver and transmitter |
| `rtl/cgi_top.sv` | top level: receiver, calculation unit, transmitter |

## Number formats

Formats are written (sign bits, integer bits, fraction bits), as in the
original block diagrams. All of these widths are the published ones.

| quantity | format | bits |
|---|---|---|
| S_i from the AD converter | (0,8,0) | 8 |
| `<S_i>`, `<S_i I>`, `<R_i I>` | (0,9,12) | 21 |
| `<R_i>`, and `<S_i>` after the selector | (0,9,0) | 9 |
| each product | (0,18,12) | 30 |
| result O'(x,y) | (1,19,12) | 32, two's complement |

The published diagrams print these widths but do not say how an 8-bit sample
is added into a 21-bit average. This design divides every addend by n as it
is added:

    addend = floor(S_i * 2^12 / n)          (cgi_pkg::scale_term; n = 2^LOG2_N)

After n additions the 21-bit word *is* the average, with 12 fraction bits.
With n = 16384 the addend is S_i >> 2, so the two low bits of each sample are
lost. This is the main rounding error of the circuit, and it is the kind of
fixed-point loss the published results show: 23.6 dB PSNR against 25.0 dB for
floating point. A wider accumulator would remove it, but would not match the
printed widths. n must be a power of two.

The **selector** takes the integer part, bits [20:12], of `<S_i>` before the
lower multiplier, because that input is printed as (0,9,0). It truncates.

**A constraint on the host.** `<R_i>` is only 9 bits wide, but a random 32 x 32
binary pattern has about 512 lit pixels, so R_i is about 512. The DGI result
does not change if every R_i is scaled by the same constant. The host is
therefore expected to send R_i / 2 (for 1024 pixels) in both `<R_i>` and
`<R_i I>`; the testbenches do this. The paper does not discuss this point.

## Generating the patterns: 64 bits per clock

The patterns come from a maximum-length sequence of the trinomial
x^71 + x^6 + 1:

    a(n+71) = a(n) xor a(n+6)

The register holds 71 consecutive sequence bits in flip-flops M(70)..M(0).
M(70) is the oldest bit and M(0) the newest. One clock advances the sequence
by 64 bits:

    M(70..64) <= M(6..0)
    M(k)      <= M(k+7) xor M(k+1)          k = 63 .. 0
    I(k)       = M(k+7)                     I(63) = M(70) ... I(0) = M(7)

Every right-hand term is an old register bit (64 < 71 - 6), so there is no
chain of XOR gates. The register costs 71 flip-flops and 64 two-input XORs.
This is the register of the published drawing. One exception: the drawing
labels the inputs of the M(0) gate as M(8) and M(2). That breaks the pattern of
the labels printed for M(63) (M(70), M(64)) and M(62) (M(69), M(63)). With
M(8) and M(2) the register would no longer produce this sequence, so the RTL
uses M(7) and M(1). `tb_mseq_lfsr` checks the register against a plain serial
model of the recurrence. Substituting the drawn taps makes that test fail.

The pattern word after w steps is, in raster order, sequence bits
a(64w) .. a(64w+63). I(63) is the first of these and I(0) the last.
`mseq_lfsr` takes a STEP parameter (1..65) so that a 16-module build can
advance 16 bits per clock. SEED is a parameter. The generator is reloaded
with SEED at the start of every frame.

### Which bit belongs to which pixel and pattern

This is the contract between the circuit and the projector. The paper only
shows that the 64 modules work on two image lines at a time (pixels 1..64
first, then the next two lines). The order used here is:

* Pass p (0..15) covers pixels 64p .. 64p+63 in raster order, i.e. lines 2p
  and 2p+1.
* Within a pass, the calculator reads S_0 .. S_16383, one per clock. The
  generator steps once per clock and is never rewound. So pattern i's part for
  pass p is generator word w = p * 16384 + i.
* Module m (0-based) owns pixel m of the pass and takes bit I(63-m).
  Pixel q = 64p + m of pattern i is therefore sequence bit
  a(64 * (p*16384 + i) + m).

The host must build pattern i for the projector from these bits.
`cgi_ref_pkg::cgi_model` in `tb/` does exactly that and can serve as the
reference. The paper does not say how its host orders the patterns. Any other
order would need a generator that can jump ahead, which the published
register cannot do.

## One frame, cycle by cycle

`calc_unit` runs four phases:

| phase | what happens | clocks (defaults) |
|---|---|---|
| LOAD | S_i arrive on `s_*`. Each is written to the S memory and added into `<S_i>`. The 16384th sample reloads the generator. | one per sample, set by the host |
| CORR | 16 passes x 16384 patterns. Each clock: read one S_i, take one 64-bit pattern word, accumulate into all 64 modules. One pipeline stage: the S memory read is registered. | 16 x 16384 + 1 = 262,145 |
| DRAIN | The multiplexer copies every module's word of every pass into the image RAM, one per clock, at address 64p + m. | 1024 |
| OUT | For each pixel: read the image RAM and the table, combine, and hold the result on `o_*` until taken. | 3 per pixel, plus output backpressure |

Each calculation module keeps one 21-bit word per pass in a 16-word RAM with
asynchronous read, like FPGA distributed RAM, so a read-add-write finishes
every clock. The first pattern of a pass overwrites the word instead of adding
to it, so the RAMs never need clearing. `calc_cycles` reports CORR+DRAIN:
263,169 clocks, or 2.63 ms at 100 MHz. The paper measured 3 ms for 64 modules.
With `NMOD = 16` there are 64 passes and 1,049,601 clocks (10.5 ms); the paper
measured 10 ms. Transfer to and from the host is excluded, as it is in the
paper's figures.

While the unit is busy, `s_ready` is low. A host that streams the next frame's
samples early is simply held off. `<R_i>` and the table can be rewritten at
any time. They keep their values from frame to frame.

## Host interface

The paper places a USB link between the PC and the FPGA; the USB device
itself is not part of this RTL. `cgi_top` exposes the two byte streams that
such a device would carry. Both use valid/ready handshakes. The formats are
this design's own:

| host -> FPGA (rx) | payload |
|---|---|
| `0x01` | 2 bytes, little-endian: `<R_i>` (low 9 bits) |
| `0x02` | 1024 x 3 bytes, little-endian: the `<R_i I(x,y)>` table in raster order (low 21 bits) |
| `0x03` | 16384 bytes: S_0 .. S_16383. The last one starts the calculation. |
| other | ignored |

FPGA -> host (tx): for each pixel in raster order, 4 bytes, least significant
first, of the signed (1,19,12) value O'(x,y).

## Parameters

| parameter | default | where |
|---|---|---|
| `N_PAT` | 16384 (power of two) | `cgi_top`, `calc_unit`, `rx_unit` |
| `IMG_W`, `IMG_H` | 32, 32 | `cgi_top`, `calc_unit` |
| `NMOD` | 64 (must divide IMG_W*IMG_H, at most 65) | `cgi_top`, `calc_unit`, `parallel_calc` |
| `SEED` | 71'h2A_5AC3_C30F_0F12_34AB (non-zero) | `cgi_top`, `calc_unit`, `mseq_lfsr` |

With the defaults, memory is 195,584 bits: the S memory is 131,072 bits, the
image RAM and table 21,504 bits each, and the module RAMs 21,504 bits in all.

## Simulating

Each testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Any of them builds the same way:

```
verilator --binary --timing -Irtl -y rtl -y tb \
    rtl/cgi_pkg.sv tb/cgi_ref_pkg.sv tb/tb_cgi_top.sv --top-module tb_cgi_top
./obj_dir/Vtb_cgi_top
```

| testbench | what it covers |
|---|---|
| `tb_mseq_lfsr` | 64- and 16-bit steps against a serial model of the recurrence, with stalls and a reload |
| `tb_calc_module`, `tb_parallel_calc` | accumulation, clear, pass addressing, bit-to-module order, the multiplexer |
| `tb_mean_acc`, `tb_sdp_ram`, `tb_dgi_combine` | the average, RAM timing (old data on a same-address read), the output arithmetic |
| `tb_rx_unit`, `tb_tx_unit` | both byte formats under random gaps and backpressure |
| `tb_calc_unit` | two 8 x 8 frames (64 patterns, 16 modules), bit exact, with cycle count and backpressure |
| `tb_cgi_top` | **full size, default parameters**: host loads, two 32 x 32 frames of 16384 patterns, bit exact, cycle count 263,169, input stall while busy, output stall, 16 passes per frame. About 5 s. |
| `tb_cgi_top_nmod16` | the same with 16 modules: 1,049,601 cycles per frame |
| `tb_cgi_quality` | full size: a grey-level object, circuit against a double-precision DGI reconstruction, by PSNR and SSIM |

The end-to-end tests expose two synthetic binary objects, a rectangle and a
ring. They take S_i = 255 x (lit object pixels) / (object pixels), check every
output word against `cgi_ref_pkg::cgi_model`, and also check that the
reconstruction is brighter on the object than off it.

## How far to trust it

* **From the paper:** the three-unit structure; the divider-free formula;
  the 64 parallel AND/add/RAM modules with their multiplexer; the `<S_i>`
  adder and register; the `<R_i>` register, the table and the RAM; the two
  multipliers, the selector and the subtractor; every printed bit width; the
  71-bit, 64-bit-per-clock M-sequence register; the two-lines-per-pass order;
  and the sizes.
* **This design's choices:** the addend scaling (divide by n on every add);
  the depth of the module RAMs (one word per pass) and copying to the image
  RAM after the last pass; the pattern-to-pass order and the seed; the S
  memory being filled while `<S_i>` accumulates; the M(0) taps (see above);
  the order in which modules take the pattern bits; the host byte formats;
  all handshakes and reset values; and the host's R_i / 2 scaling.
* **Image quality:** `tb_cgi_quality` measures a grey-level test object
  (tilted background, bright disc, dark bar) with the circuit's own 16384
  patterns. It reconstructs the object once in the circuit and once in double
  precision. After both images are stretched to 0..255, the circuit reaches
  19.36 dB PSNR and 0.928 SSIM; the floating-point reconstruction reaches
  19.68 dB and 0.931. The paper reports the same small gap for its own image:
  23.62 dB / 0.94 against 25.03 dB / 0.95.
* **Not checked:** timing closure at 100 MHz. The paths most at risk are the
  64-input, 21-bit multiplexer and the 9 x 21-bit multipliers, which feed an
  output register with no pipelining. The paper's own test image and optical
  measurements are not available, so its absolute PSNR and SSIM values are not
  reproduced.
* **Not included:** the USB device, the photodetector and AD converter, the
  projector, and the host software. Only the host's `<R_i>` / table
  arithmetic exists, as a testbench model.
