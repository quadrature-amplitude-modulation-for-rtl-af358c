# Direct-digital QAM generator for electronic-sideband laser locking

Electronic-sideband (ESB) Pound–Drever–Hall locking stabilises a laser to a reference
cavity with an offset the user can tune. It does this by driving the laser's electro-optic
modulator (EOM) with a phase-modulated rf tone:

    V_EOM(t) = xi · sin( Wc·t + beta_m · sin(Wm·t) )

- The carrier `Wc` (hundreds of MHz to about 2 GHz) selects which optical sideband sits on
  the cavity resonance. Changing `Wc` moves the locked laser by the same amount.
- The slow tone `Wm` (hundreds of kHz to about 10 MHz) with index `beta_m` (1.01 rad is the
  usual optimum) provides the PDH demodulation sidebands.

Generating this waveform cleanly is the hard part. This RTL builds it in the quadrature
(I/Q) form, as a software-defined radio does:

    V = I·cos(Wc t) + Q·sin(Wc t),   I = xi·sin(theta),  Q = xi·cos(theta),  theta = beta_m·sin(Wm t)

All of it is digital, so the I/Q imbalances of an analog modulator do not arise. They can
still be put in on purpose: the baseband is built with adjustable gain, phase and offset
terms (`xi_I'`, `xi_Q'`, `phi'`, `Delta_I'`, `Delta_Q'`). These can pre-distort the signal
to cancel imbalance elsewhere in the chain, or inject a known impairment. An impairment
matters because a DC offset on I, or a phase error between I and Q, shifts the zero
crossing of the ESB error signal. That shift is a frequency offset of the locked laser.
Gain imbalance and an offset on Q leave the lock point in place.

The carrier comes from a numerically controlled oscillator (NCO). Its tuning word (FTW) can
be streamed from memory by a small DMA engine, which lets the laser be swept while locked.
The sweep works only because every FTW change is phase-continuous: the oscillator phase is
never reset.

The design follows the published RFSoC instrument of this kind: an AMD Zynq UltraScale+
RFSoC running its RF DAC at 9.8304 GS/s. It is not the authors' code. Everything on this
page that the source does not specify is marked as this design's choice.

## Signal path

```
            register port (processor)
                  |                 \
                  v                  v
   +-------------------+     +----------------+  trigger
   |  esb_regs         |---->| dma_controller |<--------
   +-------------------+     +----------------+
          | iq_params_t         |  ^ memory read channel (FTW list)
          v                     |  |
   +-------------------+        v  |
   |  iq_generator     |     +-----+-----+
   |  I(t), Q(t)       |     |   nco     | cos(Wc t), sin(Wc t)
   +-------------------+     +-----------+
          |  I, Q                 |
          v                       v
        +---------------------------+
        | qam_modulator  I·cos+Q·sin|----> v_out  (to image-rejection filter,
        +---------------------------+              inverse-sinc filter, RF DAC)
```

`esb_top` wires these blocks together. On the device, the NCO and the two multipliers with
the adder sit inside the hardened RF data converter. The image-rejection filter, the
inverse-sinc filter and the DAC follow them there. Those three are vendor hardware with no
published internals, so they are not modelled. `v_out` is the sample stream they would
receive.

The model uses one clock and produces one sample per clock, so the clock rate *is* the
sample rate `f_s`. All frequencies below are fractions of `f_s`. The testbenches assume
`f_s = 9.8304 GS/s`, the device's DAC rate. The real converter takes several samples per
fabric clock and interpolates the baseband up to the DAC rate. This model does neither.
The arithmetic would be the same, repeated once per parallel sample lane.

## Number formats and programming

| quantity | register | format | example |
|---|---|---|---|
| `Wm` | `REG_FTW_M` (0) | 32-bit tuning word, `Wm/(2π f_s)·2^32` | 3.125 MHz → 1 365 333 |
| `beta_m` | `REG_BETA` (1) | unsigned Q3.13 radians | 1.01 rad → 8274 |
| `phi'` | `REG_PHI` (2) | signed Q3.13 radians | 3° → 429 |
| `xi_I'`, `xi_Q'` | 3, 4 | unsigned Q1.15 gain (32768 = 1.0) | 0.5 → 16384 |
| `Delta_I'`, `Delta_Q'` | 5, 6 | signed, output LSBs | −0.3·xi at xi = 0.5 FS → −4915 |
| FTW list address | `REG_DMA_ADDR` (7) | byte address, 8-byte entries | |
| FTW list length | `REG_DMA_COUNT` (8) | entries | |
| update period | `REG_DMA_PERIOD` (9) | clock cycles | 380 ns → 3736 |
| status | `REG_STATUS` (10, read) | bit 0 = DMA busy | |

- Samples (I, Q, cos, sin, V) are 16-bit two's complement. Full scale is ±32767.
- The carrier FTW is 48 bits, `Wc/(2π f_s)·2^48`, which gives a 35 µHz step at 9.8304 GS/s.
- A list entry is a 64-bit word with the FTW in bits 47:0.
- Every register resets to 0. With `xi = 0` the output stays silent until the processor
  programs it.
- Narrow fields take the low bits of the written word and read back zero-extended.

There is no direct register for the carrier. In the published block diagram the only path
to the NCO is from the DMA controller. A fixed carrier is therefore set with a one-entry
list and one trigger, and a frequency jump is another one-entry list.

## The I/Q generator and pre-distortion

`iq_generator` computes, for every sample:

    I = sat( xi_I' · sin(theta) + Delta_I' )
    Q = sat( xi_Q' · cos(theta + phi') + Delta_Q' ),    theta = beta_m · sin(Wm t)

The impairment terms sit exactly where the usual I/Q impairment model puts them: gain on
each channel, the phase imbalance inside the Q cosine, and the offsets added last. Setting a
compensation value therefore applies the inverse of the matching impairment.

It is a five-stage pipeline:

1. A 32-bit phase accumulator advances by `Wm`.
2. An interpolating sine table gives `sin(Wm t)`.
3. A multiplier forms `beta_m · sin(Wm t)` in radians (Q4.28). The product is converted to
   a fraction of a turn by multiplying with `2^19/(2π) ≈ 83443` and shifting right by 15.
   `phi'` is converted to turns with the same constant.
4. Two more interpolating tables produce `sin(theta)` and
   `sin(theta + phi' + quarter turn) = cos(theta + phi')`.
5. Gain multiply (rounded, shifted by 15), offset add, and saturation to 16 bits.

Latency is 7 cycles from a new `Wm` to the outputs, and 6 cycles from the phase register.
Parameters are not double-buffered, so a change appears in the stream within 7 cycles.

`sin_lut_interp` is a 1024-entry full-wave sine table, amplitude 32767. Its upper 10 phase
bits select an entry and the next 12 bits interpolate linearly towards the following entry.
Each entry is `round(32767·sin(2πk/1024))`. The table is a constant computed at
elaboration with integers only: the angle is folded into the first quadrant and a 9-term
Taylor series is summed in Q30. The result equals the real-arithmetic table entry for entry,
and it synthesises as a ROM. The worst error measured is about 1 LSB (the test allows 1.5). With this, an ideal
setting at `beta_m = 1.01` and `xi = 0.5` gives an RMS magnitude error of 0.002 % and an RMS
phase error of 0.004 %. The RMS errors are measured the way a vector signal analyser
reports them:

- magnitude error `sqrt(I²+Q²)/xi − 1`;
- phase error `(atan2(I,Q) − beta_m sin Wm t)/beta_m`.

The published instrument reports less than 0.3 % for both errors, and that figure includes
its analog output stage.

Source-given figures on how impairments move the lock point, for a 20 kHz cavity linewidth
`kappa`:

- phase imbalance: −0.22 % of `kappa` per degree;
- I offset: 7.8 % of `kappa` per unit of `Delta_I/xi`;
- gain imbalance and Q offset: no shift.

So `phi'` and `Delta_I'` are the two registers whose stability matters for the lock point.

## Carrier tuning: NCO and DMA controller

`nco` holds the FTW in use and a 48-bit phase accumulator that is never reloaded. The upper
32 phase bits address two interpolating sine tables, the cosine one a quarter turn ahead.

Timing:

- `ftw_valid` at edge k loads the new word.
- The accumulator steps by the new word from edge k+1.
- cos and sin follow the phase by two cycles.

The up-converter adds one more cycle, so `v_out` follows `i_out`, `q_out` and the NCO
outputs by one cycle.

`dma_controller` plays an FTW list:

1. A rising edge on `trigger` while idle, with `count ≠ 0`, starts the list. `trigger` is
   synchronised by two flip-flops. A trigger while busy is ignored.
2. The controller reads the list over a valid/ready request channel and a response channel.
   It keeps one read outstanding and one entry in a prefetch buffer.
3. It applies the first FTW as soon as the FTW arrives. Each later FTW follows exactly
   `period` cycles after the previous one, as long as memory answers within `period`
   cycles. Otherwise each FTW is applied as soon as it arrives.
4. `busy` drops after the last entry.

Assertions check that a request holds its address until accepted, and that no response
arrives unasked.

The published build measured about 380 ns between DMA-driven updates. Here that interval
is the programmable `period`: 380 ns is 3736 cycles at 9.8304 GS/s. A 10 MHz sweep in 10 Hz
steps is one million list entries (8 MB of processor memory) and takes 0.38 s at that rate.

## What is modelled and what is not

Written as synthesizable SystemVerilog (files in `rtl/`):

| file | block |
|---|---|
| `esb_pkg.sv` | formats, structs, register map, latencies |
| `phase_accumulator.sv` | DDS phase accumulator |
| `sin_lut_interp.sv` | interpolating sine table |
| `iq_generator.sv` | baseband I/Q with pre-distortion |
| `nco.sv` | carrier oscillator, phase-continuous retuning |
| `qam_modulator.sv` | I·cos + Q·sin |
| `dma_controller.sv` | FTW list streaming |
| `esb_regs.sv` | processor register file |
| `esb_top.sv` | the whole programmable-logic design |

Not modelled:

- **Processor and control PC.** `esb_top` exposes a plain register write/read port and the
  DMA memory read channel in their place. `tb/ftw_mem_model.sv` is a behavioural stand-in
  for the processor memory.
- **Image-rejection filter, inverse-sinc filter, RF DAC.** These are vendor hardware whose
  response is not published.

Departures from the device, and choices the source leaves open:

- One sample per clock, with no baseband-to-DAC interpolation stage. The source's
  "interpolation modules" are read as interpolation between look-up-table entries.
- Word widths, fixed-point formats, table size, rounding and saturation are this design's
  choices. So are the register map, the reset values and the memory interface.
- What the trigger does is not specified. Here its rising edge starts a list.
- The carrier is set only through the DMA path, as in the block diagram. The text also
  lists `Wc` among the parameters the host supplies.
- Register updates reach the datapath immediately. There is no shadow-register or
  synchronous-update mechanism.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_phase_accumulator` | 2000 random tuning words and enables against a modulo-2^32 sum |
| `tb_sin_lut_interp` | quarter turns, table wrap, mid-entry and random phases against `32767·sin` (≤ 1.5 LSB) |
| `tb_nco` | 1 GHz → 100 MHz jump and random retuning; cos/sin against a never-reset reference phase |
| `tb_iq_generator` | ideal, impaired (gain, ±phi', Delta'), large-index saturation against real-arithmetic I/Q; constant envelope |
| `tb_qam_modulator` | random and extreme inputs against 64-bit integer arithmetic, including saturation |
| `tb_dma_controller` | order, addresses and exact spacing of 5-, 12- and 6-entry lists under random memory stalls; ignored triggers |
| `tb_esb_regs` | reset values, random writes and read-back, struct outputs, status bit |
| `tb_esb_top` | whole design at default size (details below) |
| `tb_ramp_workload` | one full sweep (details below) |

`tb_esb_top` runs the whole design at default size:

- 1.5 GHz carrier with 3.125 MHz / 1.01 rad modulation. RMS magnitude and phase errors must
  both be below 0.3 %.
- Carrier sweep over 350 MHz, 700 MHz, 1.05 GHz, 1.4 GHz and 1.75 GHz, with the errors
  measured again at each carrier.
- 1 GHz → 100 MHz jump.
- Five-step 10 → 100 MHz ramp at 3736-cycle spacing, with a trigger during the ramp that
  must be ignored.
- Carrier moved to 1.015 GHz, then `Delta_I' = −0.3·xi` injected: the mean of I must move
  by −4915 LSB.
- Injected `phi' = 3°`: the phase error must rise.
- Restoring both must bring the errors back below 0.3 %.
- Every output sample is compared with I·cos + Q·sin for a reference carrier phase that is
  never reset.
- Each mechanism (carrier step, update, continuity, jump, ramp step, ignored trigger,
  offset, status) is counted, and one that never happens is a failure.

`tb_ramp_workload` runs one full laser-tuning sweep: 807 → 817 MHz in 10 Hz steps,
1 000 001 FTWs, 625 kHz modulation. It takes about 8 million cycles because the update
period is shortened to 8 cycles. At 3736 cycles per update the sweep would be 3.7 billion
cycles. The test checks every word, every spacing, and every output sample for phase
continuity.

To run a test with plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert rtl/esb_pkg.sv rtl/phase_accumulator.sv \
          rtl/sin_lut_interp.sv rtl/nco.sv rtl/iq_generator.sv rtl/qam_modulator.sv \
          rtl/dma_controller.sv rtl/esb_regs.sv rtl/esb_top.sv \
          tb/ftw_mem_model.sv tb/tb_esb_top.sv --top-module tb_esb_top
./obj_dir/Vtb_esb_top
```

Substitute any other testbench name. The block testbenches other than `tb_dma_controller`
do not need `ftw_mem_model.sv`. The simulator is two-state, so every register read in a
check is reset or initialised.

### How far to trust it

The arithmetic is checked against independent real-number models, at 1.5 LSB for the
tables and 2 + 2.5·beta_m LSB for the I/Q generator. The DMA timing is checked
cycle-exactly.

Not checked:

- Timing closure at any real clock rate.
- Behaviour at the converter's multi-sample-per-clock interface.
- Anything in the analog chain: the filters, the DAC, and the EOM drive level.

The fixed-point formats bound the ranges: `beta_m < 8 rad`, `|phi'| < 4 rad`, and gains
below 2.0.
