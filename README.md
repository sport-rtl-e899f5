# SPORT: gaze-predictive bit truncation for the 360° video display path

A standalone VR headset decodes every 4K equirectangular (ERP) frame and writes it to a DRAM display buffer. The GPU then reads that buffer again for rendering, and the display path reads it once more. Most of that data is never looked at closely. The viewer sees fine detail only within roughly 45° of where they are looking. Pixels near the poles of an ERP frame also cover much less of the sphere than pixels at the equator.

SPORT uses both facts. The design sits between the video decoder and the DRAM frame buffer, and works in four steps:

1. It predicts where the viewer will be looking when the frame reaches the screen.
2. It sorts every 64 × 64 tile of the frame into **FoV** (within 45° of the predicted gaze), **Border** (45°–60°) or **Background** (beyond 60°).
3. It drops the low bits of each 8-bit colour sample in the Border and Background tiles. Those bits are replaced by the pattern `1 0 … 0`, the value that minimises the expected error. The result is still an ordinary 8-bit integer, so neither the GPU nor its driver changes.
4. It picks each tile's truncation level as the largest level that keeps the tile's *latitude-weighted* error (the WS-PSNR measure used for 360° video) under a per-region limit.

The dropped bit columns of the on-chip truncation memory are power-gated. The bits that never reach DRAM are bandwidth and DRAM power saved.

This repository contains synthesizable SystemVerilog for the whole engine:

- gaze prediction;
- tile classification;
- level selection;
- a three-bank truncation memory with per-column truncation managers;
- the controller that streams frames through that memory and alternates between two DRAM buffers.

It also contains self-checking testbenches for every block, including one that runs two full 4K frames at the default parameters.

## Data path at a glance

```
 IMU ──► gaze_predictor ──► tile_classifier ◄── tile_rom
   (1 kHz)   θ,φ predicted      │ region per tile
                                ▼
                         region_map_sram        level table (region_map_sram, 9-bit)
                                │                     ▲          │
 decoder ──► trunmem360_ctrl ◄──┴── region_expander ◄─┼──────────┘
 pixels        │   ▲                  │ row, tile     │ 3 levels / tile
               │   │                  ▼               │
               │   │           trunc_level_selector ──┘
               ▼   │
            trunmem360  (FoV / Border / Background banks,
               │         32 trunc_manager columns each)
               ▼
        DRAM buffer A / B ──► GPU reads the other one
```

`sport_top` wires all of this together. The decoder, IMU, DRAM, GPU and display are outside it and appear only as ports.

## Number formats

Every angle is a 32-bit binary angle: 2³² units are one full turn.

- Longitude (θ) is unsigned and wraps around at ±π by itself.
- Latitude (φ) is signed: +π/2 = 2³⁰, −π/2 = −2³⁰.
- Sines and cosines are signed Q2.30.
- Latitude weights cos φ are unsigned Q1.15.

All of these are defined in `sport_pkg`. The package also holds:

- the region enum (`REG_FOV = 0`, `REG_BORDER = 1`, `REG_BG = 2`);
- the struct of a tile ROM entry;
- the struct of the three per-tile levels;
- a CORDIC function used only at elaboration, to fill tables and constants.

## Gaze prediction (`gaze_predictor`)

The total motion-to-photon latency is T = 9.33 ms, and the IMU sample period is Δt = 1 ms. On every IMU sample the predictor computes:

```
θ_pred = θ_now + (θ_now − θ_prev) · T/Δt           (mod 2π)
φ_pred = clip(φ_now + (φ_now − φ_prev) · T/Δt, −π/2, +π/2)
```

- T/Δt = 9.33 is held as the rounded Q16 constant 611451. Each axis therefore costs one subtraction, one constant multiplication and one addition.
- The result is registered one clock after `imu_valid`.
- The first sample after reset has no predecessor, so its velocity is taken as zero.
- `clip_hit` reports that the latitude was clipped at a pole.

## Tile classification (`tile_rom`, `tile_classifier`, `cordic_sincos`)

The angular distance d from a tile centre (θ_p, φ_p) to the predicted gaze (θ_g, φ_g) follows from the spherical law of cosines:

```
cos d = sin φ_p · sin φ_g + cos φ_p · cos φ_g · cos(θ_p − θ_g)
```

The tile is FoV if d ≤ 45°, Border if 45° < d ≤ 60°, and Background otherwise.

**Tile ROM.** `tile_rom` stores, per tile, sin φ_p, cos φ_p, θ_p and φ_p. The tile centre sits at row `i·S + S/2` and column `j·S + S/2`. The ROM is filled at initialisation with a 30-step integer CORDIC, using:

- φ = π/2 − π·r/H for row r;
- θ = 2π·c/W − π for column c.

**No arccos.** arccos falls monotonically, so the classifier never computes it. It compares cos d directly with cos 45° and cos 60°; both constants are computed at elaboration.

**Schedule.** The classifier uses one iterative 16-step CORDIC:

- At the start of a frame, the CORDIC produces sin and cos of φ_g.
- After that, one tile at a time: the CORDIC rotates by θ_p − θ_g, while the two latitude products are formed from the ROM data.
- Each tile takes ITER + 3 = 19 clocks.
- The 2,040 tiles of a 4K frame take 38,779 clocks, which is 0.39 ms at 100 MHz. The testbench checks this against the 0.42 ms (42,000-clock) classification budget.

The result is one byte per tile in `region_map_sram`.

## Choosing truncation levels (`trunc_level_selector`)

The reference value is y. Truncating its t low bits and reading back the dummy 2^(t−1) gives the error e = (y mod 2^t) − 2^(t−1). For a tile b and a level t, the latitude-weighted expected MSE is

```
E[WS-MSE_b](t) = Σ w_i · e_i(t)²  /  Σ w_i ,      w_i = cos φ_i of the pixel's row
```

The selector finds the largest t for which every level 1..t satisfies

```
E[WS-MSE_b](t) ≤ ξ = 255² / 10^(θ_dB/10)
```

The search stops at the first level that fails. The hardware detail:

- Each of the three colour samples of a pixel counts as one sample.
- The row weight comes from a table filled at initialisation: w(r) = sin(π·r/H). Padding rows below the picture get weight 0.
- Seven accumulators (one per level) and the weight sum are updated once per pixel.
- The comparison avoids a divider: it tests `256·Σ w e² ≤ ξ_Q8 · Σ w`, where ξ_Q8 is rounded at elaboration from the dB thresholds.
- All three region thresholds are evaluated side by side: 40/35/30 dB, the moderate configuration. So each tile gets a level for every region it could fall into.
- `levels_valid` pulses three clocks after the tile's last pixel.

**Where the levels are used.** The selector runs on the pixels as they stream past. Its results go into a second `region_map_sram` instance, the *level table*, and are used for that tile in the **next** frame. The previous frame thus serves as training data. Before a whole frame has been seen, the fixed levels FoV 0, Border 4 and Background 5 are used.

**Reachable levels.** With the moderate thresholds:

- Levels 0 and 1 never result. The largest error of levels 1 and 2 (4) is below the tightest limit (6.5).
- Level 7 is unreachable.
- Natural content mostly lands on levels 2 to 5.

**Modes.** The input `sport_a` selects the mode:

- **SPORT-B** (`sport_a = 0`, the recommended mode) keeps the FoV lossless (t = 0).
- **SPORT-A** also applies the learnt level in the FoV.

## The truncation memory (`trunmem360`, `trunc_sram_bank`, `trunc_manager`)

This is the part where behaviour and power meet, so it is worth reading closely.

`trunmem360` holds three physically separate banks, one per region, each 1,024 words × 32 bits.

- All banks share the data input and the data output.
- A one-hot bank enable picks which bank a command reaches.
- The output is the registered read word of the bank that answered.
- An assertion checks that at most one bank is enabled.

### Column truncation manager

Each bank has one `trunc_manager` per bit column. A column holds bit `BIT_POS` (0..7) of one byte lane. For a level t with truncation enabled, the manager decodes two flags:

| flag   | condition         | meaning                                   |
|--------|-------------------|-------------------------------------------|
| `head` | BIT_POS = t − 1   | carries the leading `1` of the dummy      |
| `tail` | BIT_POS < t − 1   | carries one of the trailing `0`s          |

A head or tail column is **power-gated** (`pg_off`) when the bank has power gates (`HAS_PG`). Three things follow:

- A gated column is not written.
- The read multiplexer substitutes the dummy bit for it on the way out.
- An ungated truncated column is written with the dummy bit itself.

So a gated column reads back correctly even though its cells hold nothing, and the output never depends on the gating. For example, with t = 4 the byte `1011 0111` reads back as `1011 1000`.

### Bank command interface

The bank's interface is the chip's register interface:

- Project Select (`proj_sel`)
- Data In Enable (`din_en`)
- Byte Select
- Truncation Enable
- Precharge Bar (`pre_b`)
- Wordline Enable (`wl_en`)
- Write Enable (`we`)
- Read Enable (`re`)

Clock by clock:

- **Load.** `din_en` loads the data word, address, byte select, level and truncation enable into input registers.
- **Access.** A wordline access (`wl_en` with `pre_b` high) writes or reads at the registered address.
- **Read data.** Read data appear one clock after the access, with `dout_valid`.
- **Streaming.** Loading and access may happen in the same clock. The access then uses the word loaded on the clock before, so one word per clock streams in either direction.
- **Assertions.** `we` and `re` are never high together, and no wordline is driven while precharging.

`col_gated` exposes the gated columns so that `sport_top` can count active bits.

## Streaming a frame (`region_expander`, `trunmem360_ctrl`)

Pixels arrive tile by tile (row-major inside a tile, tiles row-major in the frame) on a valid/ready handshake. Each pixel is the 24-bit word {R, G, B}. It is stored as `{8'h00, R, G, B}` with byte select `0111`, one pixel per memory word.

**Region expander.** `region_expander` follows the stream. For the pixel at the head of the stream it gives:

- its tile and place in the tile;
- its frame row;
- its word address within the current pass;
- its region, one-hot bank enable and level.

The region and the levels are read from the region map and the level table. The read address already points to the next tile while the last pixel of a tile is taken, so the lookup costs no extra clocks.

**Controller.** `trunmem360_ctrl` runs each frame in this order:

1. `frame_start` starts the classifier. `in_ready` stays low until the region map is complete; this is the first stall.
2. **Write pass.** Up to 1,024 pixels of one tile are written into the bank of the tile's region, one per clock, at the tile's level. A 64 × 64 tile therefore takes four passes.
3. **Read-back.** The pass is read back and sent to the DRAM port with its frame address (`dram_addr` = tile · 4096 + pixel). `in_ready` is low meanwhile; this is the second stall. A pass of N words costs N + 3 clocks without input.
4. After the last pass, `frame_done` pulses. On the next clock `dram_buf` flips, so the next frame goes to the other DRAM buffer while the GPU reads this one (`gpu_buf = ~dram_buf`).

**Power counting.** `active_bits` and `total_bits` accumulate, on every write access, the bits actually stored and all 24 data bits. The memory power saving is 1 − active/total.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `TILE_ROWS`, `TILE_COLS` | 34, 60 | tile grid (2,040 tiles) |
| `TILE_SIZE` | 64 | tile edge in pixels |
| `FRAME_H`, `FRAME_W` | 2160, 3840 | picture size; rows 2160..2175 are padding with weight 0 |
| `WORDS` | 1024 | words per bank (pixels per pass) |
| `ITER` | 16 | CORDIC steps in the classifier |
| `T_TOTAL_US`, `DT_US` | 9330, 1000 | prediction horizon and IMU period |
| `THETA_FOV_DB`, `THETA_BORDER_DB`, `THETA_BG_DB` | 40, 35, 30 | WS-PSNR limits (42/37/32 conservative, 38/33/28 aggressive) |
| `region_expander.T_FOV/T_BORDER/T_BG` | 0, 4, 5 | fixed levels used until levels are learnt |
| `trunmem360.FOV_HAS_PG` | 1 | power gates in the FoV bank (needed only for SPORT-A) |

## Where this design makes its own choices

The underlying description gives the algorithms and the memory organisation. It does not give the micro-architecture around them. This design chose the following; each point is also explained in the opening comment of the module concerned.

- **Number formats.** Fixed-point and binary angles throughout. The prediction uses a constant multiplier instead of floating point.
- **Classifier arithmetic.** A CORDIC for the trigonometry, and a comparison of cos d against constants instead of an arccos.
- **Tile count.** 2,040 tiles (60 × 34 of 64 × 64, which covers 4K) instead of the 1,800-entry ROM and region map the original sizing gives. The last tile row extends 16 rows past the picture.
- **Longitude convention.** θ = 2π·c/W − π.
- **Level selection in hardware.** Algorithm 2 is a software step in the original work; here it runs on the live stream, with one frame of delay.
- **Head/Tail meaning.** Head = dummy `1` column, Tail = dummy `0` columns. The dummy is written and also substituted at the read multiplexer.
- **Memory protocol.** One pixel per memory word, the clock-level command protocol, the write-then-read-back schedule per pass, the valid/ready input with its stalls, and the frame address on the DRAM port.

## Known limits

- **Throughput.** The memory path moves one pixel per clock in each direction, about two clocks per pixel including read-back. A 4K frame (8.36 M pixels) therefore takes about 171 ms at 100 MHz. A 90 fps display path, with its quoted 2.15 ms write time, needs far more parallelism (about 80 such streams) or a different write/read overlap. Nothing in the available description fixes the clock or width of this path.
- **Behavioural analog parts.** The SRAM banks are register arrays. The analog periphery (precharge, sense amplifiers, write drivers, finger-style power switches) is represented only by the behaviour it gives.
- **Classification near a boundary.** Tiles whose cos d lies within about 2·10⁻⁴ of a threshold may fall either way, because of the 16-step CORDIC.
- **Level selection near a threshold.** The fixed-point test may differ from exact arithmetic when the MSE is within about 0.2 % of ξ.

## Verification

Each block has a self-checking testbench in `tb/`. Each one:

- compares the block's outputs with a model written independently, mostly in real arithmetic;
- has a watchdog;
- ends with `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it establishes |
|---|---|
| `tb_gaze_predictor` | extrapolation against real arithmetic, clip at both poles, longitude wrap, one-clock latency |
| `tb_tile_rom` | every entry against `sin`/`cos` of the tile centre |
| `tb_tile_classifier` | regions of all tiles for several gaze points against the exact law of cosines; 38,779 clocks per 2,040 tiles |
| `tb_region_map_sram` | random read/write traffic, read latency, same-address collision |
| `tb_trunc_manager` | all levels × bit positions × enable × gating |
| `tb_trunc_sram_bank` | random writes/reads against a bit-level model, byte select, the t = 4 / t = 5 examples, streamed back-to-back access, no access without Project Select |
| `tb_trunmem360` | bank isolation, gated-column masks, shared output |
| `tb_trunc_level_selector` | levels for 40/35/30 dB against a real-arithmetic WS-MSE, three-clock latency |
| `tb_region_expander` | per-pixel tile/row/pass/region/level in both modes, trained and untrained |
| `tb_trunmem360_ctrl` | every pixel once at the right address and level, stalls, bank command rules, pass timing, A/B flip |
| `tb_sport_top` | ten small frames (3 × 6 tiles of 8 × 8, 16-word banks); counts and requires: latitude clip, longitude wrap, writes into each bank, both stalls, A/B switch, SPORT-A and SPORT-B frames and the switch between them, fixed and learnt levels, multi-pass tiles, power-gated writes |
| `tb_sport_thresholds` | conservative, moderate and aggressive engines side by side on the same frames: outputs against each engine's own reference, power-gated bits growing with looser limits, identical timing |
| `tb_sport_top_full` | two full 4K frames at the default parameters (about 34 M clocks, under a minute): fixed-level frame (every one of the 2,040 × 12,288 bytes compared with the 0/4/5 truncation, as in a byte-exact check of the memory), then learnt-level frame |

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/sport_pkg.sv tb/tb_sport_top.sv \
          --top-module tb_sport_top -y rtl +libext+.sv -o sim && obj_dir/sim
```

Replace `tb_sport_top` with any testbench name. No data files are read; all tables are computed in SystemVerilog.
