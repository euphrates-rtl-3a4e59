# Euphrates motion-vector vision subsystem

This is synthesizable SystemVerilog for the hardware side of Euphrates. Euphrates is an algorithm–SoC co-design for continuous vision. The CNN runs only on some frames, called I-frames. On the frames in between, called E-frames, the regions of interest (ROIs) are extrapolated from the motion vectors that the ISP already computes for temporal denoising.

## What is built

**ISP side** (`isp_clk`)
- `tss_motion_estimator` does block matching for one 16x16 macroblock.
  - It uses the sum of absolute differences (SAD) and a three-step search with d = 7, so 25 candidates.
  - It returns a motion vector of 1 byte (4-bit signed u and v), its SAD, and a confidence byte, `255 - SAD/256`. That byte is Eq. 2 scaled to 0..255.
  - It handles one row per cycle, so a macroblock takes 401 cycles. A 1080p frame is 8160 macroblocks, or 4.3 ms at 768 MHz.
- `td_mv_buffer` is the double-buffered SRAM of the temporal-denoising stage. It has two banks of 8192 `{conf, mv}` entries.
  - The estimator fills one bank while the write-back drains the other. The banks swap at the end of a frame.
  - If the previous frame has not finished draining, the estimator is stalled.
- `mv_writeback_dma` is an AXI4 write master with 128-bit data. It copies a drained bank into the frame-buffer metadata in DRAM: the vectors go to one region and the confidences to another.

**Motion controller** (`mc_clk`, `motion_controller`)
- `mc_regs` holds the memory-mapped registers. The CPU writes the set-up; the CNN engine writes its ROIs and a done flag.
- `mc_sequencer` is the per-frame FSM.
  - It decides whether the frame is an I-frame or an E-frame.
  - It programs the CNN engine (source address, then start) through a register-write master.
  - It runs the DMA and the extrapolation, and commits the chosen ROIs.
  - It writes the results buffer: ROI i at `+8i`, then a status word `{frame number, I flag, ROI count}` at `+80`.
- `mc_dma` is an AXI4 read master that fetches the frame's vectors and confidences into `mv_buffer`, an 8 KB local SRAM with a second array for the confidences.
- `extrap_unit` extrapolates one ROI.
  - It splits the ROI into four quadrant sub-ROIs.
  - It walks the covered macroblocks, one per cycle, and broadcasts each to the 4-lane `extrap_simd`.
  - Each lane computes the pixel-weighted mean vector (Eq. 1) and the mean confidence α.
  - β is α when α is above a programmable threshold, and 0.5 otherwise.
  - The filtered vector is `MV_F = β·μ + (1−β)·MV_{F−1}` (Eq. 3), kept per slot and sub-ROI.
  - The sub-ROIs are moved and the result is their bounding box, clamped to the frame.
  - One ROI costs (macroblocks covered) + 102 cycles.
- `extrap_scalar` is the scalar unit. It produces the I/E decision and runs the adaptive extrapolation window (EW).
- `roi_select` holds the New-ROI register and the mux between inferred and extrapolated ROIs.

**Top** (`euphrates_top`)
- Joins the two clock domains with `pulse_sync`.
- Ports are AXI4 write (ISP), AXI4 read (controller), the register slave bus, the register-write master towards the CNN engine, and the pixel inputs of the estimator.

## What is not built

The following parts are outside the top and appear only as its ports:
- the camera sensor and MIPI receiver;
- the rest of the ISP: demosaic, colour, line buffers and the ISP's own sequencer;
- the CNN engine;
- the interconnect;
- the DRAM;
- the host CPU.

The testbenches use behavioural models for the DRAM, the CNN engine and the CPU.

The paper's DMA has three channels. Only one read channel is used here, because the functions built here need no more.

## Choices made where the description is open

- **Motion direction.** The motion vector points from the current block to its match in the previous frame. A region therefore moves by −MV.
- **EW definition.** EW-N means one I-frame every N frames. This matches the quoted inference rates: 50 % for EW-2 and 25 % for EW-4.
- **Adaptive EW.** On each I-frame, the CNN boxes are compared with the extrapolated boxes by L1 corner distance.
  - Any pair above the threshold lowers EW by 1.
  - Three good I-frames in a row raise EW by 1.
  - EW stays within 1..32.
- **Frame size.** A 1080p frame is counted as 120 × 68 = 8160 macroblocks, including the partial last row, not 8100.
- **Fixed point.** Mean vectors use Q5.4 fixed point. β uses a 1/256 scale.
- **Dropped frames.** A frame announced while the controller is busy is dropped and counted in the status register.
- **Metadata buffer.** DRAM holds one metadata slot per stream. The controller uses whatever metadata is present when its DMA runs.

Register offsets are in `rtl/euph_pkg.sv`.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`, with a reference model and a watchdog. The shared references are in `tb/euph_ref_pkg.sv`: the three-step search and a pixel-level extrapolation.

- **`tb_euphrates_top`** runs end to end on a 128x64 frame for 29 frames.
  - It checks the metadata written to DRAM for every frame against the reference block matcher.
  - It checks the frame type, the EW, and every ROI written for every processed frame against a reference of the whole policy.
  - It requires each mechanism to occur: I- and E-frames, both modes, EW up and down, a TD-buffer stall, a dropped frame, and both confidence branches.
- **`tb_euphrates_full`** runs the top with all parameters at their defaults: 1080p, three frames, one I-frame and one E-frame processed. It takes about 25 s of simulation.
- **`tb_motion_controller`** runs the controller at 1080p over 39 frames, with random back-pressure on the write master.

## Files

- `rtl/`: the design, one module or package per file.
- `tb/`: the testbenches, the reference package, and the behavioural DRAM model.
