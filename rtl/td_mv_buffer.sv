// td_mv_buffer: the double-buffered motion-vector SRAM of the ISP's temporal
// denoising (TD) stage.
//
// The motion estimator writes one entry per macroblock, {confidence, MV}, in
// raster order into the fill bank; the motion-compensation stage reads the
// fill bank (`mc_*` port) as before.  When the last macroblock of a frame
// (entry NMB-1) is written, the banks swap and `drain_start` pulses: the bank
// just filled becomes the drain bank, from which the write-back DMA copies the
// frame's vectors to DRAM (`dr_*` port), while the estimator goes on filling
// the other bank with the next frame.  Without the second bank the DMA would
// compete with the TD stage for the one SRAM and stall the ISP; with it the
// write-back overlaps the next frame.  Only if the DMA has not finished
// (`drain_done`) by the time the next frame is complete does the swap wait:
// `wr_ready` is low (`stall`) until then.
//
// Timing: reads have one cycle of latency.  The swap happens on the clock
// edge that writes the last entry (or on the edge after `drain_done` if it had
// to wait).
//
// From the paper: double-buffering the TD-stage SRAM so that the DMA writes
// MVs back opportunistically off the critical path.  Own choices: the entry
// format, raster write order and the stall rule.
module td_mv_buffer
  import euph_pkg::*;
#(
  parameter int unsigned NMB   = NUM_MB,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // motion estimator (fill side)
  input  logic          wr_en,
  input  logic [15:0]   wr_data,     // {conf, mv}
  output logic          wr_ready,
  output logic          stall,
  // motion compensation read of the fill bank
  input  logic [AW-1:0] mc_addr,
  output logic [15:0]   mc_data,
  // write-back DMA (drain side)
  output logic          drain_start,
  input  logic          drain_done,
  input  logic [AW-1:0] dr_addr,
  output logic [15:0]   dr_data,
  output logic          fill_bank
);
  logic [15:0]   bank0 [DEPTH];
  logic [15:0]   bank1 [DEPTH];
  logic [AW-1:0] wptr;
  logic          draining;
  logic          pending;

  wire last_wr = wr_en && wr_ready && (wptr == AW'(NMB-1));
  wire swap    = (last_wr && !draining) || (pending && (!draining || drain_done));

  assign wr_ready = !pending;
  assign stall    = pending;

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) begin
      if (!fill_bank) bank0[wptr] <= wr_data;
      else            bank1[wptr] <= wr_data;
    end
    mc_data <= fill_bank ? bank1[mc_addr] : bank0[mc_addr];
    dr_data <= fill_bank ? bank0[dr_addr] : bank1[dr_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; fill_bank <= 1'b0; draining <= 1'b0; pending <= 1'b0; drain_start <= 1'b0;
    end else begin
      drain_start <= 1'b0;
      if (wr_en && wr_ready) wptr <= last_wr ? '0 : wptr + 1'b1;
      if (drain_done) draining <= 1'b0;
      if (swap) begin
        fill_bank   <= !fill_bank;
        draining    <= 1'b1;
        pending     <= 1'b0;
        drain_start <= 1'b1;
      end else if (last_wr) begin
        pending <= 1'b1;
      end
    end
  end

  a_no_write_while_stalled: assert property (@(posedge clk) disable iff (!rst_n) stall |-> !wr_en)
    else $error("td_mv_buffer: write while the banks wait to swap");
endmodule
