// mv_buffer: the motion controller's local motion-vector SRAM.
//
// Holds one frame of motion vectors, one byte per macroblock, and beside them
// the confidence byte of every macroblock.  The MV array is 8 KB, enough for
// the 8160 macroblocks of a 1920x1080 frame with 16x16 macroblocks.  Both
// arrays are organised as 128-bit words so that the DMA engine writes one AXI
// beat per cycle (`wr_sel` picks the array).  The extrapolation unit reads one
// macroblock per cycle by index; the MV and confidence bytes appear on the
// cycle after `rd_en` (synchronous read, as an SRAM macro would give).
//
// From the paper: an 8 KB local SRAM holding the MVs of one 1080p frame, fed
// by the DMA engine, delivering MVs and confidences to the extrapolation unit.
// Own choice: the confidences sit in a second array of the same shape (the
// paper sizes the SRAM for the MVs alone).
module mv_buffer
  import euph_pkg::*;
#(
  parameter int unsigned BYTES = MV_BYTES,
  parameter int unsigned DW    = AXI_DW,
  localparam int unsigned WORDS = BYTES / (DW/8),
  localparam int unsigned WAW   = $clog2(WORDS),
  localparam int unsigned BAW   = $clog2(BYTES)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic           wr_sel,     // 0: motion vectors, 1: confidences
  input  logic [WAW-1:0] wr_addr,
  input  logic [DW-1:0]  wr_data,
  input  logic           rd_en,
  input  logic [BAW-1:0] rd_mb,      // macroblock index
  output mv_t            rd_mv,
  output logic [7:0]     rd_conf
);
  localparam int unsigned OW = $clog2(DW/8);

  logic [DW-1:0] mv_mem   [WORDS];
  logic [DW-1:0] conf_mem [WORDS];
  logic [DW-1:0] mv_q, conf_q;
  logic [OW-1:0] off_q;

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel) mv_mem[wr_addr]   <= wr_data;
    if (wr_en &&  wr_sel) conf_mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      mv_q   <= mv_mem[rd_mb[BAW-1:OW]];
      conf_q <= conf_mem[rd_mb[BAW-1:OW]];
      off_q  <= rd_mb[OW-1:0];
    end
  end

  assign rd_mv   = mv_t'(mv_q[off_q*8 +: 8]);
  assign rd_conf = conf_q[off_q*8 +: 8];
endmodule
