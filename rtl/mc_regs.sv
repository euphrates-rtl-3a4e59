// mc_regs: memory-mapped registers of the motion controller.
//
// Two masters write here over the interconnect: the CPU, which sets up a task
// once (base addresses of the motion vectors, confidences, pixel frame,
// results buffer and CNN registers, the window size and the mode), and the CNN
// engine, which deposits its inference ROIs (up to N_ROIS, two words each) and
// their count, then writes REG_CNN_DONE.  Word map (byte offsets, see
// euph_pkg):
//   0x00 CTRL      [0] enable (0->1 starts a task), [1] adaptive mode
//   0x04 EW        window size, 1..32
//   0x08 MV_BASE   0x0C CONF_BASE   0x10 PIX_BASE   0x14 RESULT_BASE
//   0x18 CNN_BASE  0x1C CONF_THR (alpha threshold, 0..255)
//   0x20 DIFF_THR  (adaptive-mode ROI distance)  0x24 NUM_ROIS
//   0x28 CNN_DONE  (write only, any value)   0x2C STATUS (read only:
//        [31:16] frames processed, [15:8] frames dropped, [5:0] current EW)
//   0x40+8i ROI i {y0,x0}, 0x44+8i ROI i {y1,x1}
// Writes take effect on the next edge; reads are combinational.  Resets to
// EW = 2, CONF_THR = 128 (alpha > 0.5), DIFF_THR = 16, everything else 0.
//
// From the paper: memory-mapped registers holding ROI, base addresses and
// window size, programmed by the CPU and written by the CNN engine.  The map,
// the widths and the reset values are this implementation's choices.
module mc_regs
  import euph_pkg::*;
#(
  parameter int unsigned N_ROIS = MAX_ROIS,
  parameter int unsigned EWM    = EW_MAX,
  localparam int unsigned NW    = $clog2(N_ROIS + 1),
  localparam int unsigned IW    = $clog2(N_ROIS),
  localparam int unsigned EWW   = $clog2(EWM + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               s_we,
  input  logic [7:0]         s_addr,
  input  logic [31:0]        s_wdata,
  output logic [31:0]        s_rdata,
  output logic               enable,
  output logic               adaptive,
  output logic               task_start,
  output logic [EWW-1:0]     ew_cfg,
  output logic [AXI_AW-1:0]  mv_base,
  output logic [AXI_AW-1:0]  conf_base,
  output logic [AXI_AW-1:0]  pix_base,
  output logic [AXI_AW-1:0]  result_base,
  output logic [AXI_AW-1:0]  cnn_base,
  output logic [7:0]         conf_thr,
  output logic [15:0]        diff_thr,
  output logic [NW-1:0]      num_rois,
  output logic               cnn_done,
  output roi_t               mmap_roi [N_ROIS],
  input  logic [EWW-1:0]     st_ew,
  input  logic [15:0]        st_frames,
  input  logic [7:0]         st_dropped
);
  wire roi_hit = (s_addr >= REG_ROI0) && (s_addr < REG_ROI0 + 8'(8*N_ROIS));
  wire [7:0] roi_off = s_addr - REG_ROI0;
  wire [IW-1:0] roi_i = roi_off[3 +: IW];     // ROI number

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable <= 1'b0; adaptive <= 1'b0; task_start <= 1'b0; ew_cfg <= EWW'(2);
      mv_base <= '0; conf_base <= '0; pix_base <= '0; result_base <= '0; cnn_base <= '0;
      conf_thr <= 8'd128; diff_thr <= 16'd16; num_rois <= '0; cnn_done <= 1'b0;
      for (int i = 0; i < N_ROIS; i++) mmap_roi[i] <= '0;
    end else begin
      task_start <= 1'b0;
      cnn_done   <= 1'b0;
      if (s_we) begin
        unique case (s_addr)
          REG_CTRL:        begin enable <= s_wdata[0]; adaptive <= s_wdata[1];
                                 task_start <= s_wdata[0] && !enable; end
          REG_EW:          ew_cfg      <= EWW'(s_wdata);
          REG_MV_BASE:     mv_base     <= s_wdata;
          REG_CONF_BASE:   conf_base   <= s_wdata;
          REG_PIX_BASE:    pix_base    <= s_wdata;
          REG_RESULT_BASE: result_base <= s_wdata;
          REG_CNN_BASE:    cnn_base    <= s_wdata;
          REG_CONF_THR:    conf_thr    <= s_wdata[7:0];
          REG_DIFF_THR:    diff_thr    <= s_wdata[15:0];
          REG_NUM_ROIS:    num_rois    <= (s_wdata > 32'(N_ROIS)) ? NW'(N_ROIS) : NW'(s_wdata);
          REG_CNN_DONE:    cnn_done    <= 1'b1;
          default: if (roi_hit) begin
            if (!roi_off[2]) begin
              mmap_roi[roi_i].x0 <= s_wdata[15:0];
              mmap_roi[roi_i].y0 <= s_wdata[31:16];
            end else begin
              mmap_roi[roi_i].x1 <= s_wdata[15:0];
              mmap_roi[roi_i].y1 <= s_wdata[31:16];
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    s_rdata = '0;
    unique case (s_addr)
      REG_CTRL:        s_rdata = {30'd0, adaptive, enable};
      REG_EW:          s_rdata = 32'(ew_cfg);
      REG_MV_BASE:     s_rdata = mv_base;
      REG_CONF_BASE:   s_rdata = conf_base;
      REG_PIX_BASE:    s_rdata = pix_base;
      REG_RESULT_BASE: s_rdata = result_base;
      REG_CNN_BASE:    s_rdata = cnn_base;
      REG_CONF_THR:    s_rdata = {24'd0, conf_thr};
      REG_DIFF_THR:    s_rdata = {16'd0, diff_thr};
      REG_NUM_ROIS:    s_rdata = 32'(num_rois);
      REG_STATUS:      s_rdata = {st_frames, st_dropped, 8'(st_ew)};
      default: if (roi_hit)
        s_rdata = roi_off[2] ? {mmap_roi[roi_i].y1, mmap_roi[roi_i].x1}
                             : {mmap_roi[roi_i].y0, mmap_roi[roi_i].x0};
    endcase
  end
endmodule
