// motion_controller: the motion-controller IP of the vision backend.
//
// It extrapolates ROIs from the motion vectors the ISP leaves in the frame
// buffer and sequences the unmodified CNN engine, so that a continuous vision
// task runs without interrupting the CPU.  Inside:
//   mc_regs       memory-mapped registers (CPU set-up, CNN results in)
//   mc_sequencer  per-frame FSM, master of the CNN engine's registers
//   mc_dma        AXI4 read master filling the motion-vector buffer
//   mv_buffer     8 KB MV SRAM plus confidence SRAM
//   extrap_unit   4-lane SIMD extrapolation of one ROI at a time
//   extrap_scalar frame type (I/E) and window size (EW) control
//   roi_select    New-ROI registers, input mux and ROI selection
//
// Ports: a register slave (`s_*`, 8-bit word offsets, single-cycle writes and
// combinational reads), a register-write master (`m_*`, valid/ready) for the
// CNN engine's registers and the results buffer, an AXI4 read master (`ar*`,
// `r*`, 128-bit) for the metadata, and `frame_ready`, a pulse from the
// frontend saying that a frame's motion vectors are in DRAM.  The status
// outputs are for observation only.
//
// From the paper: the block structure, the 4-wide SIMD datapath, 8 KB local
// SRAM, 128-bit AXI4 DMA, 10 ROIs per frame at a 100 MHz clock.  The
// connections between the blocks follow the block diagram; the handshakes are
// this implementation's.
module motion_controller
  import euph_pkg::*;
#(
  parameter int unsigned N_ROIS = MAX_ROIS,
  parameter int unsigned L      = MB_L,
  parameter int unsigned FW     = FRAME_W,
  parameter int unsigned FH     = FRAME_H,
  parameter int unsigned BYTES  = MV_BYTES,
  parameter int unsigned EWM    = EW_MAX,
  localparam int unsigned COLS  = (FW + L - 1) / L,
  localparam int unsigned NMB   = COLS * ((FH + L - 1) / L),
  localparam int unsigned EWW   = $clog2(EWM + 1),
  localparam int unsigned WAW   = $clog2(BYTES / (AXI_DW/8))
) (
  input  logic              clk,
  input  logic              rst_n,
  // register slave
  input  logic              s_we,
  input  logic [7:0]        s_addr,
  input  logic [31:0]       s_wdata,
  output logic [31:0]       s_rdata,
  // register-write master
  output logic              m_valid,
  input  logic              m_ready,
  output logic [AXI_AW-1:0] m_addr,
  output logic [31:0]       m_wdata,
  // AXI4 read master
  output logic              arvalid,
  input  logic              arready,
  output logic [AXI_AW-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  input  logic              rvalid,
  output logic              rready,
  input  logic [AXI_DW-1:0] rdata,
  input  logic              rlast,
  // frontend
  input  logic              frame_ready,
  // observation
  output logic              frame_done,
  output logic              cur_iframe,
  output logic [EWW-1:0]    ew,
  output logic              ew_up,
  output logic              ew_down,
  output logic [LANES-1:0]  lanes_hi,
  output logic              ex_done
);
  localparam int unsigned IW = $clog2(N_ROIS);
  localparam int unsigned NW = $clog2(N_ROIS + 1);

  logic enable, adaptive, task_start, cnn_done;
  logic [EWW-1:0] ew_cfg;
  logic [AXI_AW-1:0] mv_base, conf_base, pix_base, result_base, cnn_base;
  logic [7:0] conf_thr;
  logic [15:0] diff_thr;
  logic [NW-1:0] cnn_num, new_num;
  roi_t mmap_roi [N_ROIS];
  roi_t new_roi  [N_ROIS];
  logic [15:0] frames;
  logic [7:0]  dropped;

  mc_regs #(.N_ROIS(N_ROIS), .EWM(EWM)) u_regs (
    .clk, .rst_n, .s_we, .s_addr, .s_wdata, .s_rdata,
    .enable, .adaptive, .task_start, .ew_cfg, .mv_base, .conf_base, .pix_base,
    .result_base, .cnn_base, .conf_thr, .diff_thr, .num_rois(cnn_num), .cnn_done,
    .mmap_roi, .st_ew(ew), .st_frames(frames), .st_dropped(dropped)
  );

  logic is_iframe, force_i, frame_adv, cmp_valid, cmp_last;
  logic dma_start, dma_done, dma_busy;
  logic ex_start, ex_busy, src_mmap, commit, sel_inferred, seq_busy;
  logic [IW-1:0] rd_idx;
  roi_t roi_in, ext_rd, ex_roi;
  logic [LANES-1:0] lanes_ok;

  mc_sequencer #(.N_ROIS(N_ROIS)) u_seq (
    .clk, .rst_n, .enable, .task_start, .adaptive, .pix_base, .result_base, .cnn_base,
    .cnn_done, .cnn_num, .frame_ready, .is_iframe, .force_i, .frame_adv, .cmp_valid, .cmp_last,
    .dma_start, .dma_done, .ex_start, .ex_busy, .ex_done, .rd_idx, .src_mmap, .commit,
    .sel_inferred, .new_num, .new_roi, .m_valid, .m_ready, .m_addr, .m_wdata,
    .busy(seq_busy), .frame_done, .cur_iframe, .frames, .dropped
  );

  extrap_scalar #(.EWM(EWM)) u_scalar (
    .clk, .rst_n, .init(task_start), .adaptive, .ew_cfg, .force_i, .frame_adv,
    .is_iframe, .ew, .cmp_valid, .cmp_last, .cmp_cnn(roi_in), .cmp_ext(ext_rd),
    .diff_thr, .ew_up, .ew_down
  );

  logic              buf_we, buf_sel;
  logic [WAW-1:0]    buf_addr;
  logic [AXI_DW-1:0] buf_data;
  logic              rd_en;
  logic [$clog2(BYTES)-1:0] rd_mb;
  mv_t               rd_mv;
  logic [7:0]        rd_conf;

  mc_dma #(.NMB(NMB), .BYTES(BYTES)) u_dma (
    .clk, .rst_n, .start(dma_start), .mv_base, .conf_base, .busy(dma_busy), .done(dma_done),
    .arvalid, .arready, .araddr, .arlen, .arsize, .arburst, .rvalid, .rready, .rdata, .rlast,
    .buf_we, .buf_sel, .buf_addr, .buf_data
  );

  mv_buffer #(.BYTES(BYTES)) u_buf (
    .clk, .wr_en(buf_we), .wr_sel(buf_sel), .wr_addr(buf_addr), .wr_data(buf_data),
    .rd_en, .rd_mb, .rd_mv, .rd_conf
  );

  extrap_unit #(.L(L), .COLS(COLS), .FW(FW), .FH(FH), .N_ROIS(N_ROIS), .BYTES(BYTES)) u_ex (
    .clk, .rst_n, .clear_hist(task_start), .start(ex_start), .roi_idx(rd_idx), .roi_in,
    .conf_thr, .busy(ex_busy), .done(ex_done), .roi_out(ex_roi), .lanes_ok, .lanes_hi,
    .rd_en, .rd_mb, .rd_mv, .rd_conf
  );

  roi_select #(.N_ROIS(N_ROIS)) u_sel (
    .clk, .rst_n, .clear(task_start), .mmap_roi, .mmap_num(cnn_num), .src_mmap, .rd_idx,
    .roi_in, .ext_rd, .ext_valid(ex_done), .ext_idx(rd_idx), .ext_roi(ex_roi),
    .commit, .sel_inferred, .new_roi, .new_num
  );

  a_nmb_fits: assert property (@(posedge clk) NMB <= BYTES);
endmodule
