// euphrates_top: the vision subsystem with motion-based extrapolation.
//
// Frontend (ISP clock, `isp_clk`): the temporal-denoising stage's motion
// estimator (tss_motion_estimator) computes a motion vector and a confidence
// for every macroblock; the results go into the double-buffered TD SRAM
// (td_mv_buffer); the write-back DMA (mv_writeback_dma) copies each finished
// frame's vectors and confidences into the metadata section of the frame
// buffer over the ISP's AXI4 write port.  When the write-back is complete, a
// "metadata ready" pulse crosses to the backend clock.
//
// Backend (motion-controller clock, `mc_clk`): the motion controller reads the
// metadata over its AXI4 read port, runs the CNN engine on I-frames through
// its register-write port, extrapolates ROIs on E-frames and writes the
// results buffer.
//
// Everything this design does not contain is a port: the ISP line buffers
// that feed the estimator (`me_cur`, `me_win`, `me_start`, `me_ready`), the
// motion-compensation read of the TD SRAM (`mcomp_*`), the SoC interconnect
// and DRAM (the two AXI4 masters), the CNN engine and the CPU (register slave
// `s_*` and register-write master `m_*`).  The ISP's base addresses for the
// metadata (`isp_mv_base`, `isp_conf_base`) are set by the ISP sequencer.
//
// From the paper: the partition into a frontend extension and a separate
// motion-controller IP, communication through DRAM, the clock frequencies.
// Own choices: the port-level protocols and the clock-crossing pulse.
//
// Lint notes that stand: the resets are reported as used both asynchronously
// and synchronously because the concurrent assertions sample them in
// `disable iff`; the estimator's SAD, the write-back busy flag and the TD
// fill-bank index are observation outputs of the sub-blocks that the top
// does not need.
module euphrates_top
  import euph_pkg::*;
#(
  parameter int unsigned L      = MB_L,
  parameter int unsigned D      = SEARCH_D,
  parameter int unsigned FW     = FRAME_W,
  parameter int unsigned FH     = FRAME_H,
  parameter int unsigned N_ROIS = MAX_ROIS,
  parameter int unsigned BYTES  = MV_BYTES,
  parameter int unsigned EWM    = EW_MAX,
  localparam int unsigned W     = L + 2*D,
  localparam int unsigned NMB   = ((FW + L - 1) / L) * ((FH + L - 1) / L),
  localparam int unsigned TAW   = $clog2(BYTES),
  localparam int unsigned EWW   = $clog2(EWM + 1)
) (
  input  logic              isp_clk,
  input  logic              isp_rst_n,
  input  logic              mc_clk,
  input  logic              mc_rst_n,
  // ISP line buffers -> motion estimator
  input  logic              me_start,
  input  logic [7:0]        me_cur [L][L],
  input  logic [7:0]        me_win [W][W],
  output logic              me_ready,
  // motion compensation read of the TD SRAM
  input  logic [TAW-1:0]    mcomp_addr,
  output logic [15:0]       mcomp_data,
  // ISP sequencer configuration
  input  logic [AXI_AW-1:0] isp_mv_base,
  input  logic [AXI_AW-1:0] isp_conf_base,
  // ISP AXI4 write master
  output logic              isp_awvalid,
  input  logic              isp_awready,
  output logic [AXI_AW-1:0] isp_awaddr,
  output logic [7:0]        isp_awlen,
  output logic [2:0]        isp_awsize,
  output logic [1:0]        isp_awburst,
  output logic              isp_wvalid,
  input  logic              isp_wready,
  output logic [AXI_DW-1:0] isp_wdata,
  output logic [AXI_DW/8-1:0] isp_wstrb,
  output logic              isp_wlast,
  input  logic              isp_bvalid,
  output logic              isp_bready,
  // motion controller register slave (CPU, CNN engine)
  input  logic              s_we,
  input  logic [7:0]        s_addr,
  input  logic [31:0]       s_wdata,
  output logic [31:0]       s_rdata,
  // motion controller register-write master (CNN registers, results buffer)
  output logic              m_valid,
  input  logic              m_ready,
  output logic [AXI_AW-1:0] m_addr,
  output logic [31:0]       m_wdata,
  // motion controller AXI4 read master
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
  // observation
  output logic              td_stall,
  output logic              meta_written,
  output logic              frame_done,
  output logic              cur_iframe,
  output logic [EWW-1:0]    ew,
  output logic              ew_up,
  output logic              ew_down,
  output logic [LANES-1:0]  lanes_hi,
  output logic              ex_done
);
  // ------------------------------------------------------------- frontend
  logic       me_busy, me_done;
  mv_t        me_mv;
  logic [15:0] me_sad;
  logic [7:0] me_conf;
  logic       td_ready, drain_start, wb_done, wb_busy, fill_bank;
  logic [TAW-1:0] dr_addr;
  logic [15:0] dr_data;

  tss_motion_estimator #(.L(L), .D(D)) u_me (
    .clk(isp_clk), .rst_n(isp_rst_n), .start(me_start && me_ready), .cur(me_cur), .win(me_win),
    .busy(me_busy), .done(me_done), .mv(me_mv), .sad(me_sad), .conf(me_conf)
  );
  assign me_ready = !me_busy && td_ready;

  td_mv_buffer #(.NMB(NMB), .DEPTH(BYTES)) u_td (
    .clk(isp_clk), .rst_n(isp_rst_n), .wr_en(me_done), .wr_data({me_conf, me_mv}),
    .wr_ready(td_ready), .stall(td_stall), .mc_addr(mcomp_addr), .mc_data(mcomp_data),
    .drain_start, .drain_done(wb_done), .dr_addr, .dr_data, .fill_bank
  );

  mv_writeback_dma #(.NMB(NMB), .DEPTH(BYTES)) u_wb (
    .clk(isp_clk), .rst_n(isp_rst_n), .start(drain_start), .mv_base(isp_mv_base),
    .conf_base(isp_conf_base), .busy(wb_busy), .done(wb_done), .dr_addr, .dr_data,
    .awvalid(isp_awvalid), .awready(isp_awready), .awaddr(isp_awaddr), .awlen(isp_awlen),
    .awsize(isp_awsize), .awburst(isp_awburst), .wvalid(isp_wvalid), .wready(isp_wready),
    .wdata(isp_wdata), .wstrb(isp_wstrb), .wlast(isp_wlast), .bvalid(isp_bvalid), .bready(isp_bready)
  );
  assign meta_written = wb_done;

  // ---------------------------------------------------- clock crossing
  logic frame_ready;
  pulse_sync u_sync (
    .src_clk(isp_clk), .src_rst_n(isp_rst_n), .src_pulse(wb_done),
    .dst_clk(mc_clk), .dst_rst_n(mc_rst_n), .dst_pulse(frame_ready)
  );

  // -------------------------------------------------------------- backend
  motion_controller #(.N_ROIS(N_ROIS), .L(L), .FW(FW), .FH(FH), .BYTES(BYTES), .EWM(EWM)) u_mc (
    .clk(mc_clk), .rst_n(mc_rst_n), .s_we, .s_addr, .s_wdata, .s_rdata,
    .m_valid, .m_ready, .m_addr, .m_wdata,
    .arvalid, .arready, .araddr, .arlen, .arsize, .arburst, .rvalid, .rready, .rdata, .rlast,
    .frame_ready, .frame_done, .cur_iframe, .ew, .ew_up, .ew_down, .lanes_hi, .ex_done
  );
endmodule
