// tb_euphrates_top: end-to-end test of the vision subsystem on a small frame
// (128x64 pixels, 8x4 macroblocks) with two textured objects moving over a
// textured background.
//
// The testbench plays the ISP line buffers (feeding every macroblock and its
// search window to the motion estimator), the DRAM (dram_model), the CNN
// engine (answers a start command after a latency by writing the objects'
// true boxes into the motion controller's registers, sometimes deliberately
// off by 20 pixels) and the CPU (task set-up, later a switch to adaptive
// mode).  It checks
//   * the metadata of every frame in DRAM against the reference block matcher;
//   * for every processed frame, the frame type and every ROI in the results
//     buffer against a reference of the whole policy (I/E schedule, adaptive
//     EW, Eq. 1-3 extrapolation, ROI selection);
//   * that each mechanism happened: I-frames, E-frames, constant and adaptive
//     mode, EW increase and decrease, a TD-buffer stall (slow DRAM), a frame
//     dropped while a slow inference was running, high- and low-confidence
//     filtering.
module tb_euphrates_top;
  import euph_pkg::*;
  import euph_ref_pkg::*;

  localparam int FWT = 128, FHT = 64;
  localparam int COLS = (FWT + 15) / 16, ROWS = (FHT + 15) / 16, NMBT = COLS * ROWS;
  localparam int NF = 30;                 // frames produced by the "camera"
  localparam int PERIOD = 16000;          // ISP cycles per frame
  localparam int unsigned MVB = 32'h0010_0000, CFB = 32'h0010_1000;
  localparam int unsigned PIXB = 32'h0020_0000, RESB = 32'h0030_0000, CNNB = 32'h4000_0000;

  logic isp_clk = 0, mc_clk = 0, isp_rst_n = 0, mc_rst_n = 0;
  always #1 isp_clk = !isp_clk;
  always #5 mc_clk  = !mc_clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------------ DUT
  logic me_start = 0, me_ready;
  mb_t  me_cur;
  win_t me_win;
  logic [12:0] mcomp_addr = '0;
  logic [15:0] mcomp_data;
  logic isp_awvalid, isp_awready, isp_wvalid, isp_wready, isp_wlast, isp_bvalid, isp_bready;
  logic [31:0] isp_awaddr; logic [7:0] isp_awlen; logic [2:0] isp_awsize; logic [1:0] isp_awburst;
  logic [127:0] isp_wdata; logic [15:0] isp_wstrb;
  logic s_we = 0; logic [7:0] s_addr = '0; logic [31:0] s_wdata = '0, s_rdata;
  logic m_valid, m_ready = 1; logic [31:0] m_addr, m_wdata;
  logic arvalid, arready, rvalid, rready, rlast; logic [31:0] araddr; logic [7:0] arlen;
  logic [2:0] arsize; logic [1:0] arburst; logic [127:0] rdata;
  logic td_stall, meta_written, frame_done, cur_iframe, ew_up, ew_down, ex_done;
  logic [5:0] ew; logic [3:0] lanes_hi;

  euphrates_top #(.FW(FWT), .FH(FHT)) dut (
    .isp_clk, .isp_rst_n, .mc_clk, .mc_rst_n, .me_start, .me_cur, .me_win, .me_ready,
    .mcomp_addr, .mcomp_data, .isp_mv_base(MVB), .isp_conf_base(CFB),
    .isp_awvalid, .isp_awready, .isp_awaddr, .isp_awlen, .isp_awsize, .isp_awburst,
    .isp_wvalid, .isp_wready, .isp_wdata, .isp_wstrb, .isp_wlast, .isp_bvalid, .isp_bready,
    .s_we, .s_addr, .s_wdata, .s_rdata, .m_valid, .m_ready, .m_addr, .m_wdata,
    .arvalid, .arready, .araddr, .arlen, .arsize, .arburst, .rvalid, .rready, .rdata, .rlast,
    .td_stall, .meta_written, .frame_done, .cur_iframe, .ew, .ew_up, .ew_down, .lanes_hi, .ex_done
  );

  dram_model #(.DW(128)) dram (
    .wclk(isp_clk), .awvalid(isp_awvalid), .awready(isp_awready), .awaddr(isp_awaddr), .awlen(isp_awlen),
    .wvalid(isp_wvalid), .wready(isp_wready), .wdata(isp_wdata), .wlast(isp_wlast),
    .bvalid(isp_bvalid), .bready(isp_bready),
    .rclk(mc_clk), .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast
  );

  // ------------------------------------------------------------ the scene
  function automatic int hash(input int x, input int y, input int s);
    int h = x * 374761393 + y * 668265263 + s * 2246822519;
    h = (h ^ (h >>> 13)) * 1274126177;
    return (h ^ (h >>> 16)) & 255;
  endfunction
  typedef struct { int x0, y0, w, h, vx, vy; } obj_t;
  obj_t objs [2] = '{'{8, 6, 40, 24, 2, 1}, '{96, 20, 24, 20, -2, 0}};
  function automatic void obj_box(input int o, input int t, output int x0, output int y0, output int x1, output int y1);
    x0 = objs[o].x0 + objs[o].vx * t; y0 = objs[o].y0 + objs[o].vy * t;
    x1 = x0 + objs[o].w; y1 = y0 + objs[o].h;
    if (x0 < 0) x0 = 0; if (y0 < 0) y0 = 0; if (x1 > FWT) x1 = FWT; if (y1 > FHT) y1 = FHT;
  endfunction
  function automatic logic [7:0] pix(input int t, input int x, input int y);
    int v;
    if (x < 0) x = 0; if (y < 0) y = 0; if (x >= FWT) x = FWT - 1; if (y >= FHT) y = FHT - 1;
    v = hash(x >> 1, y >> 1, 7) / 2 + 64;          // background
    for (int o = 0; o < 2; o++) begin
      int ox = objs[o].x0 + objs[o].vx * t, oy = objs[o].y0 + objs[o].vy * t;
      if (x >= ox && x < ox + objs[o].w && y >= oy && y < oy + objs[o].h)
        v = hash((x - ox) >> 1, (y - oy) >> 1, o + 1);
    end
    return 8'(v);
  endfunction

  // -------------------------------------------------- ISP line-buffer side
  byte unsigned exp_mv [NF][NMBT];
  byte unsigned exp_cf [NF][NMBT];
  int frames_fed = 0;
  int stall_cycles = 0;
  int isp_cyc = 0;
  always @(posedge isp_clk) isp_cyc++;
  always @(posedge isp_clk) if (isp_rst_n && td_stall) stall_cycles++;

  initial begin : isp_feed
    wait (isp_rst_n);
    for (int t = 1; t < NF; t++) begin
      automatic int t_start = t * PERIOD;
      while (isp_cyc < t_start) @(posedge isp_clk);
      if (t == 18 || t == 19) dram.wr_gap = 5000; else dram.wr_gap = 0;   // slow DRAM
      for (int m = 0; m < NMBT; m++) begin
        automatic int mx = (m % COLS) * 16, my = (m / COLS) * 16;
        int u, v, s;
        for (int r = 0; r < RL; r++) for (int c = 0; c < RL; c++) me_cur[r][c] = pix(t, mx + c, my + r);
        for (int r = 0; r < RW; r++) for (int c = 0; c < RW; c++) me_win[r][c] = pix(t - 1, mx + c - RD, my + r - RD);
        ref_tss(me_cur, me_win, u, v, s);
        exp_mv[t][m] = byte'(((v & 15) << 4) | (u & 15));
        exp_cf[t][m] = byte'(255 - s / 256);
        @(negedge isp_clk);
        while (!me_ready) @(negedge isp_clk);
        me_start = 1;
        @(negedge isp_clk);
        me_start = 0;
        @(negedge isp_clk);
        while (!me_ready) @(negedge isp_clk);   // keep inputs stable until done
      end
      frames_fed++;
      $display("[%0t] frame %0d fed", $time, t);
    end
  end

  // metadata snapshots, taken when the write-back of a frame completes
  byte unsigned snap_mv [NF][NMBT];
  byte unsigned snap_cf [NF][NMBT];
  int meta_frame = 0;                   // last frame whose metadata is in DRAM
  always @(posedge isp_clk) if (isp_rst_n && meta_written) begin
    automatic bit ok = 1;
    meta_frame++;
    for (int m = 0; m < NMBT; m++) begin
      snap_mv[meta_frame][m] = dram.rd8(MVB + m);
      snap_cf[meta_frame][m] = dram.rd8(CFB + m);
      if (snap_mv[meta_frame][m] != exp_mv[meta_frame][m] || snap_cf[meta_frame][m] != exp_cf[meta_frame][m]) ok = 0;
    end
    check(ok, $sformatf("metadata of frame %0d", meta_frame));
    $display("[%0t] metadata of frame %0d written", $time, meta_frame);
  end

  // ----------------------------------------------------- CPU / CNN register bus
  bit bus_busy = 0;
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    while (bus_busy) @(negedge mc_clk);
    bus_busy = 1;
    @(negedge mc_clk); s_we = 1; s_addr = a; s_wdata = d;
    @(negedge mc_clk); s_we = 0;
    bus_busy = 0;
  endtask

  int proc_frame = 0;                   // frame the motion controller works on
  int cnn_lat = 800;
  int cnn_roi [MAX_ROIS][4];
  int cnn_num = 0;
  int cnn_starts = 0;
  event cnn_go;
  logic seq_busy_q = 0;
  always @(posedge mc_clk) begin
    seq_busy_q <= dut.u_mc.u_seq.busy;
    if (mc_rst_n && dut.u_mc.u_seq.busy && !seq_busy_q) proc_frame = meta_frame;
  end

  always @(posedge mc_clk) if (mc_rst_n && m_valid && m_ready) begin
    if (m_addr >= CNNB && m_addr < CNNB + 256) begin
      if (m_addr == CNNB + 4) begin cnn_starts++; ->cnn_go; end
      else check(m_addr == CNNB && m_wdata == PIXB, "CNN source register programmed");
    end else begin
      for (int k = 0; k < 4; k++) dram.mem[m_addr + k] = m_wdata[k*8 +: 8];
    end
  end

  initial begin : cnn_engine
    forever begin
      int f;
      @(cnn_go);
      f = proc_frame;
      repeat (cnn_lat) @(posedge mc_clk);
      cnn_num = 2;
      for (int o = 0; o < 2; o++) begin
        int x0, y0, x1, y1, j;
        obj_box(o, f, x0, y0, x1, y1);
        j = (f % 5 == 3) ? 20 : 0;               // a poor inference now and then
        x0 = x0 + j; x1 = x1 + j; if (x1 > FWT) x1 = FWT; if (x0 > x1) x0 = x1;
        cnn_roi[o] = '{x0, y0, x1, y1};
        reg_wr(REG_ROI0 + 8'(8*o),     {16'(y0), 16'(x0)});
        reg_wr(REG_ROI0 + 8'(8*o + 4), {16'(y1), 16'(x1)});
      end
      reg_wr(REG_NUM_ROIS, 2);
      reg_wr(REG_CNN_DONE, 1);
    end
  end

  // ---------------------------------------------------- reference policy
  bit  adaptive_m = 0;
  int  ew_cfg_m = 2, ew_a = 2, cnt = 0, good = 0;
  bit  have = 0;
  int  prev_num = 0;
  int  prev_roi [MAX_ROIS][4];
  int  hist_u [MAX_ROIS][4], hist_v [MAX_ROIS][4];
  int  n_i = 0, n_e = 0, n_up = 0, n_down = 0, n_hi = 0, n_lo = 0, n_adapt_frames = 0, n_const_frames = 0;
  localparam int CONF_THR = 200, DIFF_THR = 16;

  always @(posedge mc_clk) begin
    if (mc_rst_n && ew_up) n_up++;
    if (mc_rst_n && ew_down) n_down++;
  end

  function automatic int l1(input int a[4], input int b[4]);
    int s = 0;
    for (int k = 0; k < 4; k++) s += (a[k] > b[k]) ? a[k] - b[k] : b[k] - a[k];
    return s;
  endfunction

  // What the extrapolation works on: the controller's MV buffer once its DMA
  // has finished.  DRAM holds one metadata slot, so with a slow memory the
  // next frame's metadata can overwrite it while the copy runs; the
  // controller then works on (partly) newer vectors.  The reference uses the
  // buffer contents, and the frames where this happened are counted.
  byte unsigned view_mv [NMBT];
  byte unsigned view_cf [NMBT];
  int n_late_meta = 0;
  always @(posedge mc_clk) if (mc_rst_n && dut.u_mc.dma_done) begin
    automatic bit same = 1;
    for (int m = 0; m < NMBT; m++) begin
      view_mv[m] = dut.u_mc.u_buf.mv_mem[m / 16][(m % 16) * 8 +: 8];
      view_cf[m] = dut.u_mc.u_buf.conf_mem[m / 16][(m % 16) * 8 +: 8];
      if (view_mv[m] != snap_mv[proc_frame][m] || view_cf[m] != snap_cf[proc_frame][m]) same = 0;
    end
    if (!same) n_late_meta++;
  end

  task automatic extrap_slot(input int i, input int f, output int r[4]);
    byte unsigned mvb[], cfb[];
    int mu[4], mv[4]; bit ok[4];
    mvb = new[NMBT]; cfb = new[NMBT];
    for (int m = 0; m < NMBT; m++) begin mvb[m] = view_mv[m]; cfb[m] = view_cf[m]; end
    ref_extrap(prev_roi[i][0], prev_roi[i][1], prev_roi[i][2], prev_roi[i][3], mvb, cfb, COLS,
               hist_u[i], hist_v[i], CONF_THR, FWT, FHT, r[0], r[1], r[2], r[3], mu, mv, ok);
    hist_u[i] = mu; hist_v[i] = mv;
  endtask

  always @(posedge mc_clk) if (mc_rst_n && frame_done) begin
    automatic int f = proc_frame;
    automatic int ew_now = adaptive_m ? ew_a : ew_cfg_m;
    automatic bit is_i = !have || cnt == 0;
    int exp_num;
    int exp_roi [MAX_ROIS][4];
    int ext [MAX_ROIS][4];
    int nxt;
    logic [31:0] st;
    if (adaptive_m) n_adapt_frames++; else n_const_frames++;
    if (is_i) begin
      n_i++;
      if (adaptive_m && have && prev_num > 0) begin
        for (int i = 0; i < prev_num; i++) extrap_slot(i, f, ext[i]);
        if (cnn_num > 0) begin
          automatic bit bad = 0;
          automatic int np = (cnn_num < prev_num) ? cnn_num : prev_num;
          for (int i = 0; i < np; i++) if (l1(cnn_roi[i], ext[i]) > DIFF_THR) bad = 1;
          if (bad) begin good = 0; if (ew_a > 1) ew_a--; end
          else if (good + 1 >= 3) begin good = 0; if (ew_a < 32) ew_a++; end
          else good++;
        end
      end
      exp_num = cnn_num;
      for (int i = 0; i < exp_num; i++) exp_roi[i] = cnn_roi[i];
      have = 1;
    end else begin
      n_e++;
      exp_num = prev_num;
      for (int i = 0; i < prev_num; i++) extrap_slot(i, f, exp_roi[i]);
    end
    ew_now = adaptive_m ? ew_a : ew_cfg_m;
    nxt = (is_i ? 0 : cnt) + 1;
    cnt = (nxt >= ew_now) ? 0 : nxt;
    // results buffer
    st = {dram.rd8(RESB + 8*MAX_ROIS + 3), dram.rd8(RESB + 8*MAX_ROIS + 2),
          dram.rd8(RESB + 8*MAX_ROIS + 1), dram.rd8(RESB + 8*MAX_ROIS)};
    $display("[%0t] frame %0d done: %s num %0d ew %0d meta_frame %0d", $time, f, st[8] ? "I" : "E", st[7:0], ew, meta_frame);
    check(st[8] == is_i, $sformatf("frame %0d type: got %s", f, st[8] ? "I" : "E"));
    check(int'(st[7:0]) == exp_num, $sformatf("frame %0d ROI count %0d want %0d", f, st[7:0], exp_num));
    for (int i = 0; i < exp_num; i++) begin
      int got[4];
      for (int k = 0; k < 4; k++)
        got[k] = int'({dram.rd8(RESB + 8*i + 2*k + 1), dram.rd8(RESB + 8*i + 2*k)});
      check(got == exp_roi[i], $sformatf("frame %0d ROI %0d: got %0d,%0d,%0d,%0d want %0d,%0d,%0d,%0d", f, i,
            got[0], got[1], got[2], got[3], exp_roi[i][0], exp_roi[i][1], exp_roi[i][2], exp_roi[i][3]));
      prev_roi[i] = exp_roi[i];
    end
    prev_num = exp_num;
    check(int'(ew) == (adaptive_m ? ew_a : ew_cfg_m), $sformatf("frame %0d EW %0d want %0d", f, ew, adaptive_m ? ew_a : ew_cfg_m));
  end

  always @(posedge mc_clk) if (mc_rst_n && ex_done) begin
    for (int l = 0; l < 4; l++) if (dut.u_mc.u_ex.lanes_ok[l]) begin
      if (lanes_hi[l]) n_hi++; else n_lo++;
    end
  end

  // -------------------------------------------------------------- watchdog
  initial begin : watchdog
    repeat (NF * PERIOD / 5 + 200000) @(posedge mc_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- CPU script
  initial begin : cpu
    int dropped;
    repeat (4) @(posedge mc_clk);
    isp_rst_n = 1; mc_rst_n = 1;
    reg_wr(REG_EW, 2);
    reg_wr(REG_MV_BASE, MVB);   reg_wr(REG_CONF_BASE, CFB);
    reg_wr(REG_PIX_BASE, PIXB); reg_wr(REG_RESULT_BASE, RESB);
    reg_wr(REG_CNN_BASE, CNNB); reg_wr(REG_CONF_THR, CONF_THR);
    reg_wr(REG_DIFF_THR, DIFF_THR);
    reg_wr(REG_CTRL, 32'h1);                       // enable, constant mode
    // constant mode until frame 8, then adaptive
    wait (meta_frame >= 8 && !dut.u_mc.u_seq.busy);
    @(negedge mc_clk);
    reg_wr(REG_CTRL, 32'h3);
    adaptive_m = 1; ew_a = ew_cfg_m;
    // one slow inference to make the pipeline drop a frame
    wait (meta_frame >= 23);
    cnn_lat = 9000;
    wait (meta_frame >= 26);
    cnn_lat = 800;
    wait (meta_frame >= NF - 1);
    repeat (12000) @(posedge mc_clk);
    // status register
    @(negedge mc_clk); s_addr = REG_STATUS; #1;
    dropped = int'(s_rdata[15:8]);
    check(dropped == int'(dut.u_mc.u_seq.dropped), "status register reports dropped frames");
    $display("frames fed %0d, I %0d, E %0d, constant %0d, adaptive %0d, EW up %0d, down %0d, stall cycles %0d, dropped %0d, hi-conf lanes %0d, lo-conf lanes %0d, CNN runs %0d, frames read with newer metadata %0d",
             frames_fed, n_i, n_e, n_const_frames, n_adapt_frames, n_up, n_down, stall_cycles, dropped, n_hi, n_lo, cnn_starts, n_late_meta);
    check(n_i > 0, "I-frames happened");
    check(n_e > 0, "E-frames happened");
    check(n_const_frames > 0 && n_adapt_frames > 0, "both modes ran");
    check(n_up > 0, "adaptive EW increased");
    check(n_down > 0, "adaptive EW decreased");
    check(stall_cycles > 0, "TD buffer stalled the estimator");
    check(dropped > 0, "a frame was dropped");
    check(n_hi > 0 && n_lo > 0, "both confidence branches used");
    check(n_i + n_e + dropped == frames_fed, "every frame processed or dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
