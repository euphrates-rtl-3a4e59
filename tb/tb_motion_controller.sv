// tb_motion_controller: the motion controller on its own, full-size frames
// (1920x1080, 8160 macroblocks).  The testbench writes each frame's motion
// vectors and confidences straight into the DRAM model (a smooth random field
// that follows three moving objects) and raises frame_ready; it plays the CNN
// engine (answers the start command after a latency with the objects' boxes,
// sometimes displaced) and the CPU (set-up, constant then adaptive mode), and
// throttles the register-write master at random.  A reference of the whole
// policy (I/E schedule, adaptive EW, Eq. 1-3 extrapolation per slot, ROI
// selection) checks the frame type, ROI count, every ROI in the results
// buffer and the EW after every frame; it also checks that the CNN is
// programmed with the frame address, and counts each mechanism: I- and
// E-frames, both modes, EW up and down, a dropped frame, both confidence
// branches, write back-pressure.
module tb_motion_controller;
  import euph_pkg::*;
  import euph_ref_pkg::*;

  localparam int NMBT = NUM_MB, NF = 40, PERIOD = 30000;   // mc cycles per frame
  localparam int unsigned MVB = 32'h0010_0000, CFB = 32'h0010_4000;
  localparam int unsigned PIXB = 32'h0020_0000, RESB = 32'h0030_0000, CNNB = 32'h4000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  wire mc_clk = clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic s_we = 0; logic [7:0] s_addr = '0; logic [31:0] s_wdata = '0, s_rdata;
  logic m_valid, m_ready = 1; logic [31:0] m_addr, m_wdata;
  logic arvalid, arready, rvalid, rready, rlast; logic [31:0] araddr; logic [7:0] arlen;
  logic [2:0] arsize; logic [1:0] arburst; logic [127:0] rdata;
  logic frame_ready = 0, frame_done, cur_iframe, ew_up, ew_down, ex_done;
  logic [5:0] ew; logic [3:0] lanes_hi;

  motion_controller dut (.*);

  dram_model dram (
    .wclk(clk), .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .wvalid(1'b0), .wready(),
    .wdata('0), .wlast(1'b0), .bvalid(), .bready(1'b0),
    .rclk(clk), .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast
  );

  // ------------------------------------------------------------ the scene
  typedef struct { int x0, y0, w, h, vx, vy; } obj_t;
  obj_t objs [3] = '{'{100, 80, 300, 200, 6, 3}, '{1500, 500, 200, 260, -5, 2}, '{800, 700, 120, 90, 2, -4}};
  function automatic void obj_box(input int o, input int t, output int x0, output int y0, output int x1, output int y1);
    x0 = objs[o].x0 + objs[o].vx * t; y0 = objs[o].y0 + objs[o].vy * t;
    x1 = x0 + objs[o].w; y1 = y0 + objs[o].h;
  endfunction

  int meta_frame = 0, frames_sent = 0, n_bp = 0;
  always @(posedge clk) if (rst_n && m_valid && !m_ready) n_bp++;

  // frame source: metadata of frame t, the vectors point back to where each
  // block came from (objects move by (vx, vy), so MV = (-vx, -vy)), clipped to
  // the 4-bit range, with noise and a band of poor confidence
  initial begin : frames
    wait (rst_n);
    repeat (200) @(posedge clk);
    for (int t = 1; t < NF; t++) begin
      for (int m = 0; m < NMBT; m++) begin
        automatic int x = (m % MB_COLS) * 16 + 8, y = (m / MB_COLS) * 16 + 8, u = 0, v = 0, c = 240;
        for (int o = 0; o < 3; o++) begin
          int x0, y0, x1, y1;
          obj_box(o, t, x0, y0, x1, y1);
          if (x >= x0 && x < x1 && y >= y0 && y < y1) begin u = -objs[o].vx; v = -objs[o].vy; end
        end
        if ($urandom % 5 == 0) u += int'($urandom % 3) - 1;
        if ($urandom % 5 == 0) v += int'($urandom % 3) - 1;
        if (u > 7) u = 7; if (u < -7) u = -7; if (v > 7) v = 7; if (v < -7) v = -7;
        if ((m / MB_COLS) % 7 == t % 7) c = 60 + $urandom % 100;
        dram.mem[MVB + m] = byte'(((v & 15) << 4) | (u & 15));
        dram.mem[CFB + m] = byte'(c);
      end
      meta_frame = t;
      @(negedge clk); frame_ready = 1; @(negedge clk); frame_ready = 0;
      frames_sent++;
      repeat (PERIOD) @(posedge clk);
    end
  end

  // ----------------------------------------------------- CPU / CNN register bus
  bit bus_busy = 0;
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    while (bus_busy) @(negedge clk);
    bus_busy = 1;
    @(negedge clk); s_we = 1; s_addr = a; s_wdata = d;
    @(negedge clk); s_we = 0;
    bus_busy = 0;
  endtask

  int proc_frame = 0;
  int cnn_lat = 2000;
  int cnn_roi [MAX_ROIS][4];
  int cnn_num = 0;
  int cnn_starts = 0;
  event cnn_go;
  logic seq_busy_q = 0;
  always @(posedge clk) begin
    seq_busy_q <= dut.u_seq.busy;
    if (rst_n && dut.u_seq.busy && !seq_busy_q) proc_frame = meta_frame;
    m_ready <= ($urandom % 3 != 0);
  end

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
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
      repeat (cnn_lat) @(posedge clk);
      cnn_num = (f % 9 == 4) ? 2 : 3;
      for (int o = 0; o < cnn_num; o++) begin
        int x0, y0, x1, y1, j;
        obj_box(o, f, x0, y0, x1, y1);
        j = (f % 4 == 3) ? 30 : 0;
        x0 = x0 + j; x1 = x1 + j;
        cnn_roi[o] = '{x0, y0, x1, y1};
        reg_wr(REG_ROI0 + 8'(8*o),     {16'(y0), 16'(x0)});
        reg_wr(REG_ROI0 + 8'(8*o + 4), {16'(y1), 16'(x1)});
      end
      reg_wr(REG_NUM_ROIS, 32'(cnn_num));
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
  localparam int FWT = FRAME_W, FHT = FRAME_H, COLS = MB_COLS;

  always @(posedge mc_clk) begin
    if (rst_n && ew_up) n_up++;
    if (rst_n && ew_down) n_down++;
  end

  function automatic int l1(input int a[4], input int b[4]);
    int s = 0;
    for (int k = 0; k < 4; k++) s += (a[k] > b[k]) ? a[k] - b[k] : b[k] - a[k];
    return s;
  endfunction

  // What the extrapolation works on: the MV buffer once the DMA has
  // finished; it must equal the metadata in DRAM.
  byte unsigned view_mv [NMBT];
  byte unsigned view_cf [NMBT];
  always @(posedge mc_clk) if (rst_n && dut.dma_done) begin
    automatic bit same = 1;
    for (int m = 0; m < NMBT; m++) begin
      view_mv[m] = dut.u_buf.mv_mem[m / 16][(m % 16) * 8 +: 8];
      view_cf[m] = dut.u_buf.conf_mem[m / 16][(m % 16) * 8 +: 8];
      if (view_mv[m] != dram.rd8(MVB + m) || view_cf[m] != dram.rd8(CFB + m)) same = 0;
    end
    check(same, "MV buffer holds the frame's metadata after the DMA");
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

  always @(posedge mc_clk) if (rst_n && frame_done) begin
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

  always @(posedge mc_clk) if (rst_n && ex_done) begin
    for (int l = 0; l < 4; l++) if (dut.u_ex.lanes_ok[l]) begin
      if (lanes_hi[l]) n_hi++; else n_lo++;
    end
  end

  initial begin : watchdog
    repeat (NF * PERIOD + 400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : cpu
    int dropped;
    repeat (4) @(posedge clk);
    rst_n = 1;
    reg_wr(REG_EW, 4);
    reg_wr(REG_MV_BASE, MVB);   reg_wr(REG_CONF_BASE, CFB);
    reg_wr(REG_PIX_BASE, PIXB); reg_wr(REG_RESULT_BASE, RESB);
    reg_wr(REG_CNN_BASE, CNNB); reg_wr(REG_CONF_THR, CONF_THR);
    reg_wr(REG_DIFF_THR, DIFF_THR);
    ew_cfg_m = 4;
    reg_wr(REG_CTRL, 32'h1);
    wait (meta_frame >= 10 && !dut.u_seq.busy);
    @(negedge clk);
    reg_wr(REG_CTRL, 32'h3);
    adaptive_m = 1; ew_a = ew_cfg_m;
    wait (meta_frame >= 30);
    cnn_lat = 40000;                 // longer than a frame: the next one is dropped
    wait (meta_frame >= 32);
    cnn_lat = 2000;
    wait (frames_sent == NF - 1);
    repeat (PERIOD) @(posedge clk);
    @(negedge clk); s_addr = REG_STATUS; #1;
    dropped = int'(s_rdata[15:8]);
    $display("frames %0d, I %0d, E %0d, constant %0d, adaptive %0d, EW up %0d, down %0d, dropped %0d, hi-conf lanes %0d, lo-conf lanes %0d, CNN runs %0d, write back-pressure cycles %0d",
             frames_sent, n_i, n_e, n_const_frames, n_adapt_frames, n_up, n_down, dropped, n_hi, n_lo, cnn_starts, n_bp);
    check(int'(s_rdata[31:16]) == n_i + n_e, "status frame count");
    check(n_i > 0 && n_e > 0, "I- and E-frames happened");
    check(n_const_frames > 0 && n_adapt_frames > 0, "both modes ran");
    check(n_up > 0 && n_down > 0, "adaptive EW moved both ways");
    check(dropped > 0, "a frame was dropped");
    check(n_hi > 0 && n_lo > 0, "both confidence branches used");
    check(n_bp > 0, "register writes were back-pressured");
    check(n_i + n_e + dropped == frames_sent, "every frame processed or dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
