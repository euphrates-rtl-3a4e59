// tb_mc_sequencer: the motion controller's sequencer FSM with its neighbours
// replaced by simple models: the DMA and the extrapolation unit answer after
// random delays, the CNN answers its start command after a random latency
// with a random ROI count, the I/E decision is random (as the scalar unit
// could decide), the ROI register takes the committed count, and the
// register-write master is throttled at random.  Per frame it checks the
// exact order and contents of the master's writes (CNN source and start on
// I-frames only, then every committed ROI and the status word), the number
// of extrapolations and comparisons (with cmp_last on the final pair), one
// commit with the right select, one frame_adv and one frame_done; frames
// arriving while busy must be dropped and counted.
module tb_mc_sequencer;
  import euph_pkg::*;
  localparam int N = MAX_ROIS;
  localparam int unsigned PIXB = 32'h1000_0000, RESB = 32'h2000_0000, CNNB = 32'h3000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic enable = 0, task_start = 0, adaptive = 0, cnn_done = 0, frame_ready = 0, is_iframe = 0;
  logic force_i, frame_adv, cmp_valid, cmp_last, dma_start, dma_done = 0, ex_start, ex_busy = 0, ex_done = 0;
  logic [3:0] rd_idx, cnn_num = '0, new_num = '0;
  logic src_mmap, commit, sel_inferred, m_valid, m_ready = 1, busy, frame_done, cur_iframe;
  roi_t new_roi [N];
  logic [31:0] m_addr, m_wdata;
  logic [15:0] frames; logic [7:0] dropped;
  logic [31:0] pix_base = PIXB, result_base = RESB, cnn_base = CNNB;

  mc_sequencer dut (.*);

  // neighbours
  always @(posedge clk) m_ready <= ($urandom % 3 != 0);
  initial forever begin
    @(posedge clk); if (!dma_start) continue;
    repeat (1 + $urandom % 20) @(posedge clk);
    dma_done <= 1; @(posedge clk); dma_done <= 0;
  end
  initial forever begin
    @(posedge clk); if (!ex_start) continue;
    ex_busy <= 1;
    repeat (1 + $urandom % 30) @(posedge clk);
    ex_busy <= 0; ex_done <= 1; @(posedge clk); ex_done <= 0;
  end
  int n_ex = 0, n_cmp = 0, n_cmp_last = 0, n_commit = 0, n_adv = 0, commit_sel = 0, n_done = 0;
  logic [31:0] wa [$], wd [$];
  always @(posedge clk) if (rst_n) begin
    if (ex_start) n_ex++;
    if (cmp_valid) begin n_cmp++; if (cmp_last) n_cmp_last++; end
    if (commit) begin n_commit++; commit_sel = sel_inferred; if (sel_inferred) new_num <= cnn_num; end
    if (frame_adv) n_adv++;
    if (frame_done) n_done++;
    if (m_valid && m_ready) begin
      wa.push_back(m_addr); wd.push_back(m_wdata);
      if (m_addr == CNNB + 4) fork begin
        repeat (5 + $urandom % 60) @(posedge clk);
        cnn_num <= 4'($urandom % (N + 1)); cnn_done <= 1; @(posedge clk); cnn_done <= 0;
      end join_none
    end
  end
  initial for (int i = 0; i < N; i++) new_roi[i] = roi_t'({$urandom, $urandom});

  initial begin
    repeat (500000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n_i = 0, n_e = 0, n_drop = 0, have = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); enable = 1; task_start = 1; @(negedge clk); task_start = 0;
    check(force_i, "first frame forced to be an I-frame");
    for (int f = 0; f < 300; f++) begin
      automatic int prev_num = int'(new_num), pn, exp_ex, exp_cmp, k = 0;
      automatic bit isi;
      if (f == 100) adaptive = 1;
      is_iframe = force_i || ($urandom % 3 == 0);
      isi = is_iframe;
      n_ex = 0; n_cmp = 0; n_cmp_last = 0; n_commit = 0; n_adv = 0; n_done = 0;
      wa.delete(); wd.delete();
      @(negedge clk); frame_ready = 1; @(negedge clk); frame_ready = 0;
      if (f % 10 == 5) begin                        // a frame arrives while busy
        repeat (3) @(negedge clk);
        if (busy) begin frame_ready = 1; @(negedge clk); frame_ready = 0; n_drop++; end
      end
      while (n_done == 0) @(negedge clk);
      repeat (2) @(negedge clk);
      if (isi) n_i++; else n_e++;
      // expected activity
      exp_ex  = isi ? ((adaptive && have && prev_num != 0) ? prev_num : 0) : prev_num;
      pn      = (int'(cnn_num) < prev_num) ? int'(cnn_num) : prev_num;
      exp_cmp = (isi && adaptive && have && prev_num != 0 && cnn_num != 0) ? pn : 0;
      check(n_ex == exp_ex, $sformatf("frame %0d extrapolations %0d want %0d", f, n_ex, exp_ex));
      check(n_cmp == exp_cmp && n_cmp_last == (exp_cmp != 0), $sformatf("frame %0d comparisons %0d want %0d", f, n_cmp, exp_cmp));
      check(n_commit == 1 && commit_sel == isi && n_adv == 1 && n_done == 1, $sformatf("frame %0d commit/advance", f));
      check(cur_iframe == isi, $sformatf("frame %0d type", f));
      if (isi) begin
        check(wa[0] == CNNB && wd[0] == PIXB && wa[1] == CNNB + 4 && wd[1] == 1, $sformatf("frame %0d CNN programming", f));
        k = 2;
        have = 1;
      end
      check(wa.size() == k + 2 * int'(new_num) + 1, $sformatf("frame %0d write count %0d", f, wa.size()));
      for (int i = 0; i < int'(new_num); i++) begin
        check(wa[k + 2*i] == RESB + 8*i && wd[k + 2*i] == {new_roi[i].y0, new_roi[i].x0} &&
              wa[k + 2*i + 1] == RESB + 8*i + 4 && wd[k + 2*i + 1] == {new_roi[i].y1, new_roi[i].x1},
              $sformatf("frame %0d result ROI %0d", f, i));
      end
      check(wa[wa.size() - 1] == RESB + 8*N && wd[wd.size() - 1] == {16'(f), 7'd0, isi, 4'd0, new_num},
            $sformatf("frame %0d status word %h", f, wd[wd.size() - 1]));
      check(frames == 16'(f + 1) && dropped == 8'(n_drop), $sformatf("frame %0d counters", f));
      repeat ($urandom % 5) @(negedge clk);
    end
    $display("I %0d E %0d dropped %0d", n_i, n_e, n_drop);
    check(n_i > 0 && n_e > 0 && n_drop > 0, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
