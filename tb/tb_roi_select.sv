// tb_roi_select: random stimulus against a cycle-level reference of the ROI
// selection block (the mux driven by signal 5 and the New-ROI register).
// Each cycle it may write an extrapolated ROI into the bank, commit either
// the inferred ROIs (I-frame) or the extrapolated bank (E-frame), clear, or
// change the memory-mapped ROIs; it checks the committed ROIs and count, the
// ROI-in mux for both sources and the bank read port.
module tb_roi_select;
  import euph_pkg::*;
  localparam int N = MAX_ROIS;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic clear = 0, src_mmap = 0, ext_valid = 0, commit = 0, sel_inferred = 0;
  roi_t mmap_roi [N];
  logic [$clog2(N+1)-1:0] mmap_num = '0, new_num;
  logic [$clog2(N)-1:0] rd_idx = '0, ext_idx = '0;
  roi_t roi_in, ext_rd, ext_roi = '0;
  roi_t new_roi [N];

  roi_select dut (.*);

  roi_t m_new [N], m_bank [N];
  int   m_num = 0;
  int   n_icommit = 0, n_ecommit = 0;

  function automatic roi_t rnd_roi();
    return roi_t'({$urandom, $urandom});
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin mmap_roi[i] = rnd_roi(); m_new[i] = '0; m_bank[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      // compare the state reached with the reference
      checks++;
      if (new_num != m_num) begin failures++; $display("FAIL cycle %0d num %0d want %0d", c, new_num, m_num); end
      for (int i = 0; i < N; i++) if (new_roi[i] != m_new[i]) begin
        failures++; $display("FAIL cycle %0d new_roi[%0d]", c, i);
      end
      // new random inputs
      clear = ($urandom % 100) == 0;
      ext_valid = $urandom % 2; ext_idx = 4'($urandom % N); ext_roi = rnd_roi();
      commit = ($urandom % 6) == 0; sel_inferred = $urandom % 2;
      mmap_num = 4'($urandom % (N + 1));
      if ($urandom % 4 == 0) mmap_roi[$urandom % N] = rnd_roi();
      src_mmap = $urandom % 2; rd_idx = 4'($urandom % N);
      #1;
      checks++;
      if (roi_in != (src_mmap ? mmap_roi[rd_idx] : m_new[rd_idx]) || ext_rd != m_bank[rd_idx]) begin
        failures++; $display("FAIL cycle %0d read ports", c);
      end
      // reference update for the coming edge
      if (clear) m_num = 0;
      else begin
        roi_t nb [N];
        nb = m_bank;
        if (ext_valid) nb[ext_idx] = ext_roi;
        if (commit) begin
          if (sel_inferred) begin
            m_num = mmap_num; for (int i = 0; i < N; i++) m_new[i] = mmap_roi[i]; n_icommit++;
          end else begin
            for (int i = 0; i < m_num; i++) m_new[i] = nb[i]; n_ecommit++;
          end
        end
        m_bank = nb;
      end
    end
    checks++;
    if (n_icommit == 0 || n_ecommit == 0) begin failures++; $display("FAIL a commit kind never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
