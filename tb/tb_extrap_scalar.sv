// tb_extrap_scalar: the scalar unit that decides I- versus E-frames and
// adapts the extrapolation window (EW).  A reference model runs beside it over
// random frames: constant mode with random EW values (including 0 and values
// above the maximum, which are clamped), then adaptive mode with random
// comparisons of inferred against extrapolated ROIs (some within, some beyond
// the distance threshold).  Every frame checks the I/E decision and the EW;
// every comparison checks the increase/decrease pulses.  The adaptive EW is
// also driven to both ends of its range.
module tb_extrap_scalar;
  import euph_pkg::*;
  localparam int EWM = EW_MAX;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic init = 0, adaptive = 0, force_i = 0, frame_adv = 0, cmp_valid = 0, cmp_last = 0;
  logic [5:0] ew_cfg = 6'd2, ew;
  logic is_iframe, ew_up, ew_down;
  roi_t cmp_cnn = '0, cmp_ext = '0;
  logic [15:0] diff_thr = 16'd20;

  extrap_scalar dut (.*);

  int m_ewa = 1, m_cnt = 0, m_good = 0;
  int n_i = 0, n_e = 0, n_up = 0, n_down = 0, n_max = 0, n_min = 0;

  function automatic int clampew(input int e);
    return (e == 0) ? 1 : (e > EWM) ? EWM : e;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int f = 0; f < 5600; f++) begin
      automatic int m_ew;
      automatic bit m_i;
      automatic bit phase_adapt = (f >= 400);
      automatic int bias = (f < 1000) ? 90 : (f < 5000) ? 0 : 50;   // % of bad pairs
      if (!phase_adapt && f % 40 == 0) begin
        ew_cfg = 6'($urandom % 40); @(negedge clk); m_ewa = clampew(int'(ew_cfg));
      end
      if (f == 400) begin ew_cfg = 6'd3; @(negedge clk); m_ewa = 3; adaptive = 1; @(negedge clk); end
      force_i = ($urandom % 50) == 0;
      #1;
      m_ew = adaptive ? m_ewa : clampew(int'(ew_cfg));
      m_i  = force_i || m_cnt == 0;
      check(is_iframe == m_i, $sformatf("frame %0d I/E", f));
      check(int'(ew) == m_ew, $sformatf("frame %0d EW %0d want %0d", f, ew, m_ew));
      if (m_i) n_i++; else n_e++;
      if (adaptive && m_i && ($urandom % 4 != 0)) begin
        automatic int np = 1 + $urandom % 4;
        automatic bit bad = 0;
        for (int p = 0; p < np; p++) begin
          automatic int off = ($urandom % 100 < bias) ? 21 + $urandom % 30 : $urandom % 21;
          cmp_cnn = roi_t'({16'(100 + $urandom % 900), 16'(100 + $urandom % 900), 16'($urandom % 1000), 16'($urandom % 1000)});
          cmp_ext = cmp_cnn;
          cmp_ext.x0 = cmp_cnn.x0 + 16'(off / 2);
          cmp_ext.y1 = cmp_cnn.y1 - 16'(off - off / 2);
          if (off > 20) bad = 1;
          cmp_valid = 1; cmp_last = (p == np - 1);
          @(negedge clk);
          cmp_valid = 0; cmp_last = 0;
        end
        // reference of the window adaptation
        begin
          automatic bit up = 0, down = 0;
          if (bad) begin m_good = 0; if (m_ewa > 1) begin m_ewa--; down = 1; end end
          else if (m_good + 1 >= 3) begin m_good = 0; if (m_ewa < EWM) begin m_ewa++; up = 1; end end
          else m_good++;
          check(ew_down == down && ew_up == up, $sformatf("frame %0d adapt pulses", f));
          if (up) n_up++; if (down) n_down++;
          if (m_ewa == EWM) n_max++; if (m_ewa == 1) n_min++;
        end
      end
      frame_adv = 1; @(negedge clk); frame_adv = 0;
      m_ew = adaptive ? m_ewa : clampew(int'(ew_cfg));
      begin
        automatic int nx = (m_i ? 0 : m_cnt) + 1;
        m_cnt = (nx >= m_ew) ? 0 : nx;
      end
    end
    $display("I %0d E %0d up %0d down %0d at max %0d at min %0d", n_i, n_e, n_up, n_down, n_max, n_min);
    check(n_i > 0 && n_e > 0 && n_up > 0 && n_down > 0 && n_max > 0 && n_min > 0, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
