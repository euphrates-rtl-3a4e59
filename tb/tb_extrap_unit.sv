// tb_extrap_unit: the extrapolation unit on a full-size 1920x1080 frame.
// The testbench holds a motion-vector field (smooth motion per region plus
// noise, random confidences) and answers the unit's buffer reads with one
// cycle of latency.  It extrapolates random ROIs (small, large, one pixel,
// on the frame borders) in random slots and compares the output ROI and the
// lane-valid flags with the pixel-level reference of Eq. 1-3 (quadrant
// sub-ROIs, minimal bounding box, clamping to the frame), keeping the
// per-slot MV_{F-1} history like the unit does.  Each run must take at most
// (#macroblocks touched) + 102 cycles exactly, and reads must stay inside the ROI's
// macroblocks.
module tb_extrap_unit;
  import euph_pkg::*;
  import euph_ref_pkg::*;
  localparam int NMB = NUM_MB;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic clear_hist = 0, start = 0, busy, done, rd_en;
  logic [3:0] roi_idx = '0;
  roi_t roi_in = '0, roi_out;
  logic [7:0] conf_thr = 8'd128, rd_conf = '0;
  logic [3:0] lanes_ok, lanes_hi;
  logic [12:0] rd_mb;
  mv_t rd_mv = '0;

  extrap_unit dut (.*);

  byte unsigned mvb [], cfb [];
  int bad_reads = 0;
  int rx0, ry0, rx1, ry1;          // ROI being extrapolated
  always @(posedge clk) if (rst_n && rd_en) begin
    automatic int mx = (int'(rd_mb) % MB_COLS) * 16, my = (int'(rd_mb) / MB_COLS) * 16;
    rd_mv <= mv_t'(mvb[rd_mb]); rd_conf <= cfb[rd_mb];
    if (int'(rd_mb) >= NMB || mx + 16 <= rx0 || mx >= rx1 || my + 16 <= ry0 || my >= ry1) bad_reads++;
  end

  int hu [MAX_ROIS][4], hv [MAX_ROIS][4];

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n_hi = 0, n_lo = 0;
    mvb = new[NMB]; cfb = new[NMB];
    for (int s = 0; s < MAX_ROIS; s++) for (int l = 0; l < 4; l++) begin hu[s][l] = 0; hv[s][l] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clear_hist = 1; @(negedge clk); clear_hist = 0;
    for (int t = 0; t < 120; t++) begin
      automatic int slot = $urandom % MAX_ROIS, cyc = 0, nmb;
      automatic int ox0, oy0, ox1, oy1, mu[4], mv[4];
      automatic bit ok[4];
      if (t % 10 == 0) begin                         // new field
        automatic int cu = int'($urandom % 11) - 5, cv = int'($urandom % 11) - 5;
        for (int m = 0; m < NMB; m++) begin
          automatic int u = cu + ((m % MB_COLS) > 60 ? 2 : 0) + int'($urandom % 3) - 1;
          automatic int v = cv + int'($urandom % 3) - 1;
          if (u > 7) u = 7; if (u < -7) u = -7; if (v > 7) v = 7; if (v < -7) v = -7;
          mvb[m] = byte'(((v & 15) << 4) | (u & 15));
          cfb[m] = byte'(($urandom % 4 == 0) ? $urandom % 256 : 180 + $urandom % 76);
        end
      end
      unique case (t % 6)
        0: begin rx0 = $urandom % 1900; ry0 = $urandom % 1060; rx1 = rx0 + 1; ry1 = ry0 + 1; end
        1: begin rx0 = 0; ry0 = 0; rx1 = 1 + $urandom % 200; ry1 = 1 + $urandom % 200; end
        2: begin rx1 = 1920; ry1 = 1080; rx0 = 1920 - 1 - $urandom % 300; ry0 = 1080 - 1 - $urandom % 300; end
        3: begin rx0 = 0; ry0 = 0; rx1 = 1920; ry1 = 1080; end
        default: begin
          rx0 = $urandom % 1800; ry0 = $urandom % 1000;
          rx1 = rx0 + 1 + $urandom % (1920 - rx0); ry1 = ry0 + 1 + $urandom % (1080 - ry0);
          if (rx1 - rx0 > 400) rx1 = rx0 + 400; if (ry1 - ry0 > 300) ry1 = ry0 + 300;
        end
      endcase
      conf_thr = (t % 3 == 0) ? 8'd255 : 8'd200;
      nmb = ((rx1 + 15) / 16 - rx0 / 16) * ((ry1 + 15) / 16 - ry0 / 16);
      @(negedge clk);
      roi_idx = 4'(slot); roi_in = '{y1: 16'(ry1), x1: 16'(rx1), y0: 16'(ry0), x0: 16'(rx0)};
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      ref_extrap(rx0, ry0, rx1, ry1, mvb, cfb, MB_COLS, hu[slot], hv[slot], int'(conf_thr), 1920, 1080,
                 ox0, oy0, ox1, oy1, mu, mv, ok);
      hu[slot] = mu; hv[slot] = mv;
      check(roi_out == {16'(oy1), 16'(ox1), 16'(oy0), 16'(ox0)},
            $sformatf("run %0d ROI (%0d,%0d,%0d,%0d): got %0d,%0d,%0d,%0d want %0d,%0d,%0d,%0d", t, rx0, ry0, rx1, ry1,
                      roi_out.x0, roi_out.y0, roi_out.x1, roi_out.y1, ox0, oy0, ox1, oy1));
      check(lanes_ok == {ok[3], ok[2], ok[1], ok[0]}, $sformatf("run %0d lane flags", t));
      check(cyc == nmb + 102, $sformatf("run %0d took %0d cycles for %0d macroblocks", t, cyc, nmb));
      for (int l = 0; l < 4; l++) if (lanes_ok[l]) begin if (lanes_hi[l]) n_hi++; else n_lo++; end
    end
    check(bad_reads == 0, "reads stay inside the ROI");
    check(n_hi > 0 && n_lo > 0, "both confidence branches used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
