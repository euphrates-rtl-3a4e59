// tb_extrap_simd: the 4-lane SIMD part of the extrapolation unit.  Each test
// gives the lanes four random sub-ROIs (some empty, some touching the frame
// edge) inside a 160x96 pixel area, broadcasts every 16x16 macroblock of the
// area with a random vector and confidence, then asks for the result.  The
// reference computes, per lane, the pixel-weighted mean vector (Eq. 1) in
// Q.4, the mean confidence, beta by the threshold rule and the filtered
// vector of Eq. 3, and the result is compared exactly, together with the
// lane-valid and high-confidence flags.  The latency from `finish` to `done`
// must be the documented 99 cycles.
module tb_extrap_simd;
  import euph_pkg::*;
  import euph_ref_pkg::sx4;
  localparam int AWD = 160, AHT = 96, C = AWD / 16, R = AHT / 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic clear = 0, acc_en = 0, finish = 0, busy, done;
  roi_t sub [LANES];
  logic [15:0] mb_px = '0, mb_py = '0;
  mv_t mv = '0; logic [7:0] conf = '0, conf_thr = 8'd128;
  mvf_t prev [LANES], mvf [LANES];
  logic lane_ok [LANES], lane_hi [LANES];

  extrap_simd dut (.*);

  byte unsigned fmv [R*C], fcf [R*C];

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n_hi = 0, n_lo = 0, n_empty = 0;
    for (int l = 0; l < LANES; l++) begin sub[l] = '0; prev[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int cyc;
      // random field: a common motion plus noise; confidence band per test
      automatic int base_u = int'($urandom % 15) - 7, base_v = int'($urandom % 15) - 7;
      automatic int cmin = (t % 3 == 0) ? 0 : (t % 3 == 1) ? 120 : 200;
      for (int m = 0; m < R*C; m++) begin
        automatic int u = base_u + int'($urandom % 3) - 1, v = base_v + int'($urandom % 3) - 1;
        if (u > 7) u = 7; if (u < -7) u = -7; if (v > 7) v = 7; if (v < -7) v = -7;
        fmv[m] = byte'(((v & 15) << 4) | (u & 15));
        fcf[m] = byte'(cmin + $urandom % (256 - cmin));
      end
      for (int l = 0; l < LANES; l++) begin
        automatic int x0 = $urandom % AWD, y0 = $urandom % AHT;
        automatic int x1 = x0 + $urandom % (AWD - x0 + 1), y1 = y0 + $urandom % (AHT - y0 + 1);
        if ($urandom % 8 == 0) x1 = x0;                 // empty lane
        sub[l] = '{y1: 16'(y1), x1: 16'(x1), y0: 16'(y0), x0: 16'(x0)};
        prev[l].u = MVF_W'(int'($urandom % 200) - 100);
        prev[l].v = MVF_W'(int'($urandom % 200) - 100);
      end
      conf_thr = 8'($urandom);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int m = 0; m < R*C; m++) begin
        acc_en = 1; mb_px = 16'((m % C) * 16); mb_py = 16'((m / C) * 16);
        mv = mv_t'(fmv[m]); conf = fcf[m];
        @(negedge clk);
      end
      acc_en = 0; finish = 1; @(negedge clk); finish = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 99, $sformatf("test %0d latency %0d", t, cyc));
      for (int l = 0; l < LANES; l++) begin
        automatic longint n = 0, su = 0, sv = 0, sc = 0;
        automatic int mu_u, mu_v, alpha, beta, eu, ev;
        for (int y = sub[l].y0; y < sub[l].y1; y++)
          for (int x = sub[l].x0; x < sub[l].x1; x++) begin
            automatic int m = (y / 16) * C + x / 16;
            n++; su += sx4(fmv[m][3:0]); sv += sx4(fmv[m][7:4]); sc += fcf[m];
          end
        if (n == 0) begin
          n_empty++;
          check(!lane_ok[l] && mvf[l] == prev[l], $sformatf("test %0d lane %0d empty", t, l));
          continue;
        end
        mu_u  = int'(((su < 0 ? -su : su) * 16) / n); if (su < 0) mu_u = -mu_u;
        mu_v  = int'(((sv < 0 ? -sv : sv) * 16) / n); if (sv < 0) mu_v = -mu_v;
        alpha = int'(sc / n);
        beta  = (alpha > int'(conf_thr)) ? alpha : 128;
        eu = (beta * mu_u + (256 - beta) * int'(prev[l].u)) >>> 8;
        ev = (beta * mu_v + (256 - beta) * int'(prev[l].v)) >>> 8;
        if (alpha > int'(conf_thr)) n_hi++; else n_lo++;
        check(lane_ok[l] && lane_hi[l] == (alpha > int'(conf_thr)) && int'(mvf[l].u) == eu && int'(mvf[l].v) == ev,
              $sformatf("test %0d lane %0d: got %0d,%0d hi %0d want %0d,%0d (alpha %0d)", t, l,
                        mvf[l].u, mvf[l].v, lane_hi[l], eu, ev, alpha));
      end
    end
    $display("lanes: high %0d low %0d empty %0d", n_hi, n_lo, n_empty);
    check(n_hi > 0 && n_lo > 0 && n_empty > 0, "all lane cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
