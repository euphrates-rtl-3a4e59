// tb_tss_motion_estimator: checks the three-step-search motion estimator
// against the reference search in euph_ref_pkg on random and on shifted-block
// stimuli, and checks the 401-cycle latency per macroblock.
module tb_tss_motion_estimator;
  import euph_pkg::*;
  import euph_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = !clk;
  mb_t  cur;
  win_t win;
  logic busy, done;
  mv_t mv;
  logic [15:0] sad;
  logic [7:0] conf;
  int checks = 0, failures = 0;

  tss_motion_estimator dut (.clk, .rst_n, .start, .cur, .win, .busy, .done, .mv, .sad, .conf);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int eu, ev, es, t0, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      // stimulus: previous frame window random; current block = window block at
      // offset (su,sv) plus a little noise (t even) or fully random (t % 5 == 4)
      int su = int'($urandom_range(14)) - 7, sv = int'($urandom_range(14)) - 7;
      for (int r = 0; r < RW; r++) for (int c = 0; c < RW; c++)
        win[r][c] = 8'($urandom_range(255));
      for (int r = 0; r < RL; r++) for (int c = 0; c < RL; c++)
        if (t % 5 == 4) cur[r][c] = 8'($urandom_range(255));
        else            cur[r][c] = 8'(int'(win[r+RD+sv][c+RD+su]) ^ ((t % 2) ? int'($urandom_range(3)) : 0));
      // smooth the window for some tests so that TSS converges gradually
      if (t % 3 == 1)
        for (int r = 0; r < RW; r++) for (int c = 0; c < RW; c++) win[r][c] = 8'(r*4 + c*3);
      if (t % 3 == 1)
        for (int r = 0; r < RL; r++) for (int c = 0; c < RL; c++) cur[r][c] = win[r+RD+sv][c+RD+su];
      ref_tss(cur, win, eu, ev, es);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      t0 = $time / 10 - 1;
      wait (done);
      lat = $time / 10 - t0;
      @(negedge clk);
      check(int'(mv.u) == eu && int'(mv.v) == ev, $sformatf("mv test %0d: got (%0d,%0d) want (%0d,%0d)", t, mv.u, mv.v, eu, ev));
      check(int'(sad) == es, $sformatf("sad test %0d: got %0d want %0d", t, sad, es));
      check(int'(conf) == 255 - es / 256, $sformatf("conf test %0d", t));
      check(lat == 401, $sformatf("latency %0d, want 401", lat));
      check(int'(sad) <= sad_at(cur, win, 0, 0), $sformatf("no worse than zero motion, test %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
