// tb_mc_regs: the memory-mapped register file of the motion controller.
// Checks the reset values, write/read-back of every register and ROI entry,
// the clamp of the ROI count, the one-cycle task_start pulse on the enable
// edge only, the one-cycle cnn_done pulse, the status word layout and that
// writes to unmapped offsets change nothing.
module tb_mc_regs;
  import euph_pkg::*;
  localparam int N = MAX_ROIS;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic s_we = 0; logic [7:0] s_addr = '0; logic [31:0] s_wdata = '0, s_rdata;
  logic enable, adaptive, task_start, cnn_done;
  logic [5:0] ew_cfg, st_ew = '0;
  logic [31:0] mv_base, conf_base, pix_base, result_base, cnn_base;
  logic [7:0] conf_thr, st_dropped = '0;
  logic [15:0] diff_thr, st_frames = '0;
  logic [3:0] num_rois;
  roi_t mmap_roi [N];

  mc_regs dut (.*);

  int n_start = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin if (task_start) n_start++; if (cnn_done) n_done++; end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); s_we = 1; s_addr = a; s_wdata = d;
    @(negedge clk); s_we = 0;
    @(negedge clk);                 // pulses raised by the write are counted
  endtask
  // combinational read port: set the address, let it settle
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    s_addr = a; #1; d = s_rdata;
  endtask
  logic [31:0] r0, r1;

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v [8];
    repeat (2) @(negedge clk); rst_n = 1;
    check(!enable && ew_cfg == 2 && conf_thr == 128 && diff_thr == 16 && num_rois == 0, "reset values");
    v = '{$urandom, $urandom, $urandom, $urandom, $urandom, 0, 0, 0};
    wr(REG_MV_BASE, v[0]); wr(REG_CONF_BASE, v[1]); wr(REG_PIX_BASE, v[2]);
    wr(REG_RESULT_BASE, v[3]); wr(REG_CNN_BASE, v[4]);
    wr(REG_EW, 7); wr(REG_CONF_THR, 32'h1234_56C8); wr(REG_DIFF_THR, 32'hFFFF_0021);
    check(mv_base == v[0] && conf_base == v[1] && pix_base == v[2] && result_base == v[3] && cnn_base == v[4], "base addresses");
    rd(REG_MV_BASE, r0);
    rd(REG_CNN_BASE, r1);
    check(r0 == v[0] && r1 == v[4], "base read-back");
    rd(REG_EW, r0);
    check(ew_cfg == 7 && r0 == 7, "window size");
    rd(REG_CONF_THR, r0);
    check(conf_thr == 8'hC8 && r0 == 32'hC8, "confidence threshold");
    rd(REG_DIFF_THR, r0);
    check(diff_thr == 16'h0021 && r0 == 32'h21, "distance threshold");
    // ROI entries
    for (int i = 0; i < N; i++) begin
      wr(REG_ROI0 + 8'(8*i), {16'(100 + i), 16'(200 + i)});
      wr(REG_ROI0 + 8'(8*i + 4), {16'(300 + i), 16'(400 + i)});
    end
    for (int i = 0; i < N; i++) begin
      check(mmap_roi[i].x0 == 200 + i && mmap_roi[i].y0 == 100 + i && mmap_roi[i].x1 == 400 + i && mmap_roi[i].y1 == 300 + i,
            $sformatf("ROI %0d fields", i));
      rd(REG_ROI0 + 8'(8*i + 4), r0);
      check(r0 == {16'(300 + i), 16'(400 + i)}, $sformatf("ROI %0d read-back", i));
    end
    wr(REG_NUM_ROIS, 6);  check(num_rois == 6, "ROI count");
    wr(REG_NUM_ROIS, 99); check(num_rois == N, "ROI count clamped");
    // an unmapped offset beyond the ROI table changes nothing
    wr(8'h40 + 8'(8*N), 32'hDEAD_BEEF);
    rd(8'h40 + 8'(8*N), r0);
    check(mmap_roi[N-1].x0 == 200 + N - 1 && r0 == 0, "unmapped offset");
    // control: task_start only on the enable edge
    wr(REG_CTRL, 32'h1); check(enable && !adaptive && n_start == 1, "enable starts a task");
    check(!task_start, "task_start is a pulse");
    wr(REG_CTRL, 32'h3); check(adaptive && n_start == 1, "mode switch does not restart");
    wr(REG_CTRL, 32'h0); wr(REG_CTRL, 32'h1); check(n_start == 2, "re-enable restarts");
    rd(REG_CTRL, r0);
    check(r0 == 32'h1, "control read-back");
    wr(REG_CNN_DONE, 1); check(n_done == 1 && !cnn_done, "CNN done pulse");
    st_ew = 6'd9; st_dropped = 8'd3; st_frames = 16'd1234;
    rd(REG_STATUS, r0);
    check(r0 == {16'd1234, 8'd3, 8'd9}, "status word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
