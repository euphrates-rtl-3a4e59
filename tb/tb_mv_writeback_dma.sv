// tb_mv_writeback_dma: the ISP-side DMA that drains one bank of the TD
// motion-vector buffer into the frame buffer's metadata in DRAM.  Full-size
// frame (8160 entries).  The testbench plays the drained bank (a synchronous
// one-cycle read of an array of {conf, mv} entries) and the DRAM model; after
// `done` it checks every motion-vector and confidence byte in DRAM, that no
// byte past the frame was written, the burst count and the WLAST framing.
// Runs with a fast memory, with W-beat gaps and with new base addresses.
// A fast run is checked against the data volume (about one entry per cycle
// while gathering each 16-entry beat).
module tb_mv_writeback_dma;
  import euph_pkg::*;
  localparam int NMB = NUM_MB, BEATS = (NMB + 15) / 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic start = 0, busy, done;
  logic [31:0] mv_base, conf_base;
  logic [12:0] dr_addr;
  logic [15:0] dr_data = '0;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst;
  logic [127:0] wdata; logic [15:0] wstrb;

  mv_writeback_dma dut (.*);

  dram_model dram (
    .wclk(clk), .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .rclk(clk), .arvalid(1'b0), .arready(), .araddr('0), .arlen('0), .rvalid(), .rready(1'b0), .rdata(), .rlast()
  );

  logic [15:0] bank [8192];
  always @(posedge clk) dr_data <= bank[dr_addr];

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      automatic int cyc = 0;
      automatic bit ok = 1, extra = 0;
      automatic int b0 = dram.wbursts;
      mv_base = 32'h0010_0000 + 32'(run) * 32'h10_0000; conf_base = mv_base + 32'h2000;
      for (int i = 0; i < 8192; i++) bank[i] = 16'($urandom);
      dram.wr_gap = (run == 1) ? 40 : 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      for (int i = 0; i < NMB; i++)
        if (dram.rd8(mv_base + i) != bank[i][7:0] || dram.rd8(conf_base + i) != bank[i][15:8]) ok = 0;
      for (int i = BEATS * 16; i < 8192; i++)            // gap up to the conf region
        if (dram.mem.exists(mv_base + i)) extra = 1;
      check(ok, $sformatf("run %0d metadata in DRAM", run));
      check(!extra, $sformatf("run %0d nothing written past the last beat", run));
      check(dram.wbursts - b0 == 2 * ((BEATS + 15) / 16), $sformatf("run %0d burst count", run));
      check(dram.wlast_errs == 0, "WLAST framing");
      $display("run %0d: %0d entries x 2 written in %0d cycles", run, NMB, cyc);
      if (run != 1) check(cyc <= 2 * NMB + 2 * BEATS + 40 * (2 * BEATS / 16 + 1), "write-back time within bound");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
