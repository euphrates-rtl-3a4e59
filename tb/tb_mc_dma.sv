// tb_mc_dma: the motion controller's DMA that copies a frame's motion vectors
// and confidences from DRAM into the MV buffer.  Full-size frame (8160
// macroblocks): random metadata is placed in the DRAM model at two base
// addresses, the copy is started, and every word written into the buffer is
// compared with DRAM; words beyond the frame must not be written.  Run three
// times, with a fast memory and with random read-beat gaps.  The time of a
// fast copy is checked against its data volume: at most two cycles per
// 128-bit beat plus a fixed cost per burst.
module tb_mc_dma;
  import euph_pkg::*;
  localparam int NMB = NUM_MB, BEATS = (NMB + 15) / 16, WORDS = MV_BYTES / 16;
  localparam int unsigned MVB = 32'h0008_0000, CFB = 32'h000A_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic start = 0, busy, done;
  logic [31:0] mv_base = MVB, conf_base = CFB;
  logic arvalid, arready, rvalid, rready, rlast, buf_we, buf_sel;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst;
  logic [127:0] rdata, buf_data;
  logic [8:0] buf_addr;

  mc_dma dut (.*);

  dram_model dram (
    .wclk(clk), .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .wvalid(1'b0), .wready(),
    .wdata('0), .wlast(1'b0), .bvalid(), .bready(1'b0),
    .rclk(clk), .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast
  );

  logic [127:0] got [2][WORDS];
  bit           hit [2][WORDS];
  always @(posedge clk) if (rst_n && buf_we) begin
    got[buf_sel][buf_addr] <= buf_data;
    hit[buf_sel][buf_addr] <= 1'b1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      automatic int cyc = 0;
      for (int i = 0; i < BEATS * 16; i++) begin
        dram.mem[MVB + i] = 8'($urandom);
        dram.mem[CFB + i] = 8'($urandom);
      end
      for (int s = 0; s < 2; s++) for (int w = 0; w < WORDS; w++) hit[s][w] = 0;
      dram.rd_gap = (run == 2) ? 3 : 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      for (int s = 0; s < 2; s++) begin
        automatic bit ok = 1, extra = 0;
        for (int w = 0; w < WORDS; w++) begin
          if (w < BEATS) begin
            for (int k = 0; k < 16; k++)
              if (!hit[s][w] || got[s][w][k*8 +: 8] != dram.rd8((s ? CFB : MVB) + 16*w + k)) ok = 0;
          end else if (hit[s][w]) extra = 1;
        end
        check(ok, $sformatf("run %0d %s region copied", run, s ? "confidence" : "motion-vector"));
        check(!extra, $sformatf("run %0d %s: nothing written past the frame", run, s ? "confidence" : "motion-vector"));
      end
      $display("run %0d: copy of %0d beats took %0d cycles", run, 2 * BEATS, cyc);
      if (run < 2) check(cyc <= 2 * (2 * BEATS) + 12 * (2 * BEATS / 16 + 1), "copy time within bound");
      check(dram.rbeats == (run + 1) * 2 * BEATS, "no extra beats read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
