// tb_td_mv_buffer: the double-buffered motion-vector store of the temporal
// denoiser.  A writer stores frames of {conf, mv} entries (values derived
// from frame and index) whenever wr_ready allows, with random gaps; a drain
// model answers each drain_start by reading the whole drained bank through
// the drain port after a random delay, sometimes long enough that the next
// frame completes first and must stall.  Checks: drained contents equal the
// frame that was written, the motion-compensation port reads the bank being
// filled, no frame is lost or drained twice, the one-cycle read latency, and
// that the stall happened and released.  A small frame (NMB = 40) keeps the
// run short; the full-size buffer is exercised by the top-level tests.
module tb_td_mv_buffer;
  import euph_pkg::*;
  localparam int NMB = 40, DEPTH = 64, NFR = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic wr_en = 0, wr_ready, stall, drain_start, drain_done = 0, fill_bank;
  logic [15:0] wr_data = '0, mc_data, dr_data;
  logic [5:0] mc_addr = '0, dr_addr = '0;

  td_mv_buffer #(.NMB(NMB), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [15:0] val(input int f, input int i);
    return 16'((f * 7919 + i * 131 + (f ^ i)) & 16'hFFFF);
  endfunction

  int wr_frame = 0, dr_frame = 0, stall_cyc = 0;
  always @(posedge clk) if (stall) stall_cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer, with motion-compensation reads of the entry written last
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < NFR; f++) begin
      for (int i = 0; i < NMB; i++) begin
        repeat ($urandom % 3) @(negedge clk);
        while (!wr_ready) @(negedge clk);
        wr_en = 1; wr_data = val(f, i);
        @(negedge clk); wr_en = 0;
        if (i != NMB - 1) begin
          mc_addr = 6'(i);
          @(negedge clk);
          check(mc_data == val(f, i), $sformatf("MC read frame %0d entry %0d", f, i));
        end
      end
      wr_frame++;
    end
  end

  // drain model
  initial begin
    wait (rst_n);
    forever begin
      automatic int delay;
      @(posedge clk); if (!drain_start) continue;
      delay = ($urandom % 4 == 0) ? 200 + $urandom % 200 : $urandom % 20;
      repeat (delay) @(negedge clk);
      for (int i = 0; i < NMB; i++) begin
        @(negedge clk); dr_addr = 6'(i);
        @(negedge clk);
        check(dr_data == val(dr_frame, i), $sformatf("drain frame %0d entry %0d", dr_frame, i));
      end
      @(negedge clk); drain_done = 1; @(negedge clk); drain_done = 0;
      dr_frame++;
    end
  end

  initial begin
    wait (dr_frame == NFR);
    repeat (20) @(negedge clk);
    check(wr_frame == NFR && !stall, "all frames written and drained");
    check(stall_cyc > 0, "the writer was stalled at least once");
    $display("stall cycles %0d", stall_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
