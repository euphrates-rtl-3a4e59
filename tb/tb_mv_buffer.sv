// tb_mv_buffer: fills both arrays of the motion controller's MV buffer with
// random 128-bit words (as the DMA does, in shuffled order) and reads random
// macroblock entries, checking the motion-vector byte and the confidence byte
// against a copy kept by the testbench and the one-cycle read latency.
module tb_mv_buffer;
  import euph_pkg::*;
  localparam int BYTES = MV_BYTES, WORDS = BYTES / 16;

  logic clk = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, wr_sel = 0, rd_en = 0;
  logic [$clog2(WORDS)-1:0] wr_addr = '0;
  logic [127:0] wr_data = '0;
  logic [$clog2(BYTES)-1:0] rd_mb = '0;
  mv_t rd_mv; logic [7:0] rd_conf;

  mv_buffer dut (.*);

  logic [127:0] ref_mv [WORDS], ref_cf [WORDS];

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int sel = 0; sel < 2; sel++)
      for (int i = 0; i < WORDS; i++) begin
        automatic int w = (i * 37 + 11) % WORDS;       // shuffled order
        automatic logic [127:0] d = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk); wr_en = 1; wr_sel = sel[0]; wr_addr = w[$clog2(WORDS)-1:0]; wr_data = d;
        if (sel == 0) ref_mv[w] = d; else ref_cf[w] = d;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int m = (n < 16) ? n : ((n < 32) ? BYTES - 1 - (n - 16) : int'($urandom % BYTES));
      @(negedge clk); rd_en = 1; rd_mb = m[$clog2(BYTES)-1:0];
      @(negedge clk); rd_en = 0;                           // data due one edge later
      checks++;
      if (rd_mv != ref_mv[m / 16][(m % 16) * 8 +: 8] || rd_conf != ref_cf[m / 16][(m % 16) * 8 +: 8]) begin
        failures++;
        $display("FAIL mb %0d: mv %h conf %h want %h %h", m, rd_mv, rd_conf,
                 ref_mv[m / 16][(m % 16) * 8 +: 8], ref_cf[m / 16][(m % 16) * 8 +: 8]);
      end
      // holding: without rd_en the outputs keep their value
      rd_mb = rd_mb + 1'b1;
      @(negedge clk);
      checks++;
      if (rd_mv != ref_mv[m / 16][(m % 16) * 8 +: 8]) begin failures++; $display("FAIL output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
