// mv_writeback_dma: write-back of the ISP's motion vectors to the frame
// buffer's metadata section.
//
// On `start` (the TD buffer's drain_start) it reads the drain bank of the TD
// buffer entry by entry ({conf, mv}, one per cycle), packs 16 bytes into a
// 128-bit beat and writes them with an AXI4 write master: first the NMB MV
// bytes to `mv_base`, then the NMB confidence bytes to `conf_base`.  Bursts
// are INCR of up to BURST beats, one in flight, each closed by its B
// response; bytes past NMB in the last beat are written as zero.  `done`
// pulses after the last B response and doubles as the TD buffer's
// drain_done and the "metadata ready" event for the motion controller.
//
// Timing: 16 cycles to gather a beat, so about 2 x 16 x ceil(NMB/16) cycles
// plus handshakes per frame: 16.3 K cycles for 1080p, 21 us at 768 MHz, a
// small fraction of a 16.7 ms frame.
//
// From the paper: the ISP's DMA writes the MVs and their confidences into the
// metadata of the frame buffer (about 8 KB of MVs per 1080p frame), configured
// by the ISP sequencer; 128-bit AXI4.  Own choices: the layout (two byte
// arrays), burst length, the gathering order.
module mv_writeback_dma
  import euph_pkg::*;
#(
  parameter int unsigned NMB   = NUM_MB,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned DW    = AXI_DW,
  parameter int unsigned BURST = 16,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BPB   = DW / 8,                    // bytes per beat
  localparam int unsigned BEATS = (NMB + BPB - 1) / BPB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AXI_AW-1:0] mv_base,
  input  logic [AXI_AW-1:0] conf_base,
  output logic              busy,
  output logic              done,
  // TD buffer drain port (1-cycle read latency)
  output logic [AW-1:0]     dr_addr,     // combinational
  input  logic [15:0]       dr_data,
  // AXI4 write master
  output logic              awvalid,
  input  logic              awready,
  output logic [AXI_AW-1:0] awaddr,
  output logic [7:0]        awlen,
  output logic [2:0]        awsize,
  output logic [1:0]        awburst,
  output logic              wvalid,
  input  logic              wready,
  output logic [DW-1:0]     wdata,
  output logic [BPB-1:0]    wstrb,
  output logic              wlast,
  input  logic              bvalid,
  output logic              bready
);
  typedef enum logic [2:0] {W_IDLE, W_AW, W_GATHER, W_W, W_B} wstate_t;
  wstate_t state;

  logic               region;
  logic [AW:0]        beat;        // beat index within the region
  logic [8:0]         inburst;     // beats left in the current burst
  logic [$clog2(BPB):0] k;         // bytes requested for the current beat
  logic               rv;          // a read is returning this cycle
  logic [$clog2(BPB)-1:0] rk;
  logic [AW-1:0]      ridx;
  logic [AXI_AW-1:0]  base;

  wire [AW:0] left = (AW+1)'(BEATS) - beat;
  wire [8:0]  blen = (left >= (AW+1)'(BURST)) ? 9'(BURST) : 9'(left);

  assign awsize  = 3'($clog2(BPB));
  assign awburst = 2'b01;
  assign wstrb   = '1;
  assign bready  = (state == W_B);
  assign busy    = (state != W_IDLE);

  wire [AW-1:0] byte_idx = AW'(beat * (AW+1)'(BPB)) + AW'(k);
  assign dr_addr = byte_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_IDLE; region <= 1'b0; beat <= '0; inburst <= '0; k <= '0;
      rv <= 1'b0; rk <= '0; ridx <= '0; base <= '0;
      awvalid <= 1'b0; awaddr <= '0; awlen <= '0;
      wvalid <= 1'b0; wdata <= '0; wlast <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rv   <= 1'b0;
      // returning read data lands in its byte lane
      if (rv)
        wdata[rk*8 +: 8] <= (ridx >= AW'(NMB)) ? 8'h00 : (region ? dr_data[15:8] : dr_data[7:0]);
      unique case (state)
        W_IDLE: if (start) begin
          region <= 1'b0; beat <= '0; base <= mv_base; state <= W_AW;
        end
        W_AW: begin
          if (!awvalid) begin
            awvalid <= 1'b1;
            awaddr  <= base + AXI_AW'(beat) * AXI_AW'(BPB);
            awlen   <= 8'(blen - 1'b1);
            inburst <= blen;
          end else if (awready) begin
            awvalid <= 1'b0;
            k       <= '0;
            state   <= W_GATHER;
          end
        end
        W_GATHER: begin
          if (k != ($bits(k))'(BPB)) begin
            rv      <= 1'b1;
            rk      <= k[$clog2(BPB)-1:0];
            ridx    <= byte_idx;
            k       <= k + 1'b1;
          end else if (!rv) begin
            wvalid <= 1'b1;
            wlast  <= (inburst == 9'd1);
            state  <= W_W;
          end
        end
        W_W: if (wready) begin
          wvalid  <= 1'b0;
          wlast   <= 1'b0;
          beat    <= beat + 1'b1;
          inburst <= inburst - 1'b1;
          k       <= '0;
          state   <= (inburst == 9'd1) ? W_B : W_GATHER;
        end
        W_B: if (bvalid) begin
          if (beat != (AW+1)'(BEATS)) state <= W_AW;
          else if (!region) begin
            region <= 1'b1; beat <= '0; base <= conf_base; state <= W_AW;
          end else begin
            state <= W_IDLE; done <= 1'b1;
          end
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  a_wstable: assert property (@(posedge clk) disable iff (!rst_n)
      wvalid && !wready |=> wvalid && $stable(wdata) && $stable(wlast));
endmodule
