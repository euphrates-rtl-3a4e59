// mc_dma: the motion controller's DMA engine.
//
// On `start` it copies one frame of metadata from the frame buffer in DRAM into
// the motion-vector buffer: first NMB motion-vector bytes from `mv_base`, then
// NMB confidence bytes from `conf_base`.  It is an AXI4 read master with a
// 128-bit data bus, issuing INCR bursts of up to BURST beats of 16 bytes, one
// burst outstanding at a time.  Every accepted R beat is written straight into
// the buffer (`buf_sel` = 0 for MVs, 1 for confidences, `buf_addr` = beat
// number).  `done` pulses after the last beat of the confidence region.
//
// Rules: base addresses must be aligned to BURST*16 bytes so that no burst
// crosses a 4 KB boundary (checked by an assertion).  ARSIZE is 16 bytes and
// ARBURST is INCR, both constant.
// Timing: with a memory that returns one beat per cycle, a region of B beats
// costs B cycles plus one address handshake and the memory latency per burst;
// 1080p metadata is 2 x 510 beats.
//
// From the paper: an on-chip SRAM fed by a DMA engine, 128-bit AXI4.  Own
// choices: one channel used for both regions, burst length, one burst in
// flight.  (The paper lists a "3-channel" DMA; the other channels would serve
// traffic this implementation sends through its register-write port.)
module mc_dma
  import euph_pkg::*;
#(
  parameter int unsigned NMB   = NUM_MB,
  parameter int unsigned DW    = AXI_DW,
  parameter int unsigned BURST = 16,
  parameter int unsigned BYTES = MV_BYTES,
  localparam int unsigned BEATS = (NMB + DW/8 - 1) / (DW/8),
  localparam int unsigned WAW   = $clog2(BYTES / (DW/8))
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AXI_AW-1:0] mv_base,
  input  logic [AXI_AW-1:0] conf_base,
  output logic              busy,
  output logic              done,
  // AXI4 read address channel
  output logic              arvalid,
  input  logic              arready,
  output logic [AXI_AW-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  // AXI4 read data channel
  input  logic              rvalid,
  output logic              rready,
  input  logic [DW-1:0]     rdata,
  input  logic              rlast,
  // motion-vector buffer write port
  output logic              buf_we,
  output logic              buf_sel,
  output logic [WAW-1:0]    buf_addr,
  output logic [DW-1:0]     buf_data
);
  typedef enum logic [1:0] {D_IDLE, D_AR, D_R} dstate_t;
  dstate_t state;
  logic              region;             // 0: MVs, 1: confidences
  logic [WAW:0]      beat;               // next beat to request
  logic [WAW:0]      wbeat;              // next beat to write
  logic [AXI_AW-1:0] base;

  localparam int unsigned BB = BURST * (DW/8);
  wire [WAW:0] left = (WAW+1)'(BEATS) - beat;
  wire [8:0]   blen = (left >= (WAW+1)'(BURST)) ? 9'(BURST) : 9'(left);

  assign arsize  = 3'($clog2(DW/8));
  assign arburst = 2'b01;
  assign rready  = (state == D_R);
  assign busy    = (state != D_IDLE);
  assign buf_we   = rvalid && rready;
  assign buf_sel  = region;
  assign buf_addr = WAW'(wbeat);
  assign buf_data = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; region <= 1'b0; beat <= '0; wbeat <= '0; base <= '0;
      arvalid <= 1'b0; araddr <= '0; arlen <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        D_IDLE: if (start) begin
          region <= 1'b0; beat <= '0; wbeat <= '0; base <= mv_base;
          state  <= D_AR;
        end
        D_AR: begin
          if (!arvalid) begin
            arvalid <= 1'b1;
            araddr  <= base + AXI_AW'(beat) * AXI_AW'(DW/8);
            arlen   <= 8'(blen - 1'b1);
          end else if (arready) begin
            arvalid <= 1'b0;
            beat    <= beat + (WAW+1)'(blen);
            state   <= D_R;
          end
        end
        D_R: if (rvalid) begin
          wbeat <= wbeat + 1'b1;
          if (rlast) begin
            if (beat != (WAW+1)'(BEATS)) state <= D_AR;
            else if (!region) begin
              region <= 1'b1; beat <= '0; wbeat <= '0; base <= conf_base; state <= D_AR;
            end else begin
              state <= D_IDLE; done <= 1'b1;
            end
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  a_align: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (mv_base % BB == 0) && (conf_base % BB == 0))
    else $error("mc_dma: base address not aligned to a burst");
  a_arstable: assert property (@(posedge clk) disable iff (!rst_n)
      arvalid && !arready |=> arvalid && $stable(araddr) && $stable(arlen));
endmodule
