// mc_sequencer: the sequencer (finite-state machine) of the motion controller.
//
// It replaces a microcontroller's instruction fetch and decode: the order of
// operations for one frame is fixed, and the registers select among its
// variants.  When the frontend signals that a frame's metadata is in DRAM
// (`frame_ready`) and the task is enabled, the sequencer
//   1. asks the scalar unit whether this is an I-frame (or forces one while no
//      ROI is known yet);
//   2. I-frame: programs the CNN engine by writing its source-frame register and
//      its start register (flows 1 and 2 of the block diagram) and waits for
//      the CNN engine to write its ROIs and REG_CNN_DONE (flow 3).  In
//      adaptive mode it meanwhile also extrapolates the previous ROIs and,
//      once the CNN answer is in, streams (CNN, extrapolated) pairs to the
//      scalar unit, which adjusts EW;
//      E-frame: starts the DMA engine, then extrapolates every valid ROI slot
//      in turn;
//   3. commits the inferred or the extrapolated ROIs as the new ROIs;
//   4. writes the new ROIs to the results buffer (two words per ROI at
//      RESULT_BASE + 8i, then a status word at RESULT_BASE + 8*N_ROIS:
//      [31:16] frame number, [8] I-frame, [7:0] number of ROIs), so the CPU
//      reads results without being interrupted;
//   5. advances the scalar unit's frame counter.
// A `frame_ready` that arrives while a frame is still being processed is
// counted as dropped (the frame is skipped, as a frame-rate-limited pipeline
// would).  Writes go through a valid/ready register-write master port.
//
// From the paper: master role over the CNN engine through its memory-mapped
// registers, results returned to the motion controller's registers, task
// autonomy, I-frame/E-frame sequencing.  Own choices: the exact order, the
// status word, frame dropping and the register-write port.
module mc_sequencer
  import euph_pkg::*;
#(
  parameter int unsigned N_ROIS = MAX_ROIS,
  localparam int unsigned IW    = $clog2(N_ROIS),
  localparam int unsigned NW    = $clog2(N_ROIS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // registers
  input  logic              enable,
  input  logic              task_start,
  input  logic              adaptive,
  input  logic [AXI_AW-1:0] pix_base,
  input  logic [AXI_AW-1:0] result_base,
  input  logic [AXI_AW-1:0] cnn_base,
  input  logic              cnn_done,
  input  logic [NW-1:0]     cnn_num,
  // frontend
  input  logic              frame_ready,
  // scalar unit
  input  logic              is_iframe,
  output logic              force_i,
  output logic              frame_adv,
  output logic              cmp_valid,
  output logic              cmp_last,
  // DMA engine
  output logic              dma_start,
  input  logic              dma_done,
  // extrapolation unit and ROI selection
  output logic              ex_start,
  input  logic              ex_busy,
  input  logic              ex_done,
  output logic [IW-1:0]     rd_idx,
  output logic              src_mmap,
  output logic              commit,
  output logic              sel_inferred,
  input  logic [NW-1:0]     new_num,
  input  roi_t              new_roi [N_ROIS],
  // register-write master (CNN engine registers, results buffer)
  output logic              m_valid,
  input  logic              m_ready,
  output logic [AXI_AW-1:0] m_addr,
  output logic [31:0]       m_wdata,
  // status
  output logic              busy,
  output logic              frame_done,
  output logic              cur_iframe,
  output logic [15:0]       frames,
  output logic [7:0]        dropped
);
  typedef enum logic [3:0] {Q_IDLE, Q_CNN_SRC, Q_CNN_GO, Q_DMA, Q_DMA_WAIT, Q_EX, Q_EX_WAIT,
                            Q_WAIT_CNN, Q_CMP, Q_COMMIT, Q_WR, Q_WR_STAT, Q_END} qstate_t;
  qstate_t state;
  logic [NW-1:0] i;
  logic          half;
  logic          have_rois;
  logic          cnn_flag;
  logic [NW-1:0] npairs;

  assign force_i      = !have_rois;
  assign busy         = (state != Q_IDLE);
  assign sel_inferred = cur_iframe;
  assign rd_idx       = IW'(i);
  assign src_mmap     = (state == Q_CMP);
  assign cmp_valid    = (state == Q_CMP);
  assign cmp_last     = (state == Q_CMP) && (i + 1'b1 == npairs);
  assign commit       = (state == Q_COMMIT);
  assign frame_adv    = (state == Q_END);
  assign dma_start    = (state == Q_DMA);
  assign ex_start     = (state == Q_EX) && !ex_busy;

  // register write wanted by the current state; `acc` = accepted this cycle
  logic              want;
  logic [AXI_AW-1:0] want_addr;
  logic [31:0]       want_data;
  wire               acc = m_valid && m_ready;
  always_comb begin
    want = 1'b0; want_addr = '0; want_data = '0;
    unique case (state)
      Q_CNN_SRC: begin want = 1'b1; want_addr = cnn_base + AXI_AW'(CNN_REG_SRC);   want_data = pix_base; end
      Q_CNN_GO:  begin want = 1'b1; want_addr = cnn_base + AXI_AW'(CNN_REG_START); want_data = 32'd1;    end
      Q_WR: if (i != new_num) begin
        want      = 1'b1;
        want_addr = result_base + AXI_AW'({i, half, 2'b00});
        want_data = half ? {new_roi[IW'(i)].y1, new_roi[IW'(i)].x1} : {new_roi[IW'(i)].y0, new_roi[IW'(i)].x0};
      end
      Q_WR_STAT: begin want = 1'b1; want_addr = result_base + AXI_AW'(8*N_ROIS);
                       want_data = {frames, 7'd0, cur_iframe, 8'(new_num)}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE; i <= '0; half <= 1'b0; have_rois <= 1'b0; cnn_flag <= 1'b0;
      npairs <= '0; m_valid <= 1'b0; m_addr <= '0; m_wdata <= '0;
      frame_done <= 1'b0; cur_iframe <= 1'b0; frames <= '0; dropped <= '0;
    end else begin
      frame_done <= 1'b0;
      if (!m_valid && want) begin
        m_valid <= 1'b1; m_addr <= want_addr; m_wdata <= want_data;
      end else if (acc) begin
        m_valid <= 1'b0;
      end
      if (cnn_done) cnn_flag <= 1'b1;
      if (task_start) begin
        have_rois <= 1'b0; frames <= '0; dropped <= '0;
      end
      if (frame_ready && enable && state != Q_IDLE) dropped <= dropped + 1'b1;
      unique case (state)
        Q_IDLE: if (frame_ready && enable && !task_start) begin
          cur_iframe <= is_iframe;
          cnn_flag   <= 1'b0;
          i          <= '0;
          if (is_iframe)              state <= Q_CNN_SRC;
          else if (new_num == '0)     state <= Q_COMMIT;
          else                        state <= Q_DMA;
        end
        Q_CNN_SRC: begin
          if (acc) state <= Q_CNN_GO;
        end
        Q_CNN_GO: begin
          if (acc) state <= (adaptive && have_rois && new_num != '0) ? Q_DMA : Q_WAIT_CNN;
        end
        Q_DMA:      state <= Q_DMA_WAIT;
        Q_DMA_WAIT: if (dma_done) begin i <= '0; state <= Q_EX; end
        Q_EX:       if (!ex_busy) state <= Q_EX_WAIT;
        Q_EX_WAIT:  if (ex_done) begin
          if (i + 1'b1 == new_num) begin
            i     <= '0;
            state <= cur_iframe ? Q_WAIT_CNN : Q_COMMIT;
          end else begin
            i     <= i + 1'b1;
            state <= Q_EX;
          end
        end
        Q_WAIT_CNN: if (cnn_flag || cnn_done) begin
          npairs <= (cnn_num < new_num) ? cnn_num : new_num;
          i      <= '0;
          state  <= (adaptive && have_rois && cnn_num != '0 && new_num != '0) ? Q_CMP : Q_COMMIT;
        end
        Q_CMP: begin
          if (cmp_last) begin i <= '0; state <= Q_COMMIT; end
          else i <= i + 1'b1;
        end
        Q_COMMIT: begin
          if (cur_iframe) have_rois <= 1'b1;
          i <= '0; half <= 1'b0;
          state <= Q_WR;
        end
        Q_WR: begin
          if (i == new_num) state <= Q_WR_STAT;
          else begin
            if (acc) begin
              half <= !half;
              if (half) i <= i + 1'b1;
            end
          end
        end
        Q_WR_STAT: begin
          if (acc) state <= Q_END;
        end
        Q_END: begin
          frames     <= frames + 1'b1;
          frame_done <= 1'b1;
          state      <= Q_IDLE;
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_valid && !m_ready |=> m_valid && $stable(m_addr) && $stable(m_wdata));
endmodule
