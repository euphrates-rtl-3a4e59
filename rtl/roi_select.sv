// roi_select: ROI selection and the New-ROI register of the motion controller.
//
// Three parts of the block diagram live here:
//  * the New-ROI register file: the ROIs of the last processed frame, one per
//    ROI slot, plus how many slots are valid.  They are R_{F-1} for the next
//    frame and are what the sequencer writes to the results buffer.
//  * the input mux in front of the extrapolation unit: slot `rd_idx` of either
//    the New-ROI registers (`src_mmap` = 0) or the ROI registers the CNN
//    engine writes (`src_mmap` = 1).
//  * ROI selection: on `commit` every slot of the New-ROI file is loaded with
//    the inferred ROI (`sel_inferred` = 1, the I-frame case) or with the ROI
//    the extrapolation unit produced for that slot (E-frame case).
// The extrapolated ROIs are collected in a bank as the extrapolation unit
// finishes them (`ext_valid`), so that in adaptive mode an I-frame can compare
// them with the CNN's answer (`ext_rd`).
//
// Timing: all writes take effect on the next clock edge; reads are
// combinational.
// From the paper: a selection between inferred and extrapolated ROIs driven by
// the scalar unit, a mux feeding the extrapolation unit from the registers or
// from the fed-back New ROI.  Own choice: whole-frame commit of all slots.
module roi_select
  import euph_pkg::*;
#(
  parameter int unsigned N_ROIS = MAX_ROIS,
  localparam int unsigned IW    = $clog2(N_ROIS),
  localparam int unsigned NW    = $clog2(N_ROIS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  roi_t          mmap_roi [N_ROIS],
  input  logic [NW-1:0] mmap_num,
  input  logic          src_mmap,
  input  logic [IW-1:0] rd_idx,
  output roi_t          roi_in,
  output roi_t          ext_rd,
  input  logic          ext_valid,
  input  logic [IW-1:0] ext_idx,
  input  roi_t          ext_roi,
  input  logic          commit,
  input  logic          sel_inferred,     // signal 5
  output roi_t          new_roi  [N_ROIS],
  output logic [NW-1:0] new_num
);
  roi_t ext_bank [N_ROIS];

  assign roi_in = src_mmap ? mmap_roi[rd_idx] : new_roi[rd_idx];
  assign ext_rd = ext_bank[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      new_num <= '0;
      for (int i = 0; i < N_ROIS; i++) begin new_roi[i] <= '0; ext_bank[i] <= '0; end
    end else if (clear) begin
      new_num <= '0;
    end else begin
      if (ext_valid) ext_bank[ext_idx] <= ext_roi;
      if (commit) begin
        if (sel_inferred) begin
          new_num <= (mmap_num > NW'(N_ROIS)) ? NW'(N_ROIS) : mmap_num;
          for (int i = 0; i < N_ROIS; i++) new_roi[i] <= mmap_roi[i];
        end else begin
          for (int i = 0; i < N_ROIS; i++)
            if (NW'(i) < new_num) new_roi[i] <= (ext_valid && ext_idx == IW'(i)) ? ext_roi : ext_bank[i];
        end
      end
    end
  end
endmodule
