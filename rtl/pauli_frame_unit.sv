// pauli_frame_unit: Pauli-frame update (PFU) and branch control.
//
// Each decoder output is the decoder's judgement of whether its logical
// observable (Z_L for the Z-type decoder, X_L for the X-type one) has
// flipped since the start of the shot. The frame bit of an observable is
// that judgement XOR the parity of the feedback corrections already applied
// to it: the sign still to be corrected (the paper's sign-bit flip, e.g.
// +X_L -> -X_L). The frame is updated one cycle (4 ns, as in the paper)
// after output_valid. On a round tagged for feedback the same edge issues a
// branch-control word to the AWGs: X on D1 when the Z_L frame bit is set, Z
// on D9 when the X_L bit is set (the paper's physical corrections), counts
// them as applied, and raises the matching cancel request for the syndrome
// calculation, held until it is taken with the next measurement event. That
// the decoder output is cumulative, and the bookkeeping of applied
// corrections, are this design's reading; the paper does not spell it out.
// final_done pulses with the frame update of the final logical measurement.
// The frame is cleared when the first-round syndromes of a shot go out.
module pauli_frame_unit
  import qec_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // event tags from the syndrome calculation
  input  logic         syn_valid,
  input  logic         syn_first,
  input  logic         syn_final,
  input  logic         syn_fb_round,
  // decoder outputs
  input  logic         dec_z_valid,
  input  logic         dec_z_flip,
  input  logic         dec_x_valid,
  input  logic         dec_x_flip,
  // branch control to the AWG backplanes
  output logic         branch_valid,
  output branch_ctrl_t branch,
  // frame
  output logic         frame_zl,
  output logic         frame_xl,
  output logic         final_done,
  // artificial-syndrome cancellation
  output logic         cancel_x_d1,
  output logic         cancel_z_d9,
  input  logic         cancel_taken
);

  logic est_zl, est_xl;          // decoder judgements
  logic app_zl, app_xl;          // parity of applied corrections
  logic tag_fb, tag_final;       // tags of the round being decoded

  logic est_zl_n, est_xl_n, res_zl, res_xl, upd, fire_z, fire_x;
  always_comb begin
    est_zl_n = dec_z_valid ? dec_z_flip : est_zl;
    est_xl_n = dec_x_valid ? dec_x_flip : est_xl;
    res_zl   = est_zl_n ^ app_zl;
    res_xl   = est_xl_n ^ app_xl;
    upd      = dec_z_valid || dec_x_valid;
    fire_z   = upd && tag_fb && res_zl;
    fire_x   = upd && tag_fb && res_xl;
  end

  assign frame_zl = est_zl ^ app_zl;
  assign frame_xl = est_xl ^ app_xl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est_zl <= 1'b0; est_xl <= 1'b0;
      app_zl <= 1'b0; app_xl <= 1'b0;
      tag_fb <= 1'b0; tag_final <= 1'b0;
      branch_valid <= 1'b0; branch <= '0;
      final_done <= 1'b0;
      cancel_x_d1 <= 1'b0; cancel_z_d9 <= 1'b0;
    end else begin
      if (syn_valid) begin
        tag_fb    <= syn_fb_round;
        tag_final <= syn_final;
      end
      if (syn_valid && syn_first) begin
        est_zl <= 1'b0; est_xl <= 1'b0;
        app_zl <= 1'b0; app_xl <= 1'b0;
      end else if (upd) begin
        est_zl <= est_zl_n;
        est_xl <= est_xl_n;
        app_zl <= app_zl ^ fire_z;
        app_xl <= app_xl ^ fire_x;
      end
      branch_valid   <= upd && tag_fb;
      branch.x_on_d1 <= fire_z;
      branch.z_on_d9 <= fire_x;
      final_done     <= upd && tag_final;
      cancel_x_d1 <= (cancel_x_d1 && !cancel_taken) || fire_z;
      cancel_z_d9 <= (cancel_z_d9 && !cancel_taken) || fire_x;
    end
  end

endmodule
